// input_buffer -- 5x5 pixel window registers and bit-plane feeder.
//
// One vector-matrix multiplication consumes the 25 pixels of a 5x5 window of
// the input image, unrolled row-major into X1..X25 (X1 top-left, X25
// bottom-right). The buffer keeps the window in 25 registers and presents one
// bit plane at a time: xbits[i-1] = bit 'bit_sel' of X_i. The controller steps
// bit_sel from 7 (MSB) down to 0, so xbits[7:0], xbits[15:8] and xbits[24:16]
// are the addresses of PMA-1, PMA-2 and PMA-3 in the eight bit cycles.
//
// Adjacent strides along an image row share 20 of the 25 pixels. 'shift'
// moves every window row one column to the left (X_i <= X_{i+1} within a row),
// after which only the new right-hand column (window positions 4, 9, 14, 19,
// 24) needs loading from the image memory.
//
// Interface / timing: 'ld_en' writes ld_pix into window position ld_idx
// (0..24) at the clock edge; 'shift' acts at the clock edge and takes priority
// over a load in the same cycle. xbits and x_out are combinational from the
// registers. Reset clears the window. Feeding bit planes MSB first and keeping
// the common pixels in registers follow the original design; the row-major
// unrolling and the slide direction are this implementation's choices.
module input_buffer
  import da_pkg::*;
#(
  parameter int unsigned KP   = K,
  parameter int unsigned X_WP = X_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   ld_en,
  input  logic [4:0]             ld_idx,
  input  logic [X_WP-1:0]        ld_pix,
  input  logic                   shift,
  input  logic [2:0]             bit_sel,
  output logic [KP*KP-1:0]       xbits,
  output logic [X_WP-1:0]        x_out [KP*KP]
);

  logic [X_WP-1:0] win [KP*KP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(KP*KP); i++) win[i] <= '0;
    end else if (shift) begin
      for (int r = 0; r < int'(KP); r++)
        for (int c = 0; c < int'(KP) - 1; c++)
          win[r*KP + c] <= win[r*KP + c + 1];
    end else if (ld_en) begin
      win[ld_idx] <= ld_pix;
    end
  end

  always_comb begin
    for (int i = 0; i < int'(KP*KP); i++) begin
      xbits[i] = win[i][bit_sel];
      x_out[i] = win[i];
    end
  end

endmodule
