// vmm_controller -- sequencer of one convolution layer as 784 vector-matrix
// multiplications.
//
// For every output pixel (r, c), row by row, the controller
//   1. fills the input buffer with the 5x5 window at (r, c): all 25 pixels at
//      the start of a row (c = 0); otherwise it slides the window one column
//      ('shift') and loads only the 5 pixels of the new column c+4;
//   2. runs the 8 bit cycles: bit_sel = 7 .. 0 (MSB first) with rd_en, so
//      PMA-1 and PMA-2 are read once per cycle; PMA-3 is read with the same
//      bit plane one clock later (rd3_en, and the top delays its address);
//   3. waits for the adder pipeline and writes Y1..Y6 to the image memory at
//      r*OUT + c (out_we).
//
// Pipeline alignment (clock = one memory cycle):
//   cycle t   PMA-1/2 read of plane k   (rd_en)
//   cycle t+1 PMA-3 read of plane k     (rd3_en); MR1/MR2 registered
//   cycle t+2 12-bit sum and MR3 registered
//   cycle t+3 13-bit sum registered; add-shift accumulates (acc_en, acc_first
//             on the MSB plane)
// so Y is in the add-shift registers 11 clocks after the first read, and
// out_we is asserted in that cycle. A pixel read (px_re) returns data the
// next clock, when it is written into the buffer (ld_en, ld_idx).
//
// Cost per multiplication: 38 clocks at a row start (25 loads + 1 + 8 + 3 + 1),
// 19 clocks otherwise (1 shift + 5 loads + 1 + 8 + 3 + 1); 15,428 clocks for
// the 28x28 layer. The sequence (load, 8 MSB-first bit cycles, write back,
// 784 times, common pixels kept) follows the original design; the state
// machine and the non-overlapped load phase are this implementation's own.
module vmm_controller
  import da_pkg::*;
#(
  parameter int unsigned IMG_P = IMG,
  parameter int unsigned KP    = K
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  // image memory pixel read
  output logic       px_re,
  output logic [9:0] px_addr,
  // input buffer
  output logic       ld_en,
  output logic [4:0] ld_idx,
  output logic       shift,
  output logic [2:0] bit_sel,
  // PMA reads and add-shift control
  output logic       rd_en,
  output logic       rd3_en,
  output logic       acc_en,
  output logic       acc_first,
  // result write
  output logic       out_we,
  output logic [9:0] out_addr
);

  localparam int unsigned OUT_P = IMG_P - KP + 1;

  typedef enum logic [2:0] {S_IDLE, S_SHIFT, S_LOAD, S_LWAIT, S_BITS, S_DRAIN, S_WRITE} state_t;
  state_t state;

  logic [4:0] r, c;       // output pixel
  logic [4:0] n;          // load counter
  logic [2:0] b;          // bit / drain counter
  logic [4:0] wr, wc;     // window row / column of the pixel being loaded
  logic [4:0] nload;
  logic [2:0] rd_d;       // rd_en delayed by 1, 2, 3
  logic [2:0] first_d;

  always_comb begin
    nload = (c == 0) ? 5'(KP*KP) : 5'(KP);
    if (c == 0) begin
      wr = 5'(n / 5'(KP));
      wc = 5'(n % 5'(KP));
    end else begin
      wr = n;
      wc = 5'(KP - 1);
    end
    busy     = (state != S_IDLE);
    px_re    = (state == S_LOAD);
    px_addr  = 10'((32'(r) + 32'(wr)) * IMG_P + 32'(c) + 32'(wc));
    shift    = (state == S_SHIFT);
    rd_en    = (state == S_BITS);
    bit_sel  = (state == S_BITS) ? 3'(7 - b) : 3'd7;
    rd3_en   = rd_d[0];
    acc_en   = rd_d[2];
    acc_first = first_d[2];
    out_we   = (state == S_WRITE);
    out_addr = 10'(32'(r) * OUT_P + 32'(c));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      r       <= '0;
      c       <= '0;
      n       <= '0;
      b       <= '0;
      done    <= 1'b0;
      ld_en   <= 1'b0;
      ld_idx  <= '0;
      rd_d    <= '0;
      first_d <= '0;
    end else begin
      done    <= 1'b0;
      rd_d    <= {rd_d[1:0], rd_en};
      first_d <= {first_d[1:0], rd_en && (b == 0)};
      ld_en   <= px_re;
      ld_idx  <= 5'(32'(wr) * KP + 32'(wc));
      unique case (state)
        S_IDLE: if (start) begin
          r     <= '0;
          c     <= '0;
          n     <= '0;
          state <= S_LOAD;
        end
        S_SHIFT: begin
          n     <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (n == nload - 1) state <= S_LWAIT;
          else                n <= n + 5'd1;
        end
        S_LWAIT: begin
          b     <= '0;
          state <= S_BITS;
        end
        S_BITS: begin
          if (b == 3'd7) begin
            b     <= '0;
            state <= S_DRAIN;
          end else b <= b + 3'd1;
        end
        S_DRAIN: begin
          if (b == 3'd2) state <= S_WRITE;
          else           b <= b + 3'd1;
        end
        S_WRITE: begin
          n <= '0;
          if (c == 5'(OUT_P - 1)) begin
            c <= '0;
            if (r == 5'(OUT_P - 1)) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              r     <= r + 5'd1;
              state <= S_LOAD;
            end
          end else begin
            c     <= c + 5'd1;
            state <= S_SHIFT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
