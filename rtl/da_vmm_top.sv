// da_vmm_top -- multiplier-free convolution engine using distributed arithmetic.
//
// Computes the first convolution layer of LeNet-5: a 32x32 unsigned 8-bit
// image convolved with six signed 8-bit 5x5 filters (stride 1, no padding)
// gives six 28x28 maps; each output pixel position is one product of the
// 25-pixel window with the 25x6 weight matrix.
//
// Datapath: the weight matrix is cut into row slices X1..X8, X9..X16 and
// X17..X25, held as tables of weight sums in three processing memory arrays
// (PMA-1 256x66, PMA-2 256x66, PMA-3 512x66, six 11-bit sums per row). In
// each of 8 bit cycles the input buffer presents one bit of every pixel (MSB
// first) as the three PMA addresses; per column the three read-outs are added
// (12-bit, then 13-bit adder) and an add-and-shift unit forms
// IS <= MR + 2*IS (21-bit adder). After 8 cycles the six IS registers hold
// Y1..Y6, which go to the image memory. No multiplier and no ADC appear:
// memory reads, sense amplifiers and adders do all the work.
//
// Operation:
//   1. load weights (w_we, w_row 0..24, w_col 0..5, w_data) and pulse
//      prevmm_start; the weight-summation unit writes all three PMAs
//      (52,224 clocks) and pulses prevmm_done. Needed once per weight set.
//   2. load the image (img_we, img_addr = row*32+col, img_data).
//   3. pulse conv_start; conv_done pulses after 15,428 clocks.
//   4. read results: res_data = {Y6,..,Y1} of output pixel res_addr = r*28+c,
//      Y_j in bits [21*(j-1) +: 21], two's complement.
// Starts are ignored while 'busy'. All parameters are the sizes of the
// original design and are fixed by the package da_pkg.
module da_vmm_top
  import da_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_we,
  input  logic [4:0]               w_row,
  input  logic [2:0]               w_col,
  input  logic signed [W_W-1:0]    w_data,
  input  logic                     prevmm_start,
  output logic                     prevmm_done,
  input  logic                     img_we,
  input  logic [9:0]               img_addr,
  input  logic [X_W-1:0]           img_data,
  input  logic                     conv_start,
  output logic                     conv_done,
  output logic                     busy,
  input  logic [9:0]               res_addr,
  output logic [NCOL*ACC_W-1:0]    res_data
);

  // ---------------- pre-VMM: weight summation -> PMAs
  logic                   ws_busy, ws_wr_en;
  logic [1:0]             ws_wr_pma;
  logic [8:0]             ws_wr_addr;
  logic [NCOL*MR_W-1:0]   ws_wr_data;
  logic                   ctl_busy;

  weight_summation u_ws (
    .clk, .rst_n,
    .w_we, .w_row, .w_col, .w_data,
    .start(prevmm_start && !ctl_busy), .busy(ws_busy), .done(prevmm_done),
    .wr_en(ws_wr_en), .wr_pma(ws_wr_pma), .wr_addr(ws_wr_addr), .wr_data(ws_wr_data)
  );

  // ---------------- controller
  logic       px_re, ld_en, shift, rd_en, rd3_en, acc_en, acc_first, out_we;
  logic [9:0] px_addr, out_addr;
  logic [4:0] ld_idx;
  logic [2:0] bit_sel;

  vmm_controller u_ctl (
    .clk, .rst_n,
    .start(conv_start && !ws_busy), .busy(ctl_busy), .done(conv_done),
    .px_re, .px_addr, .ld_en, .ld_idx, .shift, .bit_sel,
    .rd_en, .rd3_en, .acc_en, .acc_first, .out_we, .out_addr
  );

  assign busy = ws_busy | ctl_busy;

  // ---------------- image memory and input buffer
  logic [X_W-1:0]         px_data;
  logic [NCOL*ACC_W-1:0]  y_all;

  image_memory u_img (
    .clk,
    .in_we(img_we), .in_waddr(img_addr), .in_wdata(img_data),
    .px_re, .px_addr, .px_data,
    .out_we, .out_addr, .out_wdata(y_all),
    .out_raddr(res_addr), .out_rdata(res_data)
  );

  logic [NIN-1:0] xbits;

  input_buffer u_buf (
    .clk, .rst_n,
    .ld_en, .ld_idx, .ld_pix(px_data), .shift, .bit_sel,
    .xbits, .x_out()
  );

  // PMA-3 reads its plane one clock after PMA-1/2 (see column_adder)
  logic [A3-1:0] addr3_d;
  always_ff @(posedge clk) addr3_d <= xbits[A1+A2 +: A3];

  // ---------------- processing memory arrays
  logic [NCOL*MR_W-1:0] mr1, mr2, mr3;

  pma #(.ADDR_W(A1), .NCOL(NCOL), .MR_W(MR_W)) u_pma1 (
    .clk, .we(ws_wr_en && ws_wr_pma == 2'd0), .waddr(ws_wr_addr[A1-1:0]), .wdata(ws_wr_data),
    .re(rd_en), .raddr(xbits[0 +: A1]), .mr(mr1)
  );
  pma #(.ADDR_W(A2), .NCOL(NCOL), .MR_W(MR_W)) u_pma2 (
    .clk, .we(ws_wr_en && ws_wr_pma == 2'd1), .waddr(ws_wr_addr[A2-1:0]), .wdata(ws_wr_data),
    .re(rd_en), .raddr(xbits[A1 +: A2]), .mr(mr2)
  );
  pma #(.ADDR_W(A3), .NCOL(NCOL), .MR_W(MR_W)) u_pma3 (
    .clk, .we(ws_wr_en && ws_wr_pma == 2'd2), .waddr(ws_wr_addr[A3-1:0]), .wdata(ws_wr_data),
    .re(rd3_en), .raddr(addr3_d), .mr(mr3)
  );

  // ---------------- per-column adders and add-and-shift units
  for (genvar j = 0; j < NCOL; j++) begin : g_col
    logic signed [S13_W-1:0] s13;
    logic signed [ACC_W-1:0] yj;

    column_adder #(.MR_W(MR_W)) u_cadd (
      .clk,
      .mr1(mr1[j*MR_W +: MR_W]), .mr2(mr2[j*MR_W +: MR_W]), .mr3(mr3[j*MR_W +: MR_W]),
      .sum(s13)
    );

    add_shift #(.IN_W(S13_W), .ACC_W(ACC_W)) u_as (
      .clk, .rst_n, .en(acc_en), .first(acc_first), .mr(s13), .y(yj)
    );

    assign y_all[j*ACC_W +: ACC_W] = yj;
  end

endmodule
