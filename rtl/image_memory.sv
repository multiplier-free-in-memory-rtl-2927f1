// image_memory -- storage for the input feature map and the output feature maps.
//
// The input region holds the IMGxIMG (32x32) unsigned 8-bit image, addressed
// row*IMG + col. The output region holds, for each of the OUTxOUT (28x28)
// output pixels, the NCOL (6) results Y1..Y6 of one vector-matrix
// multiplication, each ACC_W (21) bits, addressed r*OUT + c. Inputs and
// outputs of a multiplication therefore only move between this memory and the
// neighbouring buffer / adders.
//
// Ports and timing:
//   in_we/in_waddr/in_wdata   host writes one input pixel at the clock edge
//   px_re/px_addr -> px_data  buffer-side pixel read, data one clock later
//                             (stands for row decode and sensing); holds otherwise
//   out_we/out_addr/out_wdata one multiplication's six results written at once
//   out_raddr -> out_rdata    host read of six results, combinational
// In the original design this is a ReRAM array with row decoder and sense
// amplifiers; its word organisation is not specified, so the port widths here
// (one pixel per read, one six-result word per write) are this
// implementation's own. Contents are not reset (non-volatile memory).
module image_memory
  import da_pkg::*;
#(
  parameter int unsigned IMG_P  = IMG,
  parameter int unsigned OUT_P  = IMG - K + 1,
  parameter int unsigned NCOL_P = NCOL,
  parameter int unsigned ACC_WP = ACC_W
) (
  input  logic                    clk,
  input  logic                    in_we,
  input  logic [9:0]              in_waddr,
  input  logic [X_W-1:0]          in_wdata,
  input  logic                    px_re,
  input  logic [9:0]              px_addr,
  output logic [X_W-1:0]          px_data,
  input  logic                    out_we,
  input  logic [9:0]              out_addr,
  input  logic [NCOL_P*ACC_WP-1:0] out_wdata,
  input  logic [9:0]              out_raddr,
  output logic [NCOL_P*ACC_WP-1:0] out_rdata
);

  logic [X_W-1:0]           ifmap [IMG_P*IMG_P];
  logic [NCOL_P*ACC_WP-1:0] ofmap [OUT_P*OUT_P];

  always_ff @(posedge clk) begin
    if (in_we) ifmap[in_waddr] <= in_wdata;
    if (px_re) px_data <= ifmap[px_addr];
  end

  always_ff @(posedge clk) begin
    if (out_we) ofmap[out_addr] <= out_wdata;
  end

  assign out_rdata = ofmap[out_raddr];

endmodule
