// pma -- processing memory array (PMA): the look-up table of weight sums.
//
// A PMA serves one row slice of the weight matrix. Row r (address r) holds,
// for each of the NCOL matrix columns, the MR_W-bit two's-complement sum of the
// weights whose slice row index i has bit i set in r. During a vector-matrix
// multiplication the address is one bit of each input pixel of the slice, so
// the read-out MR is the partial inner product for that bit plane.
//
// In silicon the array is 1T-1R ReRAM (HRS = logic 1, LRS = logic 0) with a
// bit-line precharge / discharge read and a latch-type sense amplifier per bit
// line whose output is caught by a D flip-flop. Here the cells are a register
// array and the sense-amplifier flip-flops are the registered output 'mr':
//   * write: 'we' programs the whole row 'waddr' with 'wdata' at the clock edge
//     (pre-VMM procedure, done once; the array has no reset, being non-volatile)
//   * read:  're' with 'raddr' loads row 'raddr' into 'mr' at the clock edge,
//     so MR appears one clock after the address, as after the sensing phase;
//     'mr' holds when 're' is low.
// Column j occupies wdata/mr bits [j*MR_W +: MR_W]. Sizes follow the original
// design (256x66 for 8 address bits, 512x66 for 9); the one-cycle registered
// read standing for the analog read sequence is this implementation's choice.
module pma #(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned NCOL   = 6,
  parameter int unsigned MR_W   = 11
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [ADDR_W-1:0]        waddr,
  input  logic [NCOL*MR_W-1:0]     wdata,
  input  logic                     re,
  input  logic [ADDR_W-1:0]        raddr,
  output logic [NCOL*MR_W-1:0]     mr
);

  localparam int unsigned ROWS = 1 << ADDR_W;

  logic [NCOL*MR_W-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (we) cells[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) mr <= cells[raddr];
  end

endmodule
