// add_shift -- the add-and-shift accumulator of one output column.
//
// Distributed arithmetic turns X.W into a sum over the bit planes of X:
// Y = sum_k 2^k * MR_k, where MR_k is the weight sum read with bit k of every
// input as the address. The planes arrive most significant first, so the unit
// keeps an intermediate sum IS and in each bit cycle forms
//     IS <= MR + LSIS,   LSIS = IS << 1
// with one ACC_W-bit Ladner-Fischer adder. Input a is MR sign-extended from
// IN_W bits (negative weight sums fill the upper bits with ones); input b is
// IS shifted left, bit 0 tied to zero. After the 8th plane IS is Y.
//
// Interface / timing: when 'en' is high the adder result is registered at the
// clock edge; 'first' (with 'en') marks the MSB plane and forces LSIS to zero,
// which starts a new product. 'y' is the register, so Y is valid one clock
// after the last plane was presented. Reset clears IS. Widths (13-bit input,
// 21-bit adder) follow the original design; clearing through 'first' is this
// implementation's choice.
module add_shift #(
  parameter int unsigned IN_W  = 13,
  parameter int unsigned ACC_W = 21
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [IN_W-1:0]  mr,
  output logic signed [ACC_W-1:0] y
);

  logic [ACC_W-1:0] a_in, lsis, sum;

  always_comb begin
    a_in = ACC_W'(mr);                        // sign extension: a[ACC_W-1:IN_W] = mr[IN_W-1]
    lsis = first ? '0 : {y[ACC_W-2:0], 1'b0}; // left-shifted intermediate sum
  end

  lf_adder #(.W(ACC_W)) u_add (
    .a(a_in), .b(lsis), .cin(1'b0), .s(sum), .cout()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= sum;
  end

endmodule
