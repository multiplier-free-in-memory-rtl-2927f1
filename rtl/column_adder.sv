// column_adder -- merges the read-outs of the three PMAs for one matrix column.
//
// The 25-row weight matrix is cut into slices of 8, 8 and 9 rows, one per PMA,
// so the full weight sum for one bit plane is MR1 + MR2 + MR3. The merge is a
// two-stage pipeline, each stage a Ladner-Fischer adder followed by a register:
//   stage 1: s12 <= MR1 + MR2            (12-bit adder, 11-bit inputs sign-extended)
//   stage 2: sum <= s12 + MR3            (13-bit adder, MR3 and s12 sign-extended)
// Because MR3 is added one stage later, PMA-3 is read one clock after PMA-1
// and PMA-2 for the same bit plane (the controller delays its address), so
// mr3 must arrive one clock after the matching mr1/mr2.
//
// Timing: 'sum' = MR1(t-2) + MR2(t-2) + MR3(t-1). No reset: the pipeline only
// carries data whose validity the controller tracks. The adder widths and the
// sign extension follow the original circuit; replacing its clocks skewed by
// 1-2 ns with pipeline stages on one clock is this implementation's choice.
module column_adder #(
  parameter int unsigned MR_W = 11
) (
  input  logic                   clk,
  input  logic signed [MR_W-1:0] mr1,
  input  logic signed [MR_W-1:0] mr2,
  input  logic signed [MR_W-1:0] mr3,
  output logic signed [MR_W+1:0] sum
);

  logic [MR_W:0]   a12, b12, s12_d;
  logic [MR_W:0]   s12;
  logic [MR_W+1:0] a13, b13, s13_d;

  always_comb begin
    a12 = (MR_W+1)'(mr1);
    b12 = (MR_W+1)'(mr2);
  end

  lf_adder #(.W(MR_W+1)) u_add12 (.a(a12), .b(b12), .cin(1'b0), .s(s12_d), .cout());

  always_ff @(posedge clk) s12 <= s12_d;

  always_comb begin
    a13 = {s12[MR_W], s12};
    b13 = (MR_W+2)'(mr3);
  end

  lf_adder #(.W(MR_W+2)) u_add13 (.a(a13), .b(b13), .cin(1'b0), .s(s13_d), .cout());

  always_ff @(posedge clk) sum <= s13_d;

endmodule
