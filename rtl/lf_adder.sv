// lf_adder -- W-bit Ladner-Fischer parallel-prefix adder.
//
// Every adder of the engine (the 11-bit weight-summation accumulator, the
// 12-bit and 13-bit adders that merge the three PMA read-outs and the 21-bit
// add-and-shift adder) is of this kind. Bit i first forms generate g = a&b and
// propagate p = a^b. The carries then come out of a prefix tree of log2(W)
// levels: at level l every bit in the upper half of a block of 2^(l+1) bits
// combines its (G,P) pair with that of the last bit of the lower half, which is
// the sparse, high-fan-out Ladner-Fischer pattern. The carry-in enters as the
// generate of a virtual bit -1. Sum bit i = p_i ^ carry into bit i.
//
// Purely combinational; a, b and s are plain bit vectors (two's complement is
// the caller's reading). The prefix structure is the textbook Ladner-Fischer
// network; the engine's choice of this adder type follows the original design,
// the carry-in/carry-out pins are this implementation's own.
module lf_adder #(
  parameter int unsigned W = 12
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);

  localparam int unsigned LEVELS = (W <= 1) ? 1 : $clog2(W);
  localparam int unsigned IW     = (W <= 2) ? 1 : $clog2(W);

  // g[l][i], p[l][i]: group generate / propagate of bits [.. : i] after level l
  logic [W-1:0] g [LEVELS+1];
  logic [W-1:0] p [LEVELS+1];

  always_comb begin
    g[0] = a & b;
    p[0] = a ^ b;
    // fold the carry-in into bit 0
    g[0][0] = (a[0] & b[0]) | ((a[0] ^ b[0]) & cin);
    for (int unsigned l = 0; l < LEVELS; l++) begin
      g[l+1] = g[l];
      p[l+1] = p[l];
      for (int unsigned i = 0; i < W; i++) begin
        // bit i is in the upper half of its 2^(l+1) block
        if (((i >> l) & 1) == 1) begin
          logic [IW-1:0] j;
          j = IW'(((i >> l) << l) - 1);  // last bit of the lower half
          g[l+1][i] = g[l][i] | (p[l][i] & g[l][j]);
          p[l+1][i] = p[l][i] & p[l][j];
        end
      end
    end
  end

  // carry into bit i is the group generate of bits [i-1:0] (with cin)
  always_comb begin
    s[0] = p[0][0] ^ cin;
    for (int unsigned i = 1; i < W; i++) s[i] = p[0][i] ^ g[LEVELS][i-1];
    cout = g[LEVELS][W-1];
  end

endmodule
