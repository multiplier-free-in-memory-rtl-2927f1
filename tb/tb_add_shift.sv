// tb_add_shift -- self-checking test of the add-and-shift accumulator.
//
// Feeds eight 13-bit signed weight sums MR_7 .. MR_0 (MSB plane first, 'first'
// on the first), one per clock, and checks after the eighth that
// y = sum_k 2^k * MR_k, computed here with integer arithmetic, and that the
// result is ready exactly 8 clocks after the first plane. Between products
// 'en' drops for a random number of clocks and y must hold. Extreme sums
// (+-4095, the 13-bit limits) exercise the sign extension.
module tb_add_shift;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n = 0, en = 0, first = 0;
  logic signed [12:0] mr = '0;
  logic signed [20:0] y;

  add_shift #(.IN_W(13), .ACC_W(21)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      int expv;
      int t0;
      logic signed [12:0] v [8];
      for (int k = 0; k < 8; k++) begin
        case (n % 4)
          0: v[k] = 13'($urandom);
          1: v[k] = -13'sd4095;
          2: v[k] = 13'sd4095;
          default: v[k] = 13'($signed(13'($urandom_range(0, 6400))) - 13'sd3200);
        endcase
      end
      expv = 0;
      for (int k = 7; k >= 0; k--) expv = 2 * expv + int'(v[k]);
      t0 = 0;
      for (int k = 7; k >= 0; k--) begin
        @(negedge clk);
        en = 1; first = (k == 7); mr = v[k];
        t0++;
      end
      @(negedge clk);
      en = 0; first = 0; mr = 13'($urandom);
      checks++;
      if (int'(y) !== expv || t0 != 8) begin failures++; $display("FAIL n=%0d y=%0d exp %0d", n, y, expv); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks++;
      if (int'(y) !== expv) begin failures++; $display("FAIL hold n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
