// tb_column_adder -- self-checking test of the three-PMA read-out merger.
//
// Each clock presents new random 11-bit signed MR1, MR2 and an MR3 that
// belongs to the previous clock's MR1/MR2 (as PMA-3 is read one clock later).
// One clock after MR3 arrives 'sum' must equal MR1 + MR2 + MR3 of that plane,
// computed here in integer arithmetic. Extreme values (-1024, 1023) test the
// sign extension of both adders.
module tb_column_adder;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [10:0] mr1 = '0, mr2 = '0, mr3 = '0;
  logic signed [12:0] sum;

  column_adder #(.MR_W(11)) dut (.*);

  int a1 [$], a2 [$];       // MR1/MR2 history
  int expq [$];             // expected sums in order of appearance

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // sum of the plane whose MR3 was applied one clock ago is now visible
      if (n >= 2) begin
        checks++;
        if (int'(sum) !== expq[0]) begin failures++; $display("FAIL n=%0d sum=%0d exp %0d", n, sum, expq[0]); end
        void'(expq.pop_front());
      end
      // MR3 for the plane applied one clock ago
      if (n >= 1) begin
        mr3 = (n % 7 == 0) ? -11'sd1024 : (n % 7 == 1) ? 11'sd1023 : 11'($urandom);
        expq.push_back(a1[0] + a2[0] + int'(mr3));
        void'(a1.pop_front()); void'(a2.pop_front());
      end
      mr1 = (n % 5 == 0) ? -11'sd1024 : (n % 5 == 1) ? 11'sd1023 : 11'($urandom);
      mr2 = (n % 5 == 0) ? -11'sd1024 : (n % 5 == 1) ? 11'sd1023 : 11'($urandom);
      a1.push_back(int'(mr1)); a2.push_back(int'(mr2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
