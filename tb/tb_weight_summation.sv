// tb_weight_summation -- self-checking test of the pre-VMM weight summation.
//
// Loads a random signed 25x6 weight matrix (plus the all -128 / all +127
// corner cases in some columns), starts the sweep and checks every PMA row
// write: target PMA (0, 1, 2 in order), address (ascending), and each 11-bit
// column value against the sum of the selected weights computed here,
// reduced to 11 bits two's complement. Also checks the number of writes
// (256 + 256 + 512), the 'done' pulse and the sweep length of
// 256*6*8 + 256*6*8 + 512*6*9 = 52,224 clocks (plus the clock that samples
// 'start').
module tb_weight_summation;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst_n = 0, w_we = 0, start = 0;
  logic [4:0]  w_row = '0;
  logic [2:0]  w_col = '0;
  logic signed [7:0] w_data = '0;
  logic        busy, done, wr_en;
  logic [1:0]  wr_pma;
  logic [8:0]  wr_addr;
  logic [65:0] wr_data;

  weight_summation dut (.*);

  int wref [25][6];
  int nwrites = 0;
  int exp_pma = 0, exp_addr = 0;
  int t_start, t_done;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check each write as it appears
  always @(negedge clk) if (rst_n && wr_en) begin
    int base, n;
    base = (exp_pma == 0) ? 0 : (exp_pma == 1) ? 8 : 16;
    n    = (exp_pma == 2) ? 9 : 8;
    checks++;
    if (int'(wr_pma) != exp_pma || int'(wr_addr) != exp_addr) begin
      failures++; $display("FAIL order: pma %0d addr %0d, exp %0d %0d", wr_pma, wr_addr, exp_pma, exp_addr);
    end
    for (int j = 0; j < 6; j++) begin
      int s;
      logic [10:0] e;
      s = 0;
      for (int i = 0; i < n; i++) if (((exp_addr >> i) & 1) != 0) s += wref[base + i][j];
      e = 11'(s);
      checks++;
      if (wr_data[j*11 +: 11] !== e) begin
        failures++; $display("FAIL pma %0d addr %0d col %0d: %h exp %h", exp_pma, exp_addr, j, wr_data[j*11 +: 11], e);
      end
    end
    nwrites++;
    exp_addr++;
    if (exp_addr == (1 << n)) begin exp_addr = 0; exp_pma++; end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 25; i++)
      for (int j = 0; j < 6; j++) begin
        int v;
        v = (j == 4) ? -128 : (j == 5 && i < 16) ? 127 : int'($signed(8'($urandom)));
        wref[i][j] = v;
        @(negedge clk); w_we = 1; w_row = 5'(i); w_col = 3'(j); w_data = 8'(v);
      end
    @(negedge clk); w_we = 0; start = 1;
    t_start = cyc;
    @(negedge clk); start = 0;
    wait (done);
    t_done = cyc;
    repeat (2) @(negedge clk);
    checks++;
    if (nwrites != 1024) begin failures++; $display("FAIL %0d writes", nwrites); end
    checks++;
    if (t_done - t_start != 52224 + 1) begin failures++; $display("FAIL sweep took %0d clocks", t_done - t_start); end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
