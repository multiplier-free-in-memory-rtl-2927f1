// tb_da_vmm_top -- end-to-end test of the convolution engine at full size.
//
// The top is used with its default sizes: 25x6 weight matrix, PMAs of 256,
// 256 and 512 rows, 32x32 image, 28x28x6 outputs.
//   * Filter 1 is a quantized 5x5 LeNet-5 filter (printed in the original
//     work); filters 2-4 are random INT8; filter 5 is all -128 (X17..X25:
//     -113) and filter 6 all +127 (X17..X25: +113), the largest magnitudes
//     whose 9-weight sums still fit the 11-bit PMA-3 words. Random filters
//     are scaled down where a 9-weight sum would not fit, for the same reason.
//   * Pre-VMM: load the weights, run the weight summation once, check its
//     length (52,224 clocks + start clock) and the 1024 PMA row writes.
//   * Two images (random, then with a bright 255 block and a dark 0 area) are
//     convolved with the same stored sums; each layer must take 15,428 clocks
//     plus the start clock, every VMM must read the PMAs on 8 consecutive
//     clocks and write its result 11 clocks after the first read, and all
//     784 x 6 outputs must equal the direct
//     convolution sum_i X_i * W_ij computed here in integer arithmetic.
// Mechanisms counted (each must occur): PMA rows written, full 25-pixel window
// loads, slide-and-load strides, PMA-3 reads with its 9th address bit set,
// negative weight sums entering the add-and-shift units, negative results,
// results of magnitude above 2^19 (top bits of the 21-bit adder), and a
// second layer run on the same stored weight sums.
module tb_da_vmm_top;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          rst_n = 0;
  logic          w_we = 0, prevmm_start = 0, img_we = 0, conv_start = 0;
  logic [4:0]    w_row = '0;
  logic [2:0]    w_col = '0;
  logic signed [7:0] w_data = '0;
  logic [9:0]    img_addr = '0, res_addr = '0;
  logic [7:0]    img_data = '0;
  logic          prevmm_done, conv_done, busy;
  logic [125:0]  res_data;

  da_vmm_top dut (.*);

  int wm [25][6];
  int img [32][32];
  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_pma_wr = 0, n_full = 0, n_slide = 0, n_pma3_hi = 0, n_neg_mr = 0, n_neg_y = 0, n_big_y = 0, n_layers = 0;
  int loads = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.ws_wr_en) n_pma_wr++;
    if (dut.px_re) loads++;
    if (dut.rd_en && dut.bit_sel == 3'd7) begin
      if (loads == 25) n_full++; else if (loads == 5) n_slide++;
      loads = 0;
    end
    if (dut.rd3_en && dut.addr3_d[8]) n_pma3_hi++;
    if (dut.acc_en && dut.g_col[0].s13 < 0) n_neg_mr++;
  end

  // per-VMM timing at the top: 8 consecutive PMA reads, result written
  // 11 clocks after the first read
  int t_first_rd = 0, run_rd = 0, n_vmm = 0, n_lat_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.rd_en) begin
      if (run_rd == 0) t_first_rd = cyc;
      run_rd++;
    end else if (run_rd != 0) begin
      if (run_rd != 8) n_lat_bad++;
      run_rd = 0;
    end
    if (dut.out_we) begin
      n_vmm++;
      if (cyc - t_first_rd != 11) n_lat_bad++;
    end
  end

  function automatic void chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endfunction

  initial begin
    repeat (150000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_weights();
    int f1 [25] = '{74, 46, 3, -72, -82, 26, 63, -16, 36, -15, 27, 89, 88, -55, -93,
                    -87, 102, 93, -58, 45, 21, 58, -11, 38, -22};
    for (int i = 0; i < 25; i++) begin
      wm[i][0] = f1[i];
      for (int j = 1; j < 4; j++) wm[i][j] = int'($signed(8'($urandom)));
      wm[i][4] = (i < 16) ? -128 : -113;
      wm[i][5] = (i < 16) ? 127 : 113;
    end
    // keep every 9-weight sum of the PMA-3 slice inside 11 bits
    for (int j = 1; j < 4; j++) begin
      int pos, neg;
      pos = 0; neg = 0;
      for (int i = 16; i < 25; i++) if (wm[i][j] > 0) pos += wm[i][j]; else neg += wm[i][j];
      if (pos > 1023 || neg < -1024)
        for (int i = 16; i < 25; i++) wm[i][j] = wm[i][j] / 2;
    end
  endtask

  task automatic run_layer(input int which);
    int t0;
    for (int r = 0; r < 32; r++)
      for (int c = 0; c < 32; c++) begin
        if (which == 0) img[r][c] = $urandom_range(0, 255);
        else img[r][c] = (r >= 8 && r < 20 && c >= 4 && c < 16) ? 255 : (r > 24) ? 0 : $urandom_range(0, 255);
        @(negedge clk); img_we = 1; img_addr = 10'(r*32 + c); img_data = 8'(img[r][c]);
      end
    @(negedge clk); img_we = 0; conv_start = 1; t0 = cyc;
    @(negedge clk); conv_start = 0;
    wait (conv_done);
    chk(cyc - t0 == 15428 + 1, $sformatf("layer %0d took %0d clocks", which, cyc - t0));
    @(negedge clk);
    n_layers++;
    for (int r = 0; r < 28; r++)
      for (int c = 0; c < 28; c++) begin
        res_addr = 10'(r*28 + c);
        #1;
        for (int j = 0; j < 6; j++) begin
          int e;
          logic signed [20:0] y;
          e = 0;
          for (int i = 0; i < 25; i++) e += img[r + i/5][c + i%5] * wm[i][j];
          y = $signed(res_data[j*21 +: 21]);
          chk(int'(y) == e, $sformatf("layer %0d Y%0d(%0d,%0d) = %0d exp %0d", which, j+1, r, c, y, e));
          if (e < 0) n_neg_y++;
          if (e >= (1 << 19) || e < -(1 << 19)) n_big_y++;
        end
      end
  endtask

  initial begin
    int t0;
    make_weights();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 25; i++)
      for (int j = 0; j < 6; j++) begin
        @(negedge clk); w_we = 1; w_row = 5'(i); w_col = 3'(j); w_data = 8'(wm[i][j]);
      end
    @(negedge clk); w_we = 0; prevmm_start = 1; t0 = cyc;
    @(negedge clk); prevmm_start = 0;
    wait (prevmm_done);
    chk(cyc - t0 == 52224 + 1, $sformatf("pre-VMM took %0d clocks", cyc - t0));
    repeat (2) @(negedge clk);
    chk(n_pma_wr == 1024, $sformatf("%0d PMA rows written", n_pma_wr));
    run_layer(0);
    run_layer(1);
    chk(!busy, "idle at the end");
    chk(n_vmm == 2 * 784 && n_lat_bad == 0, $sformatf("%0d VMMs, %0d with wrong read count or latency", n_vmm, n_lat_bad));
    $display("mechanisms: pma_rows=%0d full_loads=%0d slide_loads=%0d pma3_addr8=%0d neg_mr=%0d neg_y=%0d big_y=%0d layers=%0d",
             n_pma_wr, n_full, n_slide, n_pma3_hi, n_neg_mr, n_neg_y, n_big_y, n_layers);
    chk(n_pma_wr > 0, "no PMA write");
    chk(n_full > 0, "no full window load");
    chk(n_slide > 0, "no slide-and-load stride");
    chk(n_pma3_hi > 0, "no 9th PMA-3 address bit");
    chk(n_neg_mr > 0, "no negative weight sum");
    chk(n_neg_y > 0, "no negative result");
    chk(n_big_y > 0, "no result above 2^19");
    chk(n_layers == 2, "second layer on stored sums");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
