// tb_vmm_controller -- self-checking test of the layer sequencer.
//
// Runs the controller alone through a full 28x28 layer. A shadow window
// records, for each buffer position, the image address whose pixel the
// controller loaded there (px_addr one clock before ld_en) and applies
// 'shift' the way the buffer does. At the first bit cycle of every
// multiplication the testbench checks that the window holds exactly the 5x5
// patch of the output pixel expected next (row-major order). It also checks
//   * 8 consecutive read cycles with bit_sel 7,6,..,0 per multiplication,
//   * rd3_en one clock after rd_en, acc_en three clocks after it, acc_first
//     on the MSB plane only,
//   * out_we 11 clocks after the first read, at address r*28 + c,
//   * 28 full loads (25 pixels) and 756 slide-and-load steps (5 pixels),
//   * 784 result writes and a layer time of 15,428 clocks plus the start clock.
module tb_vmm_controller;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, start = 0;
  logic       busy, done, px_re, ld_en, shift, rd_en, rd3_en, acc_en, acc_first, out_we;
  logic [9:0] px_addr, out_addr;
  logic [4:0] ld_idx;
  logic [2:0] bit_sel;

  vmm_controller dut (.*);

  int win [25];
  int px_addr_d;
  logic rd_d1 = 0, rd_d2 = 0, rd_d3 = 0, msb_d1 = 0, msb_d2 = 0, msb_d3 = 0;
  int vmm = 0, bitcnt = 0, t_first = 0, cyc = 0, nwrites = 0;
  int full_loads = 0, col_loads = 0, loads_this = 0, shifts_this = 0;

  function automatic void chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (vmm %0d, cycle %0d)", msg, vmm, cyc); end
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    px_addr_d <= px_re ? int'(px_addr) : -1;
    rd_d1 <= rd_en; rd_d2 <= rd_d1; rd_d3 <= rd_d2;
    msb_d1 <= rd_en && bit_sel == 3'd7; msb_d2 <= msb_d1; msb_d3 <= msb_d2;
    if (shift) begin
      for (int r = 0; r < 5; r++) for (int c = 0; c < 4; c++) win[r*5 + c] <= win[r*5 + c + 1];
      shifts_this <= shifts_this + 1;
    end else if (ld_en) begin
      win[ld_idx] <= px_addr_d;
    end
    if (px_re) loads_this <= loads_this + 1;
  end

  always @(negedge clk) if (rst_n) begin
    chk(rd3_en == rd_d1, "rd3_en not one clock after rd_en");
    chk(acc_en == rd_d3, "acc_en not three clocks after rd_en");
    chk(acc_first == msb_d3, "acc_first misplaced");
    if (ld_en) chk(px_addr_d >= 0, "ld_en without a pixel read");
    if (rd_en) begin
      chk(int'(bit_sel) == 7 - bitcnt, "bit order");
      if (bitcnt == 0) begin
        int r, c;
        r = vmm / 28; c = vmm % 28;
        for (int i = 0; i < 25; i++)
          chk(win[i] == (r + i/5)*32 + c + i%5, $sformatf("window position %0d", i));
        if (c == 0) begin chk(loads_this == 25 && shifts_this == 0, "full load"); full_loads++; end
        else        begin chk(loads_this == 5 && shifts_this == 1, "column load"); col_loads++; end
        t_first = cyc;
      end
      bitcnt = (bitcnt + 1) % 8;
    end else begin
      chk(bitcnt == 0, "bit cycles not consecutive");
    end
    if (out_we) begin
      chk(int'(out_addr) == vmm, "result address");
      chk(cyc - t_first == 11, $sformatf("latency %0d", cyc - t_first));
      nwrites++;
      vmm++;
      loads_this = 0; shifts_this = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    wait (done);
    chk(cyc - t0 == 15428 + 1, $sformatf("layer took %0d clocks", cyc - t0));
    repeat (2) @(negedge clk);
    chk(nwrites == 784, "784 writes");
    chk(full_loads == 28 && col_loads == 756, "load mix");
    chk(!busy, "idle after done");
    $display("full loads %0d, slide loads %0d", full_loads, col_loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
