// tb_input_buffer -- self-checking test of the 5x5 window buffer.
//
// Keeps a reference copy of the window. Loads all 25 positions, then repeats:
// slide ('shift') and load a new right-hand column, as the controller does
// for adjacent strides. After every step it checks all 25 registers and, for
// all 8 values of bit_sel, every bit of the 25-bit plane xbits
// (xbits[i] = bit bit_sel of window position i).
module tb_input_buffer;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n = 0, ld_en = 0, shift = 0;
  logic [4:0] ld_idx = '0;
  logic [7:0] ld_pix = '0;
  logic [2:0] bit_sel = '0;
  logic [24:0] xbits;
  logic [7:0]  x_out [25];

  input_buffer dut (.*);

  logic [7:0] wref [25];

  task automatic load(input int idx, input logic [7:0] v);
    @(negedge clk); ld_en = 1; ld_idx = 5'(idx); ld_pix = v; wref[idx] = v;
    @(negedge clk); ld_en = 0;
  endtask

  task automatic check_window();
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (x_out[i] !== wref[i]) begin failures++; $display("FAIL x[%0d]=%h exp %h", i, x_out[i], wref[i]); end
    end
    for (int k = 0; k < 8; k++) begin
      logic [24:0] e;
      bit_sel = 3'(k);
      #1;
      for (int i = 0; i < 25; i++) e[i] = wref[i][k];
      checks++;
      if (xbits !== e) begin failures++; $display("FAIL plane %0d: %h exp %h", k, xbits, e); end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 25; i++) wref[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_window();
    for (int i = 0; i < 25; i++) load(i, 8'($urandom));
    check_window();
    for (int s = 0; s < 200; s++) begin
      @(negedge clk); shift = 1;
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 4; c++) wref[r*5 + c] = wref[r*5 + c + 1];
      @(negedge clk); shift = 0;
      for (int r = 0; r < 5; r++) load(r*5 + 4, 8'($urandom));
      check_window();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
