// tb_pma -- self-checking test of the processing memory array.
//
// Uses the PMA-3 size (9 address bits, 512 x 66). Programs every row with a
// pseudo-random word kept in a reference array, then reads rows in random
// order and checks that each read-out appears exactly one clock after the
// read request and that it holds while 're' is low. Also overwrites rows and
// checks the new value.
module tb_pma;

  localparam int AW = 9, NC = 6, MW = 11, DW = NC * MW;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, mr;
  logic [DW-1:0] ref_mem [1 << AW];

  pma #(.ADDR_W(AW), .NCOL(NC), .MR_W(MW)) dut (.*);

  function automatic logic [DW-1:0] rnd();
    return {34'($urandom), 32'($urandom)};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // program all rows
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = rnd(); ref_mem[a] = wdata;
    end
    @(negedge clk) we = 0;
    // random reads: data one clock after the request
    for (int n = 0; n < 2000; n++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      @(negedge clk); re = 1; raddr = a;
      @(negedge clk); re = 0; raddr = ~a;
      checks++;
      if (mr !== ref_mem[a]) begin failures++; $display("FAIL read %0d: %h exp %h", a, mr, ref_mem[a]); end
      @(negedge clk);  // re low: must hold
      checks++;
      if (mr !== ref_mem[a]) begin failures++; $display("FAIL hold %0d", a); end
      if (n % 10 == 0) begin  // reprogram a row
        @(negedge clk); we = 1; waddr = a; wdata = rnd(); ref_mem[a] = wdata;
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
