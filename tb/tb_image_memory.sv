// tb_image_memory -- self-checking test of the image memory.
//
// Writes a full random 32x32 input image and random six-result words to all
// 784 output positions, then reads pixels in random order (data must appear
// one clock after px_re and hold while px_re is low) and reads back all output
// words, comparing with reference copies.
module tb_image_memory;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic         in_we = 0, px_re = 0, out_we = 0;
  logic [9:0]   in_waddr = '0, px_addr = '0, out_addr = '0, out_raddr = '0;
  logic [7:0]   in_wdata = '0, px_data;
  logic [125:0] out_wdata = '0, out_rdata;

  image_memory dut (.*);

  logic [7:0]   iref [1024];
  logic [125:0] oref [784];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); in_we = 1; in_waddr = 10'(a); in_wdata = 8'($urandom); iref[a] = in_wdata;
    end
    @(negedge clk); in_we = 0;
    for (int a = 0; a < 784; a++) begin
      @(negedge clk); out_we = 1; out_addr = 10'(a);
      out_wdata = {30'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)}; oref[a] = out_wdata;
    end
    @(negedge clk); out_we = 0;
    for (int n = 0; n < 1500; n++) begin
      int a;
      a = $urandom_range(0, 1023);
      @(negedge clk); px_re = 1; px_addr = 10'(a);
      @(negedge clk); px_re = 0; px_addr = 10'(~a);
      checks++;
      if (px_data !== iref[a]) begin failures++; $display("FAIL pixel %0d", a); end
      @(negedge clk);
      checks++;
      if (px_data !== iref[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    for (int a = 0; a < 784; a++) begin
      out_raddr = 10'(a);
      #1;
      checks++;
      if (out_rdata !== oref[a]) begin failures++; $display("FAIL out %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
