// tb_lf_adder -- self-checking test of the Ladner-Fischer adder.
//
// Instantiates the three widths used in the engine (12, 13, 21 bits) plus an
// 8-bit one, drives corner values (all ones + 1, alternating patterns,
// carry-in chains) and random operands, and compares sum and carry-out with
// the integer sum a + b + cin computed here. Every check is one operand set.
module tb_lf_adder;

  int checks = 0, failures = 0;

  logic [7:0]  a8, b8, s8;    logic c8, co8;
  logic [11:0] a12, b12, s12; logic c12, co12;
  logic [12:0] a13, b13, s13; logic c13, co13;
  logic [20:0] a21, b21, s21; logic c21, co21;

  lf_adder #(.W(8))  u8  (.a(a8),  .b(b8),  .cin(c8),  .s(s8),  .cout(co8));
  lf_adder #(.W(12)) u12 (.a(a12), .b(b12), .cin(c12), .s(s12), .cout(co12));
  lf_adder #(.W(13)) u13 (.a(a13), .b(b13), .cin(c13), .s(s13), .cout(co13));
  lf_adder #(.W(21)) u21 (.a(a21), .b(b21), .cin(c21), .s(s21), .cout(co21));

  task automatic check_all();
    logic [8:0]  e8;
    logic [12:0] e12;
    logic [13:0] e13;
    logic [21:0] e21;
    #1;
    e8  = {1'b0, a8}  + {1'b0, b8}  + 9'(c8);
    e12 = {1'b0, a12} + {1'b0, b12} + 13'(c12);
    e13 = {1'b0, a13} + {1'b0, b13} + 14'(c13);
    e21 = {1'b0, a21} + {1'b0, b21} + 22'(c21);
    checks += 4;
    if ({co8, s8}   !== e8)  begin failures++; $display("FAIL W=8  %h+%h+%b -> %h exp %h", a8, b8, c8, {co8, s8}, e8); end
    if ({co12, s12} !== e12) begin failures++; $display("FAIL W=12 %h+%h+%b -> %h exp %h", a12, b12, c12, {co12, s12}, e12); end
    if ({co13, s13} !== e13) begin failures++; $display("FAIL W=13 %h+%h+%b -> %h exp %h", a13, b13, c13, {co13, s13}, e13); end
    if ({co21, s21} !== e21) begin failures++; $display("FAIL W=21 %h+%h+%b -> %h exp %h", a21, b21, c21, {co21, s21}, e21); end
  endtask

  task automatic drive(input logic [20:0] a, input logic [20:0] b, input logic c);
    a8 = a[7:0];   b8 = b[7:0];   c8 = c;
    a12 = a[11:0]; b12 = b[11:0]; c12 = c;
    a13 = a[12:0]; b13 = b[12:0]; c13 = c;
    a21 = a;       b21 = b;       c21 = c;
    check_all();
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    drive('1, 21'd1, 1'b0);          // full carry ripple
    drive('1, '0, 1'b1);             // carry-in ripple
    drive('1, '1, 1'b1);
    drive(21'h0AAAAA, 21'h155555, 1'b1);
    drive(21'h155555, 21'h155555, 1'b0);
    drive('0, '0, 1'b0);
    // exhaustive 8-bit pairs with stride, random wider operands
    for (int i = 0; i < 256; i += 3)
      for (int k = 0; k < 256; k += 5)
        drive({13'($urandom), 8'(i)}, {13'($urandom), 8'(k)}, 1'($urandom));
    for (int n = 0; n < 2000; n++) drive(21'($urandom), 21'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
