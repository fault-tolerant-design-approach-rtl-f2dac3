// tb_cla_adder: self-checking test of the carry-lookahead adder.
//
// The default 22-bit instance (accurate part of the FAC adder) gets corner
// cases (all-ones carry chains, zero) and random operands with both carry-in
// values. A 6-bit instance with 4-bit groups (one full, one partial group) is
// checked exhaustively. Expected values come from integer addition.
`timescale 1ns/1ps
module tb_cla_adder;

  localparam int unsigned W  = 22;
  localparam int unsigned WS = 6;

  logic [W-1:0]  a, b;
  logic          cin;
  logic [W:0]    sum;
  logic [WS-1:0] as, bs;
  logic          cins;
  logic [WS:0]   sums;

  int checks = 0;
  int failures = 0;

  cla_adder dut (.a_i(a), .b_i(b), .cin_i(cin), .sum_o(sum));
  cla_adder #(.WIDTH(WS), .GROUP(4)) dut_s (.a_i(as), .b_i(bs), .cin_i(cins), .sum_o(sums));

  task automatic check();
    longint unsigned exp;
    #1;
    exp = longint'(a) + longint'(b) + longint'(cin);
    checks++;
    if (longint'(sum) != exp) begin
      failures++;
      $display("FAIL cla22: %h + %h + %0d = %h, expected %h", a, b, cin, sum, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    as = '0; bs = '0; cins = 0;
    // corners
    a = '1; b = '0; cin = 1; check();
    a = '1; b = '1; cin = 1; check();
    a = '0; b = '0; cin = 0; check();
    a = '0; b = '0; cin = 1; check();
    a = 22'h2AAAAA; b = 22'h155555; cin = 1; check();
    for (int i = 0; i < W; i++) begin
      a = W'(1) << i; b = ~a; cin = 1; check();  // carry chain from bit 0 to top
    end
    for (int i = 0; i < 5000; i++) begin
      a = W'($urandom()); b = W'($urandom()); cin = 1'($urandom()); check();
    end
    // exhaustive small instance
    for (int x = 0; x < (1 << WS); x++)
      for (int y = 0; y < (1 << WS); y++)
        for (int c = 0; c < 2; c++) begin
          as = WS'(x); bs = WS'(y); cins = 1'(c);
          #1;
          checks++;
          if (int'(sums) != x + y + c) begin
            failures++;
            $display("FAIL cla6: %0d + %0d + %0d = %0d", x, y, c, sums);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
