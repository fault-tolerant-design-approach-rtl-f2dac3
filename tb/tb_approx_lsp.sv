// tb_approx_lsp: self-checking test of the approximate less significant part.
//
// The default L = 10 instance is driven with every value of the four
// reduced-logic bit pairs and random values of the others; a 5-bit instance
// is checked exhaustively. Each sum bit and the carry T are compared with the
// reference model, and the constant bits are checked to be 1.
`timescale 1ns/1ps
module tb_approx_lsp;
  import fac_ref_pkg::*;

  localparam int unsigned L  = 10;
  localparam int unsigned LB = 4;
  localparam int unsigned LS = 5;

  logic [L-1:0]  a, b, sum;
  logic          t;
  logic [LS-1:0] as, bs, sums;
  logic          ts;

  int checks = 0;
  int failures = 0;

  approx_lsp dut (.a_i(a), .b_i(b), .sum_o(sum), .carry_o(t));
  approx_lsp #(.L(LS)) dut_s (.a_i(as), .b_i(bs), .sum_o(sums), .carry_o(ts));

  task automatic check();
    #1;
    checks += 2;
    if (longint'(sum) != ref_lower(a, b, L, LB)) begin
      failures++;
      $display("FAIL sum: a=%h b=%h sum=%h exp=%h", a, b, sum, ref_lower(a, b, L, LB));
    end
    if (longint'(t) != ref_carry_t(a, b, L)) begin
      failures++;
      $display("FAIL T: a=%h b=%h t=%0d", a, b, t);
    end
    checks++;
    if (sum[L-LB-1:0] != '1) begin
      failures++;
      $display("FAIL constant bits not 1: %b", sum);
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
    as = '0; bs = '0;
    for (int p = 0; p < 256; p++) begin
      a = {p[7:4], 6'($urandom())};
      b = {p[3:0], 6'($urandom())};
      check();
    end
    for (int i = 0; i < 1000; i++) begin
      a = L'($urandom()); b = L'($urandom()); check();
    end
    for (int x = 0; x < (1 << LS); x++)
      for (int y = 0; y < (1 << LS); y++) begin
        as = LS'(x); bs = LS'(y);
        #1;
        checks++;
        if (longint'(sums) != ref_lower(as, bs, LS, LB) ||
            longint'(ts) != ref_carry_t(as, bs, LS)) begin
          failures++;
          $display("FAIL L=5: a=%b b=%b sum=%b t=%0d", as, bs, sums, ts);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
