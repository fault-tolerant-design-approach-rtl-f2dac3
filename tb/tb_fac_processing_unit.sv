// tb_fac_processing_unit: self-checking test of one imprecise-adder unit.
//
// Random and corner operands at the default N = 32, L = 10. Outputs A
// (SUM[32:10]) and B* (SUM[9:0]) are compared with the reference model. The
// test also checks the approximation error against exact addition stays
// within 2^(L+1), and that the carry T really reaches the accurate part.
`timescale 1ns/1ps
module tb_fac_processing_unit;
  import fac_ref_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned L  = 10;
  localparam int unsigned LB = 4;

  logic [N-1:0] a, b;
  logic [N-L:0] sig;
  logic [L-1:0] lsp;

  int checks = 0;
  int failures = 0;
  int t_events = 0;

  fac_processing_unit dut (.a_i(a), .b_i(b), .sig_o(sig), .lsp_o(lsp));

  task automatic check();
    longint exact, approx;
    #1;
    checks += 3;
    if (longint'(sig) != ref_upper(a, b, N, L)) begin
      failures++;
      $display("FAIL A: a=%h b=%h A=%h exp=%h", a, b, sig, ref_upper(a, b, N, L));
    end
    if (longint'(lsp) != ref_lower(a, b, L, LB)) begin
      failures++;
      $display("FAIL B*: a=%h b=%h B*=%h exp=%h", a, b, lsp, ref_lower(a, b, L, LB));
    end
    exact  = longint'(a) + longint'(b);
    approx = longint'({sig, lsp});
    if (approx - exact >= (64'sd1 <<< (L + 1)) || exact - approx >= (64'sd1 <<< (L + 1))) begin
      failures++;
      $display("FAIL error bound: a=%h b=%h approx=%h exact=%h", a, b, approx, exact);
    end
    if (a[L-1] & b[L-1]) t_events++;
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '1; b = '1; check();
    a = '0; b = '0; check();
    a = 32'hFFFF_FE00; b = 32'h0000_0200; check();  // T ripples through all 22 bits
    a = 32'hFFFF_FC00; b = 32'h0000_0200; check();  // same without T
    for (int i = 0; i < 5000; i++) begin
      a = $urandom(); b = $urandom(); check();
    end
    checks++;
    if (t_events == 0) begin
      failures++;
      $display("FAIL carry T never set");
    end
    $display("T set on %0d vectors", t_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
