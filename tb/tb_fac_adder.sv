// tb_fac_adder: end-to-end, full-size test of the 3-tuple FAC adder
// (N = 32, L = 10, three processing units, top parameters left at defaults).
//
// Operands are applied every 2 ns, the 500 MHz input rate at which the adder
// is meant to be exercised; the adder is combinational, so each result is
// checked 1 ns after its operands. Expected sums come from the arithmetic
// reference model.
//
// Faults are injected with force/release on one processing unit's outputs
// while the others are left intact, exercising each masking mechanism:
//   sig_fault  - one flipped bit in output A (significant part) of one unit
//   lsp_fault  - one flipped bit in output B* (approximate part) of one unit
//   unit_fault - every output of one unit replaced by random values
//   t_fault    - the internal carry T of one unit inverted
// In all of these the voted sum must equal the fault-free one. A double
// fault (the same bit flipped in two units) must get through the voters,
// showing the single-fault limit. The test also counts vectors on which the
// approximate low bits differ from exact addition and on which T is 1, and
// fails if any mechanism never happened.
`timescale 1ns/1ps
module tb_fac_adder;
  import fac_ref_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned L  = 10;
  localparam int unsigned LB = 4;
  localparam int          VECTORS = 2000;

  logic [N-1:0] a, b;
  logic [N-L:0] v1;
  logic [L-1:0] v2;
  logic [N:0]   sum;

  int checks = 0;
  int failures = 0;
  int n_sig_fault = 0, n_lsp_fault = 0, n_unit_fault = 0, n_t_fault = 0;
  int n_double_fault = 0, n_approx_diff = 0, n_t_set = 0;

  fac_adder dut (.a_i(a), .b_i(b), .v1_o(v1), .v2_o(v2), .sum_o(sum));

  task automatic expect_sum(string what);
    longint unsigned exp;
    exp = ref_sum(a, b, N, L, LB);
    checks++;
    if (longint'(sum) != exp || sum != {v1, v2}) begin
      failures++;
      $display("FAIL %s: a=%h b=%h sum=%h exp=%h", what, a, b, sum, exp);
    end
  endtask

  // Apply one operand pair, then inject one kind of fault into unit `unit`.
  task automatic run_vector(int kind, int unit);
    logic [N-L:0] sig_good, sig_bad;
    logic [L-1:0] lsp_good, lsp_bad;
    int           bitpos;
    a = $urandom();
    b = $urandom();
    #1;
    expect_sum("fault-free");
    if ((longint'(a) + longint'(b)) % (64'd1 << L) != longint'(v2)) n_approx_diff++;
    if (a[L-1] & b[L-1]) n_t_set++;
    sig_good = N'(ref_upper(a, b, N, L));
    lsp_good = L'(ref_lower(a, b, L, LB));
    case (kind)
      0: begin  // single bit in the significant part
        bitpos  = $urandom_range(N - L);
        sig_bad = sig_good ^ ((N-L+1)'(1) << bitpos);
        case (unit)
          0: force dut.sig_out[0] = sig_bad;
          1: force dut.sig_out[1] = sig_bad;
          default: force dut.sig_out[2] = sig_bad;
        endcase
        #0.5 expect_sum("sig_fault");
        n_sig_fault++;
      end
      1: begin  // single bit in the approximate part
        bitpos  = $urandom_range(L - 1);
        lsp_bad = lsp_good ^ (L'(1) << bitpos);
        case (unit)
          0: force dut.lsp_out[0] = lsp_bad;
          1: force dut.lsp_out[1] = lsp_bad;
          default: force dut.lsp_out[2] = lsp_bad;
        endcase
        #0.5 expect_sum("lsp_fault");
        n_lsp_fault++;
      end
      2: begin  // whole unit faulty
        sig_bad = (N-L+1)'({$urandom(), $urandom()});
        lsp_bad = L'($urandom());
        case (unit)
          0: begin force dut.sig_out[0] = sig_bad; force dut.lsp_out[0] = lsp_bad; end
          1: begin force dut.sig_out[1] = sig_bad; force dut.lsp_out[1] = lsp_bad; end
          default: begin force dut.sig_out[2] = sig_bad; force dut.lsp_out[2] = lsp_bad; end
        endcase
        #0.5 expect_sum("unit_fault");
        n_unit_fault++;
      end
      3: begin  // carry link T inverted inside one unit
        case (unit)
          0: force dut.g_pu[0].u_pu.carry_t = ~(a[L-1] & b[L-1]);
          1: force dut.g_pu[1].u_pu.carry_t = ~(a[L-1] & b[L-1]);
          default: force dut.g_pu[2].u_pu.carry_t = ~(a[L-1] & b[L-1]);
        endcase
        #0.5 expect_sum("t_fault");
        checks++;  // the faulty unit's own output A must be wrong
        if (dut.sig_out[unit] == sig_good) begin
          failures++;
          $display("FAIL T fault did not reach unit %0d", unit);
        end
        n_t_fault++;
      end
      default: begin  // same bit flipped in two units: must not be masked
        bitpos  = $urandom_range(N - L);
        sig_bad = sig_good ^ ((N-L+1)'(1) << bitpos);
        force dut.sig_out[0] = sig_bad;
        force dut.sig_out[1] = sig_bad;
        #0.5;
        checks++;
        if (v1 != sig_bad) begin
          failures++;
          $display("FAIL double fault not visible: v1=%h bad=%h", v1, sig_bad);
        end
        n_double_fault++;
      end
    endcase
    release dut.sig_out[0];
    release dut.sig_out[1];
    release dut.sig_out[2];
    release dut.lsp_out[0];
    release dut.lsp_out[1];
    release dut.lsp_out[2];
    release dut.g_pu[0].u_pu.carry_t;
    release dut.g_pu[1].u_pu.carry_t;
    release dut.g_pu[2].u_pu.carry_t;
    #0.5;
  endtask

  task automatic count_mechanism(string what, int n);
    checks++;
    $display("%-14s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin : watchdog
    #(2 * (VECTORS + 100) * 1ns);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0;
    b = '0;
    #1;
    for (int i = 0; i < VECTORS; i++) run_vector(i % 5, (i / 5) % 3);
    count_mechanism("sig_fault", n_sig_fault);
    count_mechanism("lsp_fault", n_lsp_fault);
    count_mechanism("unit_fault", n_unit_fault);
    count_mechanism("t_fault", n_t_fault);
    count_mechanism("double_fault", n_double_fault);
    count_mechanism("approx_differs", n_approx_diff);
    count_mechanism("carry_T_set", n_t_set);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
