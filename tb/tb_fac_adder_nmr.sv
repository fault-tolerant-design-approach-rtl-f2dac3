// tb_fac_adder_nmr: the FAC adder in its 5-tuple form (COPIES = 5), which
// must mask any two faulty processing units.
//
// For random operands, two distinct units get random garbage forced onto both
// their outputs (A and B*); the voted sum must still equal the reference. Then
// three units get the same corrupted A word, which must reach V1, showing the
// (COPIES-1)/2 limit. Operands are applied every 2 ns.
`timescale 1ns/1ps
module tb_fac_adder_nmr;
  import fac_ref_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned L  = 10;
  localparam int unsigned LB = 4;
  localparam int unsigned C  = 5;
  localparam int          VECTORS = 1000;

  logic [N-1:0] a, b;
  logic [N-L:0] v1;
  logic [L-1:0] v2;
  logic [N:0]   sum;

  int checks = 0;
  int failures = 0;
  int n_two_masked = 0, n_three_seen = 0;

  fac_adder #(.COPIES(C)) dut (.a_i(a), .b_i(b), .v1_o(v1), .v2_o(v2), .sum_o(sum));

  // Force garbage onto unit u (constant indices are needed for force).
  task automatic break_unit(int u, logic [N-L:0] s, logic [L-1:0] l);
    case (u)
      0: begin force dut.sig_out[0] = s; force dut.lsp_out[0] = l; end
      1: begin force dut.sig_out[1] = s; force dut.lsp_out[1] = l; end
      2: begin force dut.sig_out[2] = s; force dut.lsp_out[2] = l; end
      3: begin force dut.sig_out[3] = s; force dut.lsp_out[3] = l; end
      default: begin force dut.sig_out[4] = s; force dut.lsp_out[4] = l; end
    endcase
  endtask

  task automatic release_all();
    release dut.sig_out[0]; release dut.lsp_out[0];
    release dut.sig_out[1]; release dut.lsp_out[1];
    release dut.sig_out[2]; release dut.lsp_out[2];
    release dut.sig_out[3]; release dut.lsp_out[3];
    release dut.sig_out[4]; release dut.lsp_out[4];
  endtask

  initial begin : watchdog
    #(2 * (VECTORS + 100) * 1ns);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u1, u2;
    logic [N-L:0] bad;
    for (int i = 0; i < VECTORS; i++) begin
      a = $urandom();
      b = $urandom();
      u1 = $urandom_range(C - 1);
      u2 = (u1 + 1 + $urandom_range(C - 2)) % C;
      if (i % 4 != 3) begin
        break_unit(u1, (N-L+1)'({$urandom(), $urandom()}), L'($urandom()));
        break_unit(u2, (N-L+1)'({$urandom(), $urandom()}), L'($urandom()));
        #1;
        checks++;
        if (longint'(sum) != ref_sum(a, b, N, L, LB)) begin
          failures++;
          $display("FAIL two faults not masked: units %0d,%0d a=%h b=%h sum=%h", u1, u2,
                   a, b, sum);
        end
        n_two_masked++;
      end else begin
        bad = (N-L+1)'(ref_upper(a, b, N, L)) ^ 1;
        force dut.sig_out[0] = bad;
        force dut.sig_out[2] = bad;
        force dut.sig_out[4] = bad;
        #1;
        checks++;
        if (v1 != bad) begin
          failures++;
          $display("FAIL three faults should reach V1: v1=%h bad=%h", v1, bad);
        end
        n_three_seen++;
      end
      release_all();
      #1;
    end
    checks += 2;
    if (n_two_masked == 0) failures++;
    if (n_three_seen == 0) failures++;
    $display("two_faults_masked %0d three_faults_visible %0d", n_two_masked, n_three_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
