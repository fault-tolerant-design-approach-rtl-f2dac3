// tb_majority_voter: self-checking test of the bitwise majority voter.
//
// Two instances: the default 3-copy, 23-bit voter (V1 of the FAC adder) and a
// 5-copy, 10-bit voter for the higher-order variant. Inputs are random words
// plus every one of the 2^COPIES bit patterns broadcast over the word; the
// expected output is found by counting the ones of each bit position.
`timescale 1ns/1ps
module tb_majority_voter;

  localparam int unsigned W3 = 23;
  localparam int unsigned W5 = 10;

  logic [2:0][W3-1:0] votes3;
  logic [W3-1:0]      vote3;
  logic [4:0][W5-1:0] votes5;
  logic [W5-1:0]      vote5;

  int checks = 0;
  int failures = 0;

  majority_voter dut3 (.votes_i(votes3), .vote_o(vote3));
  majority_voter #(.WIDTH(W5), .COPIES(5)) dut5 (.votes_i(votes5), .vote_o(vote5));

  function automatic logic [W3-1:0] expect3(logic [2:0][W3-1:0] v);
    logic [W3-1:0] r;
    for (int b = 0; b < W3; b++) r[b] = (int'(v[0][b]) + int'(v[1][b]) + int'(v[2][b])) >= 2;
    return r;
  endfunction

  function automatic logic [W5-1:0] expect5(logic [4:0][W5-1:0] v);
    logic [W5-1:0] r;
    int n;
    for (int b = 0; b < W5; b++) begin
      n = 0;
      for (int k = 0; k < 5; k++) n += int'(v[k][b]);
      r[b] = n >= 3;
    end
    return r;
  endfunction

  task automatic check3();
    #1;
    checks++;
    if (vote3 !== expect3(votes3)) begin
      failures++;
      $display("FAIL voter3: in=%h %h %h out=%h exp=%h", votes3[0], votes3[1], votes3[2],
               vote3, expect3(votes3));
    end
  endtask

  task automatic check5();
    #1;
    checks++;
    if (vote5 !== expect5(votes5)) begin
      failures++;
      $display("FAIL voter5: out=%h exp=%h", vote5, expect5(votes5));
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // all 8 patterns of three copies, broadcast over every bit
    for (int p = 0; p < 8; p++) begin
      for (int k = 0; k < 3; k++) votes3[k] = p[k] ? '1 : '0;
      check3();
    end
    for (int p = 0; p < 32; p++) begin
      for (int k = 0; k < 5; k++) votes5[k] = p[k] ? '1 : '0;
      check5();
    end
    for (int i = 0; i < 2000; i++) begin
      for (int k = 0; k < 3; k++) votes3[k] = W3'($urandom());
      for (int k = 0; k < 5; k++) votes5[k] = W5'($urandom());
      check3();
      check5();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
