`timescale 1ps / 1ps
// tb_abn_network -- self-checking test of the N-node XOR network.
// 1. Wiring: from the elaborated GRAPH, every node must read three distinct
//    nodes other than itself, and every node must be read exactly three times.
// 2. Dynamics: with equal node delays D the unclocked network behaves like a
//    synchronous XOR map updated every D ps. The testbench iterates that map
//    itself, x_{k+1}[i] = x_k[f] ^ x_k[g] ^ x_k[h], and compares it with the
//    network state in the middle of every interval after release, for random
//    challenges and for the all-0 / all-1 fixed points.
// 3. Reset: raising Reset returns the state to the challenge within one D.
module tb_abn_network;
  localparam int unsigned N     = 256;
  localparam int unsigned D     = 230;
  localparam int unsigned STEPS = 45;

  logic         reset;
  logic [N-1:0] chal, x;
  int checks = 0, failures = 0;
  int unsigned src [N][3];

  abn_network #(.N(N)) dut (.reset(reset), .challenge(chal), .x(x));

  function automatic logic [N-1:0] step(logic [N-1:0] s);
    logic [N-1:0] r;
    for (int i = 0; i < int'(N); i++) r[i] = s[src[i][0]] ^ s[src[i][1]] ^ s[src[i][2]];
    return r;
  endfunction

  task automatic run_challenge(input logic [N-1:0] c, input string name);
    logic [N-1:0] ref_state;
    reset = 1;
    chal  = c;
    #(4 * D);
    checks++;
    if (x !== c) begin failures++; $display("FAIL %s: held state differs from challenge", name); end
    reset     = 0;
    ref_state = c;
    #(D / 2);
    for (int k = 1; k <= int'(STEPS); k++) begin
      #(D);
      ref_state = step(ref_state);
      checks++;
      if (x !== ref_state) begin
        failures++;
        $display("FAIL %s step %0d: x=%h expected %h", name, k, x, ref_state);
      end
    end
    reset = 1;
    #(D + 10);
    checks++;
    if (x !== c) begin failures++; $display("FAIL %s: Reset did not restore the challenge", name); end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned fanout [N];
    logic [N-1:0] c;
    for (int i = 0; i < int'(N); i++) fanout[i] = 0;
    for (int i = 0; i < int'(N); i++) begin
      for (int k = 0; k < 3; k++) begin
        src[i][k] = int'(dut.GRAPH[i][k]);
        fanout[src[i][k]]++;
      end
      checks++;
      if (src[i][0] == i || src[i][1] == i || src[i][2] == i ||
          src[i][0] == src[i][1] || src[i][0] == src[i][2] || src[i][1] == src[i][2]) begin
        failures++;
        $display("FAIL node %0d reads %0d %0d %0d", i, src[i][0], src[i][1], src[i][2]);
      end
    end
    for (int i = 0; i < int'(N); i++) begin
      checks++;
      if (fanout[i] != 3) begin failures++; $display("FAIL node %0d drives %0d inputs", i, fanout[i]); end
    end

    run_challenge('0, "all-zero");
    run_challenge('1, "all-one");
    for (int t = 0; t < 6; t++) begin
      for (int w = 0; w < int'(N); w += 32) c[w +: 32] = $urandom;
      run_challenge(c, $sformatf("random %0d", t));
    end
    c = '0; c[0] = 1'b1;
    run_challenge(c, "single one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
