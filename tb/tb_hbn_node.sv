`timescale 1ps / 1ps
// tb_hbn_node -- self-checking test of one ABN node.
// Drives every combination of the three inputs and the challenge bit with
// Reset high and low, and checks the output both just before and just after
// the node delay: with Reset high it must equal the challenge, with Reset low
// the XOR of the three inputs, and it must not change earlier than DELAY_PS.
module tb_hbn_node;
  localparam int unsigned D = 100;

  logic reset, challenge, f, g, h, x;
  int   checks = 0, failures = 0;

  hbn_node #(.DELAY_PS(D)) dut (
    .reset(reset), .challenge(challenge), .in_f(f), .in_g(g), .in_h(h), .x(x)
  );

  task automatic check(input logic exp, input string what);
    checks++;
    if (x !== exp) begin
      failures++;
      $display("FAIL %s: x=%b expected %b (reset=%b c=%b fgh=%b%b%b)", what, x, exp, reset, challenge, f, g, h);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev, exp;
    reset = 1; challenge = 0; {f, g, h} = 3'b000;
    #(3 * D);
    check(1'b0, "initial hold");
    for (int r = 0; r < 2; r++) begin
      for (int v = 0; v < 16; v++) begin
        prev = x;
        reset = (r == 0);
        {challenge, f, g, h} = 4'(v);
        exp = reset ? challenge : (f ^ g ^ h);
        #(D - 10);
        check(prev, "before delay");
        #20;
        check(exp, reset ? "reset=1 selects challenge" : "reset=0 selects xor");
        #(2 * D);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
