`timescale 1ps / 1ps
// tb_hbn_control -- self-checking test of the clocked query sequencer.
// For several queries it checks: the challenge is latched on start and held
// stable; Reset stays high for exactly HOLD cycles after the challenge is
// applied and then stays low for exactly RUN cycles; the response copied is
// the value response_in had on the last Reset-low cycle; done pulses once,
// START-to-done latency is 1 + HOLD + RUN clocks; a start while busy is
// ignored.
module tb_hbn_control;
  localparam int unsigned N    = 16;
  localparam int unsigned HOLD = 3;
  localparam int unsigned RUN  = 2;

  logic clk = 0, rst_n, start, puf_reset, busy, done;
  logic [N-1:0] chal_in, resp_in, chal, resp_out;
  int checks = 0, failures = 0;

  hbn_control #(.N(N), .HOLD_CYCLES(HOLD), .RUN_CYCLES(RUN)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge_in(chal_in), .response_in(resp_in),
    .puf_reset(puf_reset), .challenge(chal), .response_out(resp_out), .busy(busy), .done(done)
  );

  always #2500 clk = ~clk;

  task automatic expect_eq(input logic [N-1:0] got, input logic [N-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h expected %h", what, got, exp); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hi, lo, lat, dones;
    logic [N-1:0] c, last_resp;
    rst_n = 0; start = 0; chal_in = '0; resp_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    expect_eq(N'(puf_reset), 1, "Reset high after system reset");
    for (int q = 0; q < 5; q++) begin
      c = N'($urandom);
      @(negedge clk);
      chal_in = c; start = 1;
      @(negedge clk);
      start = 0; chal_in = ~c;       // later changes must not leak through
      expect_eq(chal, c, "challenge latched");
      expect_eq(N'(busy), 1, "busy after start");
      hi = 1; lo = 0; lat = 1; dones = 0;
      // count Reset-high cycles after the challenge was applied
      while (puf_reset) begin
        if (q == 2 && hi == 1) begin start = 1; chal_in = '1; end  // start while busy
        @(negedge clk); start = 0;
        resp_in = N'($urandom);
        if (puf_reset) hi++;
        lat++;
      end
      while (!puf_reset) begin
        expect_eq(chal, c, "challenge stable while running");
        last_resp = resp_in;
        @(negedge clk);
        if (done) dones++;
        resp_in = N'($urandom);
        lo++;
        lat++;
      end
      checks++; if (hi != HOLD) begin failures++; $display("FAIL hold cycles %0d expected %0d", hi, HOLD); end
      checks++; if (lo != RUN)  begin failures++; $display("FAIL run cycles %0d expected %0d", lo, RUN); end
      checks++; if (dones != 1) begin failures++; $display("FAIL done pulses %0d", dones); end
      checks++; if (lat != 1 + HOLD + RUN) begin failures++; $display("FAIL latency %0d expected %0d", lat, 1 + HOLD + RUN); end
      expect_eq(resp_out, last_resp, "response copied on last run cycle");
      expect_eq(N'(busy), 0, "idle after done");
      @(negedge clk);
      expect_eq(N'(done), 0, "done is a pulse");
      expect_eq(N'(puf_reset), 1, "Reset high while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
