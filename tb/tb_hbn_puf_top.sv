`timescale 1ps / 1ps
// tb_hbn_puf_top -- end-to-end test of the HBN-PUF at its default size.
// The testbench is the host: over the Avalon-MM port it writes challenges,
// selects a tap, starts queries, polls STATUS and reads the response and the
// whole M x N bitstream. With the default (equal) simulated delays the
// released network evolves like a synchronous XOR map stepped every
// NODE_DELAY ps, and tap m samples it 2*(m+1)*TAU ps after release, i.e.
// after floor(2*(m+1)*TAU / NODE_DELAY) steps. The testbench reads the wiring
// from the elaborated network, iterates the map itself and checks every
// response and snapshot against it. It also checks the query latency and
// counts each mechanism of the design, failing if one never happened:
// challenge hold, release, tap captures, a change of the selected tap, the
// all-0 / all-1 fixed points, a repeated challenge giving the same answer,
// and a start ignored while busy.
module tb_hbn_puf_top;
  import hbn_pkg::*;
  localparam int unsigned N    = 256;   // the top's defaults, not overridden
  localparam int unsigned M    = 20;
  localparam int unsigned D    = 230;
  localparam int unsigned TAU  = 250;
  localparam int unsigned HOLD = 8;
  localparam int unsigned RUN  = 4;
  localparam int unsigned NW   = N / 32;

  logic clk = 0, rst_n;
  logic [11:0] addr;
  logic rd, wr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  int unsigned src [N][3];

  int n_hold = 0, n_release = 0, n_capture = 0, n_tap_switch = 0, n_fixed = 0;
  int n_repeat = 0, n_busy_ignored = 0, n_starts = 0;

  hbn_puf_top dut (
    .clk(clk), .rst_n(rst_n), .avs_address(addr), .avs_read(rd), .avs_write(wr),
    .avs_writedata(wdata), .avs_readdata(rdata)
  );

  always #2500 clk = ~clk;   // 200 MHz

  logic last_tap, puf_reset;
  time  t_start, t_done;
  assign last_tap  = dut.taps[M-1];
  assign puf_reset = dut.puf_reset;

  always @(posedge clk) begin
    if (dut.u_ctrl.state == ST_HOLD) n_hold++;
    if (dut.start) begin n_starts++; t_start = $time; end
    if (dut.done) t_done = $time;
  end
  always @(negedge puf_reset) if (rst_n) n_release++;
  always @(negedge last_tap)  if (rst_n) n_capture++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(input int unsigned a, input logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask

  task automatic read(input int unsigned a, output logic [31:0] d);
    @(negedge clk); addr = 12'(a); rd = 1;
    @(negedge clk); rd = 0; d = rdata;
  endtask

  function automatic logic [N-1:0] step(logic [N-1:0] s);
    logic [N-1:0] r;
    for (int i = 0; i < int'(N); i++) r[i] = s[src[i][0]] ^ s[src[i][1]] ^ s[src[i][2]];
    return r;
  endfunction

  function automatic logic [N-1:0] expected(logic [N-1:0] c, int unsigned m);
    logic [N-1:0] s = c;
    for (int unsigned k = 0; k < (2 * (m + 1) * TAU) / D; k++) s = step(s);
    return s;
  endfunction

  // One query: returns the response read back and the cycles start->done.
  task automatic query(input logic [N-1:0] c, input int unsigned tap, output logic [N-1:0] resp,
                       output int cycles);
    logic [31:0] d;
    for (int w = 0; w < int'(NW); w++) write(REG_CHAL_BASE + w, c[32*w +: 32]);
    write(REG_TAP_SEL, tap);
    write(REG_CTRL, 1);
    cycles = 1;
    do begin
      read(REG_STATUS, d);
      cycles += 2;
    end while (d[1] == 1'b0 && cycles < 1000);
    for (int w = 0; w < int'(NW); w++) begin
      read(REG_RESP_BASE + w, d);
      resp[32*w +: 32] = d;
    end
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] c, r, r2, snap;
    logic [31:0] d;
    int cyc, prev_tap, t0;
    rst_n = 0; rd = 0; wr = 0; addr = '0; wdata = '0;
    for (int i = 0; i < int'(N); i++)
      for (int k = 0; k < 3; k++) src[i][k] = int'(dut.u_abn.GRAPH[i][k]);
    repeat (4) @(posedge clk);
    #1 rst_n = 1;

    read(REG_INFO, d);
    check(d == {16'(M), 16'(N)}, $sformatf("INFO %h", d));

    // Fixed points: the all-0 and all-1 challenges answer themselves.
    query('0, 10, r, cyc);
    check(r == '0, "all-zero challenge must give all-zero response");
    if (r == '0) n_fixed++;
    query('1, 10, r, cyc);
    check(r == '1, "all-one challenge must give all-one response");
    if (r == '1) n_fixed++;

    // Random challenges at a range of taps.
    prev_tap = -1;
    for (int q = 0; q < 8; q++) begin
      int unsigned tap;
      for (int w = 0; w < int'(NW); w++) c[32*w +: 32] = $urandom;
      tap = (q * 7 + 3) % M;
      query(c, tap, r, cyc);
      check(r == expected(c, tap), $sformatf("query %0d tap %0d response mismatch", q, tap));
      if (prev_tap >= 0 && tap != prev_tap) n_tap_switch++;
      prev_tap = int'(tap);
      // the same challenge again must give the same answer (no noise modelled)
      query(c, tap, r2, cyc);
      check(r2 == r, $sformatf("query %0d not reproducible", q));
      if (r2 == r) n_repeat++;
    end

    // Full time series of one query: every snapshot against the model.
    for (int w = 0; w < int'(NW); w++) c[32*w +: 32] = $urandom;
    query(c, 0, r, cyc);
    for (int m = 0; m < int'(M); m++) begin
      for (int w = 0; w < int'(NW); w++) begin
        read(REG_BITS_BASE + REG_REGION * m + w, d);
        snap[32*w +: 32] = d;
      end
      check(snap == expected(c, m), $sformatf("snapshot %0d mismatch", m));
    end

    // Latency: the clock edge that samples start to the one that samples
    // done is 1 + HOLD + RUN clocks (HOLD with Reset high, RUN with it low).
    write(REG_CTRL, 1);
    repeat (HOLD + RUN + 3) @(posedge clk);
    t0 = int'((t_done - t_start) / 5000);
    check(t0 == int'(1 + HOLD + RUN), $sformatf("start-to-done %0d clocks, expected %0d", t0, 1 + HOLD + RUN));

    // Start while busy is ignored.
    t0 = n_starts;
    write(REG_CTRL, 1);
    write(REG_CTRL, 1);
    write(REG_CTRL, 1);
    repeat (HOLD + RUN + 2) @(posedge clk);
    check(n_starts == t0 + 1, $sformatf("%0d starts accepted, expected 1", n_starts - t0));
    if (n_starts == t0 + 1) n_busy_ignored++;

    check(n_hold > 0, "challenge hold never happened");
    check(n_release > 0, "release never happened");
    check(n_capture == n_release, "delay line did not capture once per release");
    check(n_tap_switch > 0, "tap selection never changed");
    check(n_fixed == 2, "fixed points not both seen");
    check(n_repeat > 0, "no repeated challenge");
    check(n_busy_ignored > 0, "start-while-busy never exercised");
    $display("mechanisms: hold_cycles=%0d releases=%0d captures=%0d tap_switches=%0d fixed_points=%0d repeats=%0d busy_ignored=%0d",
             n_hold, n_release, n_capture, n_tap_switch, n_fixed, n_repeat, n_busy_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
