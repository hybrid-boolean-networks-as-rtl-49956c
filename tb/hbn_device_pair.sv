`timescale 1ps / 1ps
// hbn_device_pair -- testbench helper: copies of the HBN-PUF that differ only
// in their simulated per-node delays, driven by one host over a shared
// Avalon-MM bus. Copies A and C have the same delays (DEVICE_SEED 1), copy B
// different ones (DEVICE_SEED 2); the spread is +-SPREAD ps.
//
// For K random challenges it reads the whole M x N bitstream of every copy,
// accumulates the fractional Hamming distance between A and B at every tap
// (the simulated counterpart of the inter-device distance versus time) and
// prints it. It repeats every query to confirm that a copy answers itself
// identically (no noise is modelled, so the intra-device distance is 0).
// Checks: repeated queries identical; C identical to A at every tap (same
// delays, same answers); the all-one challenge is a fixed point for A and B
// despite their different delays; the A-B distance at the last tap is above
// MIN_LAST. Results leave through the checks / failures / finished outputs.
//
// With the simulator's inertial gate delays a node swallows input changes
// closer together than its own delay, so even a spread of a few ps changes
// which pulses survive from the first node delay on: the distance is high at
// every tap and does not show the gradual growth seen on silicon.
module hbn_device_pair #(
  parameter int unsigned N        = 64,
  parameter int unsigned M        = 20,
  parameter int unsigned SPREAD   = 5,
  parameter int unsigned K        = 6,
  parameter real         MIN_LAST = 0.1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished
);
  import hbn_pkg::*;
  localparam int unsigned NW = (N + 31) / 32;

  logic [11:0] addr;
  logic rd, wr;
  logic [31:0] wdata, rdata_a, rdata_b, rdata_c;

  hbn_puf_top #(.N(N), .M(M), .DELAY_SPREAD_PS(SPREAD), .DEVICE_SEED(1)) dev_a (
    .clk(clk), .rst_n(rst_n), .avs_address(addr), .avs_read(rd), .avs_write(wr),
    .avs_writedata(wdata), .avs_readdata(rdata_a));
  hbn_puf_top #(.N(N), .M(M), .DELAY_SPREAD_PS(SPREAD), .DEVICE_SEED(2)) dev_b (
    .clk(clk), .rst_n(rst_n), .avs_address(addr), .avs_read(rd), .avs_write(wr),
    .avs_writedata(wdata), .avs_readdata(rdata_b));
  hbn_puf_top #(.N(N), .M(M), .DELAY_SPREAD_PS(SPREAD), .DEVICE_SEED(1)) dev_c (
    .clk(clk), .rst_n(rst_n), .avs_address(addr), .avs_read(rd), .avs_write(wr),
    .avs_writedata(wdata), .avs_readdata(rdata_c));

  task automatic write(input int unsigned a, input logic [31:0] d);
    @(negedge clk); addr = 12'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask

  int n_c_mismatch = 0;

  task automatic read(input int unsigned a, output logic [31:0] da, output logic [31:0] db);
    @(negedge clk); addr = 12'(a); rd = 1;
    @(negedge clk); rd = 0; da = rdata_a; db = rdata_b;
    if (rdata_c !== rdata_a) n_c_mismatch++;
  endtask

  task automatic run_query(input logic [N-1:0] c);
    logic [31:0] da, db;
    for (int w = 0; w < int'(NW); w++) write(REG_CHAL_BASE + w, 32'(c >> (32 * w)));
    write(REG_CTRL, 1);
    do read(REG_STATUS, da, db); while (da[1] == 1'b0 || db[1] == 1'b0);
  endtask

  task automatic read_bits(output logic [M-1:0][N-1:0] a, output logic [M-1:0][N-1:0] b);
    logic [31:0] da, db;
    logic [NW*32-1:0] wa, wb;
    for (int m = 0; m < int'(M); m++) begin
      for (int w = 0; w < int'(NW); w++) begin
        read(REG_BITS_BASE + REG_REGION * m + w, da, db);
        wa[32*w +: 32] = da;
        wb[32*w +: 32] = db;
      end
      a[m] = wa[N-1:0];
      b[m] = wb[N-1:0];
    end
  endtask

  initial begin
    logic [M-1:0][N-1:0] a, b, a2, b2;
    logic [NW*32-1:0] cw;
    real hd [M];
    string line;
    checks = 0; failures = 0; finished = 0;
    rd = 0; wr = 0; addr = '0; wdata = '0;
    for (int m = 0; m < int'(M); m++) hd[m] = 0.0;
    @(posedge rst_n);
    repeat (2) @(posedge clk);

    run_query('1);
    read_bits(a, b);
    checks++;
    if (a[M-1] !== '1 || b[M-1] !== '1) begin
      failures++; $display("FAIL N=%0d: all-one challenge is not a fixed point", N);
    end

    for (int k = 0; k < int'(K); k++) begin
      for (int w = 0; w < int'(NW); w++) cw[32*w +: 32] = $urandom;
      if (cw[N-1:0] == '0 || cw[N-1:0] == '1) cw[0] = ~cw[0];
      run_query(cw[N-1:0]);
      read_bits(a, b);
      for (int m = 0; m < int'(M); m++) hd[m] += real'($countones(a[m] ^ b[m])) / real'(N * K);
      run_query(cw[N-1:0]);
      read_bits(a2, b2);
      checks++;
      if (a2 !== a || b2 !== b) begin
        failures++; $display("FAIL N=%0d challenge %0d: repeated query differs", N, k);
      end
    end

    line = $sformatf("N=%0d inter-device distance per tap:", N);
    for (int m = 0; m < int'(M); m++) line = {line, $sformatf(" %.2f", hd[m])};
    $display("%s", line);
    checks++;
    if (!(hd[M-1] > MIN_LAST)) begin
      failures++; $display("FAIL N=%0d: copies with different delays agree (last-tap distance %.3f)", N, hd[M-1]);
    end
    checks++;
    if (n_c_mismatch != 0) begin
      failures++; $display("FAIL N=%0d: copies with equal delays differ in %0d words", N, n_c_mismatch);
    end
    finished = 1;
  end
endmodule
