`timescale 1ps / 1ps
// tb_hbn_puf_sizes -- the network sizes the HBN-PUF is evaluated at, run as
// pairs of simulated devices.
// N = 16 (machine-learning attack size), 64 and 256 (uniqueness and
// reliability histograms; 1024, the largest histogram size, is left out
// because elaborating several 1024-node copies takes verilator many
// minutes). Each size is an hbn_device_pair: copies of the full design with
// equal or different simulated per-node delays, compared tap by tap over
// random challenges. The delay spread stands in for manufacturing variation;
// it is a model, so the printed distances show the mechanism (different gate
// delays give different responses, equal ones the same), not the measured
// silicon numbers.
module tb_hbn_puf_sizes;
  logic clk = 0, rst_n = 0;
  int   c16, f16, c64, f64, c256, f256;
  bit   d16, d64, d256;

  always #2500 clk = ~clk;

  hbn_device_pair #(.N(16))   p16  (.clk(clk), .rst_n(rst_n), .checks(c16),  .failures(f16),  .finished(d16));
  hbn_device_pair #(.N(64))   p64  (.clk(clk), .rst_n(rst_n), .checks(c64),  .failures(f64),  .finished(d64));
  hbn_device_pair #(.N(256))  p256 (.clk(clk), .rst_n(rst_n), .checks(c256), .failures(f256), .finished(d256));

  initial begin
    #200_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c64 + c256, f16 + f64 + f256 + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    wait (d16 && d64 && d256);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c64 + c256, f16 + f64 + f256);
    $finish;
  end
endmodule
