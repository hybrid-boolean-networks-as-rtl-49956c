`timescale 1ps / 1ps
// tb_hbn_avalon_csr -- self-checking test of the Avalon-MM register file.
// Acts as bus master with a one-cycle read latency. Checks challenge
// write/readback (N not a multiple of 32, so a partial top word), the
// challenge output, TAP_SEL, INFO, the start pulse and its suppression while
// busy, the sticky done bit, response words and every bitstream word, and
// that unmapped addresses read zero.
module tb_hbn_avalon_csr;
  import hbn_pkg::*;
  localparam int unsigned N  = 40;
  localparam int unsigned M  = 3;
  localparam int unsigned AW = 12;
  localparam int unsigned SW = $clog2(M);

  logic clk = 0, rst_n;
  logic [AW-1:0] addr;
  logic rd, wr, start, busy, done_pulse;
  logic [31:0] wdata, rdata;
  logic [N-1:0] chal, resp;
  logic [SW-1:0] tap_sel;
  logic [M-1:0][N-1:0] bits;
  int checks = 0, failures = 0, starts = 0;

  hbn_avalon_csr #(.N(N), .M(M), .ADDR_W(AW)) dut (
    .clk(clk), .rst_n(rst_n), .avs_address(addr), .avs_read(rd), .avs_write(wr),
    .avs_writedata(wdata), .avs_readdata(rdata), .challenge(chal), .tap_sel(tap_sel),
    .start(start), .busy(busy), .done_pulse(done_pulse), .response(resp), .bitstream(bits)
  );

  always #2500 clk = ~clk;
  always @(posedge clk) if (start) starts++;

  task automatic write(input int unsigned a, input logic [31:0] d);
    @(negedge clk); addr = AW'(a); wdata = d; wr = 1;
    @(negedge clk); wr = 0;
  endtask

  task automatic read(input int unsigned a, output logic [31:0] d);
    @(negedge clk); addr = AW'(a); rd = 1;
    @(negedge clk); rd = 0; d = rdata;
  endtask

  task automatic check_read(input int unsigned a, input logic [31:0] exp, input string what);
    logic [31:0] d;
    read(a, d);
    checks++;
    if (d !== exp) begin failures++; $display("FAIL %s @%h: %h expected %h", what, a, d, exp); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] c64;
    rst_n = 0; rd = 0; wr = 0; addr = '0; wdata = '0; busy = 0; done_pulse = 0;
    resp = '0; bits = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check_read(REG_INFO, {16'(M), 16'(N)}, "INFO");
    c64 = {$urandom, $urandom};
    write(REG_CHAL_BASE + 0, c64[31:0]);
    write(REG_CHAL_BASE + 1, c64[63:32]);
    checks++; if (chal !== c64[N-1:0]) begin failures++; $display("FAIL challenge out %h", chal); end
    check_read(REG_CHAL_BASE + 0, c64[31:0], "CHAL0");
    check_read(REG_CHAL_BASE + 1, c64[63:32], "CHAL1");
    write(REG_TAP_SEL, 2);
    checks++; if (tap_sel !== SW'(2)) begin failures++; $display("FAIL tap_sel %0d", tap_sel); end
    check_read(REG_TAP_SEL, 2, "TAP_SEL");
    // start, then a second start while busy must be ignored
    write(REG_CTRL, 1);
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("FAIL starts=%0d after start", starts); end
    busy = 1;
    check_read(REG_STATUS, 32'h1, "STATUS busy");
    write(REG_CTRL, 1);
    @(negedge clk);
    checks++; if (starts != 1) begin failures++; $display("FAIL start accepted while busy"); end
    resp = N'({$urandom, $urandom});
    for (int m = 0; m < int'(M); m++) bits[m] = N'({$urandom, $urandom});
    @(negedge clk); busy = 0; done_pulse = 1;
    @(negedge clk); done_pulse = 0;
    check_read(REG_STATUS, 32'h2, "STATUS done sticky");
    check_read(REG_STATUS, 32'h2, "STATUS done still set");
    check_read(REG_RESP_BASE + 0, resp[31:0], "RESP0");
    check_read(REG_RESP_BASE + 1, 32'(resp[N-1:32]), "RESP1");
    for (int m = 0; m < int'(M); m++) begin
      check_read(REG_BITS_BASE + REG_REGION * m + 0, bits[m][31:0], $sformatf("BITS tap %0d w0", m));
      check_read(REG_BITS_BASE + REG_REGION * m + 1, 32'(bits[m][N-1:32]), $sformatf("BITS tap %0d w1", m));
    end
    check_read(REG_RESP_BASE + 2, 0, "unmapped");
    check_read('h7FF, 0, "unmapped high");
    write(REG_CTRL, 1);
    @(negedge clk);
    checks++; if (starts != 2) begin failures++; $display("FAIL second start not accepted"); end
    check_read(REG_STATUS, 32'h0, "STATUS done cleared by start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
