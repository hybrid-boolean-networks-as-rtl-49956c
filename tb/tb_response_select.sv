`timescale 1ps / 1ps
// tb_response_select -- self-checking test of the response multiplexer.
// Fills the M x N bitstream with random words, sweeps every tap index (and
// the out-of-range ones, which must return the last tap) and compares.
module tb_response_select;
  localparam int unsigned N  = 40;
  localparam int unsigned M  = 6;
  localparam int unsigned SW = $clog2(M);

  logic [M-1:0][N-1:0] bits;
  logic [SW-1:0]       sel;
  logic [N-1:0]        resp;
  int checks = 0, failures = 0;

  response_select #(.N(N), .M(M)) dut (.bitstream(bits), .tap_sel(sel), .response(resp));

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp;
    for (int trial = 0; trial < 20; trial++) begin
      for (int m = 0; m < int'(M); m++) bits[m] = {$urandom, $urandom};
      for (int s = 0; s < (1 << SW); s++) begin
        sel = SW'(s);
        #10;
        exp = bits[(s < int'(M)) ? s : int'(M) - 1];
        checks++;
        if (resp !== exp) begin
          failures++;
          $display("FAIL sel=%0d resp=%h expected %h", s, resp, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
