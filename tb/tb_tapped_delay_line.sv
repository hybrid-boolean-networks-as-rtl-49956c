`timescale 1ps / 1ps
// tb_tapped_delay_line -- self-checking test of the Reset-driven sampler.
// The testbench drives the "network state" x with a new pseudo-random word
// every STEP ps after Reset falls, so the value present at any instant is
// known. It checks that tap m falls exactly 2*(m+1)*TAU ps after Reset, that
// register m then holds the word present at that instant, and that raising
// Reset again (rising tap edges) does not disturb the captured snapshots.
module tb_tapped_delay_line;
  localparam int unsigned N    = 24;
  localparam int unsigned M    = 6;
  localparam int unsigned TAU  = 100;
  localparam int unsigned STEP = 70;   // 2*TAU*(m+1) is never a multiple of 70 for m < 6

  logic                reset;
  logic [N-1:0]        x;
  logic [M-1:0]        taps;
  logic [M-1:0][N-1:0] bits;
  int checks = 0, failures = 0;
  time t_release;
  time t_fall [M];

  tapped_delay_line #(.N(N), .M(M), .TAU_PS(TAU)) dut (.reset(reset), .x(x), .taps(taps), .bitstream(bits));

  function automatic logic [N-1:0] word(int unsigned round, int unsigned j);
    return N'((round * 32'h9E3779B1) ^ (j * 32'h85EBCA77) ^ (j << 7));
  endfunction

  for (genvar m = 0; m < M; m++) begin : g_mon
    always @(negedge taps[m]) t_fall[m] = $time;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0][N-1:0] snap;
    int unsigned j;
    reset = 1;
    x     = '0;
    #(4 * M * TAU);
    for (int unsigned round = 1; round <= 4; round++) begin
      x = word(round, 0);
      #1000;
      reset     = 0;
      t_release = $time;
      for (j = 1; j * STEP < 2 * (M + 1) * TAU; j++) begin
        #(STEP);
        x = word(round, j);
      end
      #(2 * M * TAU);
      for (int m = 0; m < int'(M); m++) begin
        checks++;
        if (t_fall[m] - t_release != 2 * (m + 1) * TAU) begin
          failures++;
          $display("FAIL round %0d tap %0d fell after %0t ps, expected %0d", round, m, t_fall[m] - t_release, 2 * (m + 1) * TAU);
        end
        checks++;
        if (bits[m] !== word(round, (2 * (m + 1) * TAU) / STEP)) begin
          failures++;
          $display("FAIL round %0d tap %0d captured %h expected %h", round, m, bits[m], word(round, (2 * (m + 1) * TAU) / STEP));
        end
      end
      // Raise Reset and change x: snapshots must stay.
      snap  = bits;
      reset = 1;
      for (int k = 0; k < 10; k++) begin
        #(STEP);
        x = ~x;
      end
      #(4 * M * TAU);
      checks++;
      if (bits !== snap) begin
        failures++;
        $display("FAIL round %0d: registers changed while Reset rose", round);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
