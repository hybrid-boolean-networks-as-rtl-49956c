`timescale 1ps / 1ps
// tapped_delay_line -- Reset-driven sampling clock chain and capture registers.
//
// The global Reset is sent down a chain of M inverter pairs. After every pair
// the delayed Reset (same polarity as Reset) is a tap, and each tap clocks its
// own N-bit register that stores the ABN state. When Reset falls and the
// network is released, the falling edge ripples down the chain and the
// registers record x(2tau), x(4tau), ..., x(2M tau): a burst of M snapshots at
// the rate of the network's own dynamics, with no clock involved. Because the
// chain is built from the same kind of logic as the network, its delay tracks
// temperature and voltage the way the network does. The inverter-pair chain
// and one register per tap follow the paper; capturing on the falling edge of
// the tap (the edge that follows the release) is this design's reading of
// "triggered after the delayed Reset passes a pair".
//
// Interface: reset, x[N-1:0] in; taps[M-1:0] (tap m = Reset delayed by
// 2(m+1) inverters) and bitstream[M-1:0][N-1:0] (entry m = x(2(m+1)tau)) out.
// The registers hold their value while Reset is high again, so a clocked
// reader may read them any time after the last tap has fired.
//
// Timing: TAU_PS is the simulated delay of one inverter (0.25 ns in the
// paper). Synthesis ignores it. The keep attributes ask the tools to keep
// the inverter nets, but a generic flow still folds each double inversion
// into a wire, after which all registers share one clock and merge; an FPGA
// build needs the vendor's buffer/LCELL primitives or equivalent
// constraints for the chain.
module tapped_delay_line #(
  parameter int unsigned N      = 256,
  parameter int unsigned M      = 20,
  parameter int unsigned TAU_PS = 250
) (
  input  logic                  reset,
  input  logic [N-1:0]          x,
  output logic [M-1:0]          taps,
  output logic [M-1:0][N-1:0]   bitstream
);

  (* keep *) logic [2*M-1:0] inv;

  assign #(TAU_PS) inv[0] = ~reset;
  for (genvar j = 1; j < 2 * M; j++) begin : g_inv
    assign #(TAU_PS) inv[j] = ~inv[j-1];
  end

  for (genvar m = 0; m < M; m++) begin : g_tap
    logic [N-1:0] q;
    assign taps[m] = inv[2*m+1];
    always_ff @(negedge taps[m]) begin
      q <= x;
    end
    assign bitstream[m] = q;
  end

endmodule
