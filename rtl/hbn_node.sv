`timescale 1ps / 1ps
// hbn_node -- one node of the autonomous Boolean network (ABN).
//
// The node XORs the states of three other nodes (f, g, h) and passes the
// result through a 2:1 multiplexer controlled by the global Reset: while Reset
// is high the node outputs its challenge bit x_i(0); while Reset is low it
// outputs the XOR, so the whole network becomes one unclocked recurrent loop.
// The output x_i(t) fans out to three other nodes and to the capture
// registers. XOR3 + multiplexer and the Reset polarity follow the paper.
//
// Timing: there is no clock. The XOR-plus-multiplexer delay is lumped into
// the output assignment as DELAY_PS (simulation only; synthesis ignores it
// and the real delay is whatever the logic element and routing give). The
// default of 230 ps is this design's choice, close to the 0.25 ns inverter
// delay the paper calls similar, and offset from it so that in simulation no
// node edge coincides with a delay-line tap edge.
//
// The combinational loop that a network of these nodes forms is intended:
// it is the entropy source. Lint and synthesis tools report it as such.
module hbn_node #(
  parameter int unsigned DELAY_PS = 230
) (
  input  logic reset,      // 1: hold challenge, 0: run
  input  logic challenge,  // challenge bit x_i(0)
  input  logic in_f,       // state of input node f
  input  logic in_g,       // state of input node g
  input  logic in_h,       // state of input node h
  output logic x           // node state x_i(t)
);

  (* keep *) logic xor3;

  assign xor3 = in_f ^ in_g ^ in_h;
  assign #(DELAY_PS) x = reset ? challenge : xor3;

endmodule
