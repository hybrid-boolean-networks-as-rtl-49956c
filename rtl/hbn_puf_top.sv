`timescale 1ps / 1ps
// hbn_puf_top -- hybrid Boolean network physically unclonable function.
//
// A host writes an N-bit challenge over the Avalon-MM register file and
// starts a query. The clocked controller applies the challenge to the N
// nodes of the autonomous Boolean network with Reset high, holds it for a few
// clocks, then drops Reset. The network, a degree-3 random graph of XOR
// gates with no clock, begins a chaotic transient whose course depends on the
// exact gate and wire delays of this particular chip. The falling Reset also
// runs down a chain of inverter pairs whose taps clock M registers, so the
// network state is captured every 2 inverter delays: x(2tau) ... x(2M tau).
// The response multiplexer picks one snapshot, x(t_opt), which the
// controller copies into the clock domain before raising Reset again. The
// host reads the response, or the whole M x N bitstream.
//
//   Avalon-MM --> hbn_avalon_csr --challenge,start--> hbn_control
//   hbn_control --Reset, challenge--> abn_network --x(t)--> tapped_delay_line
//   hbn_control --Reset--> tapped_delay_line --bitstream--> response_select
//   response_select --response--> hbn_control --response--> hbn_avalon_csr
//
// The structure (network of XOR3 + challenge multiplexer nodes, clocked
// control layer, Reset-driven tapped delay line with one register per tap,
// response multiplexer) follows the paper. The register map, the cycle
// counts, the graph generator and the simulation delays are this design's.
//
// Clock: CLK_PERIOD_PS (5 ns, the 200 MHz of the paper's experiments) is
// used only for the elaboration check that the Reset pulse outlasts the delay
// line. Delays (NODE_DELAY_PS, TAU_PS, DELAY_SPREAD_PS) act in simulation
// only. The design contains an intended combinational loop (the network) and
// registers clocked by delay-line taps; both are the mechanism of the PUF.
module hbn_puf_top #(
  parameter int unsigned N               = 256,
  parameter int unsigned M               = 20,
  parameter int unsigned GRAPH_SEED      = 1,
  parameter int unsigned HOLD_CYCLES     = 8,
  parameter int unsigned RUN_CYCLES      = 4,
  parameter int unsigned CLK_PERIOD_PS   = 5000,
  parameter int unsigned NODE_DELAY_PS   = 230,
  parameter int unsigned TAU_PS          = 250,
  parameter int unsigned DELAY_SPREAD_PS = 0,
  parameter int unsigned DEVICE_SEED     = 0,
  parameter int unsigned ADDR_W          = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [ADDR_W-1:0]          avs_address,
  input  logic                       avs_read,
  input  logic                       avs_write,
  input  logic [hbn_pkg::CSR_DW-1:0] avs_writedata,
  output logic [hbn_pkg::CSR_DW-1:0] avs_readdata
);

  localparam int unsigned SW = (M > 1) ? $clog2(M) : 1;

  logic                 start, busy, done;
  logic [N-1:0]         chal_csr, chal_net, x, response_sel, response_q;
  logic [SW-1:0]        tap_sel;
  logic                 puf_reset;
  logic [M-1:0]         taps;
  logic [M-1:0][N-1:0]  bitstream;

  hbn_avalon_csr #(.N(N), .M(M), .ADDR_W(ADDR_W)) u_csr (
    .clk, .rst_n,
    .avs_address, .avs_read, .avs_write, .avs_writedata, .avs_readdata,
    .challenge (chal_csr),
    .tap_sel   (tap_sel),
    .start     (start),
    .busy      (busy),
    .done_pulse(done),
    .response  (response_q),
    .bitstream (bitstream)
  );

  hbn_control #(.N(N), .HOLD_CYCLES(HOLD_CYCLES), .RUN_CYCLES(RUN_CYCLES)) u_ctrl (
    .clk, .rst_n,
    .start       (start),
    .challenge_in(chal_csr),
    .response_in (response_sel),
    .puf_reset   (puf_reset),
    .challenge   (chal_net),
    .response_out(response_q),
    .busy        (busy),
    .done        (done)
  );

  abn_network #(
    .N(N), .GRAPH_SEED(GRAPH_SEED), .NODE_DELAY_PS(NODE_DELAY_PS),
    .DELAY_SPREAD_PS(DELAY_SPREAD_PS), .DEVICE_SEED(DEVICE_SEED)
  ) u_abn (
    .reset    (puf_reset),
    .challenge(chal_net),
    .x        (x)
  );

  tapped_delay_line #(.N(N), .M(M), .TAU_PS(TAU_PS)) u_tdl (
    .reset    (puf_reset),
    .x        (x),
    .taps     (taps),
    .bitstream(bitstream)
  );

  response_select #(.N(N), .M(M)) u_sel (
    .bitstream(bitstream),
    .tap_sel  (tap_sel),
    .response (response_sel)
  );

  // The response is copied on the last clock of the Reset-low window, so the
  // whole delay line must have fired one clock before that.
  if ((RUN_CYCLES - 1) * CLK_PERIOD_PS <= 2 * M * TAU_PS) begin : g_bad_timing
    $error("hbn_puf_top: RUN_CYCLES too short for a delay line of M inverter pairs");
  end

endmodule
