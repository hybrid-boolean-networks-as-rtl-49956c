`timescale 1ps / 1ps
// abn_network -- the N-node autonomous Boolean network of the HBN-PUF.
//
// Each of the N hbn_node instances reads three distinct other nodes and is
// read by exactly three nodes, so the wiring is a random directed graph that
// is regular of degree 3 (in and out), without self-loops. While Reset is high
// the network state equals the challenge; when Reset falls, every node starts
// computing the XOR of its three inputs without a clock and the network
// evolves as one large combinational loop.
//
// The paper draws the graph with a script and pastes it into the HDL. Here
// the draw is made at elaboration from GRAPH_SEED: three xorshift32-seeded
// Fisher-Yates permutations p0, p1, p2 give input k of node i as pk(i); a
// repair pass swaps entries of a permutation until no node reads itself and
// no node reads the same node twice. Because each pk is a permutation, every
// node also drives exactly three inputs. The generator is this design's
// choice; the degree-3 XOR network and the challenge multiplexers follow the
// paper. GRAPH[i][k] is the index of input k of node i.
//
// Simulation-only delays: every node has NODE_DELAY_PS. DELAY_SPREAD_PS > 0
// adds a fixed per-node offset in [-spread, +spread] drawn from DEVICE_SEED,
// a crude stand-in for the manufacturing variation that makes two copies of
// the same design answer differently. Synthesis ignores all delays.
//
// Interface: reset, challenge[N-1:0] in; x[N-1:0] (the ABN bitstream x(t)) out.
// The intended combinational loop through all nodes is reported by lint and
// synthesis; it is the point of the design and stands.
module abn_network #(
  parameter int unsigned N               = 256,
  parameter int unsigned GRAPH_SEED      = 1,
  parameter int unsigned NODE_DELAY_PS   = 230,
  parameter int unsigned DELAY_SPREAD_PS = 0,
  parameter int unsigned DEVICE_SEED     = 0
) (
  input  logic         reset,
  input  logic [N-1:0] challenge,
  output logic [N-1:0] x
);
  import hbn_pkg::*;

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  typedef logic [N-1:0][2:0][IW-1:0] graph_t;

  // Draw the wiring: three permutations with no fixed point and no two
  // permutations agreeing at the same node.
  function automatic graph_t draw_graph();
    graph_t      g;
    int unsigned p [N];
    int unsigned s, j, t;
    bit          ok;
    g = '0;
    s = xorshift32(GRAPH_SEED * 32'h9E37_79B9 + 32'h0123_4567);
    if (s == 0) s = 32'h1;
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < int'(N); i++) p[i] = i;
      for (int i = int'(N) - 1; i > 0; i--) begin
        s    = xorshift32(s);
        j    = s % (i + 1);
        t    = p[i];
        p[i] = p[j];
        p[j] = t;
      end
      for (int i = 0; i < int'(N); i++) begin
        for (int a = 0; a < 100000; a++) begin
          ok = (p[i] != i);
          for (int m = 0; m < k; m++)
            if (int'(g[i][m]) == p[i]) ok = 1'b0;
          if (ok) break;
          s    = xorshift32(s);
          j    = s % N;
          t    = p[i];
          p[i] = p[j];
          p[j] = t;
        end
      end
      for (int i = 0; i < int'(N); i++) g[i][k] = IW'(p[i]);
    end
    return g;
  endfunction

  // Fixed per-node delay of the simulation model.
  function automatic int unsigned node_delay(int unsigned i);
    int unsigned h;
    if (DELAY_SPREAD_PS == 0) return NODE_DELAY_PS;
    h = xorshift32(xorshift32((DEVICE_SEED + 1) * 32'h85EB_CA6B ^ (i + 1) * 32'hC2B2_AE35));
    h = NODE_DELAY_PS - DELAY_SPREAD_PS + h % (2 * DELAY_SPREAD_PS + 1);
    return (h == 0) ? 1 : h;
  endfunction

  localparam graph_t GRAPH = draw_graph();

  for (genvar i = 0; i < N; i++) begin : g_node
    hbn_node #(.DELAY_PS(node_delay(i))) u_node (
      .reset    (reset),
      .challenge(challenge[i]),
      .in_f     (x[GRAPH[i][0]]),
      .in_g     (x[GRAPH[i][1]]),
      .in_h     (x[GRAPH[i][2]]),
      .x        (x[i])
    );
  end

  // Elaboration check: the paper's nodes read three *other* distinct nodes.
  if (N < 4) begin : g_bad_n
    $error("abn_network needs N >= 4 for three distinct non-self inputs per node");
  end

endmodule
