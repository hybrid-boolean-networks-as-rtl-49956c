`timescale 1ps / 1ps
// hbn_control -- clocked control layer of the hybrid Boolean network.
//
// Runs one challenge-response query per start pulse:
//   IDLE  Reset high; the network sits at the last challenge (quiet).
//   HOLD  the new challenge is latched and applied with Reset still high for
//         HOLD_CYCLES clocks so that every node settles to it.
//   RUN   Reset is driven low for RUN_CYCLES clocks. The network evolves on
//         its own and the falling Reset runs down the tapped delay line,
//         whose registers capture the M snapshots. On the last RUN cycle the
//         selected response (already stable) is copied into a clocked
//         register, done pulses, and Reset goes high again, returning the
//         network to the challenge.
// Holding the challenge for several clock cycles, releasing it by dropping
// Reset and resetting to the challenge after the response is transferred
// follow the paper; the cycle counts are this design's choice. RUN_CYCLES
// times the clock period must exceed the delay line length (2*M*tau), so
// that the response register never samples a snapshot that is still
// changing; the top level checks this at elaboration.
//
// Interface: start (one-cycle pulse, ignored while busy), challenge_in;
// puf_reset (registered, glitch-free Reset of the network), challenge
// (registered challenge driving the node multiplexers), response_out, busy,
// done (one-cycle pulse). rst_n is the synchronous, active-low system reset.
// Latency from start to done: 1 + HOLD_CYCLES + RUN_CYCLES clocks.
module hbn_control #(
  parameter int unsigned N           = 256,
  parameter int unsigned HOLD_CYCLES = 8,
  parameter int unsigned RUN_CYCLES  = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] challenge_in,
  input  logic [N-1:0] response_in,   // selected snapshot from the delay line
  output logic         puf_reset,
  output logic [N-1:0] challenge,
  output logic [N-1:0] response_out,
  output logic         busy,
  output logic         done
);
  import hbn_pkg::*;

  localparam int unsigned CW = $clog2(((HOLD_CYCLES > RUN_CYCLES) ? HOLD_CYCLES : RUN_CYCLES) + 1);

  ctrl_state_e    state;
  logic [CW-1:0]  cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      cnt          <= '0;
      puf_reset    <= 1'b1;
      challenge    <= '0;
      response_out <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: begin
          puf_reset <= 1'b1;
          if (start) begin
            challenge <= challenge_in;
            cnt       <= CW'(HOLD_CYCLES - 1);
            state     <= ST_HOLD;
          end
        end
        ST_HOLD: begin
          if (cnt == 0) begin
            puf_reset <= 1'b0;
            cnt       <= CW'(RUN_CYCLES - 1);
            state     <= ST_RUN;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        ST_RUN: begin
          if (cnt == 0) begin
            response_out <= response_in;
            puf_reset    <= 1'b1;
            done         <= 1'b1;
            state        <= ST_IDLE;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE);

  // Reset may be low only while running, and the challenge may not change
  // while the network is released or settling.
  a_reset_only_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    !puf_reset |-> state == ST_RUN);
  a_challenge_stable: assert property (@(posedge clk) disable iff (!rst_n)
    busy && $past(busy) |-> $stable(challenge));

  if (HOLD_CYCLES < 1 || RUN_CYCLES < 1) begin : g_bad_cycles
    $error("hbn_control needs HOLD_CYCLES >= 1 and RUN_CYCLES >= 1");
  end

endmodule
