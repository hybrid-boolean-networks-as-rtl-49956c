`timescale 1ps / 1ps
// response_select -- picks the response R = x(t_opt) out of the captured bitstream.
//
// A plain multiplexer over the M snapshots of the tapped delay line: tap_sel
// = m selects x(2(m+1)tau). The paper selects the optimum measurement time
// t_opt once per design (where uniqueness minus reliability error peaks) and
// reads that snapshot; this block is the "MPX" option of the paper. An index
// beyond the last tap selects the last tap (this design's choice).
// Purely combinational; the clocked controller samples its output only after
// every tap has fired.
module response_select #(
  parameter int unsigned N = 256,
  parameter int unsigned M = 20,
  localparam int unsigned SW = (M > 1) ? $clog2(M) : 1
) (
  input  logic [M-1:0][N-1:0] bitstream,
  input  logic [SW-1:0]       tap_sel,
  output logic [N-1:0]        response
);

  always_comb begin
    if (int'(tap_sel) < int'(M)) response = bitstream[tap_sel];
    else                         response = bitstream[M-1];
  end

endmodule
