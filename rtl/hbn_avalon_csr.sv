`timescale 1ps / 1ps
// hbn_avalon_csr -- Avalon-MM slave through which a host runs the HBN-PUF.
//
// The paper's host (a hard processor running Linux) reaches the PUF over the
// vendor's Avalon memory-mapped bus: it writes a challenge, starts a query and
// reads the response. The register map below is this design's own; the paper
// only names the bus. Word addresses, 32-bit data:
//   0x000        CTRL     W   bit0 = 1 starts a query (ignored while busy)
//   0x001        STATUS   R   bit0 = busy, bit1 = done (set when a query
//                             ends, cleared by the next start)
//   0x002        TAP_SEL  RW  snapshot used as response: m -> x(2(m+1)tau)
//   0x003        INFO     R   [15:0] = N, [31:16] = M
//   0x040 + w    CHAL[w]  RW  challenge bits [32w+31 : 32w]
//   0x080 + w    RESP[w]  R   response bits of the last query
//   0x100+64m+w  BITS     R   snapshot m, bits [32w+31 : 32w] (the whole
//                             time series, for characterising t_opt)
// Unmapped addresses read 0. Reads have a fixed latency of one clock
// (readdata is valid the cycle after read), there is no waitrequest, and a
// write takes effect on the clock edge that samples it. Bits of a word past N
// read 0. N may be up to 2048 and M up to 60 with the default 12-bit address.
// The bitstream registers are clocked by the delay line, not by clk; they are
// stable whenever busy is low, which is the only time software should read
// them.
module hbn_avalon_csr #(
  parameter int unsigned N      = 256,
  parameter int unsigned M      = 20,
  parameter int unsigned ADDR_W = 12,
  localparam int unsigned SW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // Avalon-MM slave
  input  logic [ADDR_W-1:0]         avs_address,
  input  logic                      avs_read,
  input  logic                      avs_write,
  input  logic [hbn_pkg::CSR_DW-1:0] avs_writedata,
  output logic [hbn_pkg::CSR_DW-1:0] avs_readdata,
  // to / from the PUF
  output logic [N-1:0]              challenge,
  output logic [SW-1:0]             tap_sel,
  output logic                      start,
  input  logic                      busy,
  input  logic                      done_pulse,
  input  logic [N-1:0]              response,
  input  logic [M-1:0][N-1:0]       bitstream
);
  import hbn_pkg::*;

  localparam int unsigned NW = (N + CSR_DW - 1) / CSR_DW;  // words per N-bit vector

  logic                    done;
  logic [NW*CSR_DW-1:0]    chal_q;
  logic [NW*CSR_DW-1:0]    resp_w;
  logic [M-1:0][NW*CSR_DW-1:0] bits_w;

  assign challenge = chal_q[N-1:0];
  always_comb begin
    resp_w        = '0;
    resp_w[N-1:0] = response;
    for (int m = 0; m < int'(M); m++) begin
      bits_w[m]        = '0;
      bits_w[m][N-1:0] = bitstream[m];
    end
  end

  // Writes
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      chal_q  <= '0;
      tap_sel <= '0;
      start   <= 1'b0;
      done    <= 1'b0;
    end else begin
      start <= 1'b0;
      if (done_pulse) done <= 1'b1;
      if (avs_write) begin
        if (int'(avs_address) == REG_CTRL && avs_writedata[0] && !busy) begin
          start <= 1'b1;
          done  <= 1'b0;
        end
        if (int'(avs_address) == REG_TAP_SEL)
          tap_sel <= avs_writedata[SW-1:0];
        for (int w = 0; w < int'(NW); w++)
          if (int'(avs_address) == REG_CHAL_BASE + w)
            chal_q[w*CSR_DW +: CSR_DW] <= avs_writedata;
      end
    end
  end

  // Reads, one clock of latency
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      avs_readdata <= '0;
    end else if (avs_read) begin
      avs_readdata <= '0;
      if (int'(avs_address) == REG_STATUS)  avs_readdata <= {30'd0, done, busy};
      if (int'(avs_address) == REG_TAP_SEL) avs_readdata <= CSR_DW'(tap_sel);
      if (int'(avs_address) == REG_INFO)    avs_readdata <= {16'(M), 16'(N)};
      for (int w = 0; w < int'(NW); w++) begin
        if (int'(avs_address) == REG_CHAL_BASE + w) avs_readdata <= chal_q[w*CSR_DW +: CSR_DW];
        if (int'(avs_address) == REG_RESP_BASE + w) avs_readdata <= resp_w[w*CSR_DW +: CSR_DW];
        for (int m = 0; m < int'(M); m++)
          if (int'(avs_address) == REG_BITS_BASE + REG_REGION * m + w)
            avs_readdata <= bits_w[m][w*CSR_DW +: CSR_DW];
      end
    end
  end

  // A master may not read and write in the same cycle.
  a_no_read_write: assert property (@(posedge clk) disable iff (!rst_n)
    !(avs_read && avs_write));

  if (NW > REG_REGION || M > (2**ADDR_W - REG_BITS_BASE) / REG_REGION) begin : g_bad_map
    $error("hbn_avalon_csr: N or M too large for the register map");
  end

endmodule
