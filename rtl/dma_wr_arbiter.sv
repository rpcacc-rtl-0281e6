// dma_wr_arbiter: shares the PCIe DMA write port.  Requesters send bursts of
// 64-bit beats; the beat with 'last' ends a burst, and a burst is one PCIe
// write transaction.  Once a requester's first beat is accepted the arbiter
// stays with it until its last beat, so bursts are never interleaved (a
// one-shot temp-buffer flush stays one transaction).  Round-robin between
// bursts.  The paper names the PCIe path but not its arbitration; this is
// this design's choice.
module dma_wr_arbiter
  import rpcacc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     s_valid,
  output logic [N-1:0]     s_ready,
  input  dma_wr_t [N-1:0]  s_beat,
  output logic             m_valid,
  input  logic             m_ready,
  output dma_wr_t          m_beat
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic          lock;
  logic [IW-1:0] owner, last;
  int            sel;

  always_comb begin
    sel = lock ? int'(owner) : rr_pick(32'(s_valid), int'(last), int'(N));
    m_valid = (sel >= 0) && s_valid[sel];
    m_beat  = (sel >= 0) ? s_beat[sel] : '0;
    s_ready = '0;
    if (sel >= 0) s_ready[sel] = m_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock <= 1'b0; owner <= '0; last <= IW'(N - 1);
    end else if (m_valid && m_ready) begin
      last  <= IW'(sel);
      owner <= IW'(sel);
      lock  <= !m_beat.last;
    end
  end
endmodule
