// dma_rd_arbiter: shares the PCIe DMA read port between the serializer
// (fetching pre-serialized data) and the field mover (moveToAcc).  A read
// request asks for 'len' 64-bit words; the arbiter grants one request at a
// time round-robin and is locked to it until the response beat marked 'last'
// has been taken, steering the response stream to that requester.  One read
// in flight at a time is this design's choice.
module dma_rd_arbiter
  import rpcacc_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        s_valid,
  output logic [N-1:0]        s_ready,
  input  dma_rd_req_t [N-1:0] s_req,
  output logic [N-1:0]        s_rvalid,
  input  logic [N-1:0]        s_rready,
  output logic [63:0]         s_rdata,
  output logic                s_rlast,
  output logic                m_valid,
  input  logic                m_ready,
  output dma_rd_req_t         m_req,
  input  logic                m_rvalid,
  output logic                m_rready,
  input  logic [63:0]         m_rdata,
  input  logic                m_rlast
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic          lock;
  logic [IW-1:0] owner, last;
  int            sel;

  always_comb begin
    sel = lock ? -1 : rr_pick(32'(s_valid), int'(last), int'(N));
    m_valid = (sel >= 0);
    m_req   = (sel >= 0) ? s_req[sel] : '0;
    s_ready = '0;
    if (sel >= 0) s_ready[sel] = m_ready;
    s_rvalid = '0;
    m_rready = 1'b0;
    if (lock) begin
      s_rvalid[owner] = m_rvalid;
      m_rready = s_rready[owner];
    end
    s_rdata = m_rdata;
    s_rlast = m_rlast;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock <= 1'b0; owner <= '0; last <= IW'(N - 1);
    end else begin
      if (m_valid && m_ready) begin
        last <= IW'(sel); owner <= IW'(sel); lock <= 1'b1;
      end
      if (lock && m_rvalid && m_rready && m_rlast) lock <= 1'b0;
    end
  end
endmodule
