// acc_mem_arbiter: shares the single accelerator off-chip memory port among
// the deserializer lanes, the serializer, the field mover and the compute
// units (the blue "RPC kernel fields" paths into "Acc off-chip Memory").
//
// Round-robin among valid requesters.  Writes are posted: one per cycle.  A
// read locks the arbiter until the memory returns its data (m_rvalid), which
// is then steered to the requester that issued it; so at most one read is in
// flight.  This is this design's simple choice: the paper does not describe
// the memory interconnect.  Read data is broadcast; s_rvalid selects.
module acc_mem_arbiter
  import rpcacc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      s_valid,
  output logic [N-1:0]      s_ready,
  input  acc_req_t [N-1:0]  s_req,
  output logic [N-1:0]      s_rvalid,
  output logic [63:0]       s_rdata,
  output logic              m_valid,
  input  logic              m_ready,
  output acc_req_t          m_req,
  input  logic              m_rvalid,
  input  logic [63:0]       m_rdata
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
    if (lock) s_rvalid[owner] = m_rvalid;
    s_rdata = m_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock <= 1'b0; owner <= '0; last <= IW'(N - 1);
    end else begin
      if (m_valid && m_ready) begin
        last <= IW'(sel);
        if (!m_req.we) begin lock <= 1'b1; owner <= IW'(sel); end
      end
      if (lock && m_rvalid) lock <= 1'b0;
    end
  end
endmodule
