// tb_dma_rd_arbiter: two requesters issue random DMA read requests (1..5
// words) against a modelled host whose response words equal addr + index and
// arrive with random gaps; each requester's rready toggles randomly.  Checks
// that responses reach only the requester whose request was accepted, in
// order and with the right length and 'last', that no second request is
// issued while a response is streaming, and that both requesters progress.
module tb_dma_rd_arbiter;
  import rpcacc_pkg::*;
  localparam int N = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] s_valid, s_ready, s_rvalid, s_rready;
  dma_rd_req_t [N-1:0] s_req;
  logic [63:0] s_rdata; logic s_rlast;
  logic m_valid, m_ready, m_rvalid, m_rready, m_rlast;
  dma_rd_req_t m_req;
  logic [63:0] m_rdata;

  dma_rd_arbiter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // host model
  logic busy; logic [63:0] haddr; int hleft, hidx;
  always @(posedge clk) begin
    if (!rst_n) begin busy <= 0; m_ready <= 0; m_rvalid <= 0; end
    else begin
      m_ready <= 1'($urandom);
      if (m_valid && m_ready) begin
        check(!busy, "request issued while a response is streaming");
        busy <= 1; haddr <= m_req.addr; hleft <= int'(m_req.len); hidx <= 0;
      end
      if (m_rvalid && m_rready) begin
        hidx <= hidx + 1; hleft <= hleft - 1;
        m_rvalid <= 0;
        if (hleft == 1) busy <= 0;
      end else if (busy && !m_rvalid && $urandom_range(0, 1) == 1) begin
        m_rvalid <= 1; m_rdata <= haddr + 64'(hidx); m_rlast <= (hleft == 1);
      end
    end
  end

  // requesters
  logic pend [N]; logic [63:0] raddr [N]; int rlen [N], ridx [N], done [N];
  always @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= '0; s_req <= '0; s_rready <= '0;
      for (int i = 0; i < N; i++) begin pend[i] = 0; done[i] = 0; end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (s_rvalid[i] && s_rready[i]) begin
          check(pend[i], $sformatf("response to idle requester %0d", i));
          check(s_rdata == raddr[i] + 64'(ridx[i]), $sformatf("response data requester %0d", i));
          check(s_rlast == (ridx[i] == rlen[i] - 1), $sformatf("response last requester %0d", i));
          ridx[i]++;
          if (s_rlast) begin pend[i] = 0; done[i]++; end
        end
        if (s_valid[i] && s_ready[i]) begin
          pend[i] = 1; raddr[i] = s_req[i].addr; rlen[i] = int'(s_req[i].len); ridx[i] = 0;
          s_valid[i] <= 0;
        end else if (!pend[i] && !s_valid[i] && $urandom_range(0, 2) == 0) begin
          s_valid[i] <= 1;
          s_req[i] <= '{addr: (64'(i + 1) << 40) | 64'({$urandom} << 3), len: 16'($urandom_range(1, 5))};
        end
        s_rready[i] <= 1'($urandom);
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (6000) @(posedge clk);
    for (int i = 0; i < N; i++) check(done[i] > 50, $sformatf("requester %0d completed reads (%0d)", i, done[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
