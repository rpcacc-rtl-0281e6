// tb_acc_mem_arbiter: four requesters issue random reads and writes to their
// own address ranges of a modelled accelerator memory whose read data comes
// back 1..4 cycles after the accepted request.  Checks that every read returns
// the last value that requester wrote, that the response goes only to the
// requester that issued the read, that no new request is granted while a
// read is outstanding, and that a waiting requester is served within N grants
// (round robin).
module tb_acc_mem_arbiter;
  import rpcacc_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] s_valid, s_ready, s_rvalid;
  acc_req_t [N-1:0] s_req;
  logic [63:0] s_rdata;
  logic m_valid, m_ready, m_rvalid;
  acc_req_t m_req;
  logic [63:0] m_rdata;

  acc_mem_arbiter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // memory model: one read in flight, answered after a random delay
  logic [63:0] mem [logic [33:0]];
  int rd_wait; logic rd_busy; logic [33:0] rd_addr;
  always @(posedge clk) begin
    m_rvalid <= 1'b0;
    if (!rst_n) begin rd_busy <= 0; m_ready <= 0; end
    else begin
      m_ready <= 1'($urandom);
      if (m_valid && m_ready) begin
        check(!rd_busy, "request granted while a read is outstanding");
        if (m_req.we) mem[m_req.addr] = m_req.wdata;
        else begin rd_busy <= 1; rd_addr <= m_req.addr; rd_wait <= $urandom_range(1, 4); end
      end
      if (rd_busy) begin
        if (rd_wait <= 1) begin
          m_rvalid <= 1'b1; m_rdata <= mem.exists(rd_addr) ? mem[rd_addr] : 64'd0; rd_busy <= 0;
        end else rd_wait <= rd_wait - 1;
      end
    end
  end

  // requesters
  logic [63:0] shadow [N][8];
  logic        waiting [N];
  logic [63:0] expect_d [N];
  int          age [N];
  int          done_ops [N];
  always @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= '0; s_req <= '0;
      for (int i = 0; i < N; i++) begin
        waiting[i] = 0; age[i] = 0; done_ops[i] = 0;
        for (int j = 0; j < 8; j++) shadow[i][j] = 64'd0;
      end
    end else begin
      for (int i = 0; i < N; i++) begin
        if (s_rvalid[i]) begin
          check(waiting[i], $sformatf("unexpected response to requester %0d", i));
          check(s_rdata == expect_d[i], $sformatf("read data requester %0d", i));
          waiting[i] = 0; done_ops[i]++;
        end
        if (s_valid[i] && s_ready[i]) begin
          check(age[i] <= N, $sformatf("requester %0d waited %0d grants", i, age[i]));
          age[i] = 0;
          if (s_req[i].we) begin shadow[i][s_req[i].addr[5:3]] = s_req[i].wdata; done_ops[i]++; end
          else begin waiting[i] = 1; expect_d[i] = shadow[i][s_req[i].addr[5:3]]; end
          s_valid[i] <= 1'b0;
        end else if (s_valid[i] && m_valid && m_ready) age[i]++;
        if (!waiting[i] && !(s_valid[i] && !s_ready[i]) && $urandom_range(0, 2) != 0) begin
          automatic logic [2:0] w = 3'($urandom);
          s_valid[i] <= 1'b1;
          s_req[i] <= '{we: 1'($urandom), addr: 34'(i) * 34'h100 + 34'({w, 3'b000}),
                        wdata: {$urandom, $urandom}, strb: 8'hff};
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int total;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (4000) @(posedge clk);
    total = 0;
    for (int i = 0; i < N; i++) begin
      check(done_ops[i] > 100, $sformatf("requester %0d made progress (%0d)", i, done_ops[i]));
      total += done_ops[i];
    end
    $display("completed operations: %0d", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
