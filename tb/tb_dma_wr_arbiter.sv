// tb_dma_wr_arbiter: four sources each send random-length DMA write bursts
// (1..6 beats, 'last' on the final beat) carrying their source number and a
// per-source sequence number; the sink's ready toggles randomly.  Checks that
// a burst is never interleaved with another source's beats, that every
// source's beats arrive in order and complete, and that a waiting source is
// served within N bursts (round robin).
module tb_dma_wr_arbiter;
  import rpcacc_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] s_valid, s_ready;
  dma_wr_t [N-1:0] s_beat;
  logic m_valid, m_ready;
  dma_wr_t m_beat;

  dma_wr_arbiter #(.N(N)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // sources: data = {source[63:56], seq[31:0]}
  int left [N];
  int seq_tx [N], seq_rx [N], bursts [N], waited [N];
  always @(posedge clk) begin
    if (!rst_n) begin
      s_valid <= '0; s_beat <= '0;
      for (int i = 0; i < N; i++) begin left[i] = 0; seq_tx[i] = 0; waited[i] = 0; end
    end else begin
      for (int i = 0; i < N; i++) begin
        automatic bit fire = s_valid[i] && s_ready[i];
        if (fire) begin
          seq_tx[i]++;
          left[i]--;
          if (s_beat[i].last) begin
            check(waited[i] <= N, $sformatf("source %0d waited %0d bursts", i, waited[i]));
            waited[i] = 0;
          end
        end
        if (left[i] == 0 && $urandom_range(0, 3) == 0) left[i] = $urandom_range(1, 6);
        if (left[i] > 0) begin
          s_valid[i] <= 1'b1;
          s_beat[i] <= '{addr: 64'(i) << 32 | 64'(seq_tx[i]) << 3,
                         data: {8'(i), 24'd0, 32'(seq_tx[i])}, strb: 8'hff, last: left[i] == 1};
        end else s_valid[i] <= 1'b0;
      end
    end
  end

  // sink
  logic in_burst; int cur;
  always @(posedge clk) begin
    if (!rst_n) begin m_ready <= 0; in_burst <= 0; for (int i = 0; i < N; i++) begin seq_rx[i] = 0; bursts[i] = 0; end end
    else begin
      m_ready <= ($urandom_range(0, 3) != 0);
      if (m_valid && m_ready) begin
        automatic int src = int'(m_beat.data[63:56]);
        if (in_burst) check(src == cur, "burst interleaved with another source");
        check(int'(m_beat.data[31:0]) == seq_rx[src], $sformatf("beat order source %0d", src));
        seq_rx[src] = int'(m_beat.data[31:0]) + 1;
        cur <= src;
        in_burst <= !m_beat.last;
        if (m_beat.last) begin
          bursts[src]++;
          for (int i = 0; i < N; i++) if (i != src && s_valid[i]) waited[i]++;
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5000) @(posedge clk);
    for (int i = 0; i < N; i++) check(bursts[i] > 50, $sformatf("source %0d completed bursts (%0d)", i, bursts[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
