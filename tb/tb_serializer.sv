// tb_serializer: builds random pre-serialized buffers (as the host would),
// serves them over a modelled DMA read port, serves accelerator-resident
// fields from a modelled accelerator memory, and compares the message sent
// to the transport with a Protobuf encoding computed independently here.
// Its last ten messages hold only host-resident records; for those it checks
// the rate, one 64-bit pre-serialized word accepted in every cycle the DMA
// offers one (no back-pressure on the read stream).
module tb_serializer;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready; ser_cmd_t cmd = '0;
  logic dr_valid, dr_ready = 1; dma_rd_req_t dr_req;
  logic rs_valid = 0, rs_ready, rs_last = 0; logic [63:0] rs_data = 0;
  logic am_valid, am_ready = 1, am_rvalid = 0; acc_req_t am_req; logic [63:0] am_rdata = 0;
  logic tx_valid, tx_ready = 1, tx_last; logic [63:0] tx_data; logic [7:0] tx_keep;
  logic idle, overflow;

  serializer #(.ARENA_BYTES(16384)) dut (.*);

  typedef byte unsigned bq_t[$];
  logic [63:0] hostbuf [$];
  logic [7:0]  accm [logic [33:0]];
  bq_t rx;

  function automatic bq_t varint(input logic [63:0] v);
    bq_t q;
    do begin
      q.push_back(byte'({(v >> 7) != 0, v[6:0]}));
      v = v >> 7;
    end while (v != 0);
    return q;
  endfunction
  function automatic bq_t rbytes(input int n);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(byte'($urandom));
    return q;
  endfunction
  function automatic logic [63:0] rec(input int kind, input int f, input int len);
    return {3'(kind), 29'(f), 32'(len)};
  endfunction
  task automatic push_bytes_words(input bq_t b);
    for (int i = 0; i < b.size(); i += 8) begin
      logic [63:0] w; w = '0;
      for (int k = 0; k < 8 && i + k < b.size(); k++) w[8*k +: 8] = b[i+k];
      hostbuf.push_back(w);
    end
  endtask

  // DMA read responder
  int rd_words;
  always @(posedge clk) begin
    if (dr_valid && dr_ready) begin
      fork begin
        repeat (5) @(posedge clk);
        for (int i = 0; i < int'(dr_req.len); i++) begin
          rs_valid <= 1; rs_data <= hostbuf[i]; rs_last <= (i == int'(dr_req.len) - 1);
          @(posedge clk); while (!rs_ready) @(posedge clk);
        end
        rs_valid <= 0; rs_last <= 0;
      end join_none
    end
  end
  // accelerator memory: read data 3 cycles later
  always @(posedge clk) begin
    if (am_valid && am_ready && !am_req.we) begin
      logic [63:0] d;
      logic [33:0] a;
      a = am_req.addr;
      for (int b = 0; b < 8; b++) d[8*b +: 8] = accm.exists(a + 34'(b)) ? accm[a + 34'(b)] : 8'h00;
      fork begin
        repeat (3) @(posedge clk);
        am_rvalid <= 1; am_rdata <= d; @(posedge clk); am_rvalid <= 0;
      end join_none
    end
    if (tx_valid && tx_ready)
      for (int b = 0; b < 8; b++) if (tx_keep[b]) rx.push_back(byte'(tx_data[8*b +: 8]));
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_acc = 0, n_inline = 0, n_sub = 0, n_var = 0;
  // rate monitor
  bit measure = 0;
  int rs_beats = 0, rs_stalls = 0, rate_words = 0;
  always @(posedge clk)
    if (measure && rs_valid) begin
      if (rs_ready) rs_beats++; else rs_stalls++;
    end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      bq_t exp, body;
      int nrec;
      int kind, f, l;
      logic [63:0] v;
      bq_t b;
      logic [33:0] a;
      hostbuf = {};
      body = {};
      nrec = $urandom_range(1, 12);
      for (int k = 0; k < nrec; k++) begin
        kind = (r >= 30) ? $urandom_range(1, 4) : $urandom_range(1, 6);
        f = $urandom_range(1, 2000);
        case (kind)
          1: begin v = {$urandom, $urandom} >> $urandom_range(0, 63);
             hostbuf.push_back(rec(1, f, 0)); hostbuf.push_back(v);
             body = {body, varint(64'(f << 3)), varint(v)}; n_var++; end
          2: begin v = {$urandom, $urandom};
             hostbuf.push_back(rec(2, f, 0)); hostbuf.push_back(v);
             body = {body, varint(64'((f << 3) | 1))};
             for (int i = 0; i < 8; i++) body.push_back(byte'(v >> (8*i))); end
          3: begin v = $urandom;
             hostbuf.push_back(rec(3, f, 0)); hostbuf.push_back({32'hdead, v[31:0]});
             body = {body, varint(64'((f << 3) | 5))};
             for (int i = 0; i < 4; i++) body.push_back(byte'(v >> (8*i))); end
          4: begin b = rbytes($urandom_range(0, 60));
             hostbuf.push_back(rec(4, f, b.size())); push_bytes_words(b);
             body = {body, varint(64'((f << 3) | 2)), varint(64'(b.size())), b}; n_inline++; end
          5: begin b = rbytes($urandom_range(1, 100));
             a = 34'h2_0000_0000 + 34'(r * 4096 + k * 128);
             for (int i = 0; i < b.size(); i++) accm[a + 34'(i)] = b[i];
             hostbuf.push_back(rec(5, f, b.size())); hostbuf.push_back(64'(a));
             body = {body, varint(64'((f << 3) | 2)), varint(64'(b.size())), b}; n_acc++; end
          default: begin l = $urandom_range(0, 300);
             hostbuf.push_back(rec(6, f, l));
             body = {body, varint(64'((f << 3) | 2)), varint(64'(l))}; n_sub++; end
        endcase
      end
      exp = {byte'(r % 64), byte'(r + 7), 8'd0, 8'd0,
             byte'(body.size()), byte'(body.size() >> 8), 8'd0, 8'd0};
      exp = {exp, body};
      rx = {};
      measure = (r >= 30);
      if (measure) rate_words += hostbuf.size();
      @(negedge clk);
      cmd_valid = 1; cmd = '{addr: 64'h5000, len: 16'(hostbuf.size()), class_id: CLASS_W'(r % 64), req_id: 24'(r + 7)};
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 0;
      @(posedge clk); while (!(tx_valid && tx_ready && tx_last)) @(posedge clk);
      @(posedge clk);
      check(rx.size() == exp.size(), "message length");
      for (int i = 0; i < exp.size() && i < rx.size(); i++)
        if (rx[i] != exp[i]) begin check(0, $sformatf("byte %0d of msg %0d", i, r)); break; end
      checks++;
    end
    measure = 0;
    check(rs_beats == rate_words, $sformatf("rate phase words read (%0d of %0d)", rs_beats, rate_words));
    check(rs_stalls == 0, $sformatf("one pre-serialized word per cycle (%0d stall cycles)", rs_stalls));
    $display("rate phase: %0d words, %0d stall cycles", rs_beats, rs_stalls);
    check(!overflow, "no arena overflow");
    check(n_acc > 0 && n_inline > 0 && n_sub > 0 && n_var > 0, "every record kind exercised");
    $display("records: varint=%0d inline=%0d acc=%0d sub=%0d", n_var, n_inline, n_acc, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
