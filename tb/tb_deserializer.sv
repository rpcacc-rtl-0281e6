// tb_deserializer: drives one deserializer lane with randomly filled,
// nested Protobuf requests and checks the objects it builds.
//
// The testbench encodes each request itself, models the free lists, the
// accelerator memory and host memory (filled only by the lane's DMA bursts),
// then walks the object graph from the reported root pointer and compares
// every field with what was encoded: scalar values, presence bits, bytes
// contents, and that each dereference field sits in the memory its schema
// Acc bit names.  It also checks the one-shot DMA behaviour: a request that
// fits in the current chunk is flushed as exactly one DMA burst, and large
// requests force chunk-full flushes.  Schema used:
//   class 1: 1 varint, 2 bytes(host), 3 bytes(Acc), 4 sub class 2 (host),
//            5 sub class 2 (Acc), 6 fixed64, 7 fixed32; field 9 unknown
//   class 2: 1 varint, 2 bytes(host), 3 sub class 3 (host)
//   class 3: 1 varint
module tb_deserializer;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, in_last = 0;
  logic [7:0] in_data = 0;
  logic [CLASS_W-1:0] sch_class; logic [FIELD_W-1:0] sch_field; schema_entry_t sch_entry;
  logic hal_req, hal_gnt = 0, aal_req, aal_gnt = 0;
  logic [63:0] hal_data = 0; logic [ACC_AW-1:0] aal_data = 0;
  logic am_valid, am_ready = 1; acc_req_t am_req;
  logic dw_valid, dw_ready = 0; dma_wr_t dw_beat;
  logic nt_valid, nt_ready = 1; rx_notify_t nt;
  logic idle;

  deserializer dut (.*);

  // ---------------- schema ----------------
  function automatic schema_entry_t schema(input int c, input int f);
    schema_entry_t e = '{ftype: FT_NONE, acc: 1'b0, sub_class: '0};
    if (c == 1) case (f)
      1: e.ftype = FT_VARINT;
      2: e.ftype = FT_BYTES;
      3: begin e.ftype = FT_BYTES; e.acc = 1'b1; end
      4: begin e.ftype = FT_SUBMSG; e.sub_class = 2; end
      5: begin e.ftype = FT_SUBMSG; e.sub_class = 2; e.acc = 1'b1; end
      6: e.ftype = FT_FIXED64;
      7: e.ftype = FT_FIXED32;
      default: ;
    endcase
    if (c == 2) case (f)
      1: e.ftype = FT_VARINT;
      2: e.ftype = FT_BYTES;
      3: begin e.ftype = FT_SUBMSG; e.sub_class = 3; end
      default: ;
    endcase
    if (c == 3 && f == 1) e.ftype = FT_VARINT;
    return e;
  endfunction
  assign sch_entry = schema(int'(sch_class), int'(sch_field));

  // ---------------- memory models ----------------
  logic [7:0] hostm [logic [63:0]];
  logic [7:0] accm  [logic [63:0]];
  int hchunks = 0, achunks = 0, bursts = 0, beats = 0;
  always @(posedge clk) begin
    hal_gnt <= 0; aal_gnt <= 0;
    if (hal_req && !hal_gnt) begin hal_gnt <= 1; hal_data <= 64'h7f00_0000_0000 + 64'(hchunks) * 4096; hchunks++; end
    if (aal_req && !aal_gnt) begin aal_gnt <= 1; aal_data <= 34'h1_0000_0000 + 34'(achunks) * 4096; achunks++; end
    if (am_valid && am_ready && am_req.we)
      for (int b = 0; b < 8; b++) if (am_req.strb[b]) accm[64'(am_req.addr) + 64'(b)] = am_req.wdata[8*b +: 8];
    if (dw_valid && dw_ready) begin
      for (int b = 0; b < 8; b++) if (dw_beat.strb[b]) hostm[dw_beat.addr + 64'(b)] = dw_beat.data[8*b +: 8];
      beats++;
      if (dw_beat.last) bursts++;
    end
    dw_ready <= 1'($urandom_range(0, 3) != 0);
    am_ready <= 1'($urandom_range(0, 3) != 0);
  end

  function automatic logic [63:0] rd64(input logic in_acc, input logic [63:0] a);
    logic [63:0] v = '0;
    for (int b = 0; b < 8; b++) begin
      if (in_acc) v[8*b +: 8] = accm.exists(a + 64'(b)) ? accm[a + 64'(b)] : 8'hxx;
      else        v[8*b +: 8] = hostm.exists(a + 64'(b)) ? hostm[a + 64'(b)] : 8'hxx;
    end
    return v;
  endfunction
  function automatic logic [7:0] rd8(input logic in_acc, input logic [63:0] a);
    if (in_acc) return accm.exists(a) ? accm[a] : 8'h00;
    return hostm.exists(a) ? hostm[a] : 8'h00;
  endfunction

  // ---------------- encoder ----------------
  typedef byte unsigned bq_t[$];
  function automatic bq_t varint(input logic [63:0] v);
    bq_t q;
    do begin
      q.push_back(byte'({(v >> 7) != 0, v[6:0]}));
      v = v >> 7;
    end while (v != 0);
    return q;
  endfunction
  function automatic bq_t tag(input int f, input int wt);
    return varint(64'((f << 3) | wt));
  endfunction
  function automatic bq_t ld(input int f, input bq_t payload);
    bq_t q = tag(f, 2);
    q = {q, varint(64'(payload.size())), payload};
    return q;
  endfunction
  function automatic bq_t rbytes(input int n);
    bq_t q;
    for (int i = 0; i < n; i++) q.push_back(byte'($urandom));
    return q;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // compare a dereference slot with expected bytes and target
  task automatic check_bytes(input logic [63:0] slot, input bq_t exp, input logic exp_acc, input string what);
    check(slot[63] == exp_acc, {what, " target"});
    check(int'(slot[62:48]) == exp.size(), {what, " length"});
    for (int i = 0; i < exp.size(); i++)
      if (rd8(slot[63], {16'd0, slot[47:0]} + 64'(i)) != exp[i]) begin
        check(0, {what, " content"}); break;
      end
    checks++;
  endtask

  task automatic send(input int cls, input int rid, input bq_t body);
    bq_t m;
    int l = body.size();
    m = {byte'(cls), byte'(rid), byte'(rid >> 8), byte'(rid >> 16),
         byte'(l), byte'(l >> 8), byte'(l >> 16), byte'(l >> 24)};
    m = {m, body};
    for (int i = 0; i < m.size(); i++) begin
      in_valid = 1; in_data = m[i]; in_last = (i == m.size() - 1);
      @(posedge clk); while (!in_ready) @(posedge clk);
      #1;
      if ($urandom_range(0, 7) == 0) begin in_valid = 0; @(posedge clk); #1; end
    end
    in_valid = 0; in_last = 0;
  endtask

  int n_sub = 0, n_acc_fields = 0, n_oneshot = 0, n_chunkfull = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int r = 0; r < 40; r++) begin
      logic [63:0] v1, v4, v5, v6, v7; logic [31:0] v8;
      bq_t b2, b3, b4, b6, s3, s2a, s2b, body;
      int big;
      int bursts0, hch0;
      big = (r % 5 == 4);
      v1 = {$urandom, $urandom} >> $urandom_range(0, 63);
      v4 = 64'($urandom); v5 = 64'($urandom_range(0, 200)); v6 = {$urandom, $urandom};
      v7 = {$urandom, $urandom}; v8 = $urandom;
      b2 = rbytes(big ? $urandom_range(1500, 2500) : $urandom_range(0, 40));
      b3 = rbytes($urandom_range(1, 700));
      b4 = rbytes($urandom_range(0, 30));
      b6 = rbytes($urandom_range(1, 20));
      s3  = {tag(1, 0), varint(v5)};
      s2a = {tag(1, 0), varint(v4), ld(2, b4), ld(3, s3)};
      s2b = {tag(1, 0), varint(v6), ld(2, b6)};
      body = {tag(1, 0), varint(v1), ld(2, b2), ld(9, rbytes(5)), ld(3, b3), ld(4, s2a),
              ld(5, s2b), tag(6, 1)};
      for (int i = 0; i < 8; i++) body.push_back(byte'(v7 >> (8 * i)));
      body = {body, tag(7, 5)};
      for (int i = 0; i < 4; i++) body.push_back(byte'(v8 >> (8 * i)));
      bursts0 = bursts; hch0 = hchunks;
      fork
        send(1, r + 100, body);
        begin
          @(posedge clk); while (!(nt_valid && nt_ready)) @(posedge clk);
        end
      join
      #1;
      check(!nt.error, "no error");
      check(nt.req_id == 24'(r + 100) && nt.class_id == 1, "notify ids");
      if (hchunks == hch0) begin
        check(bursts - bursts0 == 1, "one-shot: one DMA burst per request");
        n_oneshot++;
      end else begin
        check(bursts - bursts0 >= 1 && bursts - bursts0 <= hchunks - hch0 + 1, "at most one flush per filled chunk plus the final one");
        n_chunkfull++;
      end
      begin : walk
        logic [63:0] root, pres, s4, s5, s43;
        root = nt.root_ptr;
        pres = rd64(0, root);
        check(pres[7:1] == 7'h7f && pres[9] == 0, "root presence bits");
        check(rd64(0, root + 8) == v1, "f1 varint");
        check_bytes(rd64(0, root + 16), b2, 0, "f2 bytes host");
        check_bytes(rd64(0, root + 24), b3, 1, "f3 bytes acc");
        n_acc_fields++;
        check(rd64(0, root + 48) == v7, "f6 fixed64");
        check(rd64(0, root + 56) == 64'(v8), "f7 fixed32");
        s4 = rd64(0, root + 32);
        check(!s4[63], "f4 sub in host");
        check(rd64(0, {16'd0, s4[47:0]} + 8) == v4, "f4.1");
        check_bytes(rd64(0, {16'd0, s4[47:0]} + 16), b4, 0, "f4.2 bytes");
        s43 = rd64(0, {16'd0, s4[47:0]} + 24);
        check(!s43[63] && rd64(0, {16'd0, s43[47:0]} + 8) == v5, "f4.3.1 nested twice");
        s5 = rd64(0, root + 40);
        check(s5[63], "f5 sub in acc");
        check(rd64(1, {16'd0, s5[47:0]} + 8) == v6, "f5.1 in acc object");
        check_bytes(rd64(1, {16'd0, s5[47:0]} + 16), b6, 0, "f5.2 host bytes of acc object");
        n_sub += 3;
      end
    end
    check(n_oneshot > 0, "one-shot flush exercised");
    check(n_chunkfull > 0, "chunk-full flush exercised");
    check(achunks > 1, "accelerator chunk refill exercised");
    $display("one-shot=%0d chunk-full=%0d submsgs=%0d host chunks=%0d acc chunks=%0d bursts=%0d beats=%0d",
             n_oneshot, n_chunkfull, n_sub, hchunks, achunks, bursts, beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
