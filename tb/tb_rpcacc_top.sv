// tb_rpcacc_top: end-to-end test of the whole accelerator at its default
// (full) size: 4 lanes, 4 CUs, 4 KB chunks, 16K-entry TLB.
//
// The testbench plays the host and the off-chip world: it programs the
// schema table, the TLB (virtual receive region mapped to scattered physical
// pages), the free-chunk lists and the CU notification rings through MMIO;
// it models host memory behind the PCIe DMA ports, HBM behind the
// accelerator-memory port (one read in flight, random latency and stalls),
// the four CU kernels (each XORs its input with a per-CU constant), and the
// transport on both sides.  Phases, each checked and counted:
//  1. sequential requests: every field of every object graph is checked by
//     walking it from the reported root pointer (virtual addresses are
//     translated with the testbench's own page map); each request is either
//     one one-shot DMA burst or, when a large field fills a chunk, a
//     chunk-full flush; sub-messages are pushed/popped; Acc fields land in
//     HBM; every host write went through the TLB (no miss);
//  2. back-to-back requests spread over all lanes, same checks;
//  3. moveToAcc of a host field: data copied to HBM and the schema Acc bit
//     set, so the next request places that field in HBM; then moveToCPU
//     copies it back and the following request places it in host memory;
//  4. one task on each CU, using a deserialized Acc field as input: output
//     in HBM, notification entry written to host memory, address returned;
//  5. serialization of a response mixing inline records, sub-message
//     headers and fields read from HBM (a deserialized field and a CU
//     output), compared with an independent Protobuf encoding.
// Schema: class 1 = {1 varint, 2 bytes host, 3 bytes Acc, 4 sub class 2
// host, 5 sub class 2 Acc}; class 2 = {1 varint, 2 bytes host}.
module tb_rpcacc_top;
  import rpcacc_pkg::*;
  localparam int NL = 4, NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rx_valid = 0, rx_ready, rx_last = 0; logic [7:0] rx_data = 0;
  logic tx_valid, tx_ready, tx_last; logic [63:0] tx_data; logic [7:0] tx_keep;
  logic mmio_valid = 0, mmio_ready; logic [7:0] mmio_addr = 0; logic [255:0] mmio_wdata = '0;
  logic mmio_resp_valid; logic [63:0] mmio_resp_data;
  logic rxn_valid, rxn_ready; rx_notify_t rxn;
  logic pcie_wr_valid, pcie_wr_ready; dma_wr_t pcie_wr_beat;
  logic pcie_rd_valid, pcie_rd_ready; dma_rd_req_t pcie_rd_req;
  logic pcie_rs_valid, pcie_rs_ready, pcie_rs_last; logic [63:0] pcie_rs_data;
  logic hbm_valid, hbm_ready, hbm_rvalid; acc_req_t hbm_req; logic [63:0] hbm_rdata;
  logic [NC-1:0] k_in_valid, k_in_ready, k_in_last, k_out_valid, k_out_ready, k_out_last;
  logic [NC-1:0][63:0] k_in_data, k_out_data;
  logic [NC-1:0][7:0] k_in_keep, k_out_keep;
  logic tlb_miss, ser_overflow, move_done;
  logic [NC-1:0] cu_busy; logic [NL-1:0] lane_idle;

  rpcacc_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- address map of the host ----------------
  localparam logic [63:0] VBASE = 64'h7f00_0000_0000;   // receive region (virtual)
  localparam int NPAGES = 96;
  function automatic logic [51:0] ppn_of(input int i);
    return 52'h10_0000 + 52'((i * 37) % 211) * 52'd3;      // scattered physical pages
  endfunction
  function automatic logic [63:0] v2p(input logic [63:0] va);
    int i = int'((va - VBASE) >> 12);
    return {ppn_of(i), va[11:0]};
  endfunction
  function automatic bit in_rx_phys(input logic [63:0] pa);
    for (int i = 0; i < NPAGES; i++) if (pa[63:12] == ppn_of(i)) return 1;
    return 0;
  endfunction
  localparam logic [63:0] NOTIF_BASE = 64'h0000_0009_0000_0000;
  localparam logic [63:0] PRESER     = 64'h0000_0005_0000_0000;
  localparam logic [63:0] MOVEBUF    = 64'h0000_0006_0000_0000;
  localparam logic [33:0] CU_IN      = 34'h1_8000_0000;
  localparam logic [33:0] CU_OUT     = 34'h1_9000_0000;

  // ---------------- host memory behind PCIe ----------------
  logic [7:0] hostm [logic [63:0]];
  int wr_beats = 0, wr_bursts = 0, rx_bursts = 0, tlb_beats = 0, notif_writes = 0;
  logic in_burst_rx = 0;
  always @(posedge clk) begin
    if (!rst_n) pcie_wr_ready <= 0;
    else begin
      pcie_wr_ready <= ($urandom_range(0, 3) != 0);
      if (pcie_wr_valid && pcie_wr_ready) begin
        for (int b = 0; b < 8; b++)
          if (pcie_wr_beat.strb[b]) hostm[pcie_wr_beat.addr + 64'(b)] = pcie_wr_beat.data[8*b +: 8];
        wr_beats++;
        if (in_rx_phys(pcie_wr_beat.addr)) begin tlb_beats++; if (pcie_wr_beat.last) rx_bursts++; end
        if (pcie_wr_beat.addr[63:12] == NOTIF_BASE[63:12]) notif_writes++;
        if (pcie_wr_beat.last) wr_bursts++;
      end
    end
  end
  // DMA reads: accepted requests are answered in order, words may pause
  dma_rd_req_t rdq [$];
  int rd_idx = 0;
  always @(posedge clk) begin
    if (!rst_n) begin pcie_rd_ready <= 0; pcie_rs_valid <= 0; pcie_rs_last <= 0; end
    else begin
      pcie_rd_ready <= 1'($urandom);
      if (pcie_rd_valid && pcie_rd_ready) rdq.push_back(pcie_rd_req);
      if (pcie_rs_valid && pcie_rs_ready) begin
        pcie_rs_valid <= 0;
        rd_idx++;
        if (pcie_rs_last) begin void'(rdq.pop_front()); rd_idx = 0; end
      end else if (!pcie_rs_valid && rdq.size() > 0 && $urandom_range(0, 2) != 0) begin
        logic [63:0] a, w;
        a = rdq[0].addr + 64'(rd_idx) * 8;
        for (int b = 0; b < 8; b++) w[8*b +: 8] = hostm.exists(a + 64'(b)) ? hostm[a + 64'(b)] : 8'h00;
        pcie_rs_valid <= 1; pcie_rs_data <= w; pcie_rs_last <= (rd_idx == int'(rdq[0].len) - 1);
      end
    end
  end

  // ---------------- HBM ----------------
  logic [7:0] hbm [logic [33:0]];
  int hbm_wait; logic hbm_busy; logic [33:0] hbm_ra; int hbm_writes = 0, hbm_reads = 0;
  always @(posedge clk) begin
    hbm_rvalid <= 0;
    if (!rst_n) begin hbm_ready <= 0; hbm_busy <= 0; end
    else begin
      hbm_ready <= ($urandom_range(0, 3) != 0);
      if (hbm_valid && hbm_ready) begin
        check(!hbm_busy, "HBM request while a read is outstanding");
        if (hbm_req.we) begin
          for (int b = 0; b < 8; b++) if (hbm_req.strb[b]) hbm[hbm_req.addr + 34'(b)] = hbm_req.wdata[8*b +: 8];
          hbm_writes++;
        end else begin hbm_busy <= 1; hbm_ra <= hbm_req.addr; hbm_wait <= $urandom_range(1, 4); hbm_reads++; end
      end
      if (hbm_busy) begin
        if (hbm_wait <= 1) begin
          logic [63:0] d;
          for (int b = 0; b < 8; b++) d[8*b +: 8] = hbm.exists(hbm_ra + 34'(b)) ? hbm[hbm_ra + 34'(b)] : 8'h00;
          hbm_rvalid <= 1; hbm_rdata <= d; hbm_busy <= 0;
        end else hbm_wait <= hbm_wait - 1;
      end
    end
  end

  // ---------------- CU kernels: XOR with 8'h11 * (cu + 1) ----------------
  logic [NC-1:0] kv; logic [NC-1:0][63:0] kd; logic [NC-1:0][7:0] kk; logic [NC-1:0] kl;
  always_comb
    for (int i = 0; i < NC; i++) begin
      k_in_ready[i] = !kv[i] || k_out_ready[i];
      k_out_valid[i] = kv[i]; k_out_data[i] = kd[i]; k_out_keep[i] = kk[i]; k_out_last[i] = kl[i];
    end
  always @(posedge clk)
    for (int i = 0; i < NC; i++) begin
      if (!rst_n) kv[i] <= 0;
      else if (k_in_valid[i] && k_in_ready[i]) begin
        kv[i] <= 1; kd[i] <= k_in_data[i] ^ {8{8'(8'h11 * (i + 1))}};
        kk[i] <= k_in_keep[i]; kl[i] <= k_in_last[i];
      end else if (kv[i] && k_out_ready[i]) kv[i] <= 0;
    end

  // ---------------- transport TX and completions ----------------
  typedef byte unsigned bq_t[$];
  bq_t txq; int tx_msgs = 0;
  rx_notify_t notes [int];
  bit lane_used [NL];
  always @(posedge clk) begin
    if (!rst_n) begin tx_ready <= 0; rxn_ready <= 0; for (int i = 0; i < NL; i++) lane_used[i] = 0; end
    else begin
      tx_ready <= 1'($urandom);
      rxn_ready <= ($urandom_range(0, 3) != 0);
      if (tx_valid && tx_ready) begin
        for (int b = 0; b < 8; b++) if (tx_keep[b]) txq.push_back(byte'(tx_data[8*b +: 8]));
        if (tx_last) tx_msgs++;
      end
      if (rxn_valid && rxn_ready) notes[int'(rxn.req_id)] = rxn;
      for (int i = 0; i < NL; i++) if (!lane_idle[i]) lane_used[i] = 1;
    end
  end

  // ---------------- host helpers ----------------
  task automatic mmio(input logic [7:0] a, input logic [255:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_addr = a; mmio_wdata = d;
    @(posedge clk); while (!mmio_ready) @(posedge clk);
    #1 mmio_valid = 0;
  endtask
  task automatic set_schema(input int c, input int f, input field_type_e t, input bit acc, input int sub);
    schema_entry_t e;
    e = '{ftype: t, acc: acc, sub_class: CLASS_W'(sub)};
    mmio(8'h00, 256'({e, 4'(f), 6'(c)}));
  endtask

  task automatic move(input bit to_acc, input logic [63:0] ha, input logic [33:0] aa, input int words);
    move_cmd_t m;
    m = '{to_acc: to_acc, host_addr: ha, acc_addr: aa, len: 16'(words), class_id: 6'd1, field_no: 4'd2};
    mmio(8'h06, 256'(m));
  endtask

  function automatic bq_t varint(input logic [63:0] v);
    bq_t q;
    do begin
      q.push_back(byte'({(v >> 7) != 0, v[6:0]}));
      v = v >> 7;
    end while (v != 0);
    return q;
  endfunction
  function automatic bq_t tag(input int f, input int wt);
    return varint((64'(f) << 3) | 64'(wt));
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
  function automatic logic [7:0] rd8(input logic in_acc, input logic [63:0] a);
    if (in_acc) return hbm.exists(34'(a)) ? hbm[34'(a)] : 8'h00;
    return hostm.exists(v2p(a)) ? hostm[v2p(a)] : 8'h00;
  endfunction
  function automatic logic [63:0] rd64(input logic in_acc, input logic [63:0] a);
    logic [63:0] v;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = rd8(in_acc, a + 64'(b));
    return v;
  endfunction

  // expected content of each request, by request id
  logic [63:0] e_v1 [int], e_s1 [int];
  bq_t e_b2 [int], e_b3 [int], e_s2 [int];
  bit  e_acc2 [int];
  int  n_sub = 0, n_accf = 0, n_reqs = 0;

  function automatic bq_t make_req(input int rid, input bit big);
    bq_t s4, s5, body;
    e_v1[rid] = {$urandom, $urandom} >> $urandom_range(0, 63);
    e_b2[rid] = rbytes(big ? $urandom_range(3700, 3900) : $urandom_range(1, 60));
    e_b3[rid] = rbytes($urandom_range(8, 300));
    e_s1[rid] = 64'($urandom);
    e_s2[rid] = rbytes($urandom_range(0, 40));
    s4 = {tag(1, 0), varint(e_s1[rid]), ld(2, e_s2[rid])};
    s5 = {tag(1, 0), varint(e_s1[rid] + 1), ld(2, e_s2[rid])};
    body = {tag(1, 0), varint(e_v1[rid]), ld(2, e_b2[rid]), ld(3, e_b3[rid]), ld(4, s4), ld(5, s5)};
    return body;
  endfunction

  task automatic send(input int cls, input int rid, input bq_t body);
    bq_t m;
    int l = body.size();
    m = {byte'(cls), byte'(rid), byte'(rid >> 8), byte'(rid >> 16),
         byte'(l), byte'(l >> 8), byte'(l >> 16), byte'(l >> 24), body};
    @(negedge clk);
    for (int i = 0; i < m.size(); i++) begin
      rx_valid = 1; rx_data = m[i]; rx_last = (i == m.size() - 1);
      @(posedge clk); while (!rx_ready) @(posedge clk);
      #1;
    end
    rx_valid = 0; rx_last = 0;
  endtask

  task automatic check_bytes(input logic [63:0] slot, input bq_t exp, input logic exp_acc, input string what);
    check(slot[63] == exp_acc, {what, " placement"});
    check(int'(slot[62:48]) == exp.size(), {what, " length"});
    for (int i = 0; i < exp.size(); i++)
      if (rd8(slot[63], {16'd0, slot[47:0]} + 64'(i)) != exp[i]) begin
        check(0, {what, " content"}); break;
      end
    checks++;
  endtask

  task automatic walk(input int rid);
    logic [63:0] root, s4, s5;
    rx_notify_t n;
    n = notes[rid];
    check(!n.error && n.class_id == 1, $sformatf("request %0d completion", rid));
    root = n.root_ptr;
    check(root[63:12] >= VBASE[63:12] && root[63:12] < VBASE[63:12] + 52'(NPAGES), "root in receive region");
    check(rd64(0, root)[5:1] == 5'h1f, "presence bits");
    check(rd64(0, root + 8) == e_v1[rid], "field 1");
    check_bytes(rd64(0, root + 16), e_b2[rid], e_acc2[rid], "field 2");
    check_bytes(rd64(0, root + 24), e_b3[rid], 1'b1, "field 3 (Acc)");
    s4 = rd64(0, root + 32);
    check(!s4[63] && rd64(0, {16'd0, s4[47:0]} + 8) == e_s1[rid], "sub-message in host");
    check_bytes(rd64(0, {16'd0, s4[47:0]} + 16), e_s2[rid], 1'b0, "sub-message bytes");
    s5 = rd64(0, root + 40);
    check(s5[63] && rd64(1, {16'd0, s5[47:0]} + 8) == e_s1[rid] + 1, "sub-message in HBM");
    check_bytes(rd64(1, {16'd0, s5[47:0]} + 16), e_s2[rid], 1'b0, "HBM object's bytes field");
    n_sub += 2; n_accf += 2; n_reqs++;
  endtask

  task automatic wait_note(input int rid);
    int t = 0;
    while (!notes.exists(rid) && t < 200000) begin @(posedge clk); t++; end
    check(notes.exists(rid), $sformatf("completion of request %0d", rid));
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int n_oneshot = 0, n_chunkfull = 0, n_moves = 0, n_tasks = 0, n_ser_acc = 0;
  initial begin
    repeat (4) @(posedge clk); rst_n = 1;
    // ---- host start-up: schema, TLB, free chunks, notification rings
    set_schema(1, 1, FT_VARINT, 0, 0);
    set_schema(1, 2, FT_BYTES, 0, 0);
    set_schema(1, 3, FT_BYTES, 1, 0);
    set_schema(1, 4, FT_SUBMSG, 0, 2);
    set_schema(1, 5, FT_SUBMSG, 1, 2);
    set_schema(2, 1, FT_VARINT, 0, 0);
    set_schema(2, 2, FT_BYTES, 0, 0);
    mmio(8'h01, 256'(VBASE[63:12]));
    for (int i = 0; i < NPAGES; i++) mmio(8'h02, 256'({1'b1, ppn_of(i), 14'(i)}));
    for (int i = 0; i < NPAGES; i++) mmio(8'h03, 256'(VBASE + 64'(i) * 4096));
    for (int i = 0; i < 200; i++) mmio(8'h04, 256'(34'h0_1000_0000 + 34'(i) * 4096));
    for (int i = 0; i < NC; i++) mmio(8'(8'h20 + i), 256'(NOTIF_BASE + 64'(i) * 256));

    // ---- phase 1: sequential requests
    for (int r = 0; r < 10; r++) begin
      int b0, h0;
      bq_t body;
      body = make_req(r, r % 3 == 2);
      e_acc2[r] = 0;
      b0 = rx_bursts;
      fork send(1, r, body); join_none
      wait_note(r);
      repeat (60) @(posedge clk);    // let the last flush drain
      // a small request is written to host memory by one DMA burst; a
      // request with a field too large for the rest of its chunk first
      // flushes the full chunk
      if (e_b2[r].size() < 1000) begin
        check(rx_bursts - b0 == 1, $sformatf("one-shot flush of request %0d (%0d bursts)", r, rx_bursts - b0));
        n_oneshot++;
      end else begin
        // (it still fits when it is the first data of a fresh chunk)
        check(rx_bursts - b0 >= 1 && rx_bursts - b0 <= 3, $sformatf("large request %0d: %0d bursts", r, rx_bursts - b0));
        if (rx_bursts - b0 >= 2) n_chunkfull++; else n_oneshot++;
      end
      walk(r);
    end

    // ---- phase 2: back-to-back requests over all lanes
    fork
      for (int r = 100; r < 124; r++) begin
        bq_t body;
        body = make_req(r, 1'b0); e_acc2[r] = 0;
        send(1, r, body);
      end
    join
    for (int r = 100; r < 124; r++) begin wait_note(r); end
    repeat (100) @(posedge clk);
    for (int r = 100; r < 124; r++) walk(r);
    for (int i = 0; i < NL; i++) check(lane_used[i], $sformatf("lane %0d used", i));

    // ---- phase 3: moveToAcc / moveToCPU with schema update
    begin
      bq_t data; int words; logic [63:0] pa; int d0;
      data = rbytes(200); words = 25;
      for (int i = 0; i < 200; i++) hostm[MOVEBUF + 64'(i)] = data[i];
      d0 = 0;
      move(1'b1, MOVEBUF, 34'h1_7000_0000, words);
      while (!move_done) @(posedge clk);
      for (int i = 0; i < 200; i++) if (hbm[34'h1_7000_0000 + 34'(i)] != data[i]) begin check(0, "moveToAcc data"); break; end
      checks++; n_moves++;
      begin bq_t body; body = make_req(200, 1'b0); e_acc2[200] = 1; send(1, 200, body); wait_note(200); repeat (60) @(posedge clk); walk(200); end
      // back to the CPU
      move(1'b0, MOVEBUF + 64'h1000, 34'h1_7000_0000, words);
      while (!move_done) @(posedge clk);
      repeat (40) @(posedge clk);
      for (int i = 0; i < 200; i++) if (hostm[MOVEBUF + 64'h1000 + 64'(i)] != data[i]) begin check(0, "moveToCPU data"); break; end
      checks++; n_moves++;
      begin bq_t body; body = make_req(201, 1'b0); e_acc2[201] = 0; send(1, 201, body); wait_note(201); repeat (60) @(posedge clk); walk(201); end
    end

    // ---- phase 4: one task per CU on a deserialized Acc field
    for (int c = 0; c < NC; c++) begin
      logic [63:0] slot, na, note; int sz; logic [33:0] ia, oa; cu_desc_t cd;
      slot = rd64(0, notes[100 + c].root_ptr + 24);   // field 3 of request 100+c, in HBM
      ia = 34'(slot[47:0]); sz = int'(slot[62:48]); oa = CU_OUT + 34'(c) * 4096;
      fork
        begin
          cd = '{in_addr: ia, in_size: 32'(sz), out_addr: oa, out_buf_size: 32'(4096)};
          mmio(8'(8'h10 + c), 256'(cd));
        end
        begin @(posedge clk); while (!mmio_resp_valid) @(posedge clk); na = mmio_resp_data; end
      join
      check(na == NOTIF_BASE + 64'(c) * 256, "notification entry address returned");
      while (!(hostm.exists(na + 7) && hostm[na + 7] == 8'h80)) @(posedge clk);
      note = 0;
      for (int b = 0; b < 8; b++) note[8*b +: 8] = hostm[na + 64'(b)];
      check(note[31:0] == 32'(sz), "CU result length");
      for (int i = 0; i < sz; i++)
        if (hbm[oa + 34'(i)] != (e_b3[100 + c][i] ^ 8'(8'h11 * (c + 1)))) begin check(0, $sformatf("CU %0d output", c)); break; end
      checks++; n_tasks++;
    end

    // ---- phase 5: serialization with fields read from HBM
    begin
      logic [63:0] pre [$]; bq_t body, exp; logic [63:0] s3, v;
      int words; int sz; ser_cmd_t sc;
      s3 = rd64(0, notes[105].root_ptr + 24);
      v = 64'h1234_5678_9abc;
      pre.push_back({3'd1, 29'd1, 32'd0}); pre.push_back(v);
      body = {tag(1, 0), varint(v)};
      // inline bytes
      pre.push_back({3'd4, 29'd2, 32'd13});
      pre.push_back(64'h0706_0504_0302_0100); pre.push_back(64'h0000_000c_0b0a_0908);
      body = {body, tag(2, 2), varint(13)};
      for (int i = 0; i < 13; i++) body.push_back(byte'(i));
      // deserialized Acc field, read from HBM by the serializer
      pre.push_back({3'd5, 29'd3, 32'(s3[62:48])}); pre.push_back({16'd0, s3[47:0]});
      body = {body, ld(3, e_b3[105])}; n_ser_acc++;
      // CU 0 output, also in HBM
      sz = e_b3[100].size();
      pre.push_back({3'd5, 29'd6, 32'(sz)}); pre.push_back(64'(CU_OUT));
      body = {body, tag(6, 2), varint(64'(sz))};
      for (int i = 0; i < sz; i++) body.push_back(byte'(e_b3[100][i] ^ 8'h11));
      n_ser_acc++;
      // sub-message header (host pre-serialized its 12-byte body length)
      pre.push_back({3'd6, 29'd4, 32'd12});
      body = {body, tag(4, 2), varint(12)};
      pre.push_back({3'd1, 29'd1, 32'd0}); pre.push_back(64'd300);
      body = {body, tag(1, 0), varint(300)};
      pre.push_back({3'd2, 29'd2, 32'd0}); pre.push_back(64'h0102_0304_0506_0708);
      body = {body, tag(2, 1)};
      for (int i = 0; i < 8; i++) body.push_back(byte'(64'h0102_0304_0506_0708 >> (8 * i)));
      for (int w = 0; w < pre.size(); w++)
        for (int b = 0; b < 8; b++) hostm[PRESER + 64'(w) * 8 + 64'(b)] = pre[w][8*b +: 8];
      exp = {8'd1, 8'h42, 8'h00, 8'h00, byte'(body.size()), byte'(body.size() >> 8), 8'd0, 8'd0, body};
      txq = {};
      sc = '{addr: PRESER, len: 16'(pre.size()), class_id: 6'd1, req_id: 24'h42};
      mmio(8'h05, 256'(sc));
      while (tx_msgs == 0) @(posedge clk);
      check(txq.size() == exp.size(), $sformatf("response length %0d vs %0d", txq.size(), exp.size()));
      for (int i = 0; i < exp.size() && i < txq.size(); i++)
        if (txq[i] != exp[i]) begin check(0, $sformatf("response byte %0d", i)); break; end
      checks++;
    end

    check(!tlb_miss, "no TLB miss");
    check(!ser_overflow, "no arena overflow");
    check(n_oneshot > 0, "one-shot flush seen");
    check(n_chunkfull > 0, "chunk-full flush seen");
    check(tlb_beats > 0, "TLB translated DMA writes");
    check(notif_writes == NC, "one notification per task");
    $display("requests=%0d one-shot=%0d chunk-full=%0d submsgs=%0d acc-fields=%0d tlb-beats=%0d rx-bursts=%0d",
             n_reqs, n_oneshot, n_chunkfull, n_sub, n_accf, tlb_beats, rx_bursts);
    $display("moves=%0d cu-tasks=%0d ser-acc-fields=%0d hbm-writes=%0d hbm-reads=%0d responses=%0d",
             n_moves, n_tasks, n_ser_acc, hbm_writes, hbm_reads, tx_msgs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
