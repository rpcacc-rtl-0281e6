// tb_cu_shell: submits tasks to a compute-unit shell whose kernel (modelled
// here) XORs every input byte with 0x5a and returns the same length.  Checks
// the returned notification-entry addresses, the output written to
// accelerator memory, truncation at the output buffer size, and the
// completion word {done, length} written to the notification ring.
module tb_cu_shell;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [63:0] notif_base = 64'h9000_0000;
  logic sub_valid = 0, sub_ready; cu_desc_t sub_desc = '0; logic [63:0] sub_notif_addr;
  logic am_valid, am_ready = 1, am_rvalid = 0; acc_req_t am_req; logic [63:0] am_rdata = 0;
  logic k_in_valid, k_in_ready, k_in_last; logic [63:0] k_in_data; logic [7:0] k_in_keep;
  logic k_out_valid, k_out_ready, k_out_last; logic [63:0] k_out_data; logic [7:0] k_out_keep;
  logic dw_valid, dw_ready = 1; dma_wr_t dw_beat; logic busy;

  cu_shell #(.RING_DEPTH(4)) dut (.*);

  // kernel model: one-word buffer, XOR 0x5a
  logic kv = 0; logic [63:0] kd; logic [7:0] kk; logic kl;
  assign k_in_ready = !kv || k_out_ready;
  assign k_out_valid = kv; assign k_out_data = kd; assign k_out_keep = kk; assign k_out_last = kl;
  always @(posedge clk) begin
    if (!rst_n) kv <= 0;
    else if (k_in_valid && k_in_ready) begin kv <= 1; kd <= k_in_data ^ {8{8'h5a}}; kk <= k_in_keep; kl <= k_in_last; end
    else if (kv && k_out_ready) kv <= 0;
  end

  logic [7:0] accm [logic [33:0]];
  logic [63:0] notes [logic [63:0]];
  always @(posedge clk) begin
    am_rvalid <= 0;
    if (rst_n && am_valid && am_ready) begin
      if (am_req.we) begin
        for (int b = 0; b < 8; b++) if (am_req.strb[b]) accm[am_req.addr + 34'(b)] = am_req.wdata[8*b +: 8];
      end else begin
        am_rvalid <= 1;
        for (int b = 0; b < 8; b++) am_rdata[8*b +: 8] <= accm.exists(am_req.addr + 34'(b)) ? accm[am_req.addr + 34'(b)] : 8'h00;
      end
    end
    if (rst_n && dw_valid && dw_ready) begin
      notes[dw_beat.addr] = dw_beat.data;
      if (!dw_beat.last) begin failures++; $display("FAIL notification is one beat"); end
    end
    am_ready <= 1'($urandom);
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ntrunc = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int sz, ob;
      logic [33:0] ia, oa;
      logic [63:0] na;
      sz = $urandom_range(1, 200);
      ob = (t % 4 == 3) ? sz / 2 : sz + 8;
      if (t % 4 == 3) ntrunc++;
      ia = 34'h1000 + 34'(t) * 1024; oa = 34'h8_0000 + 34'(t) * 1024;
      for (int i = 0; i < sz; i++) accm[ia + 34'(i)] = 8'($urandom);
      @(negedge clk);
      sub_valid = 1; sub_desc = '{in_addr: ia, in_size: 32'(sz), out_addr: oa, out_buf_size: 32'(ob)};
      #1 na = sub_notif_addr;
      @(posedge clk); while (!sub_ready) @(posedge clk);
      #1 sub_valid = 0;
      check(na == notif_base + 64'((t % 4) * 8), "notification entry address");
      while (!notes.exists(na)) @(posedge clk);
      @(posedge clk);
      check(notes[na][63] == 1'b1, "done bit");
      check(int'(notes[na][31:0]) == ((sz < ob) ? sz : ob), $sformatf("result length %0d sz %0d ob %0d", notes[na][31:0], sz, ob));
      for (int i = 0; i < sz; i++) begin
        if (i < ob) begin
          if (!accm.exists(oa + 34'(i)) || accm[oa + 34'(i)] != (accm[ia + 34'(i)] ^ 8'h5a)) begin
            check(0, $sformatf("output byte %0d task %0d", i, t)); break; end
        end else if (accm.exists(oa + 34'(i))) begin check(0, "write past output buffer"); break; end
      end
      checks++;
      notes.delete(na);
    end
    check(ntrunc > 0, "truncation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
