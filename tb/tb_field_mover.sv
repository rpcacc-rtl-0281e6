// tb_field_mover: moveToAcc and moveToCPU commands.  Checks the schema
// Acc-bit update issued on accepting each command, the copied data in the
// destination memory model, that moveToCPU leaves as one DMA burst, and the
// done pulse.
module tb_field_mover;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_valid = 0, cmd_ready; move_cmd_t cmd = '0;
  logic upd_en, upd_acc; logic [CLASS_W-1:0] upd_class; logic [FIELD_W-1:0] upd_field;
  logic dr_valid, dr_ready = 1; dma_rd_req_t dr_req;
  logic rs_valid = 0, rs_ready, rs_last = 0; logic [63:0] rs_data = 0;
  logic am_valid, am_ready = 1, am_rvalid = 0; acc_req_t am_req; logic [63:0] am_rdata = 0;
  logic dw_valid, dw_ready = 1; dma_wr_t dw_beat; logic done;
  field_mover dut (.*);

  logic [63:0] hostm [logic [63:0]];
  logic [63:0] accm [logic [33:0]];
  int bursts = 0, upds = 0, dones = 0;
  logic last_upd_acc; logic [CLASS_W-1:0] last_upd_class; logic [FIELD_W-1:0] last_upd_field;
  always @(posedge clk) begin
    am_rvalid <= 0;
    if (am_valid && am_ready) begin
      if (am_req.we) accm[am_req.addr] = am_req.wdata;
      else begin am_rvalid <= 1; am_rdata <= accm[am_req.addr]; end
    end
    if (dw_valid && dw_ready) begin hostm[dw_beat.addr] = dw_beat.data; if (dw_beat.last) bursts++; end
    if (upd_en) begin upds++; last_upd_acc = upd_acc; last_upd_class = upd_class; last_upd_field = upd_field; end
    if (done) dones++;
    am_ready <= 1'($urandom); dw_ready <= 1'($urandom);
  end
  always @(posedge clk) if (dr_valid && dr_ready) begin
    fork begin
      logic [63:0] a; int n;
      a = dr_req.addr; n = int'(dr_req.len);
      repeat (4) @(posedge clk);
      for (int i = 0; i < n; i++) begin
        rs_valid <= 1; rs_data <= hostm[a + 64'(8*i)]; rs_last <= (i == n - 1);
        @(posedge clk); while (!rs_ready) @(posedge clk);
      end
      rs_valid <= 0; rs_last <= 0;
    end join_none
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      logic [63:0] ha; logic [33:0] aa; int n; logic to_acc; int b0, d0;
      to_acc = t[0]; n = $urandom_range(1, 40);
      ha = 64'h4000_0000 + 64'(t) * 4096; aa = 34'h3_0000_0000 + 34'(t) * 4096;
      for (int i = 0; i < n; i++) begin
        if (to_acc) hostm[ha + 64'(8*i)] = {$urandom, $urandom};
        else accm[aa + 34'(8*i)] = {$urandom, $urandom};
      end
      b0 = bursts; d0 = dones;
      @(negedge clk);
      cmd_valid = 1;
      cmd = '{to_acc: to_acc, host_addr: ha, acc_addr: aa, len: 16'(n), class_id: CLASS_W'(t + 3), field_no: FIELD_W'(t)};
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 0;
      check(last_upd_acc == to_acc && last_upd_class == CLASS_W'(t + 3) && last_upd_field == FIELD_W'(t), "schema update");
      while (dones != d0 + 1) @(posedge clk);
      @(posedge clk);
      for (int i = 0; i < n; i++) begin
        if (to_acc) begin
          if (!accm.exists(aa + 34'(8*i)) || accm[aa + 34'(8*i)] != hostm[ha + 64'(8*i)]) begin check(0, "moveToAcc data"); break; end
        end else if (!hostm.exists(ha + 64'(8*i)) || hostm[ha + 64'(8*i)] != accm[aa + 34'(8*i)]) begin check(0, "moveToCPU data"); break; end
      end
      checks++;
      if (!to_acc) check(bursts == b0 + 1, "moveToCPU is one DMA burst");
    end
    check(upds == 16, "one schema update per move");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
