// tb_tlb: programs a region base and random page mappings, sends DMA beats
// and checks the translated address, one-cycle latency, and that beats
// outside the region or to invalid entries are dropped with 'miss' set.
module tb_tlb;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int E = 16384;
  logic base_we = 0, ent_we = 0, ent_valid = 0;
  logic [51:0] base_vpn = 0, ent_ppn = 0;
  logic [13:0] ent_idx = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, miss;
  dma_wr_t in_beat = '0, out_beat;
  logic [51:0] pmap [E];
  tlb #(.ENTRIES(E)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); base_we = 1; base_vpn = 52'h7f00_0000; @(negedge clk); base_we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); ent_we = 1; ent_idx = 14'(i); ent_valid = 1;
      ent_ppn = 52'h40000 + 52'($urandom_range(0, 1 << 20)); pmap[i] = ent_ppn;
    end
    @(negedge clk); ent_we = 0;
    for (int n = 0; n < 500; n++) begin
      int pg; logic [11:0] off;
      pg = $urandom_range(0, 255); off = 12'($urandom) & 12'hff8;
      @(negedge clk);
      in_valid = 1; in_beat = '{addr: {12'h0, 52'h7f00_0000 + 52'(pg)} << 12 | 64'(off),
                                data: {$urandom, $urandom}, strb: 8'hff, last: 1'b1};
      @(negedge clk); in_valid = 0; #1;
      check(out_valid, "translated beat present after one cycle");
      check(out_beat.addr == {pmap[pg], off}, "translated address");
      check(out_beat.data == in_beat.data, "data carried");
    end
    check(!miss, "no miss so far");
    // outside the region
    @(negedge clk); in_valid = 1; in_beat.addr = 64'h1234_5000;
    @(negedge clk); in_valid = 0; #1;
    check(!out_valid, "out-of-region beat dropped");
    check(miss, "miss flagged");
    // invalid entry inside the region
    @(negedge clk); ent_we = 1; ent_idx = 14'd300; ent_valid = 0; @(negedge clk); ent_we = 0;
    in_valid = 1; in_beat.addr = (64'h7f00_0000 + 300) << 12;
    @(negedge clk); in_valid = 0; #1;
    check(!out_valid, "invalid entry dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
