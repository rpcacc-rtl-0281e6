// tb_free_list_fifo: fills the free list with chunk addresses, pops them from
// several requesters at once (round-robin, one grant per cycle, FIFO order),
// checks the count, the empty behaviour and the overflow flag, then runs
// random concurrent pushes and pops against a queue model.
module tb_free_list_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int D = 64;
  logic push = 0; logic [63:0] push_data = 0;
  logic [3:0] pop_req = 0, pop_gnt;
  logic [63:0] pop_data;
  logic [6:0] count;
  logic overflow;
  free_list_fifo #(.DEPTH(D), .AW(64), .NPOP(4)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int expect_n;
    int gcount [4];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); push = 1; push_data = 64'h1000_0000 + 64'(i) * 4096;
    end
    @(negedge clk); push = 0; #1;
    check(count == 7'(D), "full count");
    check(!overflow, "no overflow yet");
    @(negedge clk); push = 1; push_data = 64'hdead; @(negedge clk); push = 0; #1;
    check(overflow, "overflow flagged");
    expect_n = 0;
    for (int k = 0; k < 4; k++) gcount[k] = 0;
    @(negedge clk);
    pop_req = 4'hf;
    while (expect_n < D) begin
      #1;
      check($countones(pop_gnt) == 1, "one grant per cycle");
      check(pop_data == 64'h1000_0000 + 64'(expect_n) * 4096, "FIFO order");
      for (int k = 0; k < 4; k++) if (pop_gnt[k]) gcount[k]++;
      expect_n++;
      @(negedge clk);
    end
    #1;
    check(pop_gnt == 0, "no grant when empty");
    for (int k = 0; k < 4; k++) check(gcount[k] == D / 4, "round-robin fairness");
    pop_req = 0;
    // random pushes (chunks returned by the host) concurrent with pops
    begin
      logic [63:0] q [$];
      for (int n = 0; n < 3000; n++) begin
        @(negedge clk);
        push = (q.size() < D) && $urandom_range(0, 1); push_data = {$urandom, $urandom};
        pop_req = 4'($urandom);
        #1;
        check(count == 7'(q.size()), "count under concurrent push and pop");
        if (pop_gnt != 0) begin
          check(q.size() > 0 && pop_data == q[0], "data under concurrent push and pop");
          void'(q.pop_front());
        end
        if (push) q.push_back(push_data);
      end
      push = 0; pop_req = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
