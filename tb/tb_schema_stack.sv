// tb_schema_stack: random push/pop sequences against a queue model, LIFO
// order, push+pop replacing the top, full/empty and overflow.
module tb_schema_stack;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push = 0, pop = 0, empty, full, overflow;
  logic [31:0] push_data = 0, top;
  logic [4:0] level;
  logic [31:0] model [$];
  schema_stack #(.W(32), .DEPTH(16)) dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      push = 1'($urandom); pop = 1'($urandom); push_data = $urandom;
      if (model.size() == 16 && push && !pop) push = 0;
      if (push && pop && model.size() > 0) begin void'(model.pop_back()); model.push_back(push_data); end
      else if (push) model.push_back(push_data);
      else if (pop && model.size() > 0) void'(model.pop_back());
      @(negedge clk); push = 0; pop = 0; #1;
      check(32'(level) == model.size(), "level");
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == 16), "full");
      if (model.size() > 0) check(top == model[$], "top is last pushed");
    end
    check(!overflow, "no overflow");
    while (model.size() < 16) begin
      @(negedge clk); push = 1; push_data = $urandom; model.push_back(push_data);
    end
    @(negedge clk); push = 1; @(negedge clk); push = 0; #1;
    check(overflow && full && top == model[$], "overflow refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
