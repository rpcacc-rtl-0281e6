// tb_temp_buffer: byte-enabled writes and one-cycle-latency reads against a
// byte model of the 4 KB buffer.
module tb_temp_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  logic [63:0] wr_data = 0, rd_data;
  logic [7:0] wr_strb = 0;
  logic [63:0] model [512];
  temp_buffer #(.DEPTH_BYTES(4096)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 9'(i); wr_data = {$urandom, $urandom}; wr_strb = 8'hff;
      model[i] = wr_data;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk); wr_en = 1; wr_addr = 9'($urandom); wr_data = {$urandom, $urandom}; wr_strb = 8'($urandom);
      for (int b = 0; b < 8; b++) if (wr_strb[b]) model[wr_addr][8*b +: 8] = wr_data[8*b +: 8];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 9'(i);
      @(negedge clk); rd_en = 0;
      checks++; if (rd_data !== model[i]) begin failures++; $display("FAIL word %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
