// tb_tx_arena: variable-length (0..16 byte) writes at arbitrary byte
// addresses, 8-byte reads, against a byte model.
module tb_tx_arena;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int B = 1024;
  logic wr_en = 0, rd_en = 0;
  logic [9:0] wr_addr = 0, rd_addr = 0;
  logic [4:0] wr_cnt = 0;
  logic [127:0] wr_data = 0;
  logic [63:0] rd_data;
  logic [7:0] model [B];
  tx_arena #(.BYTES(B)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < B; i += 16) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(i); wr_cnt = 16; wr_data = '0;
      for (int k = 0; k < 16; k++) model[i+k] = 8'h00;
    end
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'($urandom_range(0, B - 17));
      wr_cnt = 5'($urandom_range(0, 16)); wr_data = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < int'(wr_cnt); k++) model[int'(wr_addr) + k] = wr_data[8*k +: 8];
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < B - 8; a += 3) begin
      logic [63:0] e;
      @(negedge clk); rd_en = 1; rd_addr = 10'(a);
      @(negedge clk); rd_en = 0;
      for (int k = 0; k < 8; k++) e[8*k +: 8] = model[a + k];
      checks++; if (rd_data !== e) begin failures++; $display("FAIL at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
