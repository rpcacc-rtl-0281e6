// tb_schema_table: writes random schema entries, reads them back through
// every read port, and checks that an Acc-bit update changes only that bit
// and that entries never written read as FT_NONE.
module tb_schema_table;
  import rpcacc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0][CLASS_W-1:0] rd_class;
  logic [3:0][FIELD_W-1:0] rd_field;
  schema_entry_t [3:0] rd_entry;
  logic wr_en = 0, upd_en = 0, upd_acc = 0;
  logic [CLASS_W-1:0] wr_class = 0, upd_class = 0;
  logic [FIELD_W-1:0] wr_field = 0, upd_field = 0;
  schema_entry_t wr_entry = '0;
  schema_entry_t model [NUM_CLASSES][MAX_FIELDS];
  bit written [NUM_CLASSES][MAX_FIELDS];

  schema_table #(.NRD(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rd_class = '0; rd_field = '0;
    for (int c = 0; c < int'(NUM_CLASSES); c++) for (int f = 0; f < int'(MAX_FIELDS); f++) begin model[c][f] = '0; written[c][f] = 0; end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    // reset value
    #1 check(rd_entry[0].ftype == FT_NONE, "reset entry");
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      wr_en = 1; wr_class = CLASS_W'($urandom); wr_field = FIELD_W'($urandom);
      wr_entry = '{ftype: field_type_e'($urandom_range(0,5)), acc: 1'($urandom), sub_class: CLASS_W'($urandom)};
      model[wr_class][wr_field] = wr_entry; written[wr_class][wr_field] = 1;
      @(negedge clk); wr_en = 0;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int p = 0; p < 4; p++) begin rd_class[p] = CLASS_W'($urandom); rd_field[p] = FIELD_W'($urandom); end
      #1;
      for (int p = 0; p < 4; p++) check(rd_entry[p] == model[rd_class[p]][rd_field[p]], "read back");
    end
    // automatic field updating: Acc bit flips, type stays
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      upd_en = 1; upd_class = CLASS_W'($urandom); upd_field = FIELD_W'($urandom); upd_acc = 1'($urandom);
      // an entry never written stays FT_NONE with acc 0
      if (written[upd_class][upd_field]) model[upd_class][upd_field].acc = upd_acc;
      @(negedge clk); upd_en = 0;
      rd_class[1] = upd_class; rd_field[1] = upd_field; #1;
      check(rd_entry[1] == model[upd_class][upd_field], "acc update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
