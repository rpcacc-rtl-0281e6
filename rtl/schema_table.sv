// schema_table: the shared Schema Table.  For every (message class, field
// number) it stores the field's type, the class of a sub-message field and the
// one-bit target location ("Acc" label: 1 = accelerator off-chip memory,
// 0 = host memory).  All deserializer lanes read it; the host writes it at
// start-up (compiler output) and the field mover rewrites the Acc bit at run
// time (automatic field updating).
//
// Interface: NRD read ports with combinational (same-cycle) read, as a small
// LUT-RAM; one write port; a second port that updates only the Acc bit of an
// entry.  If both write in one cycle the full write wins for its entry and
// the Acc update still applies to a different entry.  Reset marks every
// entry invalid, so it reads as FT_NONE (unknown field: skipped by the
// deserializer) until written; the entry storage itself has no reset.
// Geometry (64 x 16) is this design's choice; the paper gives none.
module schema_table
  import rpcacc_pkg::*;
#(
  parameter int unsigned NRD = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // read ports
  input  logic [NRD-1:0][CLASS_W-1:0] rd_class,
  input  logic [NRD-1:0][FIELD_W-1:0] rd_field,
  output schema_entry_t [NRD-1:0]     rd_entry,
  // full entry write (host / compiler)
  input  logic                       wr_en,
  input  logic [CLASS_W-1:0]         wr_class,
  input  logic [FIELD_W-1:0]         wr_field,
  input  schema_entry_t              wr_entry,
  // Acc-bit update (automatic field updating)
  input  logic                       upd_en,
  input  logic [CLASS_W-1:0]         upd_class,
  input  logic [FIELD_W-1:0]         upd_field,
  input  logic                       upd_acc
);
  localparam int unsigned N = NUM_CLASSES * MAX_FIELDS;
  // Entry storage has no reset (it maps to a RAM); a per-entry valid bit,
  // cleared by reset, makes never-written entries read as FT_NONE.
  schema_entry_t mem [N];
  logic [N-1:0]  valid;

  always_ff @(posedge clk) begin
    if (upd_en) mem[{upd_class, upd_field}].acc <= upd_acc;
    if (wr_en)  mem[{wr_class, wr_field}] <= wr_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid <= '0;
    else if (wr_en) valid[{wr_class, wr_field}] <= 1'b1;
  end

  always_comb
    for (int p = 0; p < int'(NRD); p++)
      rd_entry[p] = valid[{rd_class[p], rd_field[p]}] ? mem[{rd_class[p], rd_field[p]}]
                                                       : '{ftype: FT_NONE, acc: 1'b0, sub_class: '0};
endmodule
