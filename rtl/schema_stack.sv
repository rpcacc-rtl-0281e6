// schema_stack: the SRAM-based stack a deserializer lane uses for nested
// sub-messages.  On entering a sub-message the lane pushes its whole parent
// context (the schema class, the partly built object and the bookkeeping
// needed to resume); on leaving it pops it again.
//
// Generic width W and depth DEPTH.  'top' always shows the most recent entry
// (combinational read of mem[sp-1]).  Push and pop in the same cycle replace
// the top entry.  A push onto a full stack is refused and sets 'overflow';
// 'empty' and 'level' report the fill.  DEPTH 16 is this design's choice for
// the "dozen levels or more" nesting the paper cites.
module schema_stack #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned LW   = $clog2(DEPTH+1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] top,
  output logic         empty,
  output logic         full,
  output logic [LW-1:0] level,
  output logic         overflow
);
  logic [W-1:0] mem [DEPTH];
  logic [LW-1:0] sp;

  assign empty = (sp == 0);
  assign full  = (sp == LW'(DEPTH));
  assign level = sp;
  assign top   = mem[empty ? '0 : $clog2(DEPTH)'(sp - 1'b1)];

  always_ff @(posedge clk) begin
    if (push && pop && !empty)  mem[$clog2(DEPTH)'(sp - 1'b1)] <= push_data;
    else if (push && !full)     mem[$clog2(DEPTH)'(sp)] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0; overflow <= 1'b0;
    end else if (push && pop && !empty) begin
      sp <= sp;
    end else if (push) begin
      if (!full) sp <= sp + 1'b1; else overflow <= 1'b1;
    end else if (pop && !empty) begin
      sp <= sp - 1'b1;
    end
  end
endmodule
