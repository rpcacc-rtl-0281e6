// sync_fifo: single-clock FIFO (helper).  First-word fall-through: 'rd_data'
// shows the head entry whenever 'rd_valid' is high; an entry is removed when
// rd_valid && rd_ready.  Writes are accepted when wr_ready (not full).
// Storage is a plain array, inferred as RAM.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic wr_fire, rd_fire;

  assign wr_ready = (count != (PW+1)'(DEPTH));
  assign rd_valid = (count != 0);
  assign rd_data  = mem[rp];
  assign wr_fire  = wr_valid && wr_ready;
  assign rd_fire  = rd_valid && rd_ready;

  always_ff @(posedge clk) if (wr_fire) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wr_fire) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd_fire) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (PW+1)'(wr_fire) - (PW+1)'(rd_fire);
    end
  end
endmodule
