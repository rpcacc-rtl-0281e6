// free_list_fifo: one of the two free-list FIFOs.  Each entry is the base
// address of a free memory chunk (4 KB by default) of the reserved host or
// accelerator region.  Allocating a chunk pops an entry, freeing one pushes
// it, so memory management needs no software on the receive path.
//
// NPOP requesters (the deserializer lanes) share the pop side through a
// round-robin arbiter: a requester holds pop_req until it sees pop_gnt, which
// is asserted for one cycle together with the popped address on pop_data.
// The head entry is read combinationally (first-word fall-through).  Pushes
// (host frees / initial fill) take one cycle each; a push to a full FIFO is
// dropped and counted by 'overflow'.  DEPTH and the address width are this
// design's choices (the paper does not size the regions).
module free_list_fifo #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = 64,
  parameter int unsigned NPOP  = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push,
  input  logic [AW-1:0]        push_data,
  input  logic [NPOP-1:0]      pop_req,
  output logic [NPOP-1:0]      pop_gnt,
  output logic [AW-1:0]        pop_data,
  output logic [$clog2(DEPTH):0] count,
  output logic                 overflow
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [AW-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [$clog2(NPOP > 1 ? NPOP : 2)-1:0] last;
  logic do_pop, do_push;
  int   sel;

  always_comb begin
    sel = rpcacc_pkg::rr_pick(32'(pop_req), int'(last), int'(NPOP));
    pop_gnt = '0;
    do_pop  = (count != 0) && (sel >= 0);
    if (do_pop) pop_gnt[sel] = 1'b1;
  end

  assign pop_data = mem[rp];
  assign do_push  = push && (count != (PW+1)'(DEPTH) || do_pop);

  always_ff @(posedge clk) if (do_push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; last <= '0; overflow <= 1'b0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop) begin
        rp   <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
        last <= $bits(last)'(sel);
      end
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
      if (push && !do_push) overflow <= 1'b1;
    end
  end
endmodule
