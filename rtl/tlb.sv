// tlb: host address translation for the deserializers' DMA writes.  As in
// the paper's simple TLB, it covers only a virtually contiguous region: entry
// i maps virtual page (base_vpn + i) to a physical page.  With 16K entries
// and 4 KB pages it covers a 64 MB receive region.
//
// It is one pipeline stage on the DMA write stream (valid/ready).  A beat
// whose page lies outside the region or whose entry is invalid is dropped and
// raises the sticky 'miss' flag.  Entries and the region base are written by
// the host through MMIO.  Timing: one cycle of latency, full throughput.
module tlb
  import rpcacc_pkg::*;
#(
  parameter int unsigned ENTRIES = 16384,
  parameter int unsigned PAGE_W  = 12,         // 4 KB pages
  localparam int unsigned IW     = $clog2(ENTRIES),
  localparam int unsigned PPN_W  = HOST_AW - PAGE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // programming
  input  logic             base_we,
  input  logic [PPN_W-1:0] base_vpn,
  input  logic             ent_we,
  input  logic [IW-1:0]    ent_idx,
  input  logic [PPN_W-1:0] ent_ppn,
  input  logic             ent_valid,
  // translated stream
  input  logic             in_valid,
  output logic             in_ready,
  input  dma_wr_t          in_beat,
  output logic             out_valid,
  input  logic             out_ready,
  output dma_wr_t          out_beat,
  output logic             miss
);
  logic [PPN_W:0]   mem [ENTRIES];     // {valid, ppn}
  logic [PPN_W-1:0] base_q;
  logic [PPN_W-1:0] vpn, rel;
  logic [PPN_W:0]   ent;
  logic             hit;

  assign vpn = in_beat.addr[HOST_AW-1:PAGE_W];
  assign rel = vpn - base_q;
  assign ent = mem[rel[IW-1:0]];
  assign hit = (rel < PPN_W'(ENTRIES)) && ent[PPN_W];
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) if (ent_we) mem[ent_idx] <= {ent_valid, ent_ppn};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0; out_valid <= 1'b0; miss <= 1'b0; out_beat <= '0;
    end else begin
      if (base_we) base_q <= base_vpn;
      if (in_ready) begin
        out_valid <= in_valid && hit;
        if (in_valid && !hit) miss <= 1'b1;
        out_beat      <= in_beat;
        out_beat.addr <= {ent[PPN_W-1:0], in_beat.addr[PAGE_W-1:0]};
      end
    end
  end
endmodule
