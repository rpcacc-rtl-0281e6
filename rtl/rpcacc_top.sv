// rpcacc_top: the RPC acceleration layer of the NIC, between the transport
// layer (RoCEv2, outside this design) and the PCIe controller (outside).
//
// Receive path: request bytes from the transport enter the dispatcher, which
// gives each request to one of NLANES target-aware deserializer lanes.  The
// lanes look fields up in the shared schema table, write accelerator-bound
// data to accelerator memory and host-bound data to their temp buffers,
// whose one-shot flushes go through the TLB to the PCIe DMA write port.
// Completions (root object pointers) leave on the rx_notify port.
// Transmit path: the host posts a serialization command; the memory-affinity
// serializer reads the pre-serialized buffer by DMA, encodes it, reads
// accelerator-resident fields from accelerator memory and sends the message
// from its TX Arena to the transport.
// Compute units: NCU shells with descriptor rings; each kernel's streams are
// ports of this module (the kernels live in reconfigurable regions).
// Field moves (moveToAcc / moveToCPU) copy data across PCIe and update the
// schema table.
//
// Host control is a write-only MMIO port (one 256-bit write-combined word
// per command; register map below, this design's choice).  A submitTask
// write answers on mmio_resp with the notification-entry address.
//   0x00 schema entry  {entry[19:10], field[9:6], class[5:0]}
//   0x01 TLB base vpn  [51:0]
//   0x02 TLB entry     {valid[66], ppn[65:14], index[13:0]}
//   0x03 free host chunk (virtual base) [63:0]
//   0x04 free acc chunk  [33:0]
//   0x05 serialize     ser_cmd_t
//   0x06 field move    move_cmd_t
//   0x10+i submit task to CU i   cu_desc_t
//   0x20+i notification-ring base of CU i [63:0]
// Memory ports: one accelerator-memory port (HBM controller, 64-bit words,
// one read in flight), one PCIe DMA write port (bursts, 'last' ends one
// transaction) and one PCIe DMA read port.
module rpcacc_top
  import rpcacc_pkg::*;
#(
  parameter int unsigned NLANES      = 4,
  parameter int unsigned NCU         = 4,
  parameter int unsigned CHUNK_BYTES = 4096,
  parameter int unsigned TLB_ENTRIES = 16384,
  parameter int unsigned FREE_DEPTH  = 1024,
  parameter int unsigned ARENA_BYTES = 16384,
  parameter int unsigned RX_FIFO     = 4096,
  parameter int unsigned STACK_DEPTH = 16,
  parameter int unsigned RING_DEPTH  = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // transport RX (requests)
  input  logic               rx_valid,
  output logic               rx_ready,
  input  logic [7:0]         rx_data,
  input  logic               rx_last,
  // transport TX (responses)
  output logic               tx_valid,
  input  logic               tx_ready,
  output logic [63:0]        tx_data,
  output logic [7:0]         tx_keep,
  output logic               tx_last,
  // MMIO from the host
  input  logic               mmio_valid,
  output logic               mmio_ready,
  input  logic [7:0]         mmio_addr,
  input  logic [255:0]       mmio_wdata,
  output logic               mmio_resp_valid,
  output logic [63:0]        mmio_resp_data,
  // deserialization completions to the host
  output logic               rxn_valid,
  input  logic               rxn_ready,
  output rx_notify_t         rxn,
  // PCIe DMA
  output logic               pcie_wr_valid,
  input  logic               pcie_wr_ready,
  output dma_wr_t            pcie_wr_beat,
  output logic               pcie_rd_valid,
  input  logic               pcie_rd_ready,
  output dma_rd_req_t        pcie_rd_req,
  input  logic               pcie_rs_valid,
  output logic               pcie_rs_ready,
  input  logic [63:0]        pcie_rs_data,
  input  logic               pcie_rs_last,
  // accelerator off-chip memory (HBM)
  output logic               hbm_valid,
  input  logic               hbm_ready,
  output acc_req_t           hbm_req,
  input  logic               hbm_rvalid,
  input  logic [63:0]        hbm_rdata,
  // compute-unit kernels (reconfigurable regions)
  output logic [NCU-1:0]         k_in_valid,
  input  logic [NCU-1:0]         k_in_ready,
  output logic [NCU-1:0][63:0]   k_in_data,
  output logic [NCU-1:0][7:0]    k_in_keep,
  output logic [NCU-1:0]         k_in_last,
  input  logic [NCU-1:0]         k_out_valid,
  output logic [NCU-1:0]         k_out_ready,
  input  logic [NCU-1:0][63:0]   k_out_data,
  input  logic [NCU-1:0][7:0]    k_out_keep,
  input  logic [NCU-1:0]         k_out_last,
  // status
  output logic               tlb_miss,
  output logic               ser_overflow,
  output logic               move_done,
  output logic [NCU-1:0]     cu_busy,
  output logic [NLANES-1:0]  lane_idle
);
  localparam int unsigned NAM = NLANES + 2 + NCU;  // lanes, serializer, mover, CUs
  localparam int unsigned NDW = 2 + NCU;           // TLB (lanes), mover, CUs
  localparam int unsigned AM_SER = NLANES, AM_MOV = NLANES + 1, AM_CU = NLANES + 2;
  localparam int unsigned TLB_IW = $clog2(TLB_ENTRIES);

  // ---------------- MMIO decode ----------------
  logic mm_fire;
  logic ser_cmd_ready, mov_cmd_ready;
  logic [NCU-1:0] cu_sub_ready;
  logic [NCU-1:0][63:0] cu_notif_base, cu_sub_notif;
  logic [NCU-1:0] cu_sub_valid;

  always_comb begin
    mmio_ready = 1'b1;
    if (mmio_addr == 8'h05) mmio_ready = ser_cmd_ready;
    if (mmio_addr == 8'h06) mmio_ready = mov_cmd_ready;
    for (int i = 0; i < int'(NCU); i++)
      if (mmio_addr == 8'(8'h10 + i)) mmio_ready = cu_sub_ready[i];
    for (int i = 0; i < int'(NCU); i++)
      cu_sub_valid[i] = mmio_valid && (mmio_addr == 8'(8'h10 + i));
  end
  assign mm_fire = mmio_valid && mmio_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cu_notif_base <= '0; mmio_resp_valid <= 1'b0; mmio_resp_data <= '0;
    end else begin
      mmio_resp_valid <= 1'b0;
      for (int i = 0; i < int'(NCU); i++) begin
        if (mm_fire && mmio_addr == 8'(8'h20 + i)) cu_notif_base[i] <= mmio_wdata[63:0];
        if (cu_sub_valid[i] && cu_sub_ready[i]) begin
          mmio_resp_valid <= 1'b1; mmio_resp_data <= cu_sub_notif[i];
        end
      end
    end
  end

  // ---------------- schema table ----------------
  logic [NLANES-1:0][CLASS_W-1:0] sch_class;
  logic [NLANES-1:0][FIELD_W-1:0] sch_field;
  schema_entry_t [NLANES-1:0]     sch_entry;
  logic upd_en, upd_acc;
  logic [CLASS_W-1:0] upd_class;
  logic [FIELD_W-1:0] upd_field;
  schema_table #(.NRD(NLANES)) u_schema (
    .clk, .rst_n, .rd_class(sch_class), .rd_field(sch_field), .rd_entry(sch_entry),
    .wr_en(mm_fire && mmio_addr == 8'h00), .wr_class(mmio_wdata[5:0]),
    .wr_field(mmio_wdata[9:6]), .wr_entry(schema_entry_t'(mmio_wdata[19:10])),
    .upd_en, .upd_class, .upd_field, .upd_acc);

  // ---------------- free lists ----------------
  logic [NLANES-1:0] hal_req, hal_gnt, aal_req, aal_gnt;
  logic [63:0]       hal_data;
  logic [ACC_AW-1:0] aal_data;
  free_list_fifo #(.DEPTH(FREE_DEPTH), .AW(64), .NPOP(NLANES)) u_free_host (
    .clk, .rst_n, .push(mm_fire && mmio_addr == 8'h03), .push_data(mmio_wdata[63:0]),
    .pop_req(hal_req), .pop_gnt(hal_gnt), .pop_data(hal_data), .count(), .overflow());
  free_list_fifo #(.DEPTH(FREE_DEPTH), .AW(ACC_AW), .NPOP(NLANES)) u_free_acc (
    .clk, .rst_n, .push(mm_fire && mmio_addr == 8'h04), .push_data(mmio_wdata[ACC_AW-1:0]),
    .pop_req(aal_req), .pop_gnt(aal_gnt), .pop_data(aal_data), .count(), .overflow());

  // ---------------- accelerator memory arbiter ----------------
  logic [NAM-1:0] am_valid, am_ready, am_rvalid;
  acc_req_t [NAM-1:0] am_req;
  logic [63:0] am_rdata;
  acc_mem_arbiter #(.N(NAM)) u_am_arb (
    .clk, .rst_n, .s_valid(am_valid), .s_ready(am_ready), .s_req(am_req),
    .s_rvalid(am_rvalid), .s_rdata(am_rdata),
    .m_valid(hbm_valid), .m_ready(hbm_ready), .m_req(hbm_req),
    .m_rvalid(hbm_rvalid), .m_rdata(hbm_rdata));

  // ---------------- receive path ----------------
  logic [NLANES-1:0] l_valid, l_ready;
  logic [7:0]        l_data;
  logic              l_last;
  rx_dispatcher #(.NLANES(NLANES), .FIFO_DEPTH(RX_FIFO)) u_disp (
    .clk, .rst_n, .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data),
    .in_last(rx_last), .lane_idle(lane_idle), .lane_valid(l_valid), .lane_ready(l_ready),
    .lane_data(l_data), .lane_last(l_last), .fifo_level());

  logic [NLANES-1:0] ldw_valid, ldw_ready, lnt_valid, lnt_ready;
  dma_wr_t [NLANES-1:0] ldw_beat;
  rx_notify_t [NLANES-1:0] lnt;

  for (genvar g = 0; g < int'(NLANES); g++) begin : g_lane
    deserializer #(.CHUNK_BYTES(CHUNK_BYTES), .STACK_DEPTH(STACK_DEPTH)) u_deser (
      .clk, .rst_n,
      .in_valid(l_valid[g]), .in_ready(l_ready[g]), .in_data(l_data), .in_last(l_last),
      .sch_class(sch_class[g]), .sch_field(sch_field[g]), .sch_entry(sch_entry[g]),
      .hal_req(hal_req[g]), .hal_gnt(hal_gnt[g]), .hal_data(hal_data),
      .aal_req(aal_req[g]), .aal_gnt(aal_gnt[g]), .aal_data(aal_data),
      .am_valid(am_valid[g]), .am_ready(am_ready[g]), .am_req(am_req[g]),
      .dw_valid(ldw_valid[g]), .dw_ready(ldw_ready[g]), .dw_beat(ldw_beat[g]),
      .nt_valid(lnt_valid[g]), .nt_ready(lnt_ready[g]), .nt(lnt[g]),
      .idle(lane_idle[g]));
  end

  // completion merge, round-robin
  logic [$clog2(NLANES > 1 ? NLANES : 2)-1:0] nt_last;
  int nt_sel;
  always_comb begin
    nt_sel = rr_pick(32'(lnt_valid), int'(nt_last), int'(NLANES));
    rxn_valid = (nt_sel >= 0);
    rxn = (nt_sel >= 0) ? lnt[nt_sel] : '0;
    lnt_ready = '0;
    if (nt_sel >= 0) lnt_ready[nt_sel] = rxn_ready;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) nt_last <= '0;
    else if (rxn_valid && rxn_ready) nt_last <= $bits(nt_last)'(nt_sel);

  // lanes -> TLB -> main DMA write arbiter
  logic    lw_valid, lw_ready, tl_valid, tl_ready;
  dma_wr_t lw_beat, tl_beat;
  dma_wr_arbiter #(.N(NLANES)) u_lane_dw (
    .clk, .rst_n, .s_valid(ldw_valid), .s_ready(ldw_ready), .s_beat(ldw_beat),
    .m_valid(lw_valid), .m_ready(lw_ready), .m_beat(lw_beat));
  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .base_we(mm_fire && mmio_addr == 8'h01), .base_vpn(mmio_wdata[51:0]),
    .ent_we(mm_fire && mmio_addr == 8'h02), .ent_idx(mmio_wdata[TLB_IW-1:0]),
    .ent_ppn(mmio_wdata[65:14]), .ent_valid(mmio_wdata[66]),
    .in_valid(lw_valid), .in_ready(lw_ready), .in_beat(lw_beat),
    .out_valid(tl_valid), .out_ready(tl_ready), .out_beat(tl_beat), .miss(tlb_miss));

  logic [NDW-1:0] dw_valid, dw_ready;
  dma_wr_t [NDW-1:0] dw_beat;
  assign dw_valid[0] = tl_valid;
  assign dw_beat[0]  = tl_beat;
  assign tl_ready    = dw_ready[0];
  dma_wr_arbiter #(.N(NDW)) u_dw_arb (
    .clk, .rst_n, .s_valid(dw_valid), .s_ready(dw_ready), .s_beat(dw_beat),
    .m_valid(pcie_wr_valid), .m_ready(pcie_wr_ready), .m_beat(pcie_wr_beat));

  // ---------------- DMA read arbiter ----------------
  logic [1:0] dr_valid, dr_ready, rs_valid, rs_ready;
  dma_rd_req_t [1:0] dr_req;
  logic [63:0] rs_data;
  logic        rs_last;
  dma_rd_arbiter #(.N(2)) u_dr_arb (
    .clk, .rst_n, .s_valid(dr_valid), .s_ready(dr_ready), .s_req(dr_req),
    .s_rvalid(rs_valid), .s_rready(rs_ready), .s_rdata(rs_data), .s_rlast(rs_last),
    .m_valid(pcie_rd_valid), .m_ready(pcie_rd_ready), .m_req(pcie_rd_req),
    .m_rvalid(pcie_rs_valid), .m_rready(pcie_rs_ready), .m_rdata(pcie_rs_data),
    .m_rlast(pcie_rs_last));

  // ---------------- transmit path ----------------
  serializer #(.ARENA_BYTES(ARENA_BYTES)) u_ser (
    .clk, .rst_n,
    .cmd_valid(mmio_valid && mmio_addr == 8'h05), .cmd_ready(ser_cmd_ready),
    .cmd(ser_cmd_t'(mmio_wdata[$bits(ser_cmd_t)-1:0])),
    .dr_valid(dr_valid[0]), .dr_ready(dr_ready[0]), .dr_req(dr_req[0]),
    .rs_valid(rs_valid[0]), .rs_ready(rs_ready[0]), .rs_data(rs_data), .rs_last(rs_last),
    .am_valid(am_valid[AM_SER]), .am_ready(am_ready[AM_SER]), .am_req(am_req[AM_SER]),
    .am_rvalid(am_rvalid[AM_SER]), .am_rdata(am_rdata),
    .tx_valid, .tx_ready, .tx_data, .tx_keep, .tx_last, .idle(), .overflow(ser_overflow));

  // ---------------- field mover ----------------
  field_mover u_mover (
    .clk, .rst_n,
    .cmd_valid(mmio_valid && mmio_addr == 8'h06), .cmd_ready(mov_cmd_ready),
    .cmd(move_cmd_t'(mmio_wdata[$bits(move_cmd_t)-1:0])),
    .upd_en, .upd_class, .upd_field, .upd_acc,
    .dr_valid(dr_valid[1]), .dr_ready(dr_ready[1]), .dr_req(dr_req[1]),
    .rs_valid(rs_valid[1]), .rs_ready(rs_ready[1]), .rs_data(rs_data), .rs_last(rs_last),
    .am_valid(am_valid[AM_MOV]), .am_ready(am_ready[AM_MOV]), .am_req(am_req[AM_MOV]),
    .am_rvalid(am_rvalid[AM_MOV]), .am_rdata(am_rdata),
    .dw_valid(dw_valid[1]), .dw_ready(dw_ready[1]), .dw_beat(dw_beat[1]),
    .done(move_done));

  // ---------------- compute units ----------------
  for (genvar g = 0; g < int'(NCU); g++) begin : g_cu
    cu_shell #(.RING_DEPTH(RING_DEPTH)) u_cu (
      .clk, .rst_n, .notif_base(cu_notif_base[g]),
      .sub_valid(cu_sub_valid[g]), .sub_ready(cu_sub_ready[g]),
      .sub_desc(cu_desc_t'(mmio_wdata[$bits(cu_desc_t)-1:0])),
      .sub_notif_addr(cu_sub_notif[g]),
      .am_valid(am_valid[AM_CU+g]), .am_ready(am_ready[AM_CU+g]), .am_req(am_req[AM_CU+g]),
      .am_rvalid(am_rvalid[AM_CU+g]), .am_rdata(am_rdata),
      .k_in_valid(k_in_valid[g]), .k_in_ready(k_in_ready[g]), .k_in_data(k_in_data[g]),
      .k_in_keep(k_in_keep[g]), .k_in_last(k_in_last[g]),
      .k_out_valid(k_out_valid[g]), .k_out_ready(k_out_ready[g]), .k_out_data(k_out_data[g]),
      .k_out_keep(k_out_keep[g]), .k_out_last(k_out_last[g]),
      .dw_valid(dw_valid[2+g]), .dw_ready(dw_ready[2+g]), .dw_beat(dw_beat[2+g]),
      .busy(cu_busy[g]));
  end
endmodule
