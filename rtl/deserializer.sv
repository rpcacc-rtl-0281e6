// deserializer: one lane of the target-aware deserializer.
//
// A lane takes one RPC request at a time as a byte stream (RPC header, then
// the Protobuf body), decodes it field by field and builds the in-memory
// objects.  For every field the shared schema table says where the result
// belongs: host memory or accelerator off-chip memory (the "Acc" bit).
//  * Host-bound data is appended to the lane's Temp Buffer, which mirrors the
//    lane's current 4 KB host chunk.  The buffer is copied to host memory in
//    one DMA burst when the chunk is used up or the request is finished
//    ("one-shot DMA write"), instead of one PCIe write per field.
//  * Accelerator-bound data is written straight to accelerator memory, and
//    the parent's field slot points to it (bit 63 of the pointer set).
//  * A sub-message pushes the parent context on an SRAM stack; the child
//    object is built, written to its target memory, then the parent is
//    popped and its slot updated with the child's pointer.
// Chunks come from the two free-list FIFOs; a lane keeps its chunks across
// requests and takes a new one only when the current one is full.  At the
// end the lane flushes the temp buffer and emits a completion record with
// the host virtual address of the root object.
//
// Object layout (this design's choice): MAX_FIELDS slots of 8 bytes, slot 0
// = presence bits, slot N = field N; scalar values are stored in the slot,
// bytes / sub-messages as {in_acc, len[14:0], addr[47:0]}.  A repeated field
// keeps its last occurrence (repeated fields are not collected into lists).
//
// Interface: byte stream in (valid/ready, one byte per cycle); schema lookup
// (combinational); chunk pop ports (req/gnt); accelerator memory write port
// and DMA write port (valid/ready, DMA addresses are host virtual, the TLB
// follows); completion port (valid/ready).  Throughput: one input byte per
// cycle while decoding; stalls while an accelerator write is pending, while
// an object is written out (one word per cycle) and during a flush (two
// cycles per 64-bit word).
module deserializer
  import rpcacc_pkg::*;
#(
  parameter int unsigned CHUNK_BYTES = 4096,
  parameter int unsigned STACK_DEPTH = 16,
  localparam int unsigned PW = $clog2(CHUNK_BYTES) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // request byte stream
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [7:0]         in_data,
  input  logic               in_last,
  // schema table read port
  output logic [CLASS_W-1:0] sch_class,
  output logic [FIELD_W-1:0] sch_field,
  input  schema_entry_t      sch_entry,
  // free-list pops
  output logic               hal_req,
  input  logic               hal_gnt,
  input  logic [63:0]        hal_data,
  output logic               aal_req,
  input  logic               aal_gnt,
  input  logic [ACC_AW-1:0]  aal_data,
  // accelerator memory writes
  output logic               am_valid,
  input  logic               am_ready,
  output acc_req_t           am_req,
  // DMA writes to host memory (virtual addresses)
  output logic               dw_valid,
  input  logic               dw_ready,
  output dma_wr_t            dw_beat,
  // completion
  output logic               nt_valid,
  input  logic               nt_ready,
  output rx_notify_t         nt,
  output logic               idle
);
  typedef enum logic [4:0] {
    S_IDLE, S_HALLOC, S_AALLOC, S_HDR, S_TAG, S_VARINT, S_FIX, S_LEN, S_SKIP,
    S_BALLOC, S_BDATA, S_PUSH, S_CHECK, S_EMIT_ALLOC, S_EMIT, S_POP,
    S_FL_RD, S_FL_WR, S_NEWH, S_NEWA, S_DRAIN, S_NOTIFY
  } state_e;

  typedef struct packed {
    logic [MAX_FIELDS-1:0][63:0] obj;
    logic [CLASS_W-1:0]          cls;
    logic [31:0]                 endp;
    logic                        acc;
    logic [FIELD_W-1:0]          fno;
  } ctx_t;

  state_e st, ret;
  ctx_t   cur;
  logic [63:0]        hchunk;  logic [PW-1:0] hptr, hflushed;  logic hvalid;
  logic [ACC_AW-1:0]  achunk;  logic [PW-1:0] aptr;            logic avalid;
  logic [31:0]        pos, cnt;
  logic [23:0]        msg_len;   // low bytes of the body length while the header is read
  logic [2:0]         hcnt;
  logic [63:0]        acc_v;     // varint / fixed accumulator
  logic [3:0]         vbytes;
  logic [31:0]        tag_fno;
  schema_entry_t      ent;       // schema entry of the field being decoded
  logic               tgt_acc;   // target of the bytes field being streamed
  logic [PW-1:0]      dptr;
  logic [63:0]        slot_val;
  logic [63:0]        wbuf;  logic [7:0] wstrb;  logic wpend;
  logic [PW-1:0]      wword;     // byte offset of the pending word
  logic               last_seen;
  logic [4:0]         eidx;
  logic [PW-1:0]      eptr;
  logic               e_acc;
  logic [63:0]        root_ptr, child_ptr;
  logic [PW-4:0]      fw, fw_end;
  logic               err;
  logic [23:0]        req_id;

  // stack
  logic stk_push, stk_pop, stk_empty, stk_full;
  ctx_t stk_top;
  schema_stack #(.W($bits(ctx_t)), .DEPTH(STACK_DEPTH)) u_stack (
    .clk, .rst_n, .push(stk_push), .push_data(cur), .pop(stk_pop), .top(stk_top),
    .empty(stk_empty), .full(stk_full), .level(), .overflow());

  // temp buffer
  logic        tb_we, tb_re;
  logic [PW-5:0] tb_waddr, tb_raddr;
  logic [63:0] tb_wdata, tb_rdata;
  logic [7:0]  tb_wstrb;
  temp_buffer #(.DEPTH_BYTES(CHUNK_BYTES)) u_tbuf (
    .clk, .wr_en(tb_we), .wr_addr(tb_waddr), .wr_data(tb_wdata), .wr_strb(tb_wstrb),
    .rd_en(tb_re), .rd_addr(tb_raddr), .rd_data(tb_rdata));

  function automatic logic [PW-1:0] align8(input logic [31:0] n);
    return PW'((n + 32'd7) & ~32'd7);
  endfunction

  logic in_fire;
  assign in_fire = in_valid && in_ready;
  assign sch_class = cur.cls;
  assign sch_field = tag_fno[FIELD_W-1:0];
  assign idle = (st == S_IDLE);

  // ---------------- combinational outputs ----------------
  always_comb begin
    in_ready = 1'b0;
    case (st)
      S_HDR, S_TAG, S_VARINT, S_FIX, S_LEN, S_SKIP, S_DRAIN: in_ready = 1'b1;
      S_BDATA: in_ready = (cnt != 0) && !wpend;
      default: ;
    endcase
    hal_req  = (st == S_HALLOC) || (st == S_NEWH);
    aal_req  = (st == S_AALLOC) || (st == S_NEWA);
    tb_we = 1'b0; tb_waddr = '0; tb_wdata = '0; tb_wstrb = '0;
    am_valid = 1'b0; am_req = '0;
    if (st == S_BDATA && !tgt_acc && in_fire) begin
      tb_we = 1'b1; tb_waddr = dptr[PW-2:3]; tb_wdata = {8{in_data}};
      tb_wstrb = 8'(1) << dptr[2:0];
    end
    if (st == S_BDATA && wpend) begin
      am_valid = 1'b1;
      am_req = '{we: 1'b1, addr: achunk + ACC_AW'(wword),
                 wdata: wbuf, strb: wstrb};
    end
    if (st == S_EMIT) begin
      if (e_acc) begin
        am_valid = 1'b1;
        am_req = '{we: 1'b1, addr: achunk + ACC_AW'(eptr) + ACC_AW'({eidx, 3'b000}),
                   wdata: cur.obj[eidx[FIELD_W-1:0]], strb: 8'hff};
      end else begin
        tb_we = 1'b1; tb_waddr = eptr[PW-2:3] + (PW-4)'(eidx); tb_wstrb = 8'hff;
        tb_wdata = cur.obj[eidx[FIELD_W-1:0]];
      end
    end
    tb_re = (st == S_FL_RD);
    tb_raddr = fw[PW-5:0];
    dw_valid = (st == S_FL_WR);
    dw_beat  = '{addr: hchunk + 64'({fw, 3'b000}), data: tb_rdata, strb: 8'hff,
                 last: (fw == fw_end)};
    nt_valid = (st == S_NOTIFY);
    nt = '{class_id: cur.cls, req_id: req_id, root_ptr: root_ptr, error: err};
    stk_push = 1'b0; stk_pop = 1'b0;
    if (st == S_PUSH && !stk_full) stk_push = 1'b1;
    if (st == S_POP) stk_pop = 1'b1;
  end

  // bytes-field write word completes (acc target) when its last lane fills
  // or the field ends
  logic [PW-1:0] dptr_n;
  assign dptr_n = dptr + 1'b1;

  // value accumulation for the current input byte: varint (7 bits per byte)
  // or little-endian fixed field (8 bits per byte)
  logic [63:0] vv, v;
  logic        vdone, kn;
  assign vv    = acc_v | (64'(in_data[6:0]) << (7 * vbytes));
  assign v     = (st == S_FIX) ? (acc_v | (64'(in_data) << (8 * vbytes))) : vv;
  assign vdone = (st == S_FIX) ? (cnt == 32'd1) : !in_data[7];
  assign kn    = (tag_fno != 0) && (tag_fno < MAX_FIELDS) && (sch_entry.ftype != FT_NONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; cur <= '0;
      hchunk <= '0; hptr <= '0; hflushed <= '0; hvalid <= 1'b0;
      achunk <= '0; aptr <= '0; avalid <= 1'b0;
      pos <= '0; msg_len <= '0; cnt <= '0; hcnt <= '0; acc_v <= '0; vbytes <= '0;
      tag_fno <= '0; ent <= '0; tgt_acc <= 1'b0;
      dptr <= '0; slot_val <= '0; wbuf <= '0; wstrb <= '0; wpend <= 1'b0;
      wword <= '0; last_seen <= 1'b0;
      eidx <= '0; eptr <= '0; e_acc <= 1'b0; root_ptr <= '0; child_ptr <= '0;
      fw <= '0; fw_end <= '0; err <= 1'b0; req_id <= '0;
    end else begin
      if (in_fire && st != S_HDR && st != S_DRAIN) pos <= pos + 1'b1;
      if (in_fire && in_last) last_seen <= 1'b1;
      case (st)
        S_IDLE: if (in_valid) begin
          err <= 1'b0; pos <= '0; hcnt <= '0; last_seen <= 1'b0;
          st  <= hvalid ? (avalid ? S_HDR : S_AALLOC) : S_HALLOC;
        end
        S_HALLOC: if (hal_gnt) begin
          hchunk <= hal_data; hptr <= '0; hflushed <= '0; hvalid <= 1'b1;
          st <= avalid ? S_HDR : S_AALLOC;
        end
        S_AALLOC: if (aal_gnt) begin
          achunk <= aal_data; aptr <= '0; avalid <= 1'b1; st <= S_HDR;
        end
        S_HDR: if (in_fire) begin
          hcnt <= hcnt + 1'b1;
          case (hcnt)
            3'd0: cur.cls <= in_data[CLASS_W-1:0];
            3'd1: req_id[7:0]   <= in_data;
            3'd2: req_id[15:8]  <= in_data;
            3'd3: req_id[23:16] <= in_data;
            3'd4: msg_len[7:0]  <= in_data;
            3'd5: msg_len[15:8] <= in_data;
            3'd6: msg_len[23:16] <= in_data;
            default: begin
              cur.obj <= '0; cur.acc <= 1'b0; cur.fno <= '0;
              cur.endp <= {in_data, msg_len[23:0]};
              st <= S_CHECK;
            end
          endcase
        end
        S_TAG: if (in_fire) begin
          acc_v  <= acc_v | (64'(in_data[6:0]) << (7 * vbytes));
          vbytes <= vbytes + 1'b1;
          if (!in_data[7]) begin
            tag_fno <= vv[34:3];
            acc_v <= '0; vbytes <= '0;
            case (vv[2:0])
              3'd0: st <= S_VARINT;
              3'd1: begin st <= S_FIX; cnt <= 32'd8; end
              3'd5: begin st <= S_FIX; cnt <= 32'd4; end
              3'd2: st <= S_LEN;
              default: begin err <= 1'b1; st <= S_DRAIN; end
            endcase
          end
        end
        S_VARINT, S_LEN, S_FIX: if (in_fire) begin
          if (st == S_FIX) cnt <= cnt - 1'b1;
          acc_v  <= v;
          vbytes <= vbytes + 1'b1;
          if (vdone) begin
            ent <= sch_entry;
            acc_v <= '0; vbytes <= '0;
            if (st == S_LEN) begin
              cnt <= v[31:0];
              if (kn && sch_entry.ftype == FT_SUBMSG)      st <= S_PUSH;
              else if (kn && sch_entry.ftype == FT_BYTES)  st <= S_BALLOC;
              else if (v[31:0] == 0)                       st <= S_CHECK;
              else                                         st <= S_SKIP;
            end else begin
              if (kn && sch_entry.ftype != FT_BYTES && sch_entry.ftype != FT_SUBMSG) begin
                cur.obj[tag_fno[FIELD_W-1:0]] <= v;
                cur.obj[0][6'(tag_fno[FIELD_W-1:0])] <= 1'b1;
              end
              st <= S_CHECK;
            end
          end
        end
        S_SKIP: if (in_fire) begin
          cnt <= cnt - 1'b1;
          if (cnt == 32'd1) st <= S_CHECK;
        end
        S_BALLOC: begin
          tgt_acc <= ent.acc;
          if (cnt > CHUNK_BYTES) begin
            err <= 1'b1; st <= S_DRAIN;
          end else if (!ent.acc) begin
            if (32'(hptr) + cnt > CHUNK_BYTES) begin
              ret <= S_BALLOC; st <= S_FL_RD;
              fw <= hflushed[PW-1:3]; fw_end <= hptr[PW-1:3] - 1'b1;
              if (hflushed == hptr) st <= S_NEWH;
            end else begin
              slot_val <= {1'b0, cnt[14:0], hchunk[47:0] + 48'(hptr)};
              dptr <= hptr; hptr <= hptr + align8(cnt);
              st <= S_BDATA;
            end
          end else begin
            if (32'(aptr) + cnt > CHUNK_BYTES) begin
              ret <= S_BALLOC; st <= S_NEWA;
            end else begin
              slot_val <= {1'b1, cnt[14:0], 48'(achunk) + 48'(aptr)};
              dptr <= aptr; aptr <= aptr + align8(cnt);
              st <= S_BDATA;
            end
          end
        end
        S_BDATA: begin
          if (in_fire) begin
            cnt  <= cnt - 1'b1;
            dptr <= dptr_n;
            if (tgt_acc) begin
              wbuf[8*dptr[2:0] +: 8] <= in_data;
              wstrb[dptr[2:0]] <= 1'b1;
              if (dptr[2:0] == 3'd7 || cnt == 32'd1) wpend <= 1'b1;
              wword <= {dptr[PW-1:3], 3'b000};
            end
          end
          if (wpend && am_ready) begin
            wpend <= 1'b0; wstrb <= '0;
          end
          if (cnt == 0 && !wpend) begin
            cur.obj[tag_fno[FIELD_W-1:0]] <= slot_val;
            cur.obj[0][6'(tag_fno[FIELD_W-1:0])] <= 1'b1;
            st <= S_CHECK;
          end
        end
        S_PUSH: begin
          if (stk_full) begin
            err <= 1'b1; st <= S_DRAIN;
          end else begin
            cur.obj  <= '0;
            cur.cls  <= ent.sub_class;
            cur.endp <= pos + cnt;
            cur.acc  <= ent.acc;
            cur.fno  <= tag_fno[FIELD_W-1:0];
            st <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (pos == cur.endp) st <= S_EMIT_ALLOC;
          else if (pos > cur.endp) begin err <= 1'b1; st <= S_DRAIN; end
          else st <= S_TAG;
          acc_v <= '0; vbytes <= '0;
        end
        S_EMIT_ALLOC: begin
          e_acc <= cur.acc;
          eidx  <= '0;
          if (!cur.acc) begin
            if (32'(hptr) + OBJ_BYTES > CHUNK_BYTES) begin
              ret <= S_EMIT_ALLOC; st <= S_FL_RD;
              fw <= hflushed[PW-1:3]; fw_end <= hptr[PW-1:3] - 1'b1;
              if (hflushed == hptr) st <= S_NEWH;
            end else begin
              child_ptr <= {1'b0, 15'(OBJ_BYTES), hchunk[47:0] + 48'(hptr)};
              eptr <= hptr; hptr <= hptr + PW'(OBJ_BYTES);
              st <= S_EMIT;
            end
          end else begin
            if (32'(aptr) + OBJ_BYTES > CHUNK_BYTES) begin
              ret <= S_EMIT_ALLOC; st <= S_NEWA;
            end else begin
              child_ptr <= {1'b1, 15'(OBJ_BYTES), 48'(achunk) + 48'(aptr)};
              eptr <= aptr; aptr <= aptr + PW'(OBJ_BYTES);
              st <= S_EMIT;
            end
          end
        end
        S_EMIT: if (!e_acc || am_ready) begin
          eidx <= eidx + 1'b1;
          if (eidx == 5'(MAX_FIELDS - 1)) begin
            if (!stk_empty) st <= S_POP;
            else begin
              root_ptr <= {16'd0, child_ptr[47:0]};
              ret <= S_NOTIFY;
              fw <= hflushed[PW-1:3]; fw_end <= hptr[PW-1:3] - 1'b1;
              st <= (hflushed == hptr) ? S_NOTIFY : S_FL_RD;
            end
          end
        end
        S_POP: begin
          cur <= stk_top;
          cur.obj[cur.fno] <= child_ptr;
          cur.obj[0][6'(cur.fno)] <= 1'b1;
          st <= S_CHECK;
        end
        S_FL_RD: st <= S_FL_WR;
        S_FL_WR: if (dw_ready) begin
          if (fw == fw_end) begin
            hflushed <= hptr;
            st <= (ret == S_NOTIFY) ? S_NOTIFY : S_NEWH;
          end else begin
            fw <= fw + 1'b1; st <= S_FL_RD;
          end
        end
        S_NEWH: if (hal_gnt) begin
          hchunk <= hal_data; hptr <= '0; hflushed <= '0; st <= ret;
        end
        S_NEWA: if (aal_gnt) begin
          achunk <= aal_data; aptr <= '0; st <= ret;
        end
        S_DRAIN: if (last_seen || (in_fire && in_last)) st <= S_NOTIFY;
        S_NOTIFY: if (nt_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
