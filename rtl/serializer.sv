// serializer: the memory-affinity serializer (accelerator side of the
// collaborative CPU-accelerator serialization).
//
// The host has already walked the response object and copied every field
// that lives in host memory, unencoded, into a contiguous DMA-safe buffer
// ("pre-serialization"); for a field that lives in accelerator memory it
// wrote only the pointer and the length.  It then posts a command with the
// buffer's address and length.  The serializer:
//  1. reserves the 8-byte RPC header at the start of the TX Arena;
//  2. reads the pre-serialized buffer with one DMA read and walks its records,
//     doing the Protobuf encoding (tag varint, varint values, length
//     prefixes, fixed-width little-endian values) and appending the result
//     to the arena;
//  3. for a record pointing into accelerator memory, reads those bytes from
//     accelerator memory and appends them;
//  4. writes the header (class, request id, body length) and streams the
//     arena to the transport layer, 8 bytes per beat.
// Record format (this design's choice; the paper gives none): a header word
// {kind[63:61], field_no[60:32], len[31:0]} followed by a value word, inline
// data words or an accelerator address, see rpcacc_pkg.  A sub-message is a
// header record carrying its encoded length (computed by the host).
//
// Timing: one pre-serialized 64-bit word per cycle; a scalar field is
// encoded in the cycle its value word arrives.  The paper encodes a 512-bit
// beat per cycle; this datapath is 64 bits wide.  Accelerator-memory reads
// are one word at a time.
module serializer
  import rpcacc_pkg::*;
#(
  parameter int unsigned ARENA_BYTES = 16384,
  localparam int unsigned AW = $clog2(ARENA_BYTES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command from the host (MMIO)
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  ser_cmd_t      cmd,
  // DMA read of the pre-serialized buffer
  output logic          dr_valid,
  input  logic          dr_ready,
  output dma_rd_req_t   dr_req,
  input  logic          rs_valid,
  output logic          rs_ready,
  input  logic [63:0]   rs_data,
  input  logic          rs_last,
  // accelerator memory reads
  output logic          am_valid,
  input  logic          am_ready,
  output acc_req_t      am_req,
  input  logic          am_rvalid,
  input  logic [63:0]   am_rdata,
  // serialized message to the transport layer
  output logic          tx_valid,
  input  logic          tx_ready,
  output logic [63:0]   tx_data,
  output logic [7:0]    tx_keep,
  output logic          tx_last,
  output logic          idle,
  output logic          overflow
);
  typedef enum logic [3:0] {
    S_IDLE, S_RDREQ, S_REC, S_VAL, S_INL, S_ACC_RD, S_ACC_WAIT, S_HDR,
    S_TX_RD, S_TX_OUT
  } state_e;

  state_e          st;
  ser_cmd_t        c;
  logic [AW:0]     wptr, txa;
  pre_kind_e       kind;
  logic [28:0]     fno;
  logic [31:0]     brem;
  logic [ACC_AW-1:0] aaddr;
  logic            seen_last;

  // arena
  logic         a_we, a_re;
  logic [AW-1:0] a_waddr, a_raddr;
  logic [4:0]   a_cnt;
  logic [127:0] a_wdata;
  logic [63:0]  a_rdata;
  tx_arena #(.BYTES(ARENA_BYTES)) u_arena (
    .clk, .wr_en(a_we), .wr_addr(a_waddr), .wr_cnt(a_cnt), .wr_data(a_wdata),
    .rd_en(a_re), .rd_addr(a_raddr), .rd_data(a_rdata));

  // Encoded tag followed by an encoded/raw value: {bytes, count}.
  function automatic logic [132:0] tag_and(input logic [28:0] f, input logic [2:0] wtype,
                                           input logic [79:0] vb, input logic [3:0] vl);
    varint_t t;
    logic [127:0] d;
    t = varint_encode({32'd0, f, wtype});
    d = 128'(t.bytes[39:0]) | (128'(vb) << (8 * t.len));
    return {d, 5'(t.len) + 5'(vl)};
  endfunction

  logic        rs_fire;
  logic [132:0] enc;
  varint_t     lrec, v, l;  // record length, value and field length as varints
  logic [31:0] blen;        // body length written into the header
  logic [3:0]  nb;          // bytes of the current data word still needed
  assign rs_fire = rs_valid && rs_ready;
  assign nb = (brem > 32'd8) ? 4'd8 : brem[3:0];
  assign idle = (st == S_IDLE);

  always_comb begin
    cmd_ready = (st == S_IDLE);
    dr_valid  = (st == S_RDREQ);
    dr_req    = '{addr: c.addr, len: c.len};
    rs_ready  = (st == S_REC) || (st == S_VAL) || (st == S_INL);
    am_valid  = (st == S_ACC_RD);
    am_req    = '{we: 1'b0, addr: aaddr, wdata: '0, strb: '0};
    a_we = 1'b0; a_waddr = wptr[AW-1:0]; a_cnt = '0; a_wdata = '0;
    enc = '0;
    lrec = varint_encode({32'd0, rs_data[31:0]});
    v    = varint_encode(rs_data);
    l    = varint_encode({32'd0, brem});
    blen = 32'(wptr) - 32'd8;
    if (st == S_REC && rs_fire) begin
      if (pre_kind_e'(rs_data[63:61]) == PK_BYTES || pre_kind_e'(rs_data[63:61]) == PK_SUBMSG) begin
        enc = tag_and(rs_data[60:32], 3'd2, lrec.bytes, lrec.len);
        a_we = 1'b1; a_cnt = enc[4:0]; a_wdata = enc[132:5];
      end
    end
    if (st == S_VAL && rs_fire) begin
      case (kind)
        PK_VARINT:  enc = tag_and(fno, 3'd0, v.bytes, v.len);
        PK_FIXED64: enc = tag_and(fno, 3'd1, {16'd0, rs_data}, 4'd8);
        PK_FIXED32: enc = tag_and(fno, 3'd5, {48'd0, rs_data[31:0]}, 4'd4);
        default:    enc = tag_and(fno, 3'd2, l.bytes, l.len);   // PK_BYTES_ACC
      endcase
      a_we = 1'b1; a_cnt = enc[4:0]; a_wdata = enc[132:5];
    end
    if (st == S_INL && rs_fire) begin
      a_we = 1'b1; a_cnt = 5'(nb); a_wdata = 128'(rs_data);
    end
    if (st == S_ACC_WAIT && am_rvalid) begin
      a_we = 1'b1; a_cnt = 5'(nb); a_wdata = 128'(am_rdata);
    end
    if (st == S_HDR) begin
      a_we = 1'b1; a_waddr = '0; a_cnt = 5'd8;
      a_wdata = 128'({blen, c.req_id, 2'b00, c.class_id});
    end
    a_re    = (st == S_TX_RD);
    a_raddr = txa[AW-1:0];
    tx_valid = (st == S_TX_OUT);
    tx_data  = a_rdata;
    tx_last  = (32'(txa) + 32'd8 >= 32'(wptr));
    tx_keep  = tx_last ? 8'((16'd1 << (32'(wptr) - 32'(txa))) - 16'd1) : 8'hff;
  end

  // after a record completes: next record, or finish if the stream ended
  function automatic state_e after_rec(input logic last_word);
    return last_word ? S_HDR : S_REC;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; wptr <= '0; txa <= '0; kind <= PK_PAD; fno <= '0;
      brem <= '0; aaddr <= '0; seen_last <= 1'b0; overflow <= 1'b0;
    end else begin
      if (a_we && st != S_HDR) begin
        if (32'(wptr) + 32'(a_cnt) > ARENA_BYTES) overflow <= 1'b1;
        wptr <= wptr + (AW+1)'(a_cnt);
      end
      if (rs_fire && rs_last) seen_last <= 1'b1;
      case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; wptr <= (AW+1)'(8); seen_last <= 1'b0; overflow <= 1'b0;
          st <= (cmd.len == 0) ? S_HDR : S_RDREQ;
        end
        S_RDREQ: if (dr_ready) st <= S_REC;
        S_REC: if (rs_fire) begin
          kind <= pre_kind_e'(rs_data[63:61]);
          fno  <= rs_data[60:32];
          brem <= rs_data[31:0];
          case (pre_kind_e'(rs_data[63:61]))
            PK_VARINT, PK_FIXED64, PK_FIXED32, PK_BYTES_ACC:
              st <= rs_last ? S_HDR : S_VAL;    // a truncated record is dropped
            PK_BYTES: st <= (rs_data[31:0] == 0 || rs_last) ? after_rec(rs_last) : S_INL;
            default:  st <= after_rec(rs_last);
          endcase
        end
        S_VAL: if (rs_fire) begin
          if (kind == PK_BYTES_ACC && brem != 0) begin
            aaddr <= rs_data[ACC_AW-1:0];
            st <= S_ACC_RD;
          end else st <= after_rec(rs_last);
        end
        S_INL: if (rs_fire) begin
          brem <= brem - 32'(nb);
          if (brem <= 32'd8 || rs_last) st <= after_rec(rs_last);
        end
        S_ACC_RD: if (am_ready) st <= S_ACC_WAIT;
        S_ACC_WAIT: if (am_rvalid) begin
          brem  <= brem - 32'(nb);
          aaddr <= aaddr + ACC_AW'(8);
          if (brem <= 32'd8) st <= after_rec(seen_last);
          else st <= S_ACC_RD;
        end
        S_HDR: begin txa <= '0; st <= S_TX_RD; end
        S_TX_RD: st <= S_TX_OUT;
        S_TX_OUT: if (tx_ready) begin
          if (tx_last) st <= S_IDLE;
          else begin txa <= txa + (AW+1)'(8); st <= S_TX_RD; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
