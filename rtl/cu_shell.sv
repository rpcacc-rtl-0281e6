// cu_shell: the static wrapper of one compute unit (CU).  The RPC kernel
// itself is user logic in a partial-reconfiguration region and talks to this
// shell through two byte-keeped 64-bit streams; the shell provides the
// host-facing task interface of the paper's CU API:
//  * Descriptor ring (on-chip SRAM): submitTask() is an MMIO write of
//    {input address, input size, output address, output buffer size}.  The
//    shell answers with the host address of the notification entry that
//    will signal completion (notif_base + 8 * ring slot).
//  * When idle the shell takes the next descriptor, reads the input from
//    accelerator memory and streams it to the kernel, and writes the kernel's
//    output to the output address (bytes beyond the output buffer are
//    dropped).
//  * Notification ring (host memory): when the kernel has consumed all input
//    and sent its last output beat, one DMA write stores
//    {done[63], result length[31:0]} into the notification entry (the
//    length counts the bytes actually stored in the output buffer); poll()
//    spins on it.
// Kernel stream: k_in_* carries input words (keep = valid bytes from byte 0,
// last on the final word); k_out_* returns output the same way.  A kernel
// must consume its whole input and end its output with 'last'.  Ring depth
// and encodings are this design's choices.
module cu_shell
  import rpcacc_pkg::*;
#(
  parameter int unsigned RING_DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [63:0]   notif_base,
  // submitTask
  input  logic          sub_valid,
  output logic          sub_ready,
  input  cu_desc_t      sub_desc,
  output logic [63:0]   sub_notif_addr,
  // accelerator memory
  output logic          am_valid,
  input  logic          am_ready,
  output acc_req_t      am_req,
  input  logic          am_rvalid,
  input  logic [63:0]   am_rdata,
  // kernel streams
  output logic          k_in_valid,
  input  logic          k_in_ready,
  output logic [63:0]   k_in_data,
  output logic [7:0]    k_in_keep,
  output logic          k_in_last,
  input  logic          k_out_valid,
  output logic          k_out_ready,
  input  logic [63:0]   k_out_data,
  input  logic [7:0]    k_out_keep,
  input  logic          k_out_last,
  // notification write
  output logic          dw_valid,
  input  logic          dw_ready,
  output dma_wr_t       dw_beat,
  output logic          busy
);
  localparam int unsigned RW = $clog2(RING_DEPTH);
  typedef struct packed { cu_desc_t d; logic [RW-1:0] slot; } ring_t;

  logic [RW-1:0] sub_slot;
  logic          r_valid, r_ready;
  ring_t         r_head;
  sync_fifo #(.W($bits(ring_t)), .DEPTH(RING_DEPTH)) u_ring (
    .clk, .rst_n, .wr_valid(sub_valid), .wr_ready(sub_ready), .wr_data({sub_desc, sub_slot}),
    .rd_valid(r_valid), .rd_ready(r_ready), .rd_data(r_head), .count());

  assign sub_notif_addr = notif_base + 64'({sub_slot, 3'b000});

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_NOTIFY} state_e;
  state_e           st;
  cu_desc_t         d;
  logic [RW-1:0]    slot;
  logic [31:0]      in_rem, out_len;
  logic [ACC_AW-1:0] raddr, waddr;
  logic             rd_out;            // a read is outstanding
  logic             ibuf_v;  logic [63:0] ibuf;  logic [7:0] ikeep;  logic ilast;
  logic             opend;   logic [63:0] oword; logic [7:0] okeep;  logic olast;
  logic             out_done;
  logic [31:0]      obytes;

  function automatic logic [7:0] keep_of(input logic [31:0] n);
    return (n >= 32'd8) ? 8'hff : 8'((16'd1 << n[3:0]) - 16'd1);
  endfunction

  always_comb begin
    r_ready = (st == S_IDLE);
    am_valid = 1'b0;
    am_req = '0;
    obytes = '0;
    if (st == S_RUN) begin
      if (opend) begin
        am_valid = 1'b1;
        // strobes limited to what still fits in the output buffer
        am_req = '{we: 1'b1, addr: waddr, wdata: oword,
                   strb: okeep & keep_of((out_len < d.out_buf_size) ? d.out_buf_size - out_len : 32'd0)};
        obytes = 32'($countones(am_req.strb));
      end else if (in_rem != 0 && !ibuf_v && !rd_out) begin
        am_valid = 1'b1;
        am_req = '{we: 1'b0, addr: raddr, wdata: '0, strb: '0};
      end
    end
    k_in_valid = ibuf_v;
    k_in_data  = ibuf;
    k_in_keep  = ikeep;
    k_in_last  = ilast;
    k_out_ready = (st == S_RUN) && !opend && !out_done;
    dw_valid = (st == S_NOTIFY);
    dw_beat  = '{addr: notif_base + 64'({slot, 3'b000}), data: {1'b1, 31'd0, out_len},
                 strb: 8'hff, last: 1'b1};
    busy = (st != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; d <= '0; slot <= '0; in_rem <= '0; out_len <= '0; raddr <= '0;
      waddr <= '0; rd_out <= 1'b0; ibuf_v <= 1'b0; ibuf <= '0; ikeep <= '0; ilast <= 1'b0;
      opend <= 1'b0; oword <= '0; okeep <= '0; olast <= 1'b0; out_done <= 1'b0; sub_slot <= '0;
    end else begin
      if (sub_valid && sub_ready) sub_slot <= sub_slot + 1'b1;
      case (st)
        S_IDLE: if (r_valid) begin
          d <= r_head.d; slot <= r_head.slot;
          in_rem <= r_head.d.in_size; raddr <= r_head.d.in_addr;
          waddr <= r_head.d.out_addr; out_len <= '0; out_done <= 1'b0;
          st <= S_RUN;
        end
        S_RUN: begin
          // memory port
          if (am_valid && am_ready) begin
            if (am_req.we) begin
              opend <= 1'b0;
              waddr <= waddr + ACC_AW'(8);
              out_len <= out_len + obytes;
              if (olast) out_done <= 1'b1;
            end else rd_out <= 1'b1;
          end
          if (rd_out && am_rvalid) begin
            rd_out <= 1'b0;
            ibuf_v <= 1'b1; ibuf <= am_rdata;
            ikeep  <= keep_of(in_rem);
            ilast  <= (in_rem <= 32'd8);
            in_rem <= (in_rem <= 32'd8) ? 32'd0 : in_rem - 32'd8;
            raddr  <= raddr + ACC_AW'(8);
          end
          if (ibuf_v && k_in_ready) ibuf_v <= 1'b0;
          if (k_out_valid && k_out_ready) begin
            opend <= 1'b1; oword <= k_out_data; okeep <= k_out_keep; olast <= k_out_last;
          end
          if (out_done && in_rem == 0 && !ibuf_v && !rd_out) st <= S_NOTIFY;
        end
        S_NOTIFY: if (dw_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
