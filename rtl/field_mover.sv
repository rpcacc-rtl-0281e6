// field_mover: executes moveToAcc() / moveToCPU() and performs automatic
// field updating.  The host issues one MMIO command per move, naming the
// field's data in host memory (physical address), its place in accelerator
// memory, the length in 64-bit words, and the (class, field) it belongs to.
//  * On accepting the command the mover rewrites that field's Acc bit in the
//    schema table (set for moveToAcc, cleared for moveToCPU), so the next
//    request of the same class is deserialized straight into the new place.
//  * moveToAcc: one DMA read of the host data; each word is written to
//    accelerator memory.
//  * moveToCPU: each word is read from accelerator memory and the words are
//    sent to host memory as one DMA write burst.
// 'done' pulses when the copy has finished.  Word granularity and one access
// in flight are this design's choices.
module field_mover
  import rpcacc_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  move_cmd_t     cmd,
  // schema Acc-bit update
  output logic          upd_en,
  output logic [CLASS_W-1:0] upd_class,
  output logic [FIELD_W-1:0] upd_field,
  output logic          upd_acc,
  // DMA read (moveToAcc)
  output logic          dr_valid,
  input  logic          dr_ready,
  output dma_rd_req_t   dr_req,
  input  logic          rs_valid,
  output logic          rs_ready,
  input  logic [63:0]   rs_data,
  input  logic          rs_last,
  // accelerator memory
  output logic          am_valid,
  input  logic          am_ready,
  output acc_req_t      am_req,
  input  logic          am_rvalid,
  input  logic [63:0]   am_rdata,
  // DMA write (moveToCPU)
  output logic          dw_valid,
  input  logic          dw_ready,
  output dma_wr_t       dw_beat,
  output logic          done
);
  typedef enum logic [2:0] {S_IDLE, S_RDREQ, S_TOACC, S_ACCWR, S_ARD, S_AWAIT, S_DW} state_e;
  state_e       st;
  move_cmd_t    c;
  logic [15:0]  i;
  logic [63:0]  w;
  logic         wlast;

  always_comb begin
    cmd_ready = (st == S_IDLE);
    upd_en    = cmd_valid && cmd_ready;
    upd_class = cmd.class_id;
    upd_field = cmd.field_no;
    upd_acc   = cmd.to_acc;
    dr_valid  = (st == S_RDREQ);
    dr_req    = '{addr: c.host_addr, len: c.len};
    rs_ready  = (st == S_TOACC);
    am_valid  = (st == S_ACCWR) || (st == S_ARD);
    am_req    = '{we: (st == S_ACCWR), addr: c.acc_addr + ACC_AW'({i, 3'b000}),
                  wdata: w, strb: 8'hff};
    dw_valid  = (st == S_DW);
    dw_beat   = '{addr: c.host_addr + 64'({i, 3'b000}), data: w, strb: 8'hff,
                  last: (i == c.len - 1'b1)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; i <= '0; w <= '0; wlast <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; i <= '0;
          if (cmd.len == 0) done <= 1'b1;
          else st <= cmd.to_acc ? S_RDREQ : S_ARD;
        end
        S_RDREQ: if (dr_ready) st <= S_TOACC;
        S_TOACC: if (rs_valid) begin w <= rs_data; wlast <= rs_last; st <= S_ACCWR; end
        S_ACCWR: if (am_ready) begin
          i <= i + 1'b1;
          if (wlast || i == c.len - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_TOACC;
        end
        S_ARD:   if (am_ready) st <= S_AWAIT;
        S_AWAIT: if (am_rvalid) begin w <= am_rdata; st <= S_DW; end
        S_DW: if (dw_ready) begin
          i <= i + 1'b1;
          if (i == c.len - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_ARD;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
