// rx_dispatcher: hands each incoming RPC request to an idle deserializer
// lane.  Requests arrive from the transport layer as a byte stream with
// 'last' on the final byte of each request.  They pass through a FIFO, which
// holds requests while no lane is idle; at the start of each request the
// dispatcher picks an idle lane round-robin and stays with it until the
// request's last byte.  The FIFO depth is this design's choice.
module rx_dispatcher #(
  parameter int unsigned NLANES = 4,
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [7:0]        in_data,
  input  logic              in_last,
  input  logic [NLANES-1:0] lane_idle,
  output logic [NLANES-1:0] lane_valid,
  input  logic [NLANES-1:0] lane_ready,
  output logic [7:0]        lane_data,
  output logic              lane_last,
  output logic [$clog2(FIFO_DEPTH):0] fifo_level
);
  import rpcacc_pkg::rr_pick;
  localparam int unsigned IW = (NLANES > 1) ? $clog2(NLANES) : 1;
  logic          f_valid, f_ready, f_last;
  logic [7:0]    f_data;
  logic          lock;
  logic [IW-1:0] owner, last;
  int            pick;

  sync_fifo #(.W(9), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_valid(in_valid), .wr_ready(in_ready), .wr_data({in_last, in_data}),
    .rd_valid(f_valid), .rd_ready(f_ready), .rd_data({f_last, f_data}), .count(fifo_level));

  always_comb begin
    pick = lock ? int'(owner) : rr_pick(32'(lane_idle), int'(last), int'(NLANES));
    lane_valid = '0;
    f_ready = 1'b0;
    if (pick >= 0) begin
      lane_valid[pick] = f_valid;
      f_ready = lane_ready[pick];
    end
    lane_data = f_data;
    lane_last = f_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock <= 1'b0; owner <= '0; last <= IW'(NLANES - 1);
    end else if (pick >= 0 && f_valid && !lock) begin
      // a one-byte message completes in the cycle it starts
      lock <= !(f_ready && f_last); owner <= IW'(pick); last <= IW'(pick);
    end else if (lock && f_valid && f_ready && f_last) begin
      lock <= 1'b0;
    end
  end
endmodule
