// temp_buffer: the per-deserializer Temp Buffer.  It mirrors the lane's
// current host-memory chunk: byte offset k of the buffer is byte offset k of
// the chunk.  Host-bound fields are appended to it, and the lane copies the
// filled part to host memory with one DMA burst ("one-shot DMA write") when
// the chunk is used up or the request is finished.
//
// Storage is DEPTH_BYTES/8 words of 64 bits with a byte-enable write port and
// a synchronous read port (data one cycle after the address), i.e. one
// simple-dual-port SRAM.  The paper gives the 4 KB size; append-only
// allocation is kept by the lane, which owns the append pointer.
module temp_buffer #(
  parameter int unsigned DEPTH_BYTES = 4096,
  localparam int unsigned WORDS = DEPTH_BYTES / 8,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [63:0]   wr_data,
  input  logic [7:0]    wr_strb,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [63:0]   rd_data
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int b = 0; b < 8; b++)
        if (wr_strb[b]) mem[wr_addr][8*b +: 8] <= wr_data[8*b +: 8];
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
