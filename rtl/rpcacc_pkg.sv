// rpcacc_pkg: types, constants and helper functions shared by the RPC
// accelerator blocks.
//
// The accelerator sits in a PCIe NIC between the transport layer and the PCIe
// controller.  It deserializes incoming Protobuf RPC requests, placing every
// field either in host memory (through a per-lane temp buffer and one-shot
// DMA writes) or in the accelerator's off-chip memory, following a per-field
// "Acc" bit in the schema table.  It serializes responses from a host
// pre-serialized record stream plus fields read from accelerator memory.
//
// Fixed here (this design's own choices; the paper gives no encodings):
//  * schema table geometry: 64 classes x 16 field numbers;
//  * in-memory object layout: 16 slots of 8 bytes; slot 0 holds the presence
//    bits, slot N holds field N.  A dereference slot (bytes / sub-message)
//    holds {in_acc[63], len[62:48], addr[47:0]}; bit 63 is what the host's
//    isInAcc() tests;
//  * RPC header: 8 bytes, byte 0 class id, bytes 1..3 request id, bytes 4..7
//    body length (little endian);
//  * pre-serialized record word: {kind[63:61], field_no[60:32], len[31:0]}.
package rpcacc_pkg;

  localparam int unsigned CLASS_W     = 6;            // 64 message classes
  localparam int unsigned NUM_CLASSES = 1 << CLASS_W;
  localparam int unsigned FIELD_W     = 4;            // field numbers 1..15
  localparam int unsigned MAX_FIELDS  = 1 << FIELD_W; // slot 0 = presence bits
  localparam int unsigned OBJ_BYTES   = MAX_FIELDS * 8;
  localparam int unsigned ACC_AW      = 34;           // 8 GiB HBM + spare bit
  localparam int unsigned HOST_AW     = 64;
  localparam int unsigned HDR_BYTES   = 8;

  // Field type stored in the schema table.
  typedef enum logic [2:0] {
    FT_NONE    = 3'd0,
    FT_VARINT  = 3'd1,
    FT_FIXED64 = 3'd2,
    FT_FIXED32 = 3'd3,
    FT_BYTES   = 3'd4,
    FT_SUBMSG  = 3'd5
  } field_type_e;

  typedef struct packed {
    field_type_e          ftype;
    logic                 acc;        // 1: place in accelerator memory ("Acc" label)
    logic [CLASS_W-1:0]   sub_class;  // class of a sub-message field
  } schema_entry_t;

  // Accelerator off-chip memory request (one 64-bit word).
  typedef struct packed {
    logic              we;
    logic [ACC_AW-1:0] addr;   // byte address, 8-byte aligned
    logic [63:0]       wdata;
    logic [7:0]        strb;
  } acc_req_t;

  // One beat of a PCIe DMA write burst; 'last' closes one PCIe transaction.
  typedef struct packed {
    logic [HOST_AW-1:0] addr;  // byte address, 8-byte aligned
    logic [63:0]        data;
    logic [7:0]         strb;
    logic               last;
  } dma_wr_t;

  // PCIe DMA read request: 'len' 64-bit words starting at 'addr'.
  typedef struct packed {
    logic [HOST_AW-1:0] addr;
    logic [15:0]        len;
  } dma_rd_req_t;

  // Deserialization completion sent to the host.
  typedef struct packed {
    logic [CLASS_W-1:0] class_id;
    logic [23:0]        req_id;
    logic [63:0]        root_ptr;  // host virtual address of the root object
    logic               error;
  } rx_notify_t;

  // Serialization command written by the host after pre-serialization.
  typedef struct packed {
    logic [HOST_AW-1:0] addr;      // DMA-safe buffer (physical)
    logic [15:0]        len;       // in 64-bit words
    logic [CLASS_W-1:0] class_id;
    logic [23:0]        req_id;
  } ser_cmd_t;

  // Pre-serialized record kinds.
  typedef enum logic [2:0] {
    PK_PAD      = 3'd0,   // skipped
    PK_VARINT   = 3'd1,   // next word: raw 64-bit value
    PK_FIXED64  = 3'd2,   // next word: raw 64-bit value
    PK_FIXED32  = 3'd3,   // next word: value in bits 31:0
    PK_BYTES    = 3'd4,   // len bytes follow, padded to whole words
    PK_BYTES_ACC= 3'd5,   // next word: accelerator address; len bytes there
    PK_SUBMSG   = 3'd6    // len = encoded length of the nested message
  } pre_kind_e;

  // Compute-unit descriptor (Table 2: submitTask parameters).
  typedef struct packed {
    logic [ACC_AW-1:0] in_addr;
    logic [31:0]       in_size;     // bytes
    logic [ACC_AW-1:0] out_addr;
    logic [31:0]       out_buf_size;// bytes
  } cu_desc_t;

  // Field move command (moveToAcc / moveToCPU).
  typedef struct packed {
    logic               to_acc;
    logic [HOST_AW-1:0] host_addr;  // physical
    logic [ACC_AW-1:0]  acc_addr;
    logic [15:0]        len;        // 64-bit words
    logic [CLASS_W-1:0] class_id;
    logic [FIELD_W-1:0] field_no;
  } move_cmd_t;

  // Protobuf varint of a 64-bit value: up to 10 bytes, byte 0 first.
  typedef struct packed {
    logic [79:0] bytes;
    logic [3:0]  len;
  } varint_t;

  function automatic varint_t varint_encode(input logic [63:0] v);
    varint_t r;
    int unsigned n;
    n = 1;
    for (int i = 1; i < 10; i++)
      if ((v >> (7 * i)) != 64'd0) n = i + 1;
    r.bytes = '0;
    for (int i = 0; i < 10; i++) begin
      r.bytes[8*i +: 7] = 7'((v >> (7 * i)) & 64'h7f);
      r.bytes[8*i + 7]  = (i + 1 < int'(n));
    end
    r.len = 4'(n);
    return r;
  endfunction

  // Wire type that the Protobuf wire format uses for a pre-serialized kind.
  function automatic logic [2:0] wire_type_of(input pre_kind_e k);
    case (k)
      PK_VARINT:  return 3'd0;
      PK_FIXED64: return 3'd1;
      PK_FIXED32: return 3'd5;
      default:    return 3'd2;
    endcase
  endfunction

  // Round-robin pick: first requester after 'last' (wrapping) among the low
  // 'n' bits of 'req'; -1 when none requests.
  function automatic int rr_pick(input logic [31:0] req, input int last, input int n);
    for (int k = 1; k <= n; k++)
      if (req[(last + k) % n]) return (last + k) % n;
    return -1;
  endfunction

endpackage
