// smi_pkg: types and constants shared by the Streaming Message Interface
// transport layer.
//
// A network packet is 256 bits wide, the width of the board's network I/O
// channel. Its low 32 bits are the header, the remaining 224 bits (28 bytes)
// hold the payload. The header carries source rank, destination rank and
// port (8 bits each), the operation type (3 bits) and the number of valid
// elements in the payload (5 bits). The field widths follow the published
// description; the order of the fields inside the header word, the operation
// encodings and the routing-table entry format are this design's own choices.
package smi_pkg;

  localparam int unsigned PKT_W     = 256;  // network packet width
  localparam int unsigned HDR_W     = 32;   // header width
  localparam int unsigned PAYLOAD_W = PKT_W - HDR_W;  // 224 bits = 28 bytes
  localparam int unsigned RANK_W    = 8;
  localparam int unsigned PORT_W    = 8;
  localparam int unsigned OP_W      = 3;
  localparam int unsigned NELEM_W   = 5;
  localparam int unsigned COUNT_W   = 32;   // message length in elements

  // Operation type carried in every packet.
  typedef enum logic [OP_W-1:0] {
    OP_SEND  = 3'd0,   // payload data of a channel
    OP_SYNCH = 3'd1    // rendezvous notification / credit grant, no payload
  } smi_op_e;

  // Reduction operators selectable when a reduce channel is opened.
  typedef enum logic [1:0] {
    RED_ADD = 2'd0,
    RED_MAX = 2'd1,
    RED_MIN = 2'd2
  } smi_red_op_e;

  // Element data types of the reduce support kernel.
  typedef enum logic [0:0] {
    DT_INT   = 1'b0,   // 32-bit two's complement
    DT_FLOAT = 1'b1    // IEEE-754 binary32
  } smi_dtype_e;

  // Header, packed so that 'src' occupies bits [7:0] of the packet.
  typedef struct packed {
    logic [NELEM_W-1:0] nelem;  // [31:27]
    smi_op_e            op;     // [26:24]
    logic [PORT_W-1:0]  port;   // [23:16]
    logic [RANK_W-1:0]  dst;    // [15:8]
    logic [RANK_W-1:0]  src;    // [7:0]
  } smi_hdr_t;

  typedef struct packed {
    logic [PAYLOAD_W-1:0] payload;  // element i at payload[i*W +: W]
    smi_hdr_t             hdr;
  } smi_pkt_t;

  // Routing-table entry of a communication kernel.
  //   CKS table (indexed by destination rank): RT_NET sends to the network
  //   port of this CKS, RT_CK forwards to CKS number 'idx'.
  //   CKR table (indexed by port): RT_APP delivers to application output
  //   'idx' of this CKR, RT_CK forwards to CKR number 'idx'.
  typedef enum logic [1:0] {
    RT_NET = 2'd0,
    RT_CK  = 2'd1,
    RT_APP = 2'd2
  } smi_rt_kind_e;

  localparam int unsigned RT_IDX_W = 4;

  typedef struct packed {
    smi_rt_kind_e        kind;
    logic [RT_IDX_W-1:0] idx;
  } smi_rt_entry_t;

endpackage
