// smi_push: send-channel endpoint (SMI_Open_send_channel + SMI_Push).
//
// Opening a channel records the message length in elements and the
// destination rank; the SMI port of the endpoint is fixed at compile time
// (parameter PORT), as every port is physical hardware. The application then
// pushes one element per cycle. The endpoint packs elements into the payload
// of a network packet (224 bits, so 7 elements of 32 bits) and emits the
// packet, with a SEND header carrying source, destination, port and the
// number of valid elements, when the payload is full or the last element of
// the message has been pushed. The channel closes by itself after 'count'
// elements. Packing in the push primitive follows the SMI reference
// implementation; handshake signals and the exact timing are this design's.
//
// Timing: the element that completes a packet leaves in the same cycle
// (the packet is assembled combinationally from the held elements and the
// new one), so the endpoint accepts an element every cycle as long as the
// packet output is ready; it stalls the application (data_ready low) only
// while a completed packet cannot leave. open_ready is high when no channel
// is open.
// Some bits of pkt_data never change: the op field is always SEND and the
// port field is the constant PORT.
module smi_push
  import smi_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned PORT   = 0,
  localparam int unsigned EPP   = PAYLOAD_W / DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RANK_W-1:0]   my_rank,
  // channel open
  input  logic                open_valid,
  output logic                open_ready,
  input  logic [COUNT_W-1:0]  open_count,
  input  logic [RANK_W-1:0]   open_dst,
  // element stream from the application
  input  logic                data_valid,
  output logic                data_ready,
  input  logic [DATA_W-1:0]   data,
  // packets towards the CKS
  output logic                pkt_valid,
  input  logic                pkt_ready,
  output smi_pkt_t            pkt_data
);
  localparam int unsigned NW = $clog2(EPP + 1);

  logic                 active;
  logic [COUNT_W-1:0]   remaining;
  logic [RANK_W-1:0]    dst;
  logic [NW-1:0]        nbuf;
  logic [PAYLOAD_W-1:0] payload;
  logic [PAYLOAD_W-1:0] payload_next;
  logic                 completes;

  assign open_ready = !active;
  assign completes  = (nbuf == NW'(EPP - 1)) || (remaining == 1);
  assign data_ready = active && (!completes || pkt_ready);
  assign pkt_valid  = active && data_valid && completes;

  always_comb begin
    payload_next = payload;
    payload_next[nbuf*DATA_W +: DATA_W] = data;
  end

  always_comb begin
    pkt_data             = '0;
    pkt_data.payload     = payload_next;
    pkt_data.hdr.src     = my_rank;
    pkt_data.hdr.dst     = dst;
    pkt_data.hdr.port    = PORT_W'(PORT);
    pkt_data.hdr.op      = OP_SEND;
    pkt_data.hdr.nelem   = NELEM_W'(nbuf + 1'b1);
  end

  wire accept = data_valid && data_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      remaining <= '0;
      dst       <= '0;
      nbuf      <= '0;
      payload   <= '0;
    end else if (!active) begin
      if (open_valid && open_count != 0) begin
        active    <= 1'b1;
        remaining <= open_count;
        dst       <= open_dst;
        nbuf      <= '0;
      end
    end else if (accept) begin
      remaining <= remaining - 1'b1;
      if (completes) begin
        nbuf    <= '0;
        payload <= '0;
        if (remaining == 1) active <= 1'b0;
      end else begin
        nbuf    <= nbuf + 1'b1;
        payload <= payload_next;
      end
    end
  end

  a_nelem: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid |-> pkt_data.hdr.nelem != '0 && 32'(pkt_data.hdr.nelem) <= EPP);

endmodule
