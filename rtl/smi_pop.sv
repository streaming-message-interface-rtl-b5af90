// smi_pop: receive-channel endpoint (SMI_Open_recv_channel + SMI_Pop).
//
// Opening a channel records the message length in elements; the port is
// fixed at compile time (parameter PORT) and the routing tables deliver only
// packets of that port here. The endpoint takes one network packet at a
// time from the CKR and hands its valid elements to the application, one per
// cycle, in order. After 'count' elements the channel closes by itself.
// The source rank given at open is checked by an assertion only: the
// transport layer, not the endpoint, decides what arrives here. Unpacking in the pop
// primitive follows the SMI reference implementation; handshakes and timing
// are this design's.
//
// Timing: the next packet is loaded in the same cycle the last element of
// the current one is taken, so a stream of packets yields one element per
// cycle without bubbles.
module smi_pop
  import smi_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned PORT   = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  // channel open
  input  logic                open_valid,
  output logic                open_ready,
  input  logic [COUNT_W-1:0]  open_count,
  input  logic [RANK_W-1:0]   open_src,
  // packets from the CKR
  input  logic                pkt_valid,
  output logic                pkt_ready,
  input  smi_pkt_t            pkt_data,
  // element stream to the application
  output logic                data_valid,
  input  logic                data_ready,
  output logic [DATA_W-1:0]   data
);
  logic                 active;
  logic [COUNT_W-1:0]   remaining;
  logic [RANK_W-1:0]    src;
  logic                 have;
  smi_pkt_t             cur;
  logic [NELEM_W-1:0]   idx;
  logic                 last_in_pkt;

  assign open_ready  = !active;
  assign data_valid  = active && have;
  assign data        = cur.payload[idx*DATA_W +: DATA_W];
  assign last_in_pkt = (idx + 1'b1 == cur.hdr.nelem) || (remaining == 1);
  wire   take_elem   = data_valid && data_ready;
  assign pkt_ready   = active && (!have || (take_elem && last_in_pkt && remaining != 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      remaining <= '0;
      src       <= '0;
      have      <= 1'b0;
      cur       <= '0;
      idx       <= '0;
    end else if (!active) begin
      if (open_valid && open_count != 0) begin
        active    <= 1'b1;
        remaining <= open_count;
        src       <= open_src;
        have      <= 1'b0;
      end
    end else begin
      if (take_elem) begin
        remaining <= remaining - 1'b1;
        idx       <= idx + 1'b1;
        if (last_in_pkt) have <= 1'b0;
        if (remaining == 1) active <= 1'b0;
      end
      if (pkt_valid && pkt_ready) begin
        cur  <= pkt_data;
        have <= 1'b1;
        idx  <= '0;
      end
    end
  end

  a_port: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid && pkt_ready |-> pkt_data.hdr.port == PORT_W'(PORT));
  a_src: assert property (@(posedge clk) disable iff (!rst_n)
    pkt_valid && pkt_ready |-> pkt_data.hdr.src == src);

endmodule
