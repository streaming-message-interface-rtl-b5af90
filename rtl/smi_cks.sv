// smi_cks: send communication kernel (CKS).
//
// One CKS owns the outgoing side of one network port. It polls its inputs
// with the R-polling scheme of smi_poller and forwards one packet per cycle.
// Inputs, in polling order:
//   0 .. NUM_APP-1          application endpoints attached to this CKS
//   NUM_APP                 the paired CKR (transit packets)
//   NUM_APP+1 .. +NUM_CK-1  the other CKS modules, in increasing index order
// Outputs:
//   0                       the network port
//   1                       the paired CKR (packets for the local rank)
//   2 .. NUM_CK             the other CKS modules, in increasing index order
//
// Routing: a packet whose destination rank is the local rank goes to the
// paired CKR. Any other packet looks up the routing table, indexed by
// destination rank, which names either this kernel's network port or another
// CKS (whose network port leads towards the destination). A table entry that
// names this CKS itself, or an application, is treated as the network port.
// This is the routing rule described for SMI; the table entry encoding is
// this design's own.
//
// Timing: the input selected by the poller is routed combinationally to the
// output; the packet is consumed in the same cycle the output accepts it.
// Inputs and outputs are expected to be FIFOs (smi_fifo), which break every
// combinational path between kernels.
module smi_cks
  import smi_pkg::*;
#(
  parameter int unsigned CK_ID    = 0,
  parameter int unsigned NUM_CK   = 4,
  parameter int unsigned NUM_APP  = 1,
  parameter int unsigned R        = 8,
  parameter int unsigned RT_DEPTH = 256,
  localparam int unsigned NI = NUM_APP + NUM_CK,
  localparam int unsigned NO = NUM_CK + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [RANK_W-1:0]           my_rank,
  // routing table upload
  input  logic                        cfg_we,
  input  logic [$clog2(RT_DEPTH)-1:0] cfg_addr,
  input  smi_rt_entry_t               cfg_entry,
  // inputs
  input  logic     [NI-1:0]           in_valid,
  output logic     [NI-1:0]           in_ready,
  input  smi_pkt_t [NI-1:0]           in_data,
  // outputs
  output logic     [NO-1:0]           out_valid,
  input  logic     [NO-1:0]           out_ready,
  output smi_pkt_t [NO-1:0]           out_data
);
  localparam int unsigned IW = $clog2(NI + 1);
  localparam int unsigned OW = $clog2(NO + 1);

  logic [IW-1:0]  cur;
  smi_pkt_t       pkt;
  smi_rt_entry_t  rt;
  logic [OW-1:0]  dest;
  logic           take;

  smi_poller #(.N(NI), .R(R)) u_poll (
    .clk, .rst_n, .valid(in_valid), .take, .cur
  );

  smi_route_table #(.DEPTH(RT_DEPTH)) u_rt (
    .clk, .we(cfg_we), .waddr(cfg_addr), .wdata(cfg_entry),
    .raddr(pkt.hdr.dst[$clog2(RT_DEPTH)-1:0]), .rdata(rt)
  );

  assign pkt = in_data[cur];

  always_comb begin
    if (pkt.hdr.dst == my_rank) begin
      dest = OW'(1);
    end else if (rt.kind == RT_CK && 32'(rt.idx) != CK_ID && 32'(rt.idx) < NUM_CK) begin
      dest = (int'(rt.idx) < int'(CK_ID)) ? OW'(rt.idx) + OW'(2) : OW'(rt.idx) + OW'(1);
    end else begin
      dest = '0;
    end
  end

  assign take = in_valid[cur] && out_ready[dest];

  always_comb begin
    in_ready = '0;
    in_ready[cur] = out_ready[dest];
    out_valid = '0;
    out_valid[dest] = in_valid[cur];
    for (int o = 0; o < int'(NO); o++) out_data[o] = pkt;
  end

endmodule
