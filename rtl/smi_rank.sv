// smi_rank: the SMI transport layer and interface of one rank (one FPGA).
//
// The rank has NUM_CK = 4 network ports. Each port is served by a pair of
// communication kernels, a CKS for the outgoing and a CKR for the incoming
// side. The pairs are fully interconnected: every CKS can hand a packet to
// every other CKS (to leave through that kernel's port) and to its paired CKR
// (packets for the local rank); every CKR can hand a packet to every other
// CKR (to reach the endpoint attached there) and to its paired CKS (transit
// packets for another rank). All these links, and the links to the
// endpoints, are FIFOs.
//
// Eight endpoints are attached to the kernel pairs, each with a compile-time
// SMI port number; endpoint e serves port e and sits on pair e mod 4 as that
// pair's application number e div 4:
//   pair 0  smi_push (send channel) and smi_pop (receive channel), port 0;
//           smi_bcast support kernel, port 4
//   pair 1  smi_push and smi_pop, port 1; smi_reduce support kernel, port 5
//           (single-precision by default)
//   pair 2  smi_push and smi_pop, port 2; smi_scatter support kernel, port 6
//   pair 3  smi_push and smi_pop, port 3; smi_gather support kernel, port 7
// Four point-to-point channels let an application talk to four neighbours
// at once, as a halo-exchanging stencil on a 2D torus does.
// The network ports (the board's 256-bit I/O channels) and the endpoints'
// application streams are ports of this module. The routing tables of all
// eight kernels are written through the cfg_* port: cfg_ckr selects the CKR
// (1) or CKS (0) table of kernel pair cfg_ck; a CKS table is indexed by
// destination rank, a CKR table by SMI port.
//
// What follows the paper: four kernel pairs, the connectivity between them,
// routing by rank and by port, R-polling, FIFO-connected endpoints spread
// over the pairs, and FP32 as the reduced data type of the evaluation. The
// assignment of endpoints and port numbers to pairs,
// the FIFO depths and the configuration port are this design's choices.
//
// Lint note: verilator reports rst_n as used both asynchronously and
// synchronously. The flip-flops use it only as an asynchronous reset; the
// synchronous use is the 'disable iff (!rst_n)' of the concurrent
// assertions, which sample it at the clock edge. No circuit depends on it.
//
// Timing: every kernel forwards one packet per cycle; a packet crosses one
// FIFO per kernel hop, and a FIFO adds one cycle.
module smi_rank
  import smi_pkg::*;
#(
  parameter int unsigned R             = 8,
  parameter int unsigned FIFO_DEPTH    = 16,
  parameter int unsigned CK_FIFO_DEPTH = 2,
  parameter int unsigned DATA_W        = 32,
  parameter int unsigned C             = 64,
  parameter smi_dtype_e  REDUCE_DTYPE  = DT_FLOAT,
  localparam int unsigned NUM_CK       = 4,
  localparam int unsigned NUM_P2P      = 4,
  localparam int unsigned RT_DEPTH     = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [RANK_W-1:0]           my_rank,
  input  logic [RANK_W:0]             comm_size,
  // routing table upload
  input  logic                        cfg_we,
  input  logic                        cfg_ckr,
  input  logic [1:0]                  cfg_ck,
  input  logic [RANK_W-1:0]           cfg_addr,
  input  smi_rt_entry_t               cfg_entry,
  // network ports
  output logic     [NUM_CK-1:0]       net_out_valid,
  input  logic     [NUM_CK-1:0]       net_out_ready,
  output smi_pkt_t [NUM_CK-1:0]       net_out_data,
  input  logic     [NUM_CK-1:0]       net_in_valid,
  output logic     [NUM_CK-1:0]       net_in_ready,
  input  smi_pkt_t [NUM_CK-1:0]       net_in_data,
  // point-to-point send channels (ports 0 to 3)
  input  logic [NUM_P2P-1:0]          send_open_valid,
  output logic [NUM_P2P-1:0]          send_open_ready,
  input  logic [COUNT_W-1:0]          send_open_count [NUM_P2P],
  input  logic [RANK_W-1:0]           send_open_dst   [NUM_P2P],
  input  logic [NUM_P2P-1:0]          send_valid,
  output logic [NUM_P2P-1:0]          send_ready,
  input  logic [DATA_W-1:0]           send_data [NUM_P2P],
  // point-to-point receive channels (ports 0 to 3)
  input  logic [NUM_P2P-1:0]          recv_open_valid,
  output logic [NUM_P2P-1:0]          recv_open_ready,
  input  logic [COUNT_W-1:0]          recv_open_count [NUM_P2P],
  input  logic [RANK_W-1:0]           recv_open_src   [NUM_P2P],
  output logic [NUM_P2P-1:0]          recv_valid,
  input  logic [NUM_P2P-1:0]          recv_ready,
  output logic [DATA_W-1:0]           recv_data [NUM_P2P],
  // broadcast (port 4)
  input  logic                        bcast_open_valid,
  output logic                        bcast_open_ready,
  input  logic [COUNT_W-1:0]          bcast_open_count,
  input  logic [RANK_W-1:0]           bcast_open_root,
  input  logic                        bcast_in_valid,
  output logic                        bcast_in_ready,
  input  logic [DATA_W-1:0]           bcast_in_data,
  output logic                        bcast_out_valid,
  input  logic                        bcast_out_ready,
  output logic [DATA_W-1:0]           bcast_out_data,
  // reduce (port 5)
  input  logic                        reduce_open_valid,
  output logic                        reduce_open_ready,
  input  logic [COUNT_W-1:0]          reduce_open_count,
  input  logic [RANK_W-1:0]           reduce_open_root,
  input  smi_red_op_e                 reduce_open_op,
  input  logic                        reduce_in_valid,
  output logic                        reduce_in_ready,
  input  logic [DATA_W-1:0]           reduce_in_data,
  output logic                        reduce_out_valid,
  input  logic                        reduce_out_ready,
  output logic [DATA_W-1:0]           reduce_out_data,
  // scatter (port 6)
  input  logic                        scatter_open_valid,
  output logic                        scatter_open_ready,
  input  logic [COUNT_W-1:0]          scatter_open_count,
  input  logic [RANK_W-1:0]           scatter_open_root,
  input  logic                        scatter_in_valid,
  output logic                        scatter_in_ready,
  input  logic [DATA_W-1:0]           scatter_in_data,
  output logic                        scatter_out_valid,
  input  logic                        scatter_out_ready,
  output logic [DATA_W-1:0]           scatter_out_data,
  // gather (port 7)
  input  logic                        gather_open_valid,
  output logic                        gather_open_ready,
  input  logic [COUNT_W-1:0]          gather_open_count,
  input  logic [RANK_W-1:0]           gather_open_root,
  input  logic                        gather_in_valid,
  output logic                        gather_in_ready,
  input  logic [DATA_W-1:0]           gather_in_data,
  output logic                        gather_out_valid,
  input  logic                        gather_out_ready,
  output logic [DATA_W-1:0]           gather_out_data
);
  localparam int unsigned NUM_EP  = 8;               // endpoints = SMI ports
  localparam int unsigned NUM_APP = NUM_EP / NUM_CK; // endpoints per pair
  localparam int unsigned S_NI = NUM_APP + NUM_CK;   // CKS inputs
  localparam int unsigned S_NO = NUM_CK + 1;         // CKS outputs
  localparam int unsigned R_NI = NUM_CK + 1;         // CKR inputs
  localparam int unsigned R_NO = NUM_APP + NUM_CK;   // CKR outputs
  localparam int unsigned PW   = $bits(smi_pkt_t);


  // slot of kernel j among the "other kernels" of kernel k
  function automatic int unsigned slot(input int unsigned k, input int unsigned j);
    return (j < k) ? j : j - 1;
  endfunction

  logic     [S_NI-1:0] cks_in_valid  [NUM_CK];
  logic     [S_NI-1:0] cks_in_ready  [NUM_CK];
  smi_pkt_t [S_NI-1:0] cks_in_data   [NUM_CK];
  logic     [S_NO-1:0] cks_out_valid [NUM_CK];
  logic     [S_NO-1:0] cks_out_ready [NUM_CK];
  smi_pkt_t [S_NO-1:0] cks_out_data  [NUM_CK];
  logic     [R_NI-1:0] ckr_in_valid  [NUM_CK];
  logic     [R_NI-1:0] ckr_in_ready  [NUM_CK];
  smi_pkt_t [R_NI-1:0] ckr_in_data   [NUM_CK];
  logic     [R_NO-1:0] ckr_out_valid [NUM_CK];
  logic     [R_NO-1:0] ckr_out_ready [NUM_CK];
  smi_pkt_t [R_NO-1:0] ckr_out_data  [NUM_CK];

  // endpoint side of the application FIFOs, indexed by endpoint (= port)
  logic     [NUM_EP-1:0] ep_tx_valid, ep_tx_ready;  // endpoint -> CKS
  smi_pkt_t [NUM_EP-1:0] ep_tx_data;
  logic     [NUM_EP-1:0] ep_rx_valid, ep_rx_ready;  // CKR -> endpoint
  smi_pkt_t [NUM_EP-1:0] ep_rx_data;

  for (genvar k = 0; k < NUM_CK; k++) begin : g_ck
    smi_cks #(.CK_ID(k), .NUM_CK(NUM_CK), .NUM_APP(NUM_APP), .R(R), .RT_DEPTH(RT_DEPTH)) u_cks (
      .clk, .rst_n, .my_rank,
      .cfg_we(cfg_we && !cfg_ckr && cfg_ck == 2'(k)), .cfg_addr, .cfg_entry,
      .in_valid(cks_in_valid[k]), .in_ready(cks_in_ready[k]),
      .in_data(cks_in_data[k]),
      .out_valid(cks_out_valid[k]), .out_ready(cks_out_ready[k]), .out_data(cks_out_data[k])
    );
    smi_ckr #(.CK_ID(k), .NUM_CK(NUM_CK), .NUM_APP(NUM_APP), .R(R), .RT_DEPTH(RT_DEPTH)) u_ckr (
      .clk, .rst_n, .my_rank,
      .cfg_we(cfg_we && cfg_ckr && cfg_ck == 2'(k)), .cfg_addr, .cfg_entry,
      .in_valid(ckr_in_valid[k]), .in_ready(ckr_in_ready[k]), .in_data(ckr_in_data[k]),
      .out_valid(ckr_out_valid[k]), .out_ready(ckr_out_ready[k]),
      .out_data(ckr_out_data[k])
    );

    for (genvar a = 0; a < NUM_APP; a++) begin : g_app
      // endpoint k + NUM_CK*a -> CKS input a
      smi_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_app_tx (
        .clk, .rst_n,
        .in_valid(ep_tx_valid[k + NUM_CK*a]), .in_ready(ep_tx_ready[k + NUM_CK*a]),
        .in_data(ep_tx_data[k + NUM_CK*a]),
        .out_valid(cks_in_valid[k][a]), .out_ready(cks_in_ready[k][a]), .out_data(cks_in_data[k][a])
      );
      // CKR output a -> endpoint k + NUM_CK*a
      smi_fifo #(.W(PW), .DEPTH(FIFO_DEPTH)) u_app_rx (
        .clk, .rst_n,
        .in_valid(ckr_out_valid[k][a]), .in_ready(ckr_out_ready[k][a]), .in_data(ckr_out_data[k][a]),
        .out_valid(ep_rx_valid[k + NUM_CK*a]), .out_ready(ep_rx_ready[k + NUM_CK*a]),
        .out_data(ep_rx_data[k + NUM_CK*a])
      );
    end
    // network input -> CKR input 0
    smi_fifo #(.W(PW), .DEPTH(CK_FIFO_DEPTH)) u_net_in (
      .clk, .rst_n,
      .in_valid(net_in_valid[k]), .in_ready(net_in_ready[k]), .in_data(net_in_data[k]),
      .out_valid(ckr_in_valid[k][0]), .out_ready(ckr_in_ready[k][0]), .out_data(ckr_in_data[k][0])
    );
    // CKS output 0 -> network output
    assign net_out_valid[k]    = cks_out_valid[k][0];
    assign cks_out_ready[k][0] = net_out_ready[k];
    assign net_out_data[k]     = cks_out_data[k][0];

    // CKS output 1 -> paired CKR input 1
    smi_fifo #(.W(PW), .DEPTH(CK_FIFO_DEPTH)) u_s2r (
      .clk, .rst_n,
      .in_valid(cks_out_valid[k][1]), .in_ready(cks_out_ready[k][1]), .in_data(cks_out_data[k][1]),
      .out_valid(ckr_in_valid[k][1]), .out_ready(ckr_in_ready[k][1]), .out_data(ckr_in_data[k][1])
    );
    // CKR output NUM_APP -> paired CKS input NUM_APP
    smi_fifo #(.W(PW), .DEPTH(CK_FIFO_DEPTH)) u_r2s (
      .clk, .rst_n,
      .in_valid(ckr_out_valid[k][NUM_APP]), .in_ready(ckr_out_ready[k][NUM_APP]),
      .in_data(ckr_out_data[k][NUM_APP]),
      .out_valid(cks_in_valid[k][NUM_APP]), .out_ready(cks_in_ready[k][NUM_APP]),
      .out_data(cks_in_data[k][NUM_APP])
    );

    for (genvar j = 0; j < NUM_CK; j++) begin : g_peer
      if (j != k) begin : g_link
        // CKS k -> CKS j
        smi_fifo #(.W(PW), .DEPTH(CK_FIFO_DEPTH)) u_s2s (
          .clk, .rst_n,
          .in_valid(cks_out_valid[k][2 + slot(k, j)]), .in_ready(cks_out_ready[k][2 + slot(k, j)]),
          .in_data(cks_out_data[k][2 + slot(k, j)]),
          .out_valid(cks_in_valid[j][NUM_APP + 1 + slot(j, k)]),
          .out_ready(cks_in_ready[j][NUM_APP + 1 + slot(j, k)]),
          .out_data(cks_in_data[j][NUM_APP + 1 + slot(j, k)])
        );
        // CKR k -> CKR j
        smi_fifo #(.W(PW), .DEPTH(CK_FIFO_DEPTH)) u_r2r (
          .clk, .rst_n,
          .in_valid(ckr_out_valid[k][NUM_APP + 1 + slot(k, j)]),
          .in_ready(ckr_out_ready[k][NUM_APP + 1 + slot(k, j)]),
          .in_data(ckr_out_data[k][NUM_APP + 1 + slot(k, j)]),
          .out_valid(ckr_in_valid[j][2 + slot(j, k)]), .out_ready(ckr_in_ready[j][2 + slot(j, k)]),
          .out_data(ckr_in_data[j][2 + slot(j, k)])
        );
      end
    end
  end

  // ---------------- endpoints ----------------
  for (genvar p = 0; p < NUM_P2P; p++) begin : g_p2p
    smi_push #(.DATA_W(DATA_W), .PORT(p)) u_push (
      .clk, .rst_n, .my_rank,
      .open_valid(send_open_valid[p]), .open_ready(send_open_ready[p]),
      .open_count(send_open_count[p]), .open_dst(send_open_dst[p]),
      .data_valid(send_valid[p]), .data_ready(send_ready[p]), .data(send_data[p]),
      .pkt_valid(ep_tx_valid[p]), .pkt_ready(ep_tx_ready[p]), .pkt_data(ep_tx_data[p])
    );
    smi_pop #(.DATA_W(DATA_W), .PORT(p)) u_pop (
      .clk, .rst_n,
      .open_valid(recv_open_valid[p]), .open_ready(recv_open_ready[p]),
      .open_count(recv_open_count[p]), .open_src(recv_open_src[p]),
      .pkt_valid(ep_rx_valid[p]), .pkt_ready(ep_rx_ready[p]), .pkt_data(ep_rx_data[p]),
      .data_valid(recv_valid[p]), .data_ready(recv_ready[p]), .data(recv_data[p])
    );
  end

  smi_bcast #(.DATA_W(DATA_W), .PORT(4)) u_bcast (
    .clk, .rst_n, .my_rank, .comm_size,
    .open_valid(bcast_open_valid), .open_ready(bcast_open_ready),
    .open_count(bcast_open_count), .open_root(bcast_open_root),
    .in_valid(bcast_in_valid), .in_ready(bcast_in_ready), .in_data(bcast_in_data),
    .out_valid(bcast_out_valid), .out_ready(bcast_out_ready), .out_data(bcast_out_data),
    .pkt_out_valid(ep_tx_valid[4]), .pkt_out_ready(ep_tx_ready[4]), .pkt_out(ep_tx_data[4]),
    .pkt_in_valid(ep_rx_valid[4]), .pkt_in_ready(ep_rx_ready[4]), .pkt_in(ep_rx_data[4])
  );

  smi_reduce #(.DTYPE(REDUCE_DTYPE), .DATA_W(DATA_W), .PORT(5), .C(C)) u_reduce (
    .clk, .rst_n, .my_rank, .comm_size,
    .open_valid(reduce_open_valid), .open_ready(reduce_open_ready),
    .open_count(reduce_open_count), .open_root(reduce_open_root), .open_op(reduce_open_op),
    .in_valid(reduce_in_valid), .in_ready(reduce_in_ready), .in_data(reduce_in_data),
    .out_valid(reduce_out_valid), .out_ready(reduce_out_ready), .out_data(reduce_out_data),
    .pkt_out_valid(ep_tx_valid[5]), .pkt_out_ready(ep_tx_ready[5]), .pkt_out(ep_tx_data[5]),
    .pkt_in_valid(ep_rx_valid[5]), .pkt_in_ready(ep_rx_ready[5]), .pkt_in(ep_rx_data[5])
  );

  smi_scatter #(.DATA_W(DATA_W), .PORT(6)) u_scatter (
    .clk, .rst_n, .my_rank, .comm_size,
    .open_valid(scatter_open_valid), .open_ready(scatter_open_ready),
    .open_count(scatter_open_count), .open_root(scatter_open_root),
    .in_valid(scatter_in_valid), .in_ready(scatter_in_ready), .in_data(scatter_in_data),
    .out_valid(scatter_out_valid), .out_ready(scatter_out_ready), .out_data(scatter_out_data),
    .pkt_out_valid(ep_tx_valid[6]), .pkt_out_ready(ep_tx_ready[6]), .pkt_out(ep_tx_data[6]),
    .pkt_in_valid(ep_rx_valid[6]), .pkt_in_ready(ep_rx_ready[6]), .pkt_in(ep_rx_data[6])
  );

  smi_gather #(.DATA_W(DATA_W), .PORT(7)) u_gather (
    .clk, .rst_n, .my_rank, .comm_size,
    .open_valid(gather_open_valid), .open_ready(gather_open_ready),
    .open_count(gather_open_count), .open_root(gather_open_root),
    .in_valid(gather_in_valid), .in_ready(gather_in_ready), .in_data(gather_in_data),
    .out_valid(gather_out_valid), .out_ready(gather_out_ready), .out_data(gather_out_data),
    .pkt_out_valid(ep_tx_valid[7]), .pkt_out_ready(ep_tx_ready[7]), .pkt_out(ep_tx_data[7]),
    .pkt_in_valid(ep_rx_valid[7]), .pkt_in_ready(ep_rx_ready[7]), .pkt_in(ep_rx_data[7])
  );

endmodule
