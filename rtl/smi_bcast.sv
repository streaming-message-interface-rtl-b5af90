// smi_bcast: support kernel of the broadcast collective (SMI_Bcast).
//
// Both the root and the non-root behaviour are present in every rank, so
// the root can be chosen when the channel is opened. The collective uses a
// linear scheme with one rendezvous per rank:
//   non-root  sends one SYNCH packet ("ready to receive") to the root, then
//             unpacks the data packets it receives (an smi_pop inside) and
//             hands the elements to the application;
//   root      waits until a SYNCH has arrived from each of the other
//             comm_size-1 ranks, then packs the application's elements into
//             packets (an smi_push inside) and sends every packet to each
//             non-root rank in increasing rank order before it takes the
//             next one.
// The rendezvous before streaming and the linear scheme follow the SMI
// reference implementation. Collecting all notifications before the first
// packet, and sending one packet to all ranks before packing the next, are
// this design's choices (the root has room for one packet only).
//
// Timing: a packet of EPP elements is replicated in comm_size-1 consecutive
// cycles if the CKS accepts them; the root's application is stalled while
// the copies leave.
module smi_bcast
  import smi_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned PORT   = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RANK_W-1:0]   my_rank,
  input  logic [RANK_W:0]     comm_size,
  // channel open
  input  logic                open_valid,
  output logic                open_ready,
  input  logic [COUNT_W-1:0]  open_count,
  input  logic [RANK_W-1:0]   open_root,
  // root: elements from the application
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_W-1:0]   in_data,
  // non-root: elements to the application
  output logic                out_valid,
  input  logic                out_ready,
  output logic [DATA_W-1:0]   out_data,
  // network side
  output logic                pkt_out_valid,
  input  logic                pkt_out_ready,
  output smi_pkt_t            pkt_out,
  input  logic                pkt_in_valid,
  output logic                pkt_in_ready,
  input  smi_pkt_t            pkt_in
);
  typedef enum logic [2:0] {
    S_IDLE, S_WAIT_READY, S_STREAM, S_NR_SYNC, S_NR_RECV
  } state_e;

  state_e            state;
  logic [RANK_W-1:0] root;
  logic [RANK_W:0]   nready;
  smi_pkt_t          pbuf;
  logic              pbuf_valid;
  logic [RANK_W:0]   target;

  // push (root) and pop (non-root) datapaths
  logic     push_open_ready, pop_open_ready;
  logic     push_pkt_valid, push_pkt_ready;
  smi_pkt_t push_pkt;
  logic     pop_pkt_valid, pop_pkt_ready;

  wire is_root  = (open_root == my_rank);
  wire do_open  = open_valid && open_ready;

  assign open_ready = (state == S_IDLE) && push_open_ready && pop_open_ready;

  smi_push #(.DATA_W(DATA_W), .PORT(PORT)) u_push (
    .clk, .rst_n, .my_rank,
    .open_valid(do_open && is_root), .open_ready(push_open_ready),
    .open_count, .open_dst(my_rank),
    .data_valid(in_valid), .data_ready(in_ready), .data(in_data),
    .pkt_valid(push_pkt_valid), .pkt_ready(push_pkt_ready), .pkt_data(push_pkt)
  );

  smi_pop #(.DATA_W(DATA_W), .PORT(PORT)) u_pop (
    .clk, .rst_n,
    .open_valid(do_open && !is_root), .open_ready(pop_open_ready),
    .open_count, .open_src(open_root),
    .pkt_valid(pop_pkt_valid), .pkt_ready(pop_pkt_ready), .pkt_data(pkt_in),
    .data_valid(out_valid), .data_ready(out_ready), .data(out_data)
  );

  // next non-root rank after 'r' (comm_size when none is left)
  function automatic logic [RANK_W:0] next_target(input logic [RANK_W:0] r);
    logic [RANK_W:0] n;
    n = r + 1'b1;
    if (n == {1'b0, root}) n = n + 1'b1;
    return n;
  endfunction

  wire [RANK_W:0] first_target = (root == '0) ? (RANK_W+1)'(1) : '0;

  assign push_pkt_ready = (state == S_STREAM) && !pbuf_valid;
  assign pop_pkt_valid  = (state == S_NR_RECV) && pkt_in_valid;
  assign pkt_in_ready   = (state == S_WAIT_READY) ? (nready != comm_size - 1'b1) :
                          (state == S_NR_RECV)    ? pop_pkt_ready : 1'b0;

  always_comb begin
    pkt_out       = pbuf;
    pkt_out.hdr.dst = target[RANK_W-1:0];
    pkt_out_valid = (state == S_STREAM) && pbuf_valid;
    if (state == S_NR_SYNC) begin
      pkt_out           = '0;
      pkt_out.hdr.src   = my_rank;
      pkt_out.hdr.dst   = root;
      pkt_out.hdr.port  = PORT_W'(PORT);
      pkt_out.hdr.op    = OP_SYNCH;
      pkt_out_valid     = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      root       <= '0;
      nready     <= '0;
      pbuf       <= '0;
      pbuf_valid <= 1'b0;
      target     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (do_open) begin
          root   <= open_root;
          nready <= '0;
          state  <= is_root ? S_WAIT_READY : S_NR_SYNC;
        end
        S_WAIT_READY: begin
          if (nready == comm_size - 1'b1) state <= S_STREAM;
          else if (pkt_in_valid && pkt_in.hdr.op == OP_SYNCH) nready <= nready + 1'b1;
        end
        S_STREAM: begin
          if (push_pkt_valid && push_pkt_ready) begin
            pbuf       <= push_pkt;
            pbuf_valid <= (first_target < comm_size);
            target     <= first_target;
          end else if (pbuf_valid && pkt_out_ready) begin
            target <= next_target(target);
            if (next_target(target) >= comm_size) pbuf_valid <= 1'b0;
          end else if (!pbuf_valid && push_open_ready) begin
            state <= S_IDLE;
          end
        end
        S_NR_SYNC: if (pkt_out_ready) state <= S_NR_RECV;
        S_NR_RECV: if (pop_open_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_only_synch_at_root: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_WAIT_READY && pkt_in_valid |-> pkt_in.hdr.op == OP_SYNCH);

endmodule
