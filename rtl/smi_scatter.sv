// smi_scatter: support kernel of the scatter collective.
//
// The root's application supplies comm_size * count elements, rank 0's
// share first; every rank, the root included, receives its 'count'
// elements. Root and non-root behaviour are both present, the root is chosen
// at open. The ranks are served one after another in rank order, each only
// after it has said it is ready:
//   non-root  sends one SYNCH packet to the root, then unpacks the data
//             packets it receives (an smi_pop) for its application;
//   root      for r = 0 .. comm_size-1: its own share goes straight from
//             its input to its output; for any other rank it waits until a
//             SYNCH from r has arrived, then packs that rank's share into
//             packets (an smi_push) addressed to r.
// Readiness notifications may arrive in any order; the root records them in
// a bit per rank. The rank-ordered sequence with one rendezvous per rank
// follows the SMI description of Scatter; the bit vector, the local path for
// the root's own share and the handshakes are this design's choices.
//
// Timing: one element per cycle at the root once the current rank is ready.
module smi_scatter
  import smi_pkg::*;
#(
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned PORT      = 6,
  parameter int unsigned MAX_RANKS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RANK_W-1:0]   my_rank,
  input  logic [RANK_W:0]     comm_size,
  input  logic                open_valid,
  output logic                open_ready,
  input  logic [COUNT_W-1:0]  open_count,
  input  logic [RANK_W-1:0]   open_root,
  // root: comm_size*count elements from the application
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_W-1:0]   in_data,
  // every rank: its count elements
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
    S_IDLE, S_R_NEXT, S_R_LOCAL, S_R_WAIT, S_R_SEND, S_NR_SYNC, S_NR_RECV
  } state_e;

  state_e             state;
  logic [RANK_W-1:0]  root;
  logic [COUNT_W-1:0] count;
  logic [RANK_W:0]    cur;        // rank being served by the root
  logic [COUNT_W-1:0] local_n;    // own share elements passed
  logic [MAX_RANKS-1:0] ready_of;

  logic push_open_ready, push_data_ready, push_pkt_valid;
  smi_pkt_t push_pkt;
  logic pop_open_ready, pop_pkt_ready, pop_out_valid;
  logic [DATA_W-1:0] pop_out_data;

  wire is_root = (open_root == my_rank);
  wire do_open = open_valid && open_ready;
  assign open_ready = (state == S_IDLE) && push_open_ready && pop_open_ready;

  wire cur_ready  = ready_of[cur[$clog2(MAX_RANKS)-1:0]];
  wire push_start = (state == S_R_WAIT) && cur_ready;

  smi_push #(.DATA_W(DATA_W), .PORT(PORT)) u_push (
    .clk, .rst_n, .my_rank,
    .open_valid(push_start), .open_ready(push_open_ready),
    .open_count(count), .open_dst(cur[RANK_W-1:0]),
    .data_valid(in_valid && state == S_R_SEND), .data_ready(push_data_ready), .data(in_data),
    .pkt_valid(push_pkt_valid), .pkt_ready(pkt_out_ready && state == S_R_SEND), .pkt_data(push_pkt)
  );

  smi_pop #(.DATA_W(DATA_W), .PORT(PORT)) u_pop (
    .clk, .rst_n,
    .open_valid(do_open && !is_root && open_count != '0), .open_ready(pop_open_ready),
    .open_count, .open_src(open_root),
    .pkt_valid(pkt_in_valid && state == S_NR_RECV), .pkt_ready(pop_pkt_ready), .pkt_data(pkt_in),
    .data_valid(pop_out_valid), .data_ready(out_ready && state == S_NR_RECV), .data(pop_out_data)
  );

  // application streams
  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = pop_out_data;
    unique case (state)
      S_R_LOCAL: begin
        in_ready  = out_ready;
        out_valid = in_valid;
        out_data  = in_data;
      end
      S_R_SEND:  in_ready  = push_data_ready;
      S_NR_RECV: out_valid = pop_out_valid;
      default: ;
    endcase
  end

  // network streams
  always_comb begin
    pkt_out       = push_pkt;
    pkt_out_valid = (state == S_R_SEND) && push_pkt_valid;
    if (state == S_NR_SYNC) begin
      pkt_out          = '0;
      pkt_out.hdr.src  = my_rank;
      pkt_out.hdr.dst  = root;
      pkt_out.hdr.port = PORT_W'(PORT);
      pkt_out.hdr.op   = OP_SYNCH;
      pkt_out_valid    = 1'b1;
    end
  end
  // the root takes notifications whenever it is serving; non-roots take data
  wire root_busy = (state == S_R_NEXT) || (state == S_R_LOCAL) ||
                   (state == S_R_WAIT) || (state == S_R_SEND);
  assign pkt_in_ready = root_busy ? 1'b1 : (state == S_NR_RECV) ? pop_pkt_ready : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      root     <= '0;
      count    <= '0;
      cur      <= '0;
      local_n  <= '0;
      ready_of <= '0;
    end else begin
      if (root_busy && pkt_in_valid && pkt_in.hdr.op == OP_SYNCH)
        ready_of[pkt_in.hdr.src[$clog2(MAX_RANKS)-1:0]] <= 1'b1;
      unique case (state)
        S_IDLE: if (do_open) begin
          root     <= open_root;
          count    <= open_count;
          cur      <= '0;
          local_n  <= '0;
          ready_of <= '0;
          if (open_count == '0) state <= S_IDLE;
          else state <= is_root ? S_R_NEXT : S_NR_SYNC;
        end
        S_R_NEXT: begin
          if (cur >= comm_size) state <= S_IDLE;
          else if (cur == {1'b0, root}) state <= S_R_LOCAL;
          else state <= S_R_WAIT;
        end
        S_R_LOCAL: if (in_valid && out_ready) begin
          local_n <= local_n + 1'b1;
          if (local_n + 1 == count) begin
            cur   <= cur + 1'b1;
            state <= S_R_NEXT;
          end
        end
        S_R_WAIT: if (cur_ready) state <= S_R_SEND;
        S_R_SEND: if (push_open_ready && !push_start) begin
          cur   <= cur + 1'b1;
          state <= S_R_NEXT;
        end
        S_NR_SYNC: if (pkt_out_ready) state <= S_NR_RECV;
        S_NR_RECV: if (pop_open_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_root_synch_only: assert property (@(posedge clk) disable iff (!rst_n)
    root_busy && pkt_in_valid |-> pkt_in.hdr.op == OP_SYNCH);

endmodule
