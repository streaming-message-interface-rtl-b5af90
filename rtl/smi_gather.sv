// smi_gather: support kernel of the gather collective.
//
// Every rank, the root included, contributes 'count' elements; the root's
// application receives comm_size * count elements, rank 0's first. Root and
// non-root behaviour are both present, the root is chosen at open. The root
// collects from one rank at a time, in rank order, and tells each rank when
// it may start, so that contributions can never arrive out of order:
//   root      for r = 0 .. comm_size-1: its own contribution goes straight
//             from its input to its output; for any other rank it sends a
//             SYNCH packet to r, then unpacks r's packets (an smi_pop) to
//             its output;
//   non-root  waits for the root's SYNCH, then packs its elements into
//             packets (an smi_push) addressed to the root.
// The rank-ordered sequence with one rendezvous per rank, granted by the
// root, follows the SMI description of Gather; the local path for the root's
// own contribution and the handshakes are this design's choices.
//
// Timing: one element per cycle at the root while the current rank's data
// flows; one SYNCH round trip between two ranks.
module smi_gather
  import smi_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned PORT   = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [RANK_W-1:0]   my_rank,
  input  logic [RANK_W:0]     comm_size,
  input  logic                open_valid,
  output logic                open_ready,
  input  logic [COUNT_W-1:0]  open_count,
  input  logic [RANK_W-1:0]   open_root,
  // every rank: its count elements
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_W-1:0]   in_data,
  // root: comm_size*count elements
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
    S_IDLE, S_R_NEXT, S_R_LOCAL, S_R_GRANT, S_R_RECV, S_NR_WAIT, S_NR_SEND
  } state_e;

  state_e             state;
  logic [RANK_W-1:0]  root;
  logic [COUNT_W-1:0] count;
  logic [RANK_W:0]    cur;
  logic [COUNT_W-1:0] local_n;

  logic push_open_ready, push_data_ready, push_pkt_valid;
  smi_pkt_t push_pkt;
  logic pop_open_ready, pop_pkt_ready, pop_out_valid;
  logic [DATA_W-1:0] pop_out_data;

  wire is_root = (open_root == my_rank);
  wire do_open = open_valid && open_ready;
  assign open_ready = (state == S_IDLE) && push_open_ready && pop_open_ready;

  wire grant_sent = (state == S_R_GRANT) && pkt_out_ready;
  wire got_grant  = (state == S_NR_WAIT) && pkt_in_valid && pkt_in.hdr.op == OP_SYNCH;

  smi_push #(.DATA_W(DATA_W), .PORT(PORT)) u_push (
    .clk, .rst_n, .my_rank,
    .open_valid(got_grant), .open_ready(push_open_ready),
    .open_count(count), .open_dst(root),
    .data_valid(in_valid && state == S_NR_SEND), .data_ready(push_data_ready), .data(in_data),
    .pkt_valid(push_pkt_valid), .pkt_ready(pkt_out_ready && state == S_NR_SEND), .pkt_data(push_pkt)
  );

  smi_pop #(.DATA_W(DATA_W), .PORT(PORT)) u_pop (
    .clk, .rst_n,
    .open_valid(grant_sent), .open_ready(pop_open_ready),
    .open_count(count), .open_src(cur[RANK_W-1:0]),
    .pkt_valid(pkt_in_valid && state == S_R_RECV), .pkt_ready(pop_pkt_ready), .pkt_data(pkt_in),
    .data_valid(pop_out_valid), .data_ready(out_ready && state == S_R_RECV), .data(pop_out_data)
  );

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
      S_R_RECV:  out_valid = pop_out_valid;
      S_NR_SEND: in_ready  = push_data_ready;
      default: ;
    endcase
  end

  always_comb begin
    pkt_out       = push_pkt;
    pkt_out_valid = (state == S_NR_SEND) && push_pkt_valid;
    if (state == S_R_GRANT) begin
      pkt_out          = '0;
      pkt_out.hdr.src  = my_rank;
      pkt_out.hdr.dst  = cur[RANK_W-1:0];
      pkt_out.hdr.port = PORT_W'(PORT);
      pkt_out.hdr.op   = OP_SYNCH;
      pkt_out_valid    = 1'b1;
    end
  end
  assign pkt_in_ready = (state == S_R_RECV)  ? pop_pkt_ready :
                        (state == S_NR_WAIT) ? 1'b1 : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      root    <= '0;
      count   <= '0;
      cur     <= '0;
      local_n <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (do_open) begin
          root    <= open_root;
          count   <= open_count;
          cur     <= '0;
          local_n <= '0;
          if (open_count == '0) state <= S_IDLE;
          else state <= is_root ? S_R_NEXT : S_NR_WAIT;
        end
        S_R_NEXT: begin
          if (cur >= comm_size) state <= S_IDLE;
          else if (cur == {1'b0, root}) state <= S_R_LOCAL;
          else state <= S_R_GRANT;
        end
        S_R_LOCAL: if (in_valid && out_ready) begin
          local_n <= local_n + 1'b1;
          if (local_n + 1 == count) begin
            cur   <= cur + 1'b1;
            state <= S_R_NEXT;
          end
        end
        S_R_GRANT: if (pkt_out_ready) state <= S_R_RECV;
        S_R_RECV: if (pop_open_ready) begin
          cur   <= cur + 1'b1;
          state <= S_R_NEXT;
        end
        S_NR_WAIT: if (got_grant) state <= S_NR_SEND;
        S_NR_SEND: if (push_open_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_grant_is_synch: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_NR_WAIT && pkt_in_valid |-> pkt_in.hdr.op == OP_SYNCH);

endmodule
