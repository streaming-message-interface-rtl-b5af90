// smi_reduce: support kernel of the reduce collective (SMI_Reduce).
//
// Every rank contributes 'count' elements (data_snd, the 'in' stream); the
// root combines the contributions element-wise with ADD, MAX or MIN (on
// 32-bit integers or on IEEE-754 single-precision values, chosen by the
// DTYPE parameter: the data type of a channel is fixed when the hardware is
// built, as in the code-generated SMI kernels) and
// hands the result to its application (data_rcv, the 'out' stream). Root and
// non-root behaviour are both present, the root is chosen at open.
//
// Flow control is credit based, with C credits: the root holds a buffer of C
// accumulators, one tile of the message. It grants a tile to every non-root
// rank by sending it a SYNCH packet (credit), once when the channel opens and
// again each time a complete tile has been reduced and forwarded to the
// application while elements remain. A non-root rank sends at most C
// elements per credit, each in a packet of its own (elements of a reduction
// are not packed). Contributions of one tile may arrive from all ranks in any
// interleaving: the root keeps, per source rank, the tile slot its next
// element goes to, and per slot the number of contributions received. Slot e
// is forwarded once all comm_size contributions are in.
// The credit-based rendezvous per tile of C elements, the C-entry
// accumulation buffer at the root and the unpacked one-element packets follow
// the SMI reference implementation; the credit also granting the first tile,
// the value of C, the per-rank slot counters and the priority of network
// contributions over the root's own are this design's choices.
//
// Timing: the root accepts one contribution per cycle (network first, its
// own application otherwise) and forwards one result per cycle. A non-root
// rank injects one element per cycle while it has credit.
// Because each packet carries one element, the payload above the first
// element of every outgoing packet is constant zero.
module smi_reduce
  import smi_pkg::*;
  import smi_fp32_pkg::*;
#(
  parameter smi_dtype_e  DTYPE     = DT_FLOAT,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned PORT      = 5,
  parameter int unsigned C         = 64,
  parameter int unsigned MAX_RANKS = 256
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
  input  smi_red_op_e         open_op,
  // contributions of this rank
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [DATA_W-1:0]   in_data,
  // reduced result (root only)
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
  localparam int unsigned SW = (C > 1) ? $clog2(C) : 1;
  localparam int unsigned KW = $clog2(C + 1);

  typedef enum logic [1:0] { S_IDLE, S_ROOT, S_NONROOT } state_e;

  state_e             state;
  logic [RANK_W-1:0]  root;
  smi_red_op_e        op;
  logic [COUNT_W-1:0] count;

  // ---------------- root state ----------------
  logic [DATA_W-1:0]  acc     [C];
  logic [RANK_W:0]    ncontrib[C];
  logic [SW-1:0]      slot_of [MAX_RANKS];  // next slot per source rank
  logic [COUNT_W-1:0] own_idx;              // own elements accepted
  logic [COUNT_W-1:0] emitted;              // results forwarded
  logic [SW-1:0]      own_slot, emit_slot;
  logic               credit_busy;          // sending credits
  logic [RANK_W:0]    credit_to;

  // ---------------- non-root state ----------------
  logic [KW-1:0]      credits;
  logic [COUNT_W-1:0] sent;

  function automatic logic [DATA_W-1:0] combine(input smi_red_op_e o,
                                                input logic [DATA_W-1:0] a,
                                                input logic [DATA_W-1:0] b);
    unique case (o)
      RED_MAX: return (DTYPE == DT_FLOAT ? fp32_less(b, a) : $signed(a) > $signed(b)) ? a : b;
      RED_MIN: return (DTYPE == DT_FLOAT ? fp32_less(a, b) : $signed(a) < $signed(b)) ? a : b;
      default: return (DTYPE == DT_FLOAT) ? fp32_add(a, b) : a + b;
    endcase
  endfunction

  function automatic logic [RANK_W:0] next_target(input logic [RANK_W:0] r);
    logic [RANK_W:0] n;
    n = r + 1'b1;
    if (n == {1'b0, root}) n = n + 1'b1;
    return n;
  endfunction

  wire is_root = (open_root == my_rank);
  assign open_ready = (state == S_IDLE);
  wire do_open = open_valid && open_ready;
  wire [RANK_W:0] first_target = (open_root == '0) ? (RANK_W+1)'(1) : '0;

  // root: choose one contribution per cycle
  wire net_take = (state == S_ROOT) && pkt_in_valid;
  wire own_ok   = (state == S_ROOT) && (own_idx < count) && (own_idx < emitted + C);
  wire own_take = own_ok && in_valid && !pkt_in_valid;

  logic [SW-1:0]     acc_slot;
  logic [DATA_W-1:0] acc_val;
  always_comb begin
    if (net_take) begin
      acc_slot = slot_of[pkt_in.hdr.src];
      acc_val  = pkt_in.payload[DATA_W-1:0];
    end else begin
      acc_slot = own_slot;
      acc_val  = in_data;
    end
  end

  // root: result output
  assign out_valid = (state == S_ROOT) && (emitted < count) &&
                     (ncontrib[emit_slot] == comm_size);
  assign out_data  = acc[emit_slot];
  wire   emit      = out_valid && out_ready;
  wire   tile_done = emit && (emit_slot == SW'(C - 1)) && (emitted + 1 < count);

  // non-root: element injection
  wire nr_send = (state == S_NONROOT) && (credits != '0) && (sent < count);

  assign in_ready     = (state == S_ROOT) ? (own_ok && !pkt_in_valid) : nr_send && pkt_out_ready;
  assign pkt_in_ready = (state == S_ROOT) || (state == S_NONROOT);

  always_comb begin
    pkt_out          = '0;
    pkt_out.hdr.src  = my_rank;
    pkt_out.hdr.port = PORT_W'(PORT);
    if (state == S_ROOT) begin
      pkt_out.hdr.dst = credit_to[RANK_W-1:0];
      pkt_out.hdr.op  = OP_SYNCH;
      pkt_out_valid   = credit_busy;
    end else begin
      pkt_out.hdr.dst   = root;
      pkt_out.hdr.op    = OP_SEND;
      pkt_out.hdr.nelem = NELEM_W'(1);
      pkt_out.payload[DATA_W-1:0] = in_data;
      pkt_out_valid     = nr_send && in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (net_take || own_take) begin
      acc[acc_slot] <= (ncontrib[acc_slot] == '0) ? acc_val
                                                 : combine(op, acc[acc_slot], acc_val);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      root        <= '0;
      op          <= RED_ADD;
      count       <= '0;
      own_idx     <= '0;
      emitted     <= '0;
      own_slot    <= '0;
      emit_slot   <= '0;
      credit_busy <= 1'b0;
      credit_to   <= '0;
      credits     <= '0;
      sent        <= '0;
      for (int i = 0; i < int'(C); i++) ncontrib[i] <= '0;
      for (int i = 0; i < int'(MAX_RANKS); i++) slot_of[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (do_open) begin
          root      <= open_root;
          op        <= open_op;
          count     <= open_count;
          own_idx   <= '0;
          emitted   <= '0;
          own_slot  <= '0;
          emit_slot <= '0;
          credits   <= '0;
          sent      <= '0;
          for (int i = 0; i < int'(C); i++) ncontrib[i] <= '0;
          for (int i = 0; i < int'(MAX_RANKS); i++) slot_of[i] <= '0;
          if (open_count == '0) begin
            state <= S_IDLE;
          end else if (is_root) begin
            state       <= S_ROOT;
            credit_to   <= first_target;
            credit_busy <= (first_target < comm_size);
          end else begin
            state <= S_NONROOT;
          end
        end
        S_ROOT: begin
          if (net_take) slot_of[pkt_in.hdr.src] <= slot_of[pkt_in.hdr.src] + 1'b1;
          if (own_take) begin
            own_idx  <= own_idx + 1'b1;
            own_slot <= own_slot + 1'b1;
          end
          if (net_take || own_take) ncontrib[acc_slot] <= ncontrib[acc_slot] + 1'b1;
          if (emit) begin
            ncontrib[emit_slot] <= '0;
            emit_slot <= emit_slot + 1'b1;
            emitted   <= emitted + 1'b1;
            if (emitted + 1 == count) state <= S_IDLE;
          end
          // credits: one SYNCH per non-root rank, at open and per tile
          if (credit_busy && pkt_out_ready) begin
            credit_to <= next_target(credit_to);
            if (next_target(credit_to) >= comm_size) credit_busy <= 1'b0;
          end
          if (tile_done) begin
            credit_to   <= first_target;
            credit_busy <= (first_target < comm_size);
          end
        end
        S_NONROOT: begin
          if (pkt_in_valid && pkt_in.hdr.op == OP_SYNCH) begin
            credits <= credits + KW'(C) - KW'(in_valid && in_ready);
          end else if (in_valid && in_ready) begin
            credits <= credits - 1'b1;
          end
          if (in_valid && in_ready) begin
            sent <= sent + 1'b1;
            if (sent + 1 == count) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Parameter rule: tile slots wrap with the slot counters.
  if ((C & (C - 1)) != 0) begin : g_c_pow2
    $error("smi_reduce: C must be a power of two");
  end

  a_root_gets_data: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_ROOT && pkt_in_valid |-> pkt_in.hdr.op == OP_SEND);
  a_credit_bound: assert property (@(posedge clk) disable iff (!rst_n)
    credits <= KW'(C));

endmodule
