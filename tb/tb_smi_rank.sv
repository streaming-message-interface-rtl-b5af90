// tb_smi_rank: end-to-end test of the SMI transport layer on eight ranks.
//
// Eight smi_rank instances, all with their default parameters, are cabled
// together: port 1 of rank i to port 0 of rank i+1 (a linear bus), and
// port 3 of rank i to port 2 of rank (i+2) mod 8. The testbench computes
// shortest-path routes over a list of usable links and writes every
// kernel's routing table through the configuration ports:
//   phase 1 routes over the bus links only (up to 7 hops),
//   phase 2 routes over all links; only the tables change.
// Each phase runs point-to-point messages (multi-hop, a message within one
// rank, messages arriving on a different kernel than their endpoint's), a
// broadcast over all ranks, single-precision reductions over all ranks
// spanning several credit tiles, a scatter and a gather. Phase 2 also runs
// a stencil-style halo exchange: every rank sends to all its cabled
// neighbours at once over four point-to-point channels. All received data is compared with reference values
// computed here. The testbench counts how often each transport mechanism
// happened (transit forwarding, CKS-to-CKS and CKR-to-CKR hand-over,
// local delivery, endpoint stalls under backpressure, R-limit poll
// switches, collective rendezvous and credits) and fails any that never did.
module tb_smi_rank;
  import smi_pkg::*;
  localparam int NR = 8, NP = 4, NPORT = 8, NPP = 4, DW = 32;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- DUT signals ----------------
  logic cfg_we [NR]; logic cfg_ckr [NR]; logic [1:0] cfg_ck [NR];
  logic [RANK_W-1:0] cfg_addr [NR]; smi_rt_entry_t cfg_entry [NR];
  logic [NP-1:0] no_valid [NR], no_ready [NR], ni_valid [NR], ni_ready [NR];
  smi_pkt_t [NP-1:0] no_data [NR], ni_data [NR];
  logic [NPP-1:0] s_open_valid [NR], s_open_ready [NR], s_valid [NR], s_ready [NR];
  logic [COUNT_W-1:0] s_open_count [NR][NPP];
  logic [RANK_W-1:0] s_open_dst [NR][NPP];
  logic [DW-1:0] s_data [NR][NPP];
  logic [NPP-1:0] r_open_valid [NR], r_open_ready [NR], r_valid [NR], r_ready [NR];
  logic [COUNT_W-1:0] r_open_count [NR][NPP];
  logic [RANK_W-1:0] r_open_src [NR][NPP];
  logic [DW-1:0] r_data [NR][NPP];
  logic b_open_valid [NR], b_open_ready [NR], b_in_valid [NR], b_in_ready [NR];
  logic b_out_valid [NR], b_out_ready [NR];
  logic [DW-1:0] b_in_data [NR], b_out_data [NR];
  logic [COUNT_W-1:0] b_count; logic [RANK_W-1:0] b_root;
  logic x_open_valid [NR], x_open_ready [NR], x_in_valid [NR], x_in_ready [NR];
  logic x_out_valid [NR], x_out_ready [NR];
  logic [DW-1:0] x_in_data [NR], x_out_data [NR];
  logic [COUNT_W-1:0] x_count; logic [RANK_W-1:0] x_root; smi_red_op_e x_op;
  // scatter (sc_) and gather (ga_)
  logic sc_open_valid [NR], sc_open_ready [NR], sc_in_valid [NR], sc_in_ready [NR];
  logic sc_out_valid [NR], sc_out_ready [NR];
  logic [DW-1:0] sc_in_data [NR], sc_out_data [NR];
  logic ga_open_valid [NR], ga_open_ready [NR], ga_in_valid [NR], ga_in_ready [NR];
  logic ga_out_valid [NR], ga_out_ready [NR];
  logic [DW-1:0] ga_in_data [NR], ga_out_data [NR];
  logic [COUNT_W-1:0] sg_count; logic [RANK_W-1:0] sg_root;

  for (genvar i = 0; i < NR; i++) begin : g_r
    smi_rank dut (
      .clk, .rst_n, .my_rank(8'(i)), .comm_size(9'(NR)),
      .cfg_we(cfg_we[i]), .cfg_ckr(cfg_ckr[i]), .cfg_ck(cfg_ck[i]),
      .cfg_addr(cfg_addr[i]), .cfg_entry(cfg_entry[i]),
      .net_out_valid(no_valid[i]), .net_out_ready(no_ready[i]), .net_out_data(no_data[i]),
      .net_in_valid(ni_valid[i]), .net_in_ready(ni_ready[i]), .net_in_data(ni_data[i]),
      .send_open_valid(s_open_valid[i]), .send_open_ready(s_open_ready[i]),
      .send_open_count(s_open_count[i]), .send_open_dst(s_open_dst[i]),
      .send_valid(s_valid[i]), .send_ready(s_ready[i]), .send_data(s_data[i]),
      .recv_open_valid(r_open_valid[i]), .recv_open_ready(r_open_ready[i]),
      .recv_open_count(r_open_count[i]), .recv_open_src(r_open_src[i]),
      .recv_valid(r_valid[i]), .recv_ready(r_ready[i]), .recv_data(r_data[i]),
      .bcast_open_valid(b_open_valid[i]), .bcast_open_ready(b_open_ready[i]),
      .bcast_open_count(b_count), .bcast_open_root(b_root),
      .bcast_in_valid(b_in_valid[i]), .bcast_in_ready(b_in_ready[i]), .bcast_in_data(b_in_data[i]),
      .bcast_out_valid(b_out_valid[i]), .bcast_out_ready(b_out_ready[i]), .bcast_out_data(b_out_data[i]),
      .reduce_open_valid(x_open_valid[i]), .reduce_open_ready(x_open_ready[i]),
      .reduce_open_count(x_count), .reduce_open_root(x_root), .reduce_open_op(x_op),
      .reduce_in_valid(x_in_valid[i]), .reduce_in_ready(x_in_ready[i]), .reduce_in_data(x_in_data[i]),
      .reduce_out_valid(x_out_valid[i]), .reduce_out_ready(x_out_ready[i]), .reduce_out_data(x_out_data[i]),
      .scatter_open_valid(sc_open_valid[i]), .scatter_open_ready(sc_open_ready[i]),
      .scatter_open_count(sg_count), .scatter_open_root(sg_root),
      .scatter_in_valid(sc_in_valid[i]), .scatter_in_ready(sc_in_ready[i]), .scatter_in_data(sc_in_data[i]),
      .scatter_out_valid(sc_out_valid[i]), .scatter_out_ready(sc_out_ready[i]), .scatter_out_data(sc_out_data[i]),
      .gather_open_valid(ga_open_valid[i]), .gather_open_ready(ga_open_ready[i]),
      .gather_open_count(sg_count), .gather_open_root(sg_root),
      .gather_in_valid(ga_in_valid[i]), .gather_in_ready(ga_in_ready[i]), .gather_in_data(ga_in_data[i]),
      .gather_out_valid(ga_out_valid[i]), .gather_out_ready(ga_out_ready[i]), .gather_out_data(ga_out_data[i])
    );
  end

  // ---------------- cabling ----------------
  // peer_r/peer_p: where port p of rank i is cabled to (-1: open)
  int peer_r [NR][NP];
  int peer_p [NR][NP];
  initial begin
    for (int i = 0; i < NR; i++)
      for (int p = 0; p < NP; p++) begin peer_r[i][p] = -1; peer_p[i][p] = -1; end
    for (int i = 0; i < NR - 1; i++) begin
      peer_r[i][1] = i + 1; peer_p[i][1] = 0; peer_r[i+1][0] = i; peer_p[i+1][0] = 1;
    end
    for (int i = 0; i < NR; i++) begin
      peer_r[i][3] = (i + 2) % NR; peer_p[i][3] = 2;
      peer_r[(i + 2) % NR][2] = i; peer_p[(i + 2) % NR][2] = 3;
    end
  end
  always_comb begin
    for (int i = 0; i < NR; i++)
      for (int p = 0; p < NP; p++) begin
        if (peer_r[i][p] >= 0) begin
          ni_valid[i][p] = no_valid[peer_r[i][p]][peer_p[i][p]];
          ni_data[i][p]  = no_data[peer_r[i][p]][peer_p[i][p]];
          no_ready[i][p] = ni_ready[peer_r[i][p]][peer_p[i][p]];
        end else begin
          ni_valid[i][p] = 1'b0; ni_data[i][p] = '0; no_ready[i][p] = 1'b0;
        end
      end
  end

  // ---------------- routing ----------------
  int hops [NR][NR];
  task automatic program_routes(input bit use_all);
    for (int a = 0; a < NR; a++)
      for (int b = 0; b < NR; b++) hops[a][b] = (a == b) ? 0 : 1000;
    for (int a = 0; a < NR; a++)
      for (int p = 0; p < NP; p++)
        if (peer_r[a][p] >= 0 && (use_all || p < 2)) hops[a][peer_r[a][p]] = 1;
    for (int k = 0; k < NR; k++)
      for (int a = 0; a < NR; a++)
        for (int b = 0; b < NR; b++)
          if (hops[a][k] + hops[k][b] < hops[a][b]) hops[a][b] = hops[a][k] + hops[k][b];
    // CKS tables by destination rank, CKR tables by SMI port: port s is served
    // by endpoint s, application s div 4 of kernel pair s mod 4
    for (int k = 0; k < NP; k++) begin
      for (int d = 0; d < NR; d++) begin
        for (int i = 0; i < NR; i++) begin
          int hop;
          hop = 0;
          for (int p = NP - 1; p >= 0; p--)
            if (peer_r[i][p] >= 0 && (use_all || p < 2) && hops[peer_r[i][p]][d] == hops[i][d] - 1) hop = p;
          cfg_we[i] <= 1; cfg_ckr[i] <= 0; cfg_ck[i] <= 2'(k); cfg_addr[i] <= 8'(d);
          cfg_entry[i] <= (hop == k) ? '{kind: RT_NET, idx: '0} : '{kind: RT_CK, idx: RT_IDX_W'(hop)};
        end
        @(posedge clk);
      end
      for (int s = 0; s < NPORT; s++) begin
        for (int i = 0; i < NR; i++) begin
          cfg_we[i] <= 1; cfg_ckr[i] <= 1; cfg_ck[i] <= 2'(k); cfg_addr[i] <= 8'(s);
          cfg_entry[i] <= (s % NP == k) ? '{kind: RT_APP, idx: RT_IDX_W'(s / NP)}
                                         : '{kind: RT_CK, idx: RT_IDX_W'(s % NP)};
        end
        @(posedge clk);
      end
    end
    for (int i = 0; i < NR; i++) cfg_we[i] <= 0;
    @(posedge clk);
  endtask

  // ---------------- mechanism counters ----------------
  int n_transit = 0, n_s2s = 0, n_r2r = 0, n_local = 0, n_stall = 0, n_rlimit = 0;
  int n_synch = 0, n_netpkts = 0, n_reconfig = 0, n_bcast = 0, n_reduce = 0;
  int n_scatter = 0, n_gather = 0, n_halo = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NR; i++) begin
      for (int p = 0; p < NP; p++) if (no_valid[i][p] && no_ready[i][p]) begin
        n_netpkts++;
      end
      for (int p = 0; p < NPP; p++) if (s_valid[i][p] && !s_ready[i][p]) n_stall++;
    end
  end
  for (genvar i = 0; i < NR; i++) begin : g_mon
    for (genvar k = 0; k < NP; k++) begin : g_k
      localparam int NA = NPORT / NP;   // endpoints on each pair
      always @(posedge clk) if (rst_n) begin
        if (g_r[i].dut.g_ck[k].u_ckr.out_valid[NA] && g_r[i].dut.g_ck[k].u_ckr.out_ready[NA]) n_transit++;
        // SYNCH packets counted where they reach their endpoint
        for (int a = 0; a < NA; a++)
          if (g_r[i].dut.g_ck[k].u_ckr.out_valid[a] && g_r[i].dut.g_ck[k].u_ckr.out_ready[a] &&
              g_r[i].dut.g_ck[k].u_ckr.out_data[a].hdr.op == OP_SYNCH) n_synch++;
        if (g_r[i].dut.g_ck[k].u_cks.out_valid[1] && g_r[i].dut.g_ck[k].u_cks.out_ready[1]) n_local++;
        if (|(g_r[i].dut.g_ck[k].u_cks.out_valid[4:2] & g_r[i].dut.g_ck[k].u_cks.out_ready[4:2])) n_s2s++;
        if (|(g_r[i].dut.g_ck[k].u_ckr.out_valid[NA+3:NA+1] & g_r[i].dut.g_ck[k].u_ckr.out_ready[NA+3:NA+1])) n_r2r++;
        if (g_r[i].dut.g_ck[k].u_cks.take && g_r[i].dut.g_ck[k].u_cks.u_poll.cnt == 3'(7)) n_rlimit++;
      end
    end
  end

  // ---------------- point-to-point ----------------
  // one send/receive slot per (rank, endpoint); the test sets them up
  logic [DW-1:0] p2p_msg [NR][NPP][$];
  int s_k [NR][NPP], r_k [NR][NPP], r_n [NR][NPP];
  int r_from [NR][NPP], r_ep [NR][NPP];
  for (genvar i = 0; i < NR; i++) begin : g_p2p
    for (genvar e = 0; e < NPP; e++) begin : g_e
      always @(posedge clk) begin
        if (s_valid[i][e] && s_ready[i][e]) s_k[i][e]++;
        if (s_k[i][e] < p2p_msg[i][e].size()) begin
          s_valid[i][e] <= ($urandom_range(0, 7) != 0);
          s_data[i][e]  <= p2p_msg[i][e][s_k[i][e]];
        end else s_valid[i][e] <= 0;
        if (rst_n && r_valid[i][e] && r_ready[i][e]) begin
          check(r_data[i][e] == p2p_msg[r_from[i][e]][r_ep[i][e]][r_k[i][e]],
                $sformatf("p2p rank %0d ep %0d element %0d", i, e, r_k[i][e]));
          r_k[i][e]++;
        end
        r_ready[i][e] <= ($urandom_range(0, 3) != 0);
      end
    end
  end

  task automatic p2p_phase();
    // (src rank, endpoint) -> (dst rank, same endpoint/port), lengths
    int src [4] = '{0, 6, 4, 3};
    int ep  [4] = '{0, 0, 1, 1};
    int dst [4] = '{7, 1, 4, 2};
    int len [4] = '{200, 100, 50, 30};
    for (int m = 0; m < 4; m++) begin
      p2p_msg[src[m]][ep[m]].delete();
      for (int n = 0; n < len[m]; n++) p2p_msg[src[m]][ep[m]].push_back(DW'($urandom));
      s_k[src[m]][ep[m]] = 0;
      r_k[dst[m]][ep[m]] = 0; r_n[dst[m]][ep[m]] = len[m];
      r_from[dst[m]][ep[m]] = src[m]; r_ep[dst[m]][ep[m]] = ep[m];
    end
    // open receivers first, then senders (eager protocol)
    for (int m = 0; m < 4; m++) begin
      r_open_valid[dst[m]][ep[m]] <= 1; r_open_count[dst[m]][ep[m]] <= len[m];
      r_open_src[dst[m]][ep[m]] <= 8'(src[m]);
      s_open_valid[src[m]][ep[m]] <= 1; s_open_count[src[m]][ep[m]] <= len[m];
      s_open_dst[src[m]][ep[m]] <= 8'(dst[m]);
    end
    @(posedge clk);
    for (int i = 0; i < NR; i++) begin r_open_valid[i] <= '0; s_open_valid[i] <= '0; end
    for (int m = 0; m < 4; m++) begin
      while (r_k[dst[m]][ep[m]] < len[m]) @(posedge clk);
      check(1'b1, "message complete");
    end
    repeat (5) @(posedge clk);
    for (int m = 0; m < 4; m++) check(r_open_ready[dst[m]][ep[m]] && s_open_ready[src[m]][ep[m]], "channels closed");
    // drop the finished messages so the senders stay idle
    for (int m = 0; m < 4; m++) begin p2p_msg[src[m]][ep[m]].delete(); s_k[src[m]][ep[m]] = 0; end
  endtask

  // halo exchange as in a 2D stencil: every rank sends a message to each
  // rank cabled to it, through point-to-point port p for network port p,
  // all at the same time; rank j receives on port p from the rank whose
  // port p is cabled to j.
  task automatic halo_phase(input int len);
    int n_msg;
    for (int i = 0; i < NR; i++)
      for (int p = 0; p < NP; p++)
        if (peer_r[i][p] >= 0) begin
          int j;
          j = peer_r[i][p];
          p2p_msg[i][p].delete();
          for (int n = 0; n < len; n++) p2p_msg[i][p].push_back(DW'($urandom));
          s_k[i][p] = 0;
          r_k[j][p] = 0; r_n[j][p] = len; r_from[j][p] = i; r_ep[j][p] = p;
          r_open_valid[j][p] <= 1; r_open_count[j][p] <= len; r_open_src[j][p] <= 8'(i);
          s_open_valid[i][p] <= 1; s_open_count[i][p] <= len; s_open_dst[i][p] <= 8'(j);
        end
    @(posedge clk);
    for (int i = 0; i < NR; i++) begin r_open_valid[i] <= '0; s_open_valid[i] <= '0; end
    n_msg = 0;
    for (int i = 0; i < NR; i++)
      for (int p = 0; p < NP; p++)
        if (peer_r[i][p] >= 0) begin
          while (r_k[peer_r[i][p]][p] < len) @(posedge clk);
          n_msg++;
        end
    check(n_msg == 30, "halo: 30 neighbour messages (8 ranks x 4 ports minus the 2 open bus ends)");
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(&r_open_ready[i] && &s_open_ready[i], "halo channels closed");
    for (int i = 0; i < NR; i++)
      for (int p = 0; p < NP; p++) begin p2p_msg[i][p].delete(); s_k[i][p] = 0; end
    n_halo++;
  endtask

  // ---------------- broadcast ----------------
  logic [DW-1:0] bmsg [$];
  int b_k, b_got [NR];
  always @(posedge clk) begin
    for (int i = 0; i < NR; i++) begin
      if (i == int'(b_root)) begin
        if (b_in_valid[i] && b_in_ready[i]) b_k++;
        b_in_valid[i] <= (b_k < bmsg.size()) && ($urandom_range(0, 3) != 0);
        b_in_data[i]  <= (b_k < bmsg.size()) ? bmsg[b_k] : '0;
      end else b_in_valid[i] <= 0;
      if (rst_n && b_out_valid[i] && b_out_ready[i]) begin
        check(b_out_data[i] == bmsg[b_got[i]], $sformatf("bcast rank %0d element %0d", i, b_got[i]));
        b_got[i]++;
      end
      b_out_ready[i] <= ($urandom_range(0, 3) != 0);
    end
  end

  task automatic bcast_phase(input int root, input int count);
    int done_cnt;
    bmsg.delete();
    for (int n = 0; n < count; n++) bmsg.push_back(DW'($urandom));
    b_root = 8'(root); b_count = count; b_k = 0;
    for (int i = 0; i < NR; i++) b_got[i] = 0;
    for (int i = 0; i < NR; i++) b_open_valid[i] <= 1;
    @(posedge clk);
    for (int i = 0; i < NR; i++) b_open_valid[i] <= 0;
    done_cnt = 0;
    while (done_cnt < NR - 1) begin
      @(posedge clk);
      done_cnt = 0;
      for (int i = 0; i < NR; i++) if (i != root && b_got[i] == count) done_cnt++;
    end
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(b_open_ready[i], "bcast kernels idle");
    n_bcast++;
    bmsg.delete();
  endtask

  // ---------------- reduce ----------------
  // The reduce kernel works on single-precision values. Contributions are
  // quarter-integers, so every sum is exact whatever the order in which the
  // root combines them, and the expected result is computed on integers.
  // k/4 as an IEEE-754 binary32 word (exact for |k| < 2^24)
  function automatic logic [31:0] to_f(input int k);
    int unsigned m;
    int p;
    if (k == 0) return '0;
    m = (k < 0) ? -k : k;
    p = 31;
    while (!m[p]) p--;
    return {k < 0, 8'(p - 2 + 127), 23'(m << (23 - p))};
  endfunction

  logic [DW-1:0] xcontrib [NR][$];
  int xint [NR][$];
  logic [DW-1:0] xexp [$];
  int x_k [NR], x_got;
  always @(posedge clk) begin
    for (int i = 0; i < NR; i++) begin
      if (x_in_valid[i] && x_in_ready[i]) x_k[i]++;
      x_in_valid[i] <= (x_k[i] < xcontrib[i].size()) && ($urandom_range(0, 3) != 0);
      x_in_data[i]  <= (x_k[i] < xcontrib[i].size()) ? xcontrib[i][x_k[i]] : '0;
      if (rst_n && x_out_valid[i] && x_out_ready[i]) begin
        check(i == int'(x_root) && x_out_data[i] == xexp[x_got], $sformatf("reduce element %0d", x_got));
        x_got++;
      end
      x_out_ready[i] <= ($urandom_range(0, 3) != 0);
    end
  end

  task automatic reduce_phase(input int root, input int count, input smi_red_op_e o);
    for (int i = 0; i < NR; i++) begin
      xcontrib[i].delete(); xint[i].delete();
      for (int n = 0; n < count; n++) xint[i].push_back(int'($urandom_range(0, 100000)) - 50000);
      foreach (xint[i][n]) xcontrib[i].push_back(to_f(xint[i][n]));
      x_k[i] = 0;
    end
    xexp.delete();
    for (int n = 0; n < count; n++) begin
      int v;
      v = xint[0][n];
      for (int i = 1; i < NR; i++)
        case (o)
          RED_MAX: v = (xint[i][n] > v) ? xint[i][n] : v;
          RED_MIN: v = (xint[i][n] < v) ? xint[i][n] : v;
          default: v = v + xint[i][n];
        endcase
      xexp.push_back(to_f(v));
    end
    x_root = 8'(root); x_count = count; x_op = o; x_got = 0;
    for (int i = 0; i < NR; i++) x_open_valid[i] <= 1;
    @(posedge clk);
    for (int i = 0; i < NR; i++) x_open_valid[i] <= 0;
    while (x_got < count) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(x_open_ready[i], "reduce kernels idle");
    n_reduce++;
    for (int i = 0; i < NR; i++) xcontrib[i].delete();
  endtask

  // ---------------- scatter and gather ----------------
  // scatter: the root's stream is sc_msg (rank-major), rank i receives
  // sc_msg[i*count ...]; gather: rank i sends ga_msg[i*count ...] and the
  // root receives all of ga_msg in rank order.
  logic [DW-1:0] sc_msg [$], ga_msg [$];
  int sc_k, sc_got [NR], ga_k [NR], ga_got;
  int sg_n;   // sg_count as an int
  always @(posedge clk) begin
    for (int i = 0; i < NR; i++) begin
      if (i == int'(sg_root)) begin
        if (sc_in_valid[i] && sc_in_ready[i]) sc_k++;
        sc_in_valid[i] <= (sc_k < sc_msg.size()) && ($urandom_range(0, 3) != 0);
        sc_in_data[i]  <= (sc_k < sc_msg.size()) ? sc_msg[sc_k] : '0;
      end else sc_in_valid[i] <= 0;
      if (rst_n && sc_out_valid[i] && sc_out_ready[i]) begin
        check(sc_out_data[i] == sc_msg[i * sg_n + sc_got[i]],
              $sformatf("scatter rank %0d element %0d", i, sc_got[i]));
        sc_got[i]++;
      end
      sc_out_ready[i] <= ($urandom_range(0, 3) != 0);

      if (ga_in_valid[i] && ga_in_ready[i]) ga_k[i]++;
      ga_in_valid[i] <= (ga_k[i] < sg_n) && (ga_msg.size() != 0) && ($urandom_range(0, 3) != 0);
      if (ga_k[i] < sg_n && ga_msg.size() != 0) ga_in_data[i] <= ga_msg[i * sg_n + ga_k[i]];
      if (rst_n && ga_out_valid[i] && ga_out_ready[i]) begin
        check(i == int'(sg_root) && ga_out_data[i] == ga_msg[ga_got], $sformatf("gather element %0d", ga_got));
        ga_got++;
      end
      ga_out_ready[i] <= ($urandom_range(0, 3) != 0);
    end
  end

  task automatic scatter_phase(input int root, input int count);
    int done_cnt;
    sc_msg.delete();
    for (int n = 0; n < NR * count; n++) sc_msg.push_back(DW'($urandom));
    sg_root = 8'(root); sg_count = count; sg_n = count; sc_k = 0;
    for (int i = 0; i < NR; i++) sc_got[i] = 0;
    for (int i = 0; i < NR; i++) sc_open_valid[i] <= 1;
    @(posedge clk);
    for (int i = 0; i < NR; i++) sc_open_valid[i] <= 0;
    done_cnt = 0;
    while (done_cnt < NR) begin
      @(posedge clk);
      done_cnt = 0;
      for (int i = 0; i < NR; i++) if (sc_got[i] == count) done_cnt++;
    end
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(sc_open_ready[i], "scatter kernels idle");
    n_scatter++;
    sc_msg.delete();
  endtask

  task automatic gather_phase(input int root, input int count);
    ga_msg.delete();
    sg_root = 8'(root); sg_count = count; sg_n = count; ga_got = 0;
    for (int i = 0; i < NR; i++) ga_k[i] = 0;
    for (int n = 0; n < NR * count; n++) ga_msg.push_back(DW'($urandom));
    for (int i = 0; i < NR; i++) ga_open_valid[i] <= 1;
    @(posedge clk);
    for (int i = 0; i < NR; i++) ga_open_valid[i] <= 0;
    while (ga_got < NR * count) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int i = 0; i < NR; i++) check(ga_open_ready[i], "gather kernels idle");
    n_gather++;
    ga_msg.delete();
  endtask

  // ---------------- sequence ----------------
  int synch_before;
  initial begin
    for (int i = 0; i < NR; i++) begin
      cfg_we[i] = 0; cfg_ckr[i] = 0; cfg_ck[i] = 0; cfg_addr[i] = 0; cfg_entry[i] = '0;
      s_open_valid[i] = '0; r_open_valid[i] = '0; s_valid[i] = '0;
      b_open_valid[i] = 0; x_open_valid[i] = 0; b_in_valid[i] = 0; x_in_valid[i] = 0;
      sc_open_valid[i] = 0; ga_open_valid[i] = 0; sc_in_valid[i] = 0; ga_in_valid[i] = 0;
      sc_got[i] = 0; ga_k[i] = 0;
      for (int e = 0; e < NPP; e++) begin
        s_k[i][e] = 0; r_k[i][e] = 0; r_n[i][e] = 0; r_from[i][e] = 0; r_ep[i][e] = 0;
        s_open_count[i][e] = 0; s_open_dst[i][e] = 0; r_open_count[i][e] = 0; r_open_src[i][e] = 0;
        s_data[i][e] = 0;
      end
      x_k[i] = 0; b_got[i] = 0;
    end
    b_k = 0; b_root = 0; b_count = 0; x_root = 0; x_count = 0; x_op = RED_ADD; x_got = 0;
    sg_root = 0; sg_count = 0; sg_n = 0; sc_k = 0; ga_got = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 1: bus routes
    program_routes(0);
    check(hops[0][7] == 7, "bus: 7 hops from rank 0 to rank 7");
    p2p_phase();
    synch_before = n_synch;
    bcast_phase(2, 100);
    check(n_synch - synch_before == NR - 1, "bcast: one ready notification per non-root rank");
    synch_before = n_synch;
    reduce_phase(5, 150, RED_ADD);
    check(n_synch - synch_before == (NR - 1) * 3, "reduce: credits for 3 tiles of 64");
    synch_before = n_synch;
    scatter_phase(1, 40);
    check(n_synch - synch_before == NR - 1, "scatter: one rendezvous per non-root rank");
    synch_before = n_synch;
    gather_phase(6, 33);
    check(n_synch - synch_before == NR - 1, "gather: one rendezvous per non-root rank");

    // phase 2: same hardware, new routes over all links
    program_routes(1);
    n_reconfig++;
    check(hops[0][7] < 7, "all links: shorter path from rank 0 to rank 7");
    p2p_phase();
    halo_phase(64);
    bcast_phase(7, 20);
    reduce_phase(0, 70, RED_MAX);
    reduce_phase(3, 5, RED_MIN);
    scatter_phase(4, 7);
    gather_phase(0, 60);

    $display("cycles: %0t", $time);
    $display("mechanisms: transit=%0d cks2cks=%0d ckr2ckr=%0d local=%0d stall=%0d rlimit=%0d synch=%0d reconfig=%0d bcast=%0d reduce=%0d scatter=%0d gather=%0d netpkts=%0d",
             n_transit, n_s2s, n_r2r, n_local, n_stall, n_rlimit, n_synch, n_reconfig, n_bcast, n_reduce,
             n_scatter, n_gather, n_netpkts);
    check(n_transit > 0, "transit forwarding happened");
    check(n_s2s > 0, "CKS to CKS hand-over happened");
    check(n_r2r > 0, "CKR to CKR hand-over happened");
    check(n_local > 0, "local delivery happened");
    check(n_stall > 0, "endpoint backpressure stall happened");
    check(n_rlimit > 0, "R-limit poll switch happened");
    check(n_synch > 0, "rendezvous / credit packets happened");
    check(n_reconfig > 0 && n_bcast == 2 && n_reduce == 3, "reconfiguration and collectives happened");
    check(n_scatter == 2 && n_gather == 2, "scatter and gather happened");
    check(n_halo == 1, "halo exchange happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
