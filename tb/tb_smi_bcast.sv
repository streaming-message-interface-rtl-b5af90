// tb_smi_bcast: self-checking test of the broadcast support kernel.
// Four kernels, one per rank, exchange packets through an ideal network
// modelled here (any packet is delivered to the kernel of its destination
// rank, in order, with random acceptance stalls). Ranks open the channel at
// different times. Checks: every non-root rank receives the root's elements
// in order; the root sends nothing before all comm_size-1 SYNCH
// notifications arrived; exactly comm_size-1 SYNCH packets per broadcast;
// every data packet carries the broadcast port; several broadcasts with
// different roots and lengths in a row.
module tb_smi_bcast;
  import smi_pkg::*;
  localparam int N = 4, DW = 32, PORT = 2;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] open_valid, open_ready, in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0] po_valid, po_ready, pi_valid, pi_ready;
  logic [COUNT_W-1:0] open_count;
  logic [RANK_W-1:0] open_root;
  logic [DW-1:0] in_data [N];
  logic [DW-1:0] out_data [N];
  smi_pkt_t po [N];
  smi_pkt_t pi [N];
  smi_pkt_t netq [N][$];

  for (genvar r = 0; r < N; r++) begin : g_rank
    smi_bcast #(.DATA_W(DW), .PORT(PORT)) dut (
      .clk, .rst_n, .my_rank(8'(r)), .comm_size(9'(N)),
      .open_valid(open_valid[r]), .open_ready(open_ready[r]), .open_count, .open_root,
      .in_valid(in_valid[r]), .in_ready(in_ready[r]), .in_data(in_data[r]),
      .out_valid(out_valid[r]), .out_ready(out_ready[r]), .out_data(out_data[r]),
      .pkt_out_valid(po_valid[r]), .pkt_out_ready(po_ready[r]), .pkt_out(po[r]),
      .pkt_in_valid(pi_valid[r]), .pkt_in_ready(pi_ready[r]), .pkt_in(pi[r]));
  end

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

  // ideal network
  int synchs = 0, data_pkts = 0, data_before_ready = 0;
  always_comb
    for (int r = 0; r < N; r++) begin
      pi_valid[r] = netq[r].size() > 0;
      pi[r] = (netq[r].size() > 0) ? netq[r][0] : '0;
    end
  always @(posedge clk) begin
    if (rst_n) begin
      for (int r = 0; r < N; r++) begin
        if (pi_valid[r] && pi_ready[r]) void'(netq[r].pop_front());
        if (po_valid[r] && po_ready[r]) begin
          netq[po[r].hdr.dst].push_back(po[r]);
          check(po[r].hdr.port == PORT && po[r].hdr.src == 8'(r), "packet header");
          if (po[r].hdr.op == OP_SYNCH) synchs++;
          else begin
            data_pkts++;
            if (synchs < N - 1) data_before_ready++;
          end
        end
      end
      for (int r = 0; r < N; r++) po_ready[r] <= ($urandom_range(0, 3) != 0);
    end
  end

  logic [DW-1:0] msg [$];
  int got [N];

  task automatic bcast(input int root, input int count);
    int sent;
    msg.delete();
    for (int i = 0; i < count; i++) msg.push_back(DW'($urandom));
    synchs = 0; data_before_ready = 0;
    for (int r = 0; r < N; r++) got[r] = 0;
    open_count = count; open_root = 8'(root);
    fork
      // staggered opens: root first, the others later
      for (int r = 0; r < N; r++) begin
        open_valid[r] <= 1;
        @(posedge clk);
        while (!open_ready[r]) @(posedge clk);
        open_valid[r] <= 0;
        repeat ($urandom_range(0, 20)) @(posedge clk);
      end
      begin
        sent = 0;
        while (sent < count) begin
          in_valid[root] <= 1; in_data[root] <= msg[sent];
          @(posedge clk);
          if (in_ready[root]) sent++;
        end
        in_valid[root] <= 0;
      end
      begin
        int done_ranks;
        done_ranks = 0;
        while (done_ranks < N - 1) begin
          @(posedge clk);
          done_ranks = 0;
          for (int r = 0; r < N; r++) begin
            if (r != root && out_valid[r] && out_ready[r]) begin
              check(out_data[r] == msg[got[r]], $sformatf("rank %0d element %0d", r, got[r]));
              got[r]++;
            end
            if (r != root && got[r] == count) done_ranks++;
          end
        end
      end
    join
    repeat (10) @(posedge clk);
    check(synchs == N - 1, $sformatf("%0d SYNCH packets", synchs));
    check(data_before_ready == 0, "no data before all ranks ready");
    for (int r = 0; r < N; r++) check(open_ready[r], "all kernels idle again");
  endtask

  initial begin
    open_valid = 0; in_valid = 0; out_ready = '1; open_count = 0; open_root = 0;
    for (int r = 0; r < N; r++) in_data[r] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    bcast(2, 30);
    check(data_pkts == 5 * (N - 1), "30 elements = 5 packets to each of 3 ranks");
    bcast(0, 7);
    bcast(3, 100);
    bcast(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
