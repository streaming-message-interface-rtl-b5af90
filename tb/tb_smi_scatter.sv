// tb_smi_scatter: self-checking test of the scatter support kernel.
// Four kernels, one per rank, exchange packets through an ideal network
// modelled here (in-order delivery to the destination rank, random
// acceptance stalls). Ranks open the channel at different times and run at a
// random pace. The reference result is computed here: for scatter, rank r
// receives elements r*count .. r*count+count-1 of the root's input; for
// gather, the root receives every rank's contribution in rank order. Also
// checked: exactly comm_size-1 SYNCH packets per operation, every kernel
// idle afterwards, several operations with different roots and lengths.
module tb_smi_scatter;
  import smi_pkg::*;
  localparam int N = 4, DW = 32, PORT = 4;
  localparam bit SCATTER = ("scatter" == "scatter");
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
    smi_scatter #(.DATA_W(DW), .PORT(PORT)) dut (
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

  int synchs = 0;
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
        end
      end
      for (int r = 0; r < N; r++) po_ready[r] <= ($urandom_range(0, 3) != 0);
    end
  end

  // per-rank input data and expected output
  logic [DW-1:0] src_q [N][$];
  logic [DW-1:0] exp_q [N][$];
  int in_k [N], out_k [N];
  bit running = 0;
  for (genvar r = 0; r < N; r++) begin : g_drv
    always @(posedge clk) begin
      if (in_valid[r] && in_ready[r]) in_k[r]++;
      in_valid[r] <= running && (in_k[r] < src_q[r].size()) && ($urandom_range(0, 3) != 0);
      in_data[r]  <= (in_k[r] < src_q[r].size()) ? src_q[r][in_k[r]] : '0;
      if (rst_n && out_valid[r] && out_ready[r]) begin
        check(out_k[r] < exp_q[r].size() && out_data[r] == exp_q[r][out_k[r]],
              $sformatf("rank %0d element %0d", r, out_k[r]));
        out_k[r]++;
      end
      out_ready[r] <= ($urandom_range(0, 3) != 0);
    end
  end

  task automatic run(input int root, input int count);
    int done;
    synchs = 0;
    for (int r = 0; r < N; r++) begin
      src_q[r].delete(); exp_q[r].delete(); in_k[r] = 0; out_k[r] = 0;
    end
    if (SCATTER) begin
      for (int r = 0; r < N; r++)
        for (int i = 0; i < count; i++) begin
          logic [DW-1:0] v;
          v = DW'($urandom);
          src_q[root].push_back(v);
          exp_q[r].push_back(v);
        end
    end else begin
      for (int r = 0; r < N; r++)
        for (int i = 0; i < count; i++) begin
          logic [DW-1:0] v;
          v = DW'($urandom);
          src_q[r].push_back(v);
          exp_q[root].push_back(v);
        end
    end
    open_count = count; open_root = 8'(root);
    running = 1;
    for (int r = N - 1; r >= 0; r--) begin
      open_valid[r] <= 1;
      @(posedge clk);
      open_valid[r] <= 0;
      repeat ($urandom_range(0, 15)) @(posedge clk);
    end
    done = 0;
    while (done < N) begin
      @(posedge clk);
      done = 0;
      for (int r = 0; r < N; r++) if (out_k[r] == exp_q[r].size()) done++;
    end
    repeat (10) @(posedge clk);
    running = 0;
    check(synchs == N - 1, $sformatf("%0d SYNCH packets", synchs));
    for (int r = 0; r < N; r++) check(open_ready[r] && in_k[r] == src_q[r].size(), "kernels idle, inputs consumed");
  endtask

  initial begin
    open_valid = 0; open_count = 0; open_root = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run(0, 10);
    run(2, 23);
    run(3, 1);
    run(1, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
