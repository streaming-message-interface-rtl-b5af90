// tb_smi_reduce: self-checking test of the reduce support kernel.
// Four kernels, one per rank, with a tile of C = 8 credits, exchange packets
// through an ideal network modelled here (random acceptance stalls). Every
// rank feeds random contributions at a random pace; the root's result
// stream is compared with the element-wise ADD / MAX / MIN computed here.
// The kernel is built for single-precision data (the default); the
// contributions are quarter-integers so that every sum is exact in any
// combination order and the reference can be computed on integers. The
// test also runs with DT = DT_INT (plain 32-bit integers).
// Also checked: one credit (SYNCH) per non-root rank per tile, i.e.
// (comm_size-1) * ceil(count/C) per reduction; no non-root rank sends more
// elements than its credits allow (the tile flow control); one element per
// data packet; lengths that are and are not multiples of C; changing roots.
module tb_smi_reduce #(parameter smi_pkg::smi_dtype_e DT = smi_pkg::DT_FLOAT);
  import smi_pkg::*;
  localparam int N = 4, DW = 32, PORT = 3, C = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] open_valid, open_ready, in_valid, in_ready, out_valid, out_ready;
  logic [N-1:0] po_valid, po_ready, pi_valid, pi_ready;
  logic [COUNT_W-1:0] open_count;
  logic [RANK_W-1:0] open_root;
  smi_red_op_e open_op;
  logic [DW-1:0] in_data [N];
  logic [DW-1:0] out_data [N];
  smi_pkt_t po [N];
  smi_pkt_t pi [N];
  smi_pkt_t netq [N][$];

  for (genvar r = 0; r < N; r++) begin : g_rank
    smi_reduce #(.DTYPE(DT), .DATA_W(DW), .PORT(PORT), .C(C), .MAX_RANKS(8)) dut (
      .clk, .rst_n, .my_rank(8'(r)), .comm_size(9'(N)),
      .open_valid(open_valid[r]), .open_ready(open_ready[r]), .open_count, .open_root, .open_op,
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

  int credits_sent = 0;
  int granted [N];
  int sent_by [N];
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
          if (po[r].hdr.op == OP_SYNCH) begin
            credits_sent++;
            granted[po[r].hdr.dst] += C;
          end else begin
            sent_by[r]++;
            check(po[r].hdr.nelem == 1, "one element per packet");
            check(sent_by[r] <= granted[r], $sformatf("rank %0d exceeds its credits", r));
          end
        end
      end
      for (int r = 0; r < N; r++) po_ready[r] <= ($urandom_range(0, 3) != 0);
    end
  end

  logic [DW-1:0] contrib [N][$];
  logic [DW-1:0] expect_q [$];
  int cint [N][$];

  // k/4 as an IEEE-754 binary32 word (exact for |k| < 2^24); k itself for DT_INT
  function automatic logic [31:0] to_f(input int k);
    int unsigned m;
    int p;
    if (DT == DT_INT) return k;
    if (k == 0) return '0;
    m = (k < 0) ? -k : k;
    p = 31;
    while (!m[p]) p--;
    return {k < 0, 8'(p - 2 + 127), 23'(m << (23 - p))};
  endfunction

  function automatic int f(input smi_red_op_e o, input int a, input int b);
    case (o)
      RED_MAX: return (a > b) ? a : b;
      RED_MIN: return (a < b) ? a : b;
      default: return a + b;
    endcase
  endfunction

  // contribution drivers, one per rank, random pace
  int drv_k [N];
  int drv_count = 0;
  bit running = 0;
  for (genvar r = 0; r < N; r++) begin : g_drv
    always @(posedge clk) begin
      if (in_valid[r] && in_ready[r]) drv_k[r]++;
      if (running && drv_k[r] < drv_count) begin
        in_valid[r] <= ($urandom_range(0, 2) != 0);
        in_data[r]  <= contrib[r][drv_k[r]];
      end else begin
        in_valid[r] <= 0;
      end
    end
  end

  task automatic reduce(input int root, input int count, input smi_red_op_e o);
    int got;
    expect_q.delete();
    credits_sent = 0;
    for (int r = 0; r < N; r++) begin
      contrib[r].delete(); cint[r].delete(); granted[r] = 0; sent_by[r] = 0;
      for (int i = 0; i < count; i++) cint[r].push_back(int'($urandom_range(0, 2000)) - 1000);
      foreach (cint[r][i]) contrib[r].push_back(to_f(cint[r][i]));
    end
    for (int i = 0; i < count; i++) begin
      int v;
      v = cint[0][i];
      for (int r = 1; r < N; r++) v = f(o, v, cint[r][i]);
      expect_q.push_back(to_f(v));
    end
    open_count = count; open_root = 8'(root); open_op = o;
    open_valid <= '1;
    @(posedge clk);
    open_valid <= '0;
    got = 0;
    for (int r = 0; r < N; r++) drv_k[r] = 0;
    drv_count = count;
    running = 1;
    fork
      begin
        while (got < count) begin
          out_ready[root] <= ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid[root] && out_ready[root]) begin
            check(out_data[root] == expect_q[got], $sformatf("result %0d: %0d exp %0d", got, $signed(out_data[root]), $signed(expect_q[got])));
            got++;
          end
        end
        out_ready[root] <= 0;
      end
    join
    running = 0;
    repeat (10) @(posedge clk);
    check(credits_sent == (N - 1) * ((count + C - 1) / C),
          $sformatf("%0d credits for %0d elements", credits_sent, count));
    for (int r = 0; r < N; r++) check(open_ready[r], "all kernels idle again");
  endtask

  initial begin
    open_valid = 0; out_ready = '0; open_count = 0; open_root = 0; open_op = RED_ADD;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    reduce(0, 50, RED_ADD);
    reduce(2, 64, RED_MAX);
    reduce(3, 3, RED_MIN);
    reduce(1, 41, RED_ADD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
