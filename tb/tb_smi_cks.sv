// tb_smi_cks: self-checking test of the send communication kernel.
// Kernel 1 of 4, one application input, local rank 3. The routing table is
// written through the configuration port; random packets on all five inputs
// must leave on the output the rule predicts (local rank -> paired CKR,
// table RT_NET / RT_CK / self / invalid), in order per input.
// Polling timing: with R = 1 and a single busy input (the application), the
// kernel takes a packet every 5 cycles (1 application + 1 CKR + 3 other CKS
// inputs polled in turn), the injection latency of 5 cycles reported for
// R = 1. With R = 8 it takes 8 packets back to back, then spends 4 cycles
// polling the empty inputs. With all inputs busy and R = 1 each input gets
// one packet in 5 cycles.
module tb_smi_cks;
  import smi_pkg::*;
  localparam int NI = 5, NO = 5;
  logic clk = 0, rst_n = 0;
  logic [RANK_W-1:0] my_rank = 8'd3;
  logic cfg_we; logic [7:0] cfg_addr; smi_rt_entry_t cfg_entry;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  // two kernels with different R share the stimulus style
  logic [NI-1:0] in_valid [2];
  logic [NI-1:0] in_ready [2];
  smi_pkt_t [NI-1:0] in_data [2];
  logic [NO-1:0] out_valid [2];
  logic [NO-1:0] out_ready [2];
  smi_pkt_t [NO-1:0] out_data [2];

  smi_cks #(.CK_ID(1), .NUM_CK(4), .NUM_APP(1), .R(8)) dut8 (
    .clk, .rst_n, .my_rank, .cfg_we, .cfg_addr, .cfg_entry,
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_data(out_data[0]));
  smi_cks #(.CK_ID(1), .NUM_CK(4), .NUM_APP(1), .R(1)) dut1 (
    .clk, .rst_n, .my_rank, .cfg_we, .cfg_addr, .cfg_entry,
    .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_data(in_data[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_data(out_data[1]));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference routing: expected output index for destination rank d
  function automatic int exp_out(input int d);
    case (d)
      3: return 1;      // local rank -> paired CKR
      0: return 0;      // RT_NET
      1: return 2;      // RT_CK 0 -> slot 0
      2: return 3;      // RT_CK 2 -> slot 1
      4: return 4;      // RT_CK 3 -> slot 2
      5: return 0;      // RT_CK 1 = itself -> network
      default: return 0;  // RT_APP is not a CKS target -> network
    endcase
  endfunction

  smi_pkt_t q [2][NI][$];
  int last_seq [2][NI];
  int out_times [2][$];
  int out_src [2][$];
  int cyc = 0;
  int stall = 0;

  always @(posedge clk) cyc++;

  // input drivers and output monitors
  for (genvar u = 0; u < 2; u++) begin : g_drv
    always_comb begin
      for (int i = 0; i < NI; i++) begin
        in_valid[u][i] = q[u][i].size() > 0;
        in_data[u][i]  = (q[u][i].size() > 0) ? q[u][i][0] : '0;
      end
    end
    always @(posedge clk) begin
      if (rst_n) begin
        for (int i = 0; i < NI; i++)
          if (in_valid[u][i] && in_ready[u][i]) void'(q[u][i].pop_front());
        for (int o = 0; o < NO; o++) begin
          if (out_valid[u][o] && out_ready[u][o]) begin
            int src, seq;
            src = int'(out_data[u][o].payload[15:8]);
            seq = int'(out_data[u][o].payload[31:16]);
            check(o == exp_out(int'(out_data[u][o].hdr.dst)),
                  $sformatf("dut%0d dst %0d left on %0d", u, out_data[u][o].hdr.dst, o));
            check(seq == last_seq[u][src] + 1, "per-input order");
            last_seq[u][src] = seq;
            out_times[u].push_back(cyc);
            out_src[u].push_back(src);
          end
        end
        for (int o = 0; o < NO; o++) out_ready[u][o] <= ($urandom_range(0, 99) >= stall);
      end
    end
  end

  function automatic smi_pkt_t mk(input int src, input int seq, input int dst);
    smi_pkt_t p;
    p = '0;
    p.hdr.dst = 8'(dst); p.hdr.src = 8'd3; p.hdr.op = OP_SEND; p.hdr.nelem = 5'd1;
    p.payload[15:8] = 8'(src); p.payload[31:16] = 16'(seq);
    return p;
  endfunction

  task automatic wr(input int a, input smi_rt_kind_e k, input int idx);
    cfg_we <= 1; cfg_addr <= 8'(a); cfg_entry <= '{kind: k, idx: RT_IDX_W'(idx)};
    @(posedge clk);
    cfg_we <= 0;
  endtask

  task automatic reset_state();
    for (int u = 0; u < 2; u++) begin
      for (int i = 0; i < NI; i++) last_seq[u][i] = -1;
      out_times[u].delete(); out_src[u].delete();
    end
  endtask

  int seqn [NI];
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_entry = '0;
    for (int u = 0; u < 2; u++) out_ready[u] = '1;
    reset_state();
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(0, RT_NET, 0); wr(1, RT_CK, 0); wr(2, RT_CK, 2); wr(4, RT_CK, 3);
    wr(5, RT_CK, 1); wr(6, RT_APP, 0); wr(3, RT_CK, 2);  // entry 3 unused: local rank wins

    // 1. routing with random traffic and stalls, both kernels
    stall = 30;
    for (int i = 0; i < NI; i++) seqn[i] = 0;
    for (int n = 0; n < 400; n++) begin
      int i, d;
      i = $urandom_range(0, NI-1); d = $urandom_range(0, 6);
      q[0][i].push_back(mk(i, seqn[i], d));
      q[1][i].push_back(mk(i, seqn[i], d));
      seqn[i]++;
    end
    repeat (3000) @(posedge clk);
    check(out_times[0].size() == 400 && out_times[1].size() == 400, "all routed packets delivered");

    // 2. injection latency, application input only, outputs always ready
    stall = 0;
    @(posedge clk);
    reset_state();
    for (int n = 0; n < 24; n++) begin q[0][0].push_back(mk(0, n, 0)); q[1][0].push_back(mk(0, n, 0)); end
    repeat (300) @(posedge clk);
    check(out_times[1].size() == 24 && out_times[1][23] - out_times[1][0] == 23 * 5,
          $sformatf("R=1: 24 packets in %0d cycles, expected %0d", out_times[1][23] - out_times[1][0], 23*5));
    check(out_times[0].size() == 24 && out_times[0][23] - out_times[0][0] == 31,
          $sformatf("R=8: 24 packets span %0d cycles, expected 31", out_times[0][23] - out_times[0][0]));
    check(out_times[0][7] - out_times[0][0] == 7, "R=8: 8 packets back to back");

    // 3. all inputs busy, R = 1: strict rotation
    reset_state();
    for (int i = 0; i < NI; i++)
      for (int n = 0; n < 10; n++) q[1][i].push_back(mk(i, n, 0));
    repeat (200) @(posedge clk);
    check(out_src[1].size() == 50, "all 50 packets out");
    for (int n = 1; n < 50; n++)
      check(out_src[1][n] == (out_src[1][n-1] + 1) % NI && out_times[1][n] == out_times[1][n-1] + 1,
            "R=1 rotates inputs every cycle");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
