// tb_smi_ckr: self-checking test of the receive communication kernel.
// Kernel 2 of 4 with two application outputs, local rank 3, R = 2. Random
// packets with random destination ranks and ports arrive on all five inputs
// under random output stalls. A packet for another rank must go to the
// paired CKS (transit); a packet for this rank goes where the port-indexed
// table says (an application, another CKR, or application 0 for an entry
// that names this CKR or an application that does not exist). Order per
// input is checked. With R = 2 and only the network input busy, the kernel
// takes two packets, then polls the four other inputs: 2 packets per 6
// cycles.
module tb_smi_ckr;
  import smi_pkg::*;
  localparam int NI = 5, NO = 6;
  logic clk = 0, rst_n = 0;
  logic [RANK_W-1:0] my_rank = 8'd3;
  logic cfg_we; logic [7:0] cfg_addr; smi_rt_entry_t cfg_entry;
  logic [NI-1:0] in_valid, in_ready;
  smi_pkt_t [NI-1:0] in_data;
  logic [NO-1:0] out_valid, out_ready;
  smi_pkt_t [NO-1:0] out_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  smi_ckr #(.CK_ID(2), .NUM_CK(4), .NUM_APP(2), .R(2)) dut (.*);

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

  function automatic int exp_out(input int d, input int port);
    if (d != 3) return 2;
    case (port)
      0: return 0;
      1: return 1;
      2: return 3;   // CKR 0
      3: return 4;   // CKR 1
      4: return 5;   // CKR 3
      default: return 0;  // self or invalid application
    endcase
  endfunction

  smi_pkt_t q [NI][$];
  int last_seq [NI];
  int out_times [$];
  int cyc = 0, stall = 0;

  always @(posedge clk) cyc++;

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      in_valid[i] = q[i].size() > 0;
      in_data[i]  = (q[i].size() > 0) ? q[i][0] : '0;
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < NI; i++)
        if (in_valid[i] && in_ready[i]) void'(q[i].pop_front());
      for (int o = 0; o < NO; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int src, seq;
          src = int'(out_data[o].payload[15:8]);
          seq = int'(out_data[o].payload[31:16]);
          check(o == exp_out(int'(out_data[o].hdr.dst), int'(out_data[o].hdr.port)),
                $sformatf("dst %0d port %0d left on %0d", out_data[o].hdr.dst, out_data[o].hdr.port, o));
          check(seq == last_seq[src] + 1, "per-input order");
          last_seq[src] = seq;
          out_times.push_back(cyc);
        end
      end
      for (int o = 0; o < NO; o++) out_ready[o] <= ($urandom_range(0, 99) >= stall);
    end
  end

  function automatic smi_pkt_t mk(input int src, input int seq, input int dst, input int port);
    smi_pkt_t p;
    p = '0;
    p.hdr.dst = 8'(dst); p.hdr.port = 8'(port); p.hdr.op = OP_SEND; p.hdr.nelem = 5'd1;
    p.payload[15:8] = 8'(src); p.payload[31:16] = 16'(seq);
    return p;
  endfunction

  task automatic wr(input int a, input smi_rt_kind_e k, input int idx);
    cfg_we <= 1; cfg_addr <= 8'(a); cfg_entry <= '{kind: k, idx: RT_IDX_W'(idx)};
    @(posedge clk);
    cfg_we <= 0;
  endtask

  int seqn [NI];
  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_entry = '0; out_ready = '1;
    for (int i = 0; i < NI; i++) begin last_seq[i] = -1; seqn[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(0, RT_APP, 0); wr(1, RT_APP, 1); wr(2, RT_CK, 0); wr(3, RT_CK, 1);
    wr(4, RT_CK, 3); wr(5, RT_CK, 2); wr(6, RT_APP, 5);

    stall = 30;
    for (int n = 0; n < 500; n++) begin
      int i, d, p;
      i = $urandom_range(0, NI-1);
      d = ($urandom_range(0, 2) == 0) ? $urandom_range(0, 7) : 3;
      p = $urandom_range(0, 6);
      q[i].push_back(mk(i, seqn[i], d, p));
      seqn[i]++;
    end
    repeat (4000) @(posedge clk);
    check(out_times.size() == 500, "all packets delivered");

    stall = 0;
    @(posedge clk);
    out_times.delete();
    for (int i = 0; i < NI; i++) last_seq[i] = -1;
    for (int n = 0; n < 12; n++) q[0].push_back(mk(0, n, 3, 0));
    repeat (200) @(posedge clk);
    check(out_times.size() == 12, "12 packets");
    check(out_times[11] - out_times[0] == 5 * 6 + 1,
          $sformatf("R=2 polling: 12 packets span %0d cycles, expected 31", out_times[11] - out_times[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
