// tb_smi_push: self-checking test of smi_push.
// Opens send channels of several lengths and checks every packet: header
// fields (source, destination, port, SEND, element count) and payload
// elements against a reference packing computed here (7 elements of 32 bits
// per packet, the last packet holding the rest). With the packet output
// always ready the endpoint must take one element per cycle (a 17-element
// message in 17 cycles); random output stalls are then applied.
module tb_smi_push;
  import smi_pkg::*;
  localparam int DW = 32, PORT = 5, EPP = 7;
  logic clk = 0, rst_n = 0;
  logic [RANK_W-1:0] my_rank = 8'd3;
  logic open_valid, open_ready;
  logic [COUNT_W-1:0] open_count;
  logic [RANK_W-1:0] open_dst;
  logic data_valid, data_ready;
  logic [DW-1:0] data;
  logic pkt_valid, pkt_ready;
  smi_pkt_t pkt_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  smi_push #(.DATA_W(DW), .PORT(PORT)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] elems[$], expq[$];
  int stall_pct;

  // packet checker: compares against the element queue
  int pkts_seen;
  always @(posedge clk) begin
    if (rst_n && pkt_valid && pkt_ready) begin
      int n;
      n = (expq.size() < EPP) ? expq.size() : EPP;
      pkts_seen++;
      check(pkt_data.hdr.src == my_rank && pkt_data.hdr.dst == open_dst &&
            pkt_data.hdr.port == PORT && pkt_data.hdr.op == OP_SEND, "header fields");
      check(int'(pkt_data.hdr.nelem) == n, $sformatf("nelem %0d exp %0d", pkt_data.hdr.nelem, n));
      for (int i = 0; i < n; i++)
        check(pkt_data.payload[i*DW +: DW] == expq.pop_front(), "payload element");
    end
  end

  task automatic send_msg(input int count, input int stall);
    int cyc, pushed;
    stall_pct = stall;
    elems.delete();
    for (int i = 0; i < count; i++) elems.push_back(DW'($urandom));
    expq = elems;
    open_count <= count; open_dst <= 8'(count); open_valid <= 1;
    @(posedge clk);
    check(open_ready == 1, "open accepted");
    open_valid <= 0;
    cyc = 0; pushed = 0;
    data_valid <= 1; data <= elems[0];
    while (pushed < count) begin
      pkt_ready <= ($urandom_range(0, 99) >= stall_pct);
      @(posedge clk);
      cyc++;
      if (data_valid && data_ready) begin
        pushed++;
        if (pushed < count) data <= elems[pushed];
      end
    end
    data_valid <= 0;
    pkt_ready <= 1;
    if (stall == 0) check(cyc == count, $sformatf("one element per cycle: %0d cycles for %0d", cyc, count));
    @(posedge clk);
    check(open_ready, "channel closed after count elements");
    check(expq.size() == 0, "all elements delivered");
  endtask

  initial begin
    open_valid = 0; data_valid = 0; pkt_ready = 1; data = 0; open_count = 0; open_dst = 0;
    pkts_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    send_msg(17, 0);
    check(pkts_seen == 3, "17 elements in 3 packets");
    send_msg(7, 0);
    send_msg(1, 0);
    send_msg(100, 40);
    send_msg(29, 70);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
