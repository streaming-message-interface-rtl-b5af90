// tb_smi_pop: self-checking test of smi_pop.
// The testbench packs reference messages into SEND packets itself (7 x 32-bit
// elements per packet, last packet partial) and checks that the endpoint
// returns every element in order, closes after 'count' elements, and with a
// ready application and packets waiting delivers one element per cycle.
module tb_smi_pop;
  import smi_pkg::*;
  localparam int DW = 32, PORT = 1, EPP = 7;
  logic clk = 0, rst_n = 0;
  logic open_valid, open_ready;
  logic [COUNT_W-1:0] open_count;
  logic [RANK_W-1:0] open_src;
  logic pkt_valid, pkt_ready;
  smi_pkt_t pkt_data;
  logic data_valid, data_ready;
  logic [DW-1:0] data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  smi_pop #(.DATA_W(DW), .PORT(PORT)) dut (.*);

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

  logic [DW-1:0] elems[$];
  smi_pkt_t pkts[$];

  task automatic recv_msg(input int count, input int stall);
    int cyc, got, first;
    elems.delete(); pkts.delete();
    for (int i = 0; i < count; i++) elems.push_back(DW'($urandom));
    for (int i = 0; i < count; i += EPP) begin
      smi_pkt_t p;
      p = '0;
      p.hdr.src = 8'd9; p.hdr.dst = 8'd0; p.hdr.port = PORT; p.hdr.op = OP_SEND;
      p.hdr.nelem = NELEM_W'((count - i < EPP) ? count - i : EPP);
      for (int j = 0; j < EPP && i + j < count; j++) p.payload[j*DW +: DW] = elems[i+j];
      pkts.push_back(p);
    end
    open_count <= count; open_src <= 8'd9; open_valid <= 1;
    @(posedge clk);
    check(open_ready, "open accepted");
    open_valid <= 0;
    got = 0; cyc = 0; first = -1;
    while (got < count) begin
      pkt_valid <= (pkts.size() > 0);
      pkt_data  <= (pkts.size() > 0) ? pkts[0] : '0;
      data_ready <= ($urandom_range(0, 99) >= stall);
      @(posedge clk);
      cyc++;
      if (pkt_valid && pkt_ready) void'(pkts.pop_front());
      if (data_valid && data_ready) begin
        if (first < 0) first = cyc;
        check(data == elems[got], $sformatf("element %0d", got));
        got++;
      end
    end
    pkt_valid <= 0; data_ready <= 0;
    if (stall == 0) check(cyc - first + 1 == count, $sformatf("one element per cycle: %0d cycles for %0d", cyc - first + 1, count));
    @(posedge clk);
    check(open_ready, "channel closed");
    check(pkts.size() == 0, "all packets consumed");
  endtask

  initial begin
    open_valid = 0; pkt_valid = 0; data_ready = 0; pkt_data = '0; open_count = 0; open_src = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    recv_msg(17, 0);
    recv_msg(70, 0);
    recv_msg(1, 0);
    recv_msg(100, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
