// tb_smi_fifo: self-checking test of smi_fifo.
// Random producer and consumer stalls; a queue in the testbench is the
// reference for order and contents. Also checks that the FIFO reports full
// after DEPTH words, empty after draining, and the one-cycle write-to-read
// latency.
module tb_smi_fifo;
  localparam int W = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q[$];

  always #5 clk = ~clk;

  smi_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0, got = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // latency and full
    check(!out_valid && in_ready, "empty after reset");
    for (int i = 0; i < DEPTH; i++) begin
      in_valid <= 1; in_data <= W'(100 + i);
      @(posedge clk);
      if (i == 0) begin
        #1 check(out_valid && out_data == 100, "one-cycle latency");
      end
    end
    in_valid <= 0;
    @(posedge clk); #1;
    check(!in_ready, "full after DEPTH writes");
    for (int i = 0; i < DEPTH; i++) begin
      #1 check(out_valid && out_data == W'(100 + i), "drain order");
      out_ready <= 1;
      @(posedge clk);
      out_ready <= 0;
    end
    #1 check(!out_valid, "empty after drain");
    // random traffic
    fork
      begin
        while (sent < 500) begin
          in_valid <= ($urandom_range(0, 3) != 0);
          in_data  <= W'($urandom);
          @(posedge clk);
          if (in_valid && in_ready) begin ref_q.push_back(in_data); sent++; end
        end
        in_valid <= 0;
      end
      begin
        while (got < 500) begin
          out_ready <= ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            check(ref_q.size() > 0 && out_data == ref_q.pop_front(), "random order/data");
            got++;
          end
        end
        out_ready <= 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
