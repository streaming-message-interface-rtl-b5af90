// smi_fifo: synchronous FIFO buffer with valid/ready handshakes.
//
// Every connection between an application endpoint and a communication
// kernel, and between two kernels, is such a buffer; its depth is a
// compile-time parameter that trades on-chip memory for the amount of data a
// sender may commit before it stalls. The storage is a plain array (a RAM),
// addressed by a read and a write pointer; an occupancy counter gives full
// and empty.
//
// Timing: a word written in cycle t is visible at the read side in cycle
// t+1. in_ready and out_valid are functions of registers only, so chaining
// kernels through FIFOs creates no combinational path from one kernel to the
// next. One write and one read may happen in the same cycle.
// The default depth of 16 packets is this design's choice.
module smi_fifo #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= incr(wptr);
      if (do_rd) rptr <= incr(rptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // A producer must hold its word until it is accepted.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));

endmodule
