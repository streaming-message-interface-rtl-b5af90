// smi_poller: the polling scheme of a communication kernel.
//
// A kernel looks at one of its N input connections per cycle. When the
// connection it looks at holds a packet, the kernel keeps reading from it,
// up to R packets in a row while data is available, before it moves on to
// the next connection in round-robin order. A connection that is empty when
// polled costs one cycle. With R = 1 the kernel therefore polls a different
// connection every cycle, and a single busy input is served once every N
// cycles. This behaviour is the one the SMI transport layer is described to
// have. Moving on also when the packet at the current connection is blocked
// at its output is this design's choice: kernels hand packets to each other
// in both directions (CKS0 -> CKS1 and CKS1 -> CKS0), and a kernel that
// waited on a blocked input could wait forever on a peer that waits on it.
// A blocked packet is retried when the round robin comes back to it.
//
// Interface: 'valid' are the non-empty flags of the inputs, 'take' is high
// when the kernel consumed a packet from input 'cur' in this cycle. 'cur' is
// a register.
module smi_poller #(
  parameter int unsigned N = 5,
  parameter int unsigned R = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N-1:0]              valid,
  input  logic                      take,
  output logic [$clog2(N+1)-1:0]    cur
);
  localparam int unsigned IW = $clog2(N + 1);
  localparam int unsigned CW = $clog2(R + 1);

  logic [CW-1:0] cnt;

  function automatic logic [IW-1:0] next_of(input logic [IW-1:0] c);
    return (c == IW'(N - 1)) ? '0 : c + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0;
      cnt <= '0;
    end else if (take) begin
      if (cnt == CW'(R - 1)) begin
        cur <= next_of(cur);
        cnt <= '0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end else begin
      // empty, or its packet cannot leave this cycle
      cur <= next_of(cur);
      cnt <= '0;
    end
  end

  a_take_valid: assert property (@(posedge clk) disable iff (!rst_n)
    take |-> valid[cur]);

endmodule
