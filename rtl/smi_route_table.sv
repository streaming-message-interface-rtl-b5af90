// smi_route_table: the routing table of one communication kernel.
//
// A small on-chip memory of DEPTH entries (one per possible destination rank
// or port, 256 for the 8-bit header fields). The host writes it through the
// write port before the transport layer starts, so that routes can change
// without rebuilding the hardware; the kernel reads it combinationally with
// the rank or port of the packet it is forwarding. The contents are not
// reset: every entry that traffic may use must be written first.
module smi_route_table
  import smi_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  smi_rt_entry_t            wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output smi_rt_entry_t            rdata
);
  smi_rt_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
