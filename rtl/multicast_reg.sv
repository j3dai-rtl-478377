// multicast_reg - the cluster's multicast register.
//
// Holds one 64-bit word chosen by the cluster router so that every
// computing block of the cluster sees it on the same cycle; its output goes
// straight to operand B of all PEs (through the local routers), so a value
// loaded in one cycle is usable in the next. Loads when load is set; clears
// on reset. The register and its direct path to one PE operand are in the
// paper; its width (one bank word) is this design's choice.
module multicast_reg #(
  parameter int unsigned DW = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [DW-1:0] d,
  output logic [DW-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= '0;
    else if (load) q <= d;
  end
endmodule
