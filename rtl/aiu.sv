// aiu - Automatic Index Unit: a three-level hardware loop.
//
// start loads the loop counts (n0 innermost; a count of 0 is taken as 1) and
// zeroes the indexes; each step advances idx0, carrying into idx1 and idx2
// like an odometer. last is set during the final iteration, and a step taken
// then ends the loop (active drops). first marks iteration (0,0,0). The
// indexes drive the address generators and, when an instruction asks for it,
// the routing selection (multicast byte or source block), so no extra
// instruction is spent on routing. The paper gives the idea (a configurable
// hardware loop driving the routing); the depth of three levels is ours.
module aiu #(
  parameter int unsigned CW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          step,
  input  logic [CW-1:0] n0,
  input  logic [CW-1:0] n1,
  input  logic [CW-1:0] n2,
  output logic [CW-1:0] idx0,
  output logic [CW-1:0] idx1,
  output logic [CW-1:0] idx2,
  output logic          active,
  output logic          first,
  output logic          last
);
  logic [CW-1:0] m0, m1, m2;   // counts minus one
  logic          l0, l1, l2;

  assign l0    = (idx0 == m0);
  assign l1    = (idx1 == m1);
  assign l2    = (idx2 == m2);
  assign last  = active & l0 & l1 & l2;
  assign first = active & (idx0 == '0) & (idx1 == '0) & (idx2 == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {idx0, idx1, idx2, m0, m1, m2} <= '0;
      active <= 1'b0;
    end else if (start) begin
      m0 <= (n0 == '0) ? '0 : n0 - 1'b1;
      m1 <= (n1 == '0) ? '0 : n1 - 1'b1;
      m2 <= (n2 == '0) ? '0 : n2 - 1'b1;
      {idx0, idx1, idx2} <= '0;
      active <= 1'b1;
    end else if (step && active) begin
      if (last) begin
        active <= 1'b0;
      end else if (!l0) begin
        idx0 <= idx0 + 1'b1;
      end else begin
        idx0 <= '0;
        if (!l1) idx1 <= idx1 + 1'b1;
        else begin
          idx1 <= '0;
          idx2 <= idx2 + 1'b1;
        end
      end
    end
  end
endmodule
