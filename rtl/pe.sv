// pe - processing element of a computing block.
//
// A 9-bit signed multiplier, a 32-bit accumulator, a small ALU and the
// non-linear unit (nlu). The 8-bit operands a and b are extended to 9 bits,
// signed or unsigned as ctrl.a_signed / ctrl.b_signed say, so that one
// multiplier serves both uint8 and int8 data. Each cycle with en set applies
// ctrl.op to the accumulator (MAC, MUL, ADD, MAX, MIN, CLR, load, or a move /
// add of the neighbour's accumulator arriving on the 32-bit path acc_link).
// clr makes the cycle start from a zero accumulator. res is the activation
// byte of the current accumulator, combinational. Multiplier width and
// accumulator width follow the paper; the ALU operation set is our choice.
module pe
  import j3dai_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  lane_ctrl_t              ctrl,
  input  nl_cfg_t                 nl_cfg,
  input  logic        [7:0]       a,
  input  logic        [7:0]       b,
  input  logic signed [ACC_W-1:0] acc_link,
  output logic signed [ACC_W-1:0] acc,
  output logic        [7:0]       res
);
  logic signed [8:0]       a9, b9;
  logic signed [17:0]      prod;
  logic signed [ACC_W-1:0] base, aext, nxt;

  assign a9   = {ctrl.a_signed & a[7], a};
  assign b9   = {ctrl.b_signed & b[7], b};
  assign prod = a9 * b9;
  assign aext = ACC_W'(a9);
  assign base = clr ? '0 : acc;

  always_comb begin
    unique case (ctrl.op)
      PE_MAC:    nxt = base + ACC_W'(prod);
      PE_MUL:    nxt = ACC_W'(prod);
      PE_ADD:    nxt = base + aext;
      PE_MAX:    nxt = (clr || aext > acc) ? aext : acc;
      PE_MIN:    nxt = (clr || aext < acc) ? aext : acc;
      PE_CLR:    nxt = '0;
      PE_LDA:    nxt = aext;
      PE_LDACC:  nxt = acc_link;
      PE_ADDACC: nxt = base + acc_link;
      default:   nxt = acc;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= nxt;
  end

  nlu #(.ACC_W(ACC_W)) u_nlu (.x(acc), .cfg(nl_cfg), .y(res));
endmodule
