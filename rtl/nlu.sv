// nlu - non-linear operation unit of a PE.
//
// Turns a 32-bit accumulator into an 8-bit activation in one combinational
// step: first a piecewise-linear approximation of the activation function
// (identity, ReLU, leaky ReLU with slope 1/8, hard tanh clamped to +-2^shift),
// then requantisation: an arithmetic right shift by cfg.shift with
// round-half-up, and saturation to uint8 or int8. For hard tanh the result
// is given in Q1.7 (127 = +1.0), always signed. The paper states only that
// the unit is "based on an approximation of functions"; the set of functions
// and the requantisation are this design's choices.
module nlu
  import j3dai_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic signed [ACC_W-1:0] x,
  input  nl_cfg_t                 cfg,
  output logic        [7:0]       y
);
  logic signed [ACC_W:0] f, r, lim;
  logic                  sgn;

  always_comb begin
    f   = (ACC_W+1)'(x);
    sgn = cfg.out_signed;
    lim = '0;
    unique case (cfg.mode)
      NL_RELU:  if (x < 0) f = '0;
      NL_LEAKY: if (x < 0) f = (ACC_W+1)'(x) >>> 3;
      NL_HTANH: begin
        lim = (ACC_W+1)'(1) <<< cfg.shift;
        if (f > lim)  f = lim;
        if (f < -lim) f = -lim;
        sgn = 1'b1;
      end
      default: ;
    endcase
    // requantise
    if (cfg.mode == NL_HTANH) begin
      if (cfg.shift >= 5'd7) r = f >>> (cfg.shift - 5'd7);
      else                   r = f <<< (5'd7 - cfg.shift);
    end else if (cfg.shift == 5'd0) begin
      r = f;
    end else begin
      r = (f + ((ACC_W+1)'(1) <<< (cfg.shift - 5'd1))) >>> cfg.shift;
    end
    // saturate
    if (sgn) begin
      if (r > 127)       y = 8'h7f;
      else if (r < -128) y = 8'h80;
      else               y = r[7:0];
    end else begin
      if (r > 255)       y = 8'hff;
      else if (r < 0)    y = 8'h00;
      else               y = r[7:0];
    end
  end
endmodule
