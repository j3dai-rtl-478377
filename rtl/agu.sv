// agu - multidimensional Address Generation Unit.
//
// addr = base + idx0*s0 + idx1*s1 + idx2*s2, modulo 2^AW, combinational from
// the AIU indexes. Strides are two's complement, so a negative stride walks
// backwards. The address is a computing-block local address: the top two
// bits pick the bank and the rest the word. Three dimensions match the
// three-level AIU; the paper names "multidimensional address generators"
// without giving their form.
module agu
  import j3dai_pkg::*;
#(
  parameter int unsigned AW = LADDR_W,
  parameter int unsigned CW = CNT_W
) (
  input  agu_cfg_t      cfg,
  input  logic [CW-1:0] idx0,
  input  logic [CW-1:0] idx1,
  input  logic [CW-1:0] idx2,
  output logic [AW-1:0] addr
);
  logic [AW+CW-1:0] t0, t1, t2;
  assign t0   = (AW+CW)'(idx0) * (AW+CW)'(cfg.s0);
  assign t1   = (AW+CW)'(idx1) * (AW+CW)'(cfg.s1);
  assign t2   = (AW+CW)'(idx2) * (AW+CW)'(cfg.s2);
  assign addr = AW'(cfg.base) + t0[AW-1:0] + t1[AW-1:0] + t2[AW-1:0];
endmodule
