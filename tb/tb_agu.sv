// tb_agu - random bases, strides and indexes against the formula
// base + i0*s0 + i1*s1 + i2*s2 (mod 4096).
module tb_agu;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  agu_cfg_t cfg;
  logic [11:0] idx0, idx1, idx2, addr;

  agu dut (.cfg, .idx0, .idx1, .idx2, .addr);

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int e;
      cfg = agu_cfg_t'({$urandom, $urandom});
      idx0 = 12'($urandom); idx1 = 12'($urandom); idx2 = 12'($urandom);
      #1;
      e = (int'(cfg.base) + int'(idx0) * int'(cfg.s0) + int'(idx1) * int'(cfg.s1) +
           int'(idx2) * int'(cfg.s2)) % 4096;
      checks++;
      if (addr !== 12'(e)) failures++;
    end
    // negative stride: base 100, s0 = -3, idx0 = 5 -> 85
    cfg = '{base: 12'd100, s0: -12'sd3, s1: 12'd0, s2: 12'd0};
    idx0 = 12'd5; idx1 = 0; idx2 = 0; #1;
    checks++; if (addr != 12'd85) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
