// tb_nlu - checks the non-linear unit against a behavioural reference for
// every mode over random and corner-case accumulators and shifts.
module tb_nlu;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic signed [31:0] x;
  nl_cfg_t cfg;
  logic [7:0] y;

  nlu dut (.x, .cfg, .y);

  function automatic logic [7:0] ref_nl(longint v, int mode, int sh, bit sgn);
    longint f = v, r, lim;
    if (mode == 1 && v < 0) f = 0;
    if (mode == 2 && v < 0) f = v >>> 3;
    if (mode == 3) begin
      lim = longint'(1) << sh;
      if (f > lim) f = lim;
      if (f < -lim) f = -lim;
      sgn = 1;
      r = (sh >= 7) ? (f >>> (sh - 7)) : (f <<< (7 - sh));
    end else if (sh == 0) r = f;
    else r = (f + (longint'(1) << (sh - 1))) >>> sh;
    if (sgn) return (r > 127) ? 8'h7f : (r < -128) ? 8'h80 : 8'(r);
    return (r > 255) ? 8'hff : (r < 0) ? 8'h00 : 8'(r);
  endfunction

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int m, sh;
      m  = n % 4;
      sh = (n < 40) ? n % 20 : $urandom_range(0, 20);
      x = (n % 7 == 0) ? 32'sh7fff_ffff : (n % 11 == 0) ? -32'sh8000_0000 :
          (n % 3 == 0) ? $signed($urandom) : $signed(32'($urandom_range(0, 200000)) - 100000);
      cfg = '{mode: nl_mode_e'(m), shift: 5'(sh), out_signed: n[3]};
      #1;
      checks++;
      if (y !== ref_nl(longint'(x), m, sh, n[3])) begin
        failures++;
        if (failures < 10) $display("FAIL mode=%0d sh=%0d x=%0d y=%0d exp=%0d", m, sh, x, y,
                                     ref_nl(longint'(x), m, sh, n[3]));
      end
    end
    // a few fixed values worked by hand
    cfg = '{mode: NL_RELU, shift: 5'd4, out_signed: 1'b0};
    x = 32'sd200;  #1 checks++; if (y != 8'd13) failures++;    // (200+8)>>4
    x = -32'sd200; #1 checks++; if (y != 8'd0)  failures++;
    cfg = '{mode: NL_LEAKY, shift: 5'd0, out_signed: 1'b1};
    x = -32'sd80;  #1 checks++; if (y != 8'hf6) failures++;    // -10
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
