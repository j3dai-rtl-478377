// tb_pe - drives one PE through random operation sequences and compares
// its accumulator with a reference model after every cycle.
module tb_pe;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en, clr;
  lane_ctrl_t ctrl;
  nl_cfg_t nl_cfg;
  logic [7:0] a, b, res;
  logic signed [31:0] acc_link, acc;
  longint model;

  always #5 clk = ~clk;
  pe dut (.clk, .rst_n, .en, .clr, .ctrl, .nl_cfg, .a, .b, .acc_link, .acc, .res);

  initial begin
    #200000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint av, bv, base;
    ctrl = '0; en = 0; clr = 0; a = 0; b = 0; acc_link = 0;
    nl_cfg = '{mode: NL_LINEAR, shift: 5'd0, out_signed: 1'b1};
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 9) != 0);
      clr = ($urandom_range(0, 15) == 0);
      ctrl.op = pe_op_e'($urandom_range(0, 9));
      ctrl.a_signed = $urandom_range(0, 1);
      ctrl.b_signed = $urandom_range(0, 1);
      a = 8'($urandom); b = 8'($urandom); acc_link = $signed($urandom);
      av = ctrl.a_signed ? longint'($signed(a)) : longint'(a);
      bv = ctrl.b_signed ? longint'($signed(b)) : longint'(b);
      base = clr ? 0 : model;
      if (en) begin
        unique case (ctrl.op)
          PE_MAC:    model = base + av * bv;
          PE_MUL:    model = av * bv;
          PE_ADD:    model = base + av;
          PE_MAX:    model = (clr || av > model) ? av : model;
          PE_MIN:    model = (clr || av < model) ? av : model;
          PE_CLR:    model = 0;
          PE_LDA:    model = av;
          PE_LDACC:  model = longint'(acc_link);
          PE_ADDACC: model = base + longint'(acc_link);
          default:   ;
        endcase
        model = longint'($signed(32'(model)));
      end
      @(posedge clk); #1;
      checks++;
      if (acc !== 32'(model)) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d op=%0d acc=%0d exp=%0d", n, ctrl.op, acc, model);
      end
    end
    // a clean MAC sequence: -128 * 255 + 127 * 127 with a signed / b unsigned
    @(negedge clk); en = 1; clr = 1; ctrl.op = PE_MAC; ctrl.a_signed = 1; ctrl.b_signed = 0;
    a = 8'h80; b = 8'hff;
    @(negedge clk); clr = 0; a = 8'h7f; b = 8'h7f;
    @(negedge clk); en = 0;
    checks++; if (acc != -32'sd16511) begin failures++; $display("FAIL mac %0d", acc); end
    checks++; if (res != 8'h80) failures++;   // linear, saturated to int8
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
