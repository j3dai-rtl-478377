// tb_local_router - random words and controls; every PE operand and
// accumulator link is compared with an independent model of each mode.
module tb_local_router;
  import j3dai_pkg::*;
  int checks = 0, failures = 0;
  lane_ctrl_t ctrl;
  logic [7:0][7:0] mem_word, mcast, a, b;
  logic [7:0] left_byte, right_byte;
  logic [7:0][31:0] acc, acc_link;
  logic [31:0] right_acc;

  local_router dut (.ctrl, .mem_word, .mcast, .left_byte, .right_byte, .acc, .right_acc,
                    .a, .b, .acc_link);

  initial begin
    #1000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [7:0] ea, eb, fl, fr;
      ctrl = lane_ctrl_t'($urandom);
      ctrl.a_sel = ra_sel_e'($urandom_range(0, 5));
      ctrl.fill  = fill_e'($urandom_range(0, 2));
      ctrl.b_sel = rb_sel_e'($urandom_range(0, 2));
      mem_word = {$urandom, $urandom}; mcast = {$urandom, $urandom};
      left_byte = 8'($urandom); right_byte = 8'($urandom); right_acc = $urandom;
      for (int i = 0; i < 8; i++) acc[i] = $urandom;
      #1;
      fl = (ctrl.fill == FILL_ZERO) ? 8'h00 : (ctrl.fill == FILL_ONES) ? 8'hff : left_byte;
      fr = (ctrl.fill == FILL_ZERO) ? 8'h00 : (ctrl.fill == FILL_ONES) ? 8'hff : right_byte;
      for (int i = 0; i < 8; i++) begin
        case (ctrl.a_sel)
          RA_MEM:   ea = mem_word[i];
          RA_SHL:   ea = (i < 7) ? mem_word[i+1] : fr;
          RA_SHR:   ea = (i > 0) ? mem_word[i-1] : fl;
          RA_BCAST: ea = mem_word[ctrl.a_byte];
          RA_PAD0:  ea = 8'h00;
          default:  ea = 8'hff;
        endcase
        case (ctrl.b_sel)
          RB_MCAST_BYTE: eb = mcast[ctrl.b_byte];
          RB_MCAST_LANE: eb = mcast[i];
          default:       eb = mem_word[i];
        endcase
        checks += 3;
        if (a[i] !== ea) failures++;
        if (b[i] !== eb) failures++;
        if (acc_link[i] !== ((i < 7) ? acc[i+1] : right_acc)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
