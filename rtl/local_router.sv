// local_router - operand router of one computing block.
//
// Combinational, so data reaches the PEs in the cycle it leaves the bank.
// The 8-bit path builds operand A of each PE from the bank word: straight
// (PE i takes byte i), shifted by one PE left or right, with the edge byte
// taken from the neighbouring block on the daisy chain or filled with zeros
// or ones for padding, a local multicast of one byte to all PEs, or all
// zeros / all ones. Operand B is a byte of the multicast register sent to
// every PE, the register's byte i to PE i, or the bank word itself. The
// 32-bit path hands each PE the accumulator of its right-hand neighbour (PE 7
// gets PE 0 of the next block), which lets partial sums move or be reduced
// without a trip through memory. The published design lists these features;
// the encoding and the choice of one-PE shifts are this design's own.
module local_router
  import j3dai_pkg::*;
#(
  parameter int unsigned N_PE  = 8,
  parameter int unsigned ACC_W = 32
) (
  input  lane_ctrl_t                      ctrl,
  input  logic [N_PE-1:0][7:0]            mem_word,
  input  logic [N_PE-1:0][7:0]            mcast,
  input  logic [7:0]                      left_byte,   // byte N_PE-1 of left block
  input  logic [7:0]                      right_byte,  // byte 0 of right block
  input  logic [N_PE-1:0][ACC_W-1:0]      acc,
  input  logic [ACC_W-1:0]                right_acc,   // PE 0 acc of right block
  output logic [N_PE-1:0][7:0]            a,
  output logic [N_PE-1:0][7:0]            b,
  output logic [N_PE-1:0][ACC_W-1:0]      acc_link
);
  logic [7:0] fill_l, fill_r;

  always_comb begin
    unique case (ctrl.fill)
      FILL_ZERO: begin fill_l = 8'h00; fill_r = 8'h00; end
      FILL_ONES: begin fill_l = 8'hff; fill_r = 8'hff; end
      default:   begin fill_l = left_byte; fill_r = right_byte; end
    endcase
    for (int i = 0; i < N_PE; i++) begin
      unique case (ctrl.a_sel)
        RA_SHL:   a[i] = (i == N_PE-1) ? fill_r : mem_word[(i+1) % N_PE];
        RA_SHR:   a[i] = (i == 0) ? fill_l : mem_word[(i+N_PE-1) % N_PE];
        RA_BCAST: a[i] = mem_word[ctrl.a_byte];
        RA_PAD0:  a[i] = 8'h00;
        RA_PAD1:  a[i] = 8'hff;
        default:  a[i] = mem_word[i];
      endcase
      unique case (ctrl.b_sel)
        RB_MCAST_LANE: b[i] = mcast[i];
        RB_MEM:        b[i] = mem_word[i];
        default:       b[i] = mcast[ctrl.b_byte];
      endcase
      acc_link[i] = (i == N_PE-1) ? right_acc : acc[(i+1) % N_PE];
    end
  end
endmodule
