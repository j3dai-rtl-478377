// cluster_ctrl - the single control unit of a neural cluster.
//
// Fetches 64-bit instructions from its instruction memory, decodes them and
// broadcasts the resulting control to all computing blocks of the cluster
// (SIMD). Configuration instructions (SETAGU, SETLOOP, SETNL) load the three
// address generators, the loop counts of the Automatic Index Unit and the
// non-linear unit setup. A data instruction (COMP, MCAST, STORE) is then
// repeated by the AIU for every point of its loop nest, one iteration per
// cycle, with the AGU addresses and, on request, the routing selection
// (multicast byte, source block) taken from the loop indexes; after it the
// loop counts fall back to one. HALT ends the program, sets STATUS.done and,
// if enabled, raises irq.
//
// Timing: fetch and decode take one cycle each; an iteration is issued in
// one cycle (bank read) and executed in the next (router, PEs, write-back),
// so a looped MAC keeps every PE busy every cycle. When the DMPA holds the
// bank an issue read needs, stall is set and the iteration is retried next
// cycle (an empty execute slot is sent instead).
//
// Host registers (byte offset in the cluster window): 0x00 CTRL (bit0 start,
// bit1 irq enable), 0x08 STATUS (bit0 busy, bit1 done, write 1 to clear
// done), 0x10 START_PC, 0x18 CYCLES, 0x20 STALLS, 0x28 PC. The instruction
// memory is at 0x10000 and is host-accessible while the cluster is idle.
// Each accepted access is answered one cycle later. The instruction set,
// register map and timing are this design's own; the paper gives the unit's
// role (fetch, decode, broadcast, control/status registers, AIU, AGU).
module cluster_ctrl
  import j3dai_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 1024,
  localparam int unsigned PCW       = $clog2(IMEM_WORDS)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,        // already decoded to this cluster's regs / imem
  output bus_rsp_t rsp,
  output issue_t   issue,
  output ex_t      ex,
  output nl_cfg_t  nl_cfg,
  input  logic     stall,
  output logic     busy,
  output logic     irq
);
  typedef enum logic [1:0] { S_IDLE, S_FETCH, S_DECODE, S_EXEC } state_e;
  state_e st;

  logic [PCW-1:0]   pc, start_pc;
  logic             done, irq_en;
  logic [31:0]      cycles, stalls;
  logic [63:0]      ir, imem_rdata;
  agu_cfg_t         agu_cfg [3];
  logic [CNT_W-1:0] n0, n1, n2;
  logic [LADDR_W-1:0] addr_a, addr_m, addr_w;
  logic [CNT_W-1:0] idx0, idx1, idx2;
  logic             aiu_start, aiu_step, aiu_active, aiu_first, aiu_last;
  opcode_e          dop, xop;
  logic             go;

  // ---- host access ----
  logic is_imem, acc_ok, imem_en, imem_we;
  logic [PCW-1:0] imem_addr;
  logic rd_pending, rd_imem;
  logic [63:0] reg_rdata;

  assign is_imem   = req.addr[16];
  assign acc_ok    = !is_imem || !busy;
  assign rsp.ready = acc_ok;
  assign imem_en   = (req.valid && is_imem && !busy) || (st == S_FETCH);
  assign imem_we   = req.valid && is_imem && !busy && req.we;
  assign imem_addr = (st == S_FETCH) ? pc : req.addr[3 +: PCW];

  mem_bank #(.WORDS(IMEM_WORDS), .DW(64)) u_imem (
    .clk, .en(imem_en), .we(imem_we), .be(req.be), .addr(imem_addr),
    .wdata(req.wdata), .rdata(imem_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pending <= 1'b0;
      rd_imem    <= 1'b0;
      reg_rdata  <= '0;
    end else begin
      rd_pending <= req.valid && acc_ok;
      rd_imem    <= is_imem;
      unique case (req.addr[7:3])
        5'd0:    reg_rdata <= {62'd0, irq_en, 1'b0};
        5'd1:    reg_rdata <= {62'd0, done, busy};
        5'd2:    reg_rdata <= 64'(start_pc);
        5'd3:    reg_rdata <= 64'(cycles);
        5'd4:    reg_rdata <= 64'(stalls);
        5'd5:    reg_rdata <= 64'(pc);
        default: reg_rdata <= '0;
      endcase
    end
  end
  assign rsp.rvalid = rd_pending;
  assign rsp.rdata  = rd_imem ? imem_rdata : reg_rdata;

  logic reg_wr, start_req;
  assign reg_wr    = req.valid && req.we && !is_imem;
  assign start_req = reg_wr && req.addr[7:3] == 5'd0 && req.wdata[0];

  // ---- AIU / AGUs ----
  aiu #(.CW(CNT_W)) u_aiu (
    .clk, .rst_n, .start(aiu_start), .step(aiu_step), .n0, .n1, .n2,
    .idx0, .idx1, .idx2, .active(aiu_active), .first(aiu_first), .last(aiu_last));
  agu u_agu_a (.cfg(agu_cfg[AGU_A]), .idx0, .idx1, .idx2, .addr(addr_a));
  agu u_agu_m (.cfg(agu_cfg[AGU_M]), .idx0, .idx1, .idx2, .addr(addr_m));
  agu u_agu_w (.cfg(agu_cfg[AGU_W]), .idx0, .idx1, .idx2, .addr(addr_w));

  assign dop = opcode_e'(imem_rdata[63:58]);
  assign xop = opcode_e'(ir[63:58]);
  assign aiu_start = (st == S_DECODE) &&
                     (dop == OP_COMP || dop == OP_MCAST || dop == OP_STORE);

  // ---- issue ----
  always_comb begin
    issue.rd   = (st == S_EXEC) && (xop == OP_COMP || xop == OP_MCAST);
    issue.addr = (xop == OP_MCAST) ? addr_m : addr_a;
  end
  assign go       = (st == S_EXEC) && !(issue.rd && stall);
  assign aiu_step = go;
  assign busy     = (st != S_IDLE);
  assign irq      = done && irq_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      pc       <= '0;
      start_pc <= '0;
      done     <= 1'b0;
      irq_en   <= 1'b0;
      cycles   <= '0;
      stalls   <= '0;
      ir       <= '0;
      ex       <= '0;
      nl_cfg   <= '0;
      n0 <= '0; n1 <= '0; n2 <= '0;
      for (int k = 0; k < 3; k++) agu_cfg[k] <= '0;
    end else begin
      // host register writes
      if (reg_wr) begin
        unique case (req.addr[7:3])
          5'd0: irq_en <= req.wdata[1];
          5'd1: if (req.wdata[1]) done <= 1'b0;
          5'd2: start_pc <= req.wdata[PCW-1:0];
          default: ;
        endcase
      end
      if (busy) cycles <= cycles + 1'b1;
      ex.kind <= EX_NONE;

      unique case (st)
        S_IDLE: if (start_req) begin
          pc     <= start_pc;
          done   <= 1'b0;
          cycles <= '0;
          stalls <= '0;
          st     <= S_FETCH;
        end
        S_FETCH: st <= S_DECODE;
        S_DECODE: begin
          ir <= imem_rdata;
          pc <= pc + 1'b1;
          st <= S_FETCH;
          unique case (dop)
            OP_HALT: begin
              st   <= S_IDLE;
              done <= 1'b1;
            end
            OP_SETAGU: agu_cfg[imem_rdata[57:56]] <= agu_cfg_t'(imem_rdata[47:0]);
            OP_SETLP: begin
              n0 <= imem_rdata[11:0];
              n1 <= imem_rdata[23:12];
              n2 <= imem_rdata[35:24];
            end
            OP_SETNL: nl_cfg <= '{mode: nl_mode_e'(imem_rdata[2:0]),
                                  shift: imem_rdata[8:4], out_signed: imem_rdata[12]};
            OP_COMP, OP_MCAST, OP_STORE: st <= S_EXEC;
            default: ;
          endcase
        end
        S_EXEC: begin
          if (go) begin
            ex.lane  <= lane_ctrl_t'(ir[18:0]);
            if (ir[19]) ex.lane.b_byte <= idx0[2:0];
            ex.clr   <= ir[20] && aiu_first;
            ex.src_a <= ir[16] ? idx0[3:0] : ir[3:0];
            ex.src_b <= ir[7:4];
            ex.mix   <= ir[15:8];
            ex.waddr <= addr_w;
            unique case (xop)
              OP_COMP:  ex.kind <= EX_COMP;
              OP_MCAST: ex.kind <= EX_MCAST;
              default:  ex.kind <= EX_STORE;
            endcase
            if (aiu_last) begin
              st <= S_FETCH;
              n0 <= '0; n1 <= '0; n2 <= '0;
            end
          end else begin
            stalls <= stalls + 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_step_in_loop: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_EXEC) |-> aiu_active);
endmodule
