// sys_interconnect - the 64-bit system bus of the middle die.
//
// Two masters (0: host CPU, 1: DMA) share one bus with fixed priority to the
// CPU; one transfer is accepted per cycle. The address decoder selects one
// of six slaves (0 instruction SRAM, 1 data SRAM, 2 L2, 3 DNN accelerator,
// 4 system registers, 5 DMA registers, see j3dai_pkg for the bases) and
// hands it the offset inside its window; other addresses go to a default
// slave that accepts and answers zero. Request and ready pass through
// combinationally; the response of the transfer accepted in the previous
// cycle is routed back to its master. The 64-bit width follows the paper;
// the arbitration and the address map are this design's choices.
module sys_interconnect
  import j3dai_pkg::*;
#(
  parameter int unsigned N_SLV = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  bus_req_t [1:0]        m_req,
  output bus_rsp_t [1:0]        m_rsp,
  output bus_req_t [N_SLV-1:0]  s_req,
  input  bus_rsp_t [N_SLV-1:0]  s_rsp
);
  localparam int unsigned DEF = N_SLV;   // default slave index

  logic        gnt, gnt_q, acc_q, acc;
  bus_req_t    r;
  logic [2:0]  sel, sel_q;
  logic [31:0] base;
  logic        s_ready;

  assign gnt = !m_req[0].valid;          // 0 = CPU, 1 = DMA
  assign r   = m_req[gnt];

  always_comb begin
    sel  = 3'(DEF);
    base = '0;
    if (r.addr < DSRAM_BASE)                                   begin sel = 3'd0; base = ISRAM_BASE; end
    else if (r.addr < DSRAM_BASE + 32'h4_0000)                 begin sel = 3'd1; base = DSRAM_BASE; end
    else if (r.addr >= L2_BASE && r.addr < L2_BASE + 32'h50_0000) begin sel = 3'd2; base = L2_BASE; end
    else if (r.addr >= DNN_BASE && r.addr < DNN_BASE + 32'h100_0000) begin sel = 3'd3; base = DNN_BASE; end
    else if (r.addr >= SREG_BASE && r.addr < SREG_BASE + 32'h1000) begin sel = 3'd4; base = SREG_BASE; end
    else if (r.addr >= DMA_BASE && r.addr < DMA_BASE + 32'h1000)   begin sel = 3'd5; base = DMA_BASE; end

    s_ready = 1'b1;
    for (int s = 0; s < N_SLV; s++) begin
      s_req[s]       = r;
      s_req[s].addr  = r.addr - base;
      s_req[s].valid = r.valid && (sel == 3'(s));
      if (sel == 3'(s)) s_ready = s_rsp[s].ready;
    end
    acc = r.valid && s_ready;
    for (int m = 0; m < 2; m++) begin
      m_rsp[m].ready  = (gnt == 1'(m)) && s_ready;
      m_rsp[m].rvalid = acc_q && (gnt_q == 1'(m));
      m_rsp[m].rdata  = '0;
      for (int s = 0; s < N_SLV; s++)
        if (sel_q == 3'(s)) m_rsp[m].rdata = s_rsp[s].rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= 1'b0;
      gnt_q <= 1'b0;
      sel_q <= '0;
    end else begin
      acc_q <= acc;
      gnt_q <= gnt;
      sel_q <= sel;
    end
  end

  // every slave answers an accepted transfer in the next cycle
  for (genvar s = 0; s < N_SLV; s++) begin : g_chk
    a_resp: assert property (@(posedge clk) disable iff (!rst_n)
      (acc && sel == 3'(s)) |=> s_rsp[s].rvalid);
  end
endmodule
