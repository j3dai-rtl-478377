// sys_regs - system registers of the middle die.
//
// A chip ID (read-only, "J3DA"), a scratch register, the raw interrupt
// sources (cluster done interrupts, DMPA, DMA; read-only) and an interrupt
// mask. irq to the host is the OR of the unmasked sources. Offsets: 0x00 ID,
// 0x08 SCRATCH, 0x10 IRQ_STATUS, 0x18 IRQ_MASK. Always ready, answered one
// cycle later. The paper only names "system registers & peripherals"; this
// content is this design's choice.
module sys_regs
  import j3dai_pkg::*;
#(
  parameter int unsigned N_IRQ = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  bus_req_t         req,
  output bus_rsp_t         rsp,
  input  logic [N_IRQ-1:0] irq_src,
  output logic             irq
);
  logic [63:0]      scratch, rreg;
  logic [N_IRQ-1:0] mask;
  logic             rv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scratch <= '0;
      mask    <= '0;
      rv      <= 1'b0;
      rreg    <= '0;
    end else begin
      rv <= req.valid;
      if (req.valid && req.we) begin
        if (req.addr[7:3] == 5'd1) scratch <= req.wdata;
        if (req.addr[7:3] == 5'd3) mask    <= req.wdata[N_IRQ-1:0];
      end
      unique case (req.addr[7:3])
        5'd0:    rreg <= 64'h0000_0000_4A33_4441;
        5'd1:    rreg <= scratch;
        5'd2:    rreg <= 64'(irq_src);
        5'd3:    rreg <= 64'(mask);
        default: rreg <= '0;
      endcase
    end
  end
  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rreg;
  assign irq        = |(irq_src & mask);
endmodule
