// j3dai_top - digital system of the J3DAI stacked image sensor (middle and
// bottom dies).
//
// Middle die: the 64-bit system interconnect, the DMA, the system registers,
// the host CPU's 256 KB instruction and 256 KB data SRAMs and the 2 MB L2
// partition. Bottom die: the DNN accelerator (6 clusters of 16 computing
// blocks of 8 PEs, 768 MACs per cycle) and the 3 MB L2 partition; the two L2
// partitions form one 5 MB, 16-column global memory (l2_memory). The RISC-V
// host CPU is not part of this RTL: its bus is the cpu_req / cpu_rsp master
// port, and irq is its interrupt line. The ISP's sub-sampled image stream
// enters through isp_valid / isp_data / isp_ready and is written into the
// memories by the DMPA. One clock (200 MHz in the paper's implementation),
// active-low asynchronous reset. Structure after the paper's system figure;
// bus protocol and address map are this design's own (see j3dai_pkg).
module j3dai_top
  import j3dai_pkg::*;
#(
  parameter int unsigned N_CLUSTERS  = 6,
  parameter int unsigned N_NCB       = 16,
  parameter int unsigned BANK_WORDS  = 1024,
  parameter int unsigned IMEM_WORDS  = 1024,
  parameter int unsigned L2_BOT_ROWS = 24576,
  parameter int unsigned L2_MID_ROWS = 16384,
  parameter int unsigned SRAM_WORDS  = 32768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  bus_req_t    cpu_req,
  output bus_rsp_t    cpu_rsp,
  input  logic        isp_valid,
  input  logic [63:0] isp_data,
  output logic        isp_ready,
  output logic        irq
);
  bus_req_t [1:0] m_req;
  bus_rsp_t [1:0] m_rsp;
  bus_req_t [5:0] s_req;
  bus_rsp_t [5:0] s_rsp;
  logic                       l2_req, l2_we;
  logic [ROW_W-1:0]           l2_row;
  logic [N_NCB-1:0][63:0]     l2_wdata, l2_rdata;
  logic [N_CLUSTERS-1:0]      cl_busy;
  logic [N_CLUSTERS:0]        acc_irq;
  logic                       dma_irq;

  assign m_req[0] = cpu_req;
  assign cpu_rsp  = m_rsp[0];

  sys_interconnect #(.N_SLV(6)) u_sic (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);

  sram_bus #(.WORDS(SRAM_WORDS)) u_isram (.clk, .rst_n, .req(s_req[0]), .rsp(s_rsp[0]));
  sram_bus #(.WORDS(SRAM_WORDS)) u_dsram (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));

  l2_memory #(.BOT_ROWS(L2_BOT_ROWS), .MID_ROWS(L2_MID_ROWS), .N_COL(N_NCB)) u_l2 (
    .clk, .rst_n, .req(s_req[2]), .rsp(s_rsp[2]),
    .vert_req(l2_req), .vert_we(l2_we), .vert_row(l2_row),
    .vert_wdata(l2_wdata), .vert_rdata(l2_rdata));

  dnn_accelerator #(.N_CLUSTERS(N_CLUSTERS), .N_NCB(N_NCB), .N_PE(8), .N_BANKS(4),
                    .BANK_WORDS(BANK_WORDS), .IMEM_WORDS(IMEM_WORDS)) u_dnn (
    .clk, .rst_n, .req(s_req[3]), .rsp(s_rsp[3]),
    .l2_req, .l2_we, .l2_row, .l2_wdata, .l2_rdata,
    .isp_valid, .isp_data, .isp_ready, .busy(cl_busy), .irq(acc_irq));

  sys_regs #(.N_IRQ(N_CLUSTERS + 2)) u_sregs (
    .clk, .rst_n, .req(s_req[4]), .rsp(s_rsp[4]),
    .irq_src({dma_irq, acc_irq}), .irq);

  dma u_dma (.clk, .rst_n, .req(s_req[5]), .rsp(s_rsp[5]),
             .m_req(m_req[1]), .m_rsp(m_rsp[1]), .irq(dma_irq));
endmodule
