// dnn_accelerator - the bottom-die DNN accelerator: N_CLUSTERS neural
// clusters, the DMPA and the local interconnect.
//
// The host reaches every cluster's registers, instruction memory and L1
// banks and the DMPA registers through the local interconnect (all internal
// memories are mapped, a near-memory arrangement). The DMPA drives the
// vertical column bus of every cluster and the L2's row port, which is
// brought out here because the L2 sits beside the accelerator. The ISP image
// stream enters through the DMPA. irq[c] is cluster c's done interrupt and
// irq[N_CLUSTERS] the DMPA's. Structure after the paper's system figure.
module dnn_accelerator
  import j3dai_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 6,
  parameter int unsigned N_NCB      = 16,
  parameter int unsigned N_PE       = 8,
  parameter int unsigned N_BANKS    = 4,
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned IMEM_WORDS = 1024
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  bus_req_t                    req,
  output bus_rsp_t                    rsp,
  output logic                        l2_req,
  output logic                        l2_we,
  output logic [ROW_W-1:0]            l2_row,
  output logic [N_NCB-1:0][63:0]      l2_wdata,
  input  logic [N_NCB-1:0][63:0]      l2_rdata,
  input  logic                        isp_valid,
  input  logic [63:0]                 isp_data,
  output logic                        isp_ready,
  output logic [N_CLUSTERS-1:0]       busy,
  output logic [N_CLUSTERS:0]         irq
);
  bus_req_t [N_CLUSTERS-1:0] cl_req;
  bus_rsp_t [N_CLUSTERS-1:0] cl_rsp;
  bus_req_t dm_req;
  bus_rsp_t dm_rsp;
  logic [N_CLUSTERS-1:0]                  v_req, v_we, v_blk;
  logic [N_CLUSTERS-1:0][LADDR_W-1:0]     v_addr;
  logic [N_CLUSTERS-1:0][N_NCB-1:0][63:0] v_rdata;
  logic [N_NCB-1:0][63:0]                 v_wdata;

  local_interconnect #(.N_CLUSTERS(N_CLUSTERS)) u_lic (
    .clk, .rst_n, .req, .rsp, .cl_req, .cl_rsp, .dm_req, .dm_rsp);

  dmpa #(.N_CLUSTERS(N_CLUSTERS), .N_COL(N_NCB)) u_dmpa (
    .clk, .rst_n, .req(dm_req), .rsp(dm_rsp),
    .l2_req, .l2_we, .l2_row, .wdata(v_wdata), .l2_rdata,
    .cl_req(v_req), .cl_we(v_we), .cl_addr(v_addr), .cl_rdata(v_rdata),
    .cl_blocked(v_blk), .isp_valid, .isp_data, .isp_ready, .irq(irq[N_CLUSTERS]));

  assign l2_wdata = v_wdata;

  for (genvar c = 0; c < N_CLUSTERS; c++) begin : g_cl
    neural_cluster #(.N_NCB(N_NCB), .N_PE(N_PE), .N_BANKS(N_BANKS),
                     .BANK_WORDS(BANK_WORDS), .IMEM_WORDS(IMEM_WORDS)) u_cluster (
      .clk, .rst_n, .req(cl_req[c]), .rsp(cl_rsp[c]),
      .vert_req(v_req[c]), .vert_we(v_we[c]), .vert_addr(v_addr[c]),
      .vert_wdata(v_wdata), .vert_blocked(v_blk[c]), .vert_rdata(v_rdata[c]),
      .busy(busy[c]), .irq(irq[c]));
  end
endmodule
