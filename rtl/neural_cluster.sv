// neural_cluster - one SIMD neural cluster.
//
// A control unit (cluster_ctrl, with its instruction memory and host
// registers), N_NCB computing blocks driven by the same broadcast control, a
// cluster router and a multicast register shared by all blocks, and one
// CCONNECT per block (inside each ncb) on the vertical DMPA bus. The blocks'
// local routers are daisy-chained: block n sees the end bytes of blocks n-1
// and n+1 and the accumulator of PE 0 of block n+1; the two ends of the
// chain see zero.
//
// Host window (byte offset, 1 MB): 0x00000 registers, 0x10000 instruction
// memory, 0x80000 L1: block = off[18:15], bank = off[14:13], word =
// off[12:3]. L1 and instruction memory are reachable only while the cluster
// is idle (ready is low otherwise); every accepted access is answered one
// cycle later. The vertical port moves one 64-bit slice per block per cycle
// at the same local address in every block; vert_blocked is set when a
// program write-back holds that bank. The arrangement follows the paper's
// cluster figure; the address map and chain ends are this design's choices.
module neural_cluster
  import j3dai_pkg::*;
#(
  parameter int unsigned N_NCB      = 16,
  parameter int unsigned N_PE       = 8,
  parameter int unsigned N_BANKS    = 4,
  parameter int unsigned BANK_WORDS = 1024,
  parameter int unsigned IMEM_WORDS = 1024,
  localparam int unsigned DW        = 8 * N_PE,
  localparam int unsigned NW        = (N_NCB > 1) ? $clog2(N_NCB) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  bus_req_t                    req,
  output bus_rsp_t                    rsp,
  input  logic                        vert_req,
  input  logic                        vert_we,
  input  logic [LADDR_W-1:0]          vert_addr,
  input  logic [N_NCB-1:0][DW-1:0]    vert_wdata,
  output logic                        vert_blocked,
  output logic [N_NCB-1:0][DW-1:0]    vert_rdata,
  output logic                        busy,
  output logic                        irq
);
  issue_t   issue;
  ex_t      ex;
  nl_cfg_t  nl_cfg;
  bus_req_t creq;
  bus_rsp_t crsp;
  logic     stall;
  logic [DW-1:0] mcast_d, mcast_q;
  logic [N_NCB-1:0][DW-1:0] rd_word, host_rdata;
  logic [N_NCB-1:0][7:0]    edge_lo, edge_hi;
  logic [N_NCB-1:0][31:0]   acc0;
  logic [N_NCB-1:0]         issue_blocked, host_blocked, vblk, host_sel;

  // ---- host decode ----
  logic          is_l1, l1_ok, l1_rd_q, l1_q;
  logic [NW-1:0] l1_ncb, l1_ncb_q;
  assign is_l1  = req.addr[19];
  assign l1_ncb = req.addr[15 +: NW];
  assign l1_ok  = !busy && !host_blocked[l1_ncb];

  always_comb begin
    creq       = req;
    creq.valid = req.valid && !is_l1;
    for (int n = 0; n < N_NCB; n++)
      host_sel[n] = req.valid && is_l1 && !busy && (l1_ncb == NW'(n));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1_rd_q  <= 1'b0;
      l1_q     <= 1'b0;
      l1_ncb_q <= '0;
    end else begin
      l1_rd_q  <= req.valid && is_l1 && l1_ok;
      l1_q     <= is_l1;
      l1_ncb_q <= l1_ncb;
    end
  end

  assign rsp.ready  = is_l1 ? l1_ok : crsp.ready;
  assign rsp.rvalid = l1_q ? l1_rd_q : crsp.rvalid;
  assign rsp.rdata  = l1_q ? host_rdata[l1_ncb_q] : crsp.rdata;

  cluster_ctrl #(.IMEM_WORDS(IMEM_WORDS)) u_ctrl (
    .clk, .rst_n, .req(creq), .rsp(crsp), .issue, .ex, .nl_cfg,
    .stall, .busy, .irq);

  assign stall        = issue_blocked[0];
  assign vert_blocked = |vblk;

  // ---- cluster router and multicast register ----
  cluster_router #(.N_NCB(N_NCB), .NB(N_PE)) u_crouter (
    .words(rd_word), .src_a(ex.src_a[NW-1:0]), .src_b(ex.src_b[NW-1:0]),
    .mix(ex.mix[N_PE-1:0]), .out(mcast_d));

  multicast_reg #(.DW(DW)) u_mcast (
    .clk, .rst_n, .load(ex.kind == EX_MCAST), .d(mcast_d), .q(mcast_q));

  // ---- computing blocks ----
  for (genvar n = 0; n < N_NCB; n++) begin : g_ncb
    logic [7:0]  lb, rb;
    logic [31:0] ra;
    if (n == 0) begin : g_l0
      assign lb = 8'h00;
    end else begin : g_l
      assign lb = edge_hi[n-1];
    end
    if (n == N_NCB-1) begin : g_rn
      assign rb = 8'h00;
      assign ra = '0;
    end else begin : g_r
      assign rb = edge_lo[n+1];
      assign ra = acc0[n+1];
    end

    ncb #(.N_PE(N_PE), .N_BANKS(N_BANKS), .BANK_WORDS(BANK_WORDS)) u_ncb (
      .clk, .rst_n, .issue, .ex, .nl_cfg, .mcast(mcast_q),
      .issue_blocked(issue_blocked[n]), .rd_word(rd_word[n]),
      .left_byte(lb), .right_byte(rb), .right_acc(ra),
      .edge_lo(edge_lo[n]), .edge_hi(edge_hi[n]), .acc0(acc0[n]),
      .host_req(host_sel[n]), .host_we(req.we), .host_addr(req.addr[14:3]),
      .host_wdata(req.wdata[DW-1:0]), .host_be(req.be[DW/8-1:0]),
      .host_blocked(host_blocked[n]), .host_rdata(host_rdata[n]),
      .vert_req, .vert_we, .vert_addr, .vert_wdata(vert_wdata[n]),
      .vert_blocked(vblk[n]), .vert_rdata(vert_rdata[n]));
  end
endmodule
