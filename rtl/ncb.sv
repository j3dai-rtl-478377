// ncb - Neural Computing Block: four memory banks, local control, local
// router and eight PEs.
//
// The cluster controller broadcasts two things every cycle: an issue request
// (read one word at a local address) and the execute-stage control for the
// word read in the previous cycle. The local control picks the one local
// access of the cycle: a STORE write-back (high priority), else the issue
// read, else a host access through the internal memory bus; the CCONNECT
// then shares the banks with the DMPA's vertical traffic. In the execute
// stage the word read last cycle goes through the local router to the PEs
// (COMP), or out to the cluster router (MCAST), or the PEs' activation bytes
// are written back as one word (STORE). The bytes at both ends of the word
// and PE 0's accumulator are offered to the neighbouring blocks (daisy
// chain). Local address = bank (top 2 bits) & word. The structure (banks,
// local router, PEs, CCONNECT) follows the paper's cluster figure; the
// two-stage timing and the arbitration order are this design's choices.
module ncb
  import j3dai_pkg::*;
#(
  parameter int unsigned N_PE       = 8,
  parameter int unsigned N_BANKS    = 4,
  parameter int unsigned BANK_WORDS = 1024,
  localparam int unsigned WAW       = $clog2(BANK_WORDS),
  localparam int unsigned BW        = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned DW        = 8 * N_PE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  issue_t               issue,
  input  ex_t                  ex,
  input  nl_cfg_t              nl_cfg,
  input  logic [DW-1:0]        mcast,
  output logic                 issue_blocked,
  output logic [DW-1:0]        rd_word,
  // daisy chain
  input  logic [7:0]           left_byte,
  input  logic [7:0]           right_byte,
  input  logic [31:0]          right_acc,
  output logic [7:0]           edge_lo,
  output logic [7:0]           edge_hi,
  output logic [31:0]          acc0,
  // host (internal memory bus)
  input  logic                 host_req,
  input  logic                 host_we,
  input  logic [LADDR_W-1:0]   host_addr,
  input  logic [DW-1:0]        host_wdata,
  input  logic [DW/8-1:0]      host_be,
  output logic                 host_blocked,
  output logic [DW-1:0]        host_rdata,
  // vertical (CCONNECT)
  input  logic                 vert_req,
  input  logic                 vert_we,
  input  logic [LADDR_W-1:0]   vert_addr,
  input  logic [DW-1:0]        vert_wdata,
  output logic                 vert_blocked,
  output logic [DW-1:0]        vert_rdata
);
  logic                         is_store;
  logic                         loc_req, loc_we, loc_blocked;
  logic [LADDR_W-1:0]           loc_addr;
  logic [DW-1:0]                loc_wdata, loc_rdata;
  logic [DW/8-1:0]              loc_be;
  logic [N_PE-1:0][7:0]         a, b, res;
  logic [N_PE-1:0][31:0]        acc, acc_link;
  logic [N_BANKS-1:0]           m_en, m_we;
  logic [N_BANKS-1:0][DW/8-1:0] m_be;
  logic [N_BANKS-1:0][WAW-1:0]  m_addr;
  logic [N_BANKS-1:0][DW-1:0]   m_wdata, m_rdata;

  // ---- local control ----
  assign is_store = (ex.kind == EX_STORE);
  always_comb begin
    loc_req   = 1'b0;
    loc_we    = 1'b0;
    loc_addr  = '0;
    loc_wdata = '0;
    loc_be    = '1;
    if (is_store) begin
      loc_req   = 1'b1;
      loc_we    = 1'b1;
      loc_addr  = ex.waddr;
      loc_wdata = res;
    end else if (issue.rd) begin
      loc_req  = 1'b1;
      loc_addr = issue.addr;
    end else if (host_req) begin
      loc_req   = 1'b1;
      loc_we    = host_we;
      loc_addr  = host_addr;
      loc_wdata = host_wdata;
      loc_be    = host_be;
    end
  end
  assign issue_blocked = issue.rd && (is_store || loc_blocked);
  // independent of host_req so that a broadcast write can test every block first
  assign host_blocked  = is_store || issue.rd ||
                         (vert_req && vert_addr[WAW +: BW] == host_addr[WAW +: BW]);
  assign rd_word       = loc_rdata;
  assign host_rdata    = loc_rdata;

  cconnect #(.NBANKS(N_BANKS), .AW(WAW), .DW(DW)) u_cc (
    .clk, .rst_n,
    .loc_req, .loc_hi(is_store), .hi_bank(ex.waddr[WAW +: BW]), .loc_we,
    .loc_bank(loc_addr[WAW +: BW]), .loc_addr(loc_addr[WAW-1:0]),
    .loc_wdata, .loc_be, .loc_blocked, .loc_rdata,
    .vert_req, .vert_we, .vert_bank(vert_addr[WAW +: BW]), .vert_addr(vert_addr[WAW-1:0]),
    .vert_wdata, .vert_blocked, .vert_rdata,
    .mem_en(m_en), .mem_we(m_we), .mem_be(m_be), .mem_addr(m_addr),
    .mem_wdata(m_wdata), .mem_rdata(m_rdata));

  for (genvar k = 0; k < N_BANKS; k++) begin : g_bank
    mem_bank #(.WORDS(BANK_WORDS), .DW(DW)) u_bank (
      .clk, .en(m_en[k]), .we(m_we[k]), .be(m_be[k]), .addr(m_addr[k]),
      .wdata(m_wdata[k]), .rdata(m_rdata[k]));
  end

  // ---- local router and PEs ----
  local_router #(.N_PE(N_PE), .ACC_W(32)) u_router (
    .ctrl(ex.lane), .mem_word(rd_word), .mcast, .left_byte, .right_byte,
    .acc, .right_acc, .a, .b, .acc_link);

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pe #(.ACC_W(32)) u_pe (
      .clk, .rst_n, .en(ex.kind == EX_COMP), .clr(ex.clr), .ctrl(ex.lane),
      .nl_cfg, .a(a[i]), .b(b[i]), .acc_link(acc_link[i]), .acc(acc[i]), .res(res[i]));
  end

  assign edge_lo = rd_word[7:0];
  assign edge_hi = rd_word[DW-1 -: 8];
  assign acc0    = acc[0];
endmodule
