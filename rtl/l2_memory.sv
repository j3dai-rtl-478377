// l2_memory - the global (L2) memory shared by the host and the accelerator.
//
// Sixteen 64-bit columns, each split into a bottom-die partition (BOT_ROWS
// words, 3 MB in all) and a middle-die partition (MID_ROWS words, 2 MB), so
// that one row of the memory is 16 x 64 = 1024 bits, the width the DMPA
// moves per cycle. In silicon the middle partition sits on the other die and
// is reached through 1024 TSVs in each direction; logically it is just more
// rows. Two ports: the system-bus port (one 64-bit word; word w is column
// w mod 16, row w / 16) and the vertical DMPA port (one whole row). Each
// column has a CCONNECT that gives the vertical port priority; a bus access
// to a partition the DMPA is using waits (ready low). Every accepted bus
// access is answered one cycle later. Sizes follow the paper; the
// interleaving and the priority are this design's choices.
module l2_memory
  import j3dai_pkg::*;
#(
  parameter int unsigned BOT_ROWS = 24576,
  parameter int unsigned MID_ROWS = 16384,
  parameter int unsigned N_COL    = 16,
  localparam int unsigned AW      = 15
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  bus_req_t                  req,    // addr = byte offset in L2
  output bus_rsp_t                  rsp,
  input  logic                      vert_req,
  input  logic                      vert_we,
  input  logic [ROW_W-1:0]          vert_row,
  input  logic [N_COL-1:0][63:0]    vert_wdata,
  output logic [N_COL-1:0][63:0]    vert_rdata
);
  localparam int unsigned CW = $clog2(N_COL);

  logic [28:0]      word;
  logic [CW-1:0]    col, col_q;
  logic [ROW_W-1:0] brow;
  logic             b_part, v_part;
  logic [AW-1:0]    b_addr, v_addr;
  logic [N_COL-1:0] lblk, vblk_unused, sel;
  logic [N_COL-1:0][63:0] lrdata;
  logic             rd_q;

  assign word = req.addr[31:3];
  assign col  = word[CW-1:0];
  assign brow = ROW_W'(word >> CW);

  // row -> (partition, address)
  always_comb begin
    b_part = (32'(brow) >= BOT_ROWS);
    b_addr = b_part ? AW'(32'(brow) - BOT_ROWS) : AW'(brow);
    v_part = (32'(vert_row) >= BOT_ROWS);
    v_addr = v_part ? AW'(32'(vert_row) - BOT_ROWS) : AW'(vert_row);
    for (int c = 0; c < N_COL; c++) sel[c] = req.valid && (col == CW'(c));
  end

  for (genvar c = 0; c < N_COL; c++) begin : g_col
    logic [1:0]       m_en, m_we;
    logic [1:0][7:0]  m_be;
    logic [1:0][AW-1:0] m_addr;
    logic [1:0][63:0] m_wdata, m_rdata;

    cconnect #(.NBANKS(2), .AW(AW), .DW(64)) u_cc (
      .clk, .rst_n,
      .loc_req(sel[c]), .loc_hi(1'b0), .hi_bank(1'b0), .loc_we(req.we), .loc_bank(b_part),
      .loc_addr(b_addr), .loc_wdata(req.wdata), .loc_be(req.be),
      .loc_blocked(lblk[c]), .loc_rdata(lrdata[c]),
      .vert_req, .vert_we, .vert_bank(v_part), .vert_addr(v_addr),
      .vert_wdata(vert_wdata[c]), .vert_blocked(vblk_unused[c]), .vert_rdata(vert_rdata[c]),
      .mem_en(m_en), .mem_we(m_we), .mem_be(m_be), .mem_addr(m_addr),
      .mem_wdata(m_wdata), .mem_rdata(m_rdata));

    mem_bank #(.WORDS(BOT_ROWS), .DW(64)) u_bot (
      .clk, .en(m_en[0]), .we(m_we[0]), .be(m_be[0]),
      .addr(m_addr[0][$clog2(BOT_ROWS)-1:0]), .wdata(m_wdata[0]), .rdata(m_rdata[0]));
    mem_bank #(.WORDS(MID_ROWS), .DW(64)) u_mid (
      .clk, .en(m_en[1]), .we(m_we[1]), .be(m_be[1]),
      .addr(m_addr[1][$clog2(MID_ROWS)-1:0]), .wdata(m_wdata[1]), .rdata(m_rdata[1]));
  end

  // bus port: ready does not depend on valid
  assign rsp.ready = !(vert_req && (v_part == b_part));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= 1'b0;
      col_q <= '0;
    end else begin
      rd_q  <= req.valid && rsp.ready;
      col_q <= col;
    end
  end
  assign rsp.rvalid = rd_q;
  assign rsp.rdata  = lrdata[col_q];

  a_bus_not_blocked: assert property (@(posedge clk) disable iff (!rst_n)
    (req.valid && rsp.ready) |-> !lblk[col]);
endmodule
