// j3dai_pkg - types and constants shared by the J3DAI digital system.
//
// Holds the default sizes of the accelerator (6 clusters x 16 computing
// blocks x 8 PEs, 4 banks per block, 64-bit bank words, 16-column L2), the
// system-bus request/response structs, the broadcast control structs that
// the cluster controller sends to all computing blocks, and the encoding of
// the cluster instruction set. Sizes marked "paper" below follow the
// published configuration; encodings, widths and the instruction set are
// this design's own choices.
package j3dai_pkg;

  // ---- sizes ------------------------------------------------------------
  localparam int unsigned N_CLUSTERS  = 6;      // paper
  localparam int unsigned N_NCB       = 16;     // paper: computing blocks per cluster
  localparam int unsigned N_PE        = 8;      // paper: PEs per computing block
  localparam int unsigned N_BANKS     = 4;      // paper (figure): banks per block
  localparam int unsigned BANK_WORDS  = 1024;   // 512 KB / 16 / 4 / 8 B
  localparam int unsigned IMEM_WORDS  = 1024;   // own choice
  localparam int unsigned L2_BOT_ROWS = 24576;  // 3 MB / 128 B rows
  localparam int unsigned L2_MID_ROWS = 16384;  // 2 MB / 128 B rows
  localparam int unsigned SRAM_WORDS  = 32768;  // 256 KB / 8 B
  localparam int unsigned N_COL       = 16;     // L2 columns = NCBs per cluster
  localparam int unsigned LADDR_W     = 12;     // bank (2) & word (10) address
  localparam int unsigned ROW_W       = 16;     // DMPA row address width
  localparam int unsigned CNT_W       = 12;     // loop counter width

  // ---- system bus -------------------------------------------------------
  // A request is held until ready; each accepted request (read or write)
  // gets exactly one rvalid one cycle later.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [63:0] wdata;
    logic [7:0]  be;
  } bus_req_t;

  typedef struct packed {
    logic        ready;
    logic        rvalid;
    logic [63:0] rdata;
  } bus_rsp_t;

  // System address map (byte addresses)
  localparam logic [31:0] ISRAM_BASE = 32'h0000_0000;
  localparam logic [31:0] DSRAM_BASE = 32'h0004_0000;
  localparam logic [31:0] L2_BASE    = 32'h0100_0000;
  localparam logic [31:0] DNN_BASE   = 32'h0200_0000;
  localparam logic [31:0] SREG_BASE  = 32'h0300_0000;
  localparam logic [31:0] DMA_BASE   = 32'h0300_1000;

  // Inside the DNN window: cluster c at c * 1 MB, DMPA registers at 7 MB,
  // broadcast (all clusters) write window at 15 MB.
  localparam int unsigned DMPA_SLOT  = 7;
  localparam int unsigned BCAST_SLOT = 15;
  // Inside a cluster window
  localparam logic [19:0] CL_IMEM_OFS = 20'h1_0000;
  localparam logic [19:0] CL_L1_OFS   = 20'h8_0000;

  // ---- PE / router control ---------------------------------------------
  typedef enum logic [3:0] {
    PE_NOP    = 4'd0,
    PE_MAC    = 4'd1,   // acc += a*b
    PE_MUL    = 4'd2,   // acc  = a*b
    PE_ADD    = 4'd3,   // acc += a
    PE_MAX    = 4'd4,   // acc  = max(acc, a)
    PE_MIN    = 4'd5,   // acc  = min(acc, a)
    PE_CLR    = 4'd6,   // acc  = 0
    PE_LDA    = 4'd7,   // acc  = a
    PE_LDACC  = 4'd8,   // acc  = neighbour acc (32-bit path)
    PE_ADDACC = 4'd9    // acc += neighbour acc (32-bit path)
  } pe_op_e;

  typedef enum logic [2:0] {
    RA_MEM   = 3'd0,    // PE i takes byte i of the bank word
    RA_SHL   = 3'd1,    // PE i takes byte i+1 (PE 7 from right neighbour / fill)
    RA_SHR   = 3'd2,    // PE i takes byte i-1 (PE 0 from left neighbour / fill)
    RA_BCAST = 3'd3,    // every PE takes byte a_byte (local multicast)
    RA_PAD0  = 3'd4,    // all zero
    RA_PAD1  = 3'd5     // all ones
  } ra_sel_e;

  typedef enum logic [1:0] {
    FILL_NEIGH = 2'd0,
    FILL_ZERO  = 2'd1,
    FILL_ONES  = 2'd2
  } fill_e;

  typedef enum logic [1:0] {
    RB_MCAST_BYTE = 2'd0,  // every PE takes multicast byte b_byte
    RB_MCAST_LANE = 2'd1,  // PE i takes multicast byte i
    RB_MEM        = 2'd2   // PE i takes byte i of the bank word
  } rb_sel_e;

  typedef struct packed {
    pe_op_e     op;
    ra_sel_e    a_sel;
    fill_e      fill;
    logic [2:0] a_byte;
    rb_sel_e    b_sel;
    logic [2:0] b_byte;
    logic       a_signed;
    logic       b_signed;
  } lane_ctrl_t;

  typedef enum logic [2:0] {
    NL_LINEAR = 3'd0,
    NL_RELU   = 3'd1,
    NL_LEAKY  = 3'd2,   // slope 1/8 below zero
    NL_HTANH  = 3'd3    // clamp to +-1.0 (2^shift), output Q1.7
  } nl_mode_e;

  typedef struct packed {
    nl_mode_e   mode;
    logic [4:0] shift;
    logic       out_signed;
  } nl_cfg_t;

  typedef struct packed {
    logic [LADDR_W-1:0] base;
    logic [LADDR_W-1:0] s0;
    logic [LADDR_W-1:0] s1;
    logic [LADDR_W-1:0] s2;
  } agu_cfg_t;

  // Issue stage: one bank read broadcast to every computing block.
  typedef struct packed {
    logic               rd;
    logic [LADDR_W-1:0] addr;
  } issue_t;

  typedef enum logic [1:0] { EX_NONE, EX_COMP, EX_MCAST, EX_STORE } ex_kind_e;

  // Execute stage: what to do with the word read in the previous cycle.
  typedef struct packed {
    ex_kind_e           kind;
    lane_ctrl_t         lane;
    logic               clr;       // first iteration: start from zero
    logic [3:0]         src_a;     // MCAST sources
    logic [3:0]         src_b;
    logic [7:0]         mix;       // byte taken from src_b where set
    logic [LADDR_W-1:0] waddr;     // STORE address
  } ex_t;

  // ---- instruction set (64-bit words) -----------------------------------
  typedef enum logic [5:0] {
    OP_NOP    = 6'd0,
    OP_HALT   = 6'd1,
    OP_SETAGU = 6'd2,   // [57:56] agu id, [47:36] base, [35:24] s0, [23:12] s1, [11:0] s2
    OP_SETLP  = 6'd3,   // [35:24] n2, [23:12] n1, [11:0] n0 (0 counts as 1)
    OP_SETNL  = 6'd4,   // [2:0] mode, [8:4] shift, [12] out_signed
    OP_COMP   = 6'd5,   // [20:0] lane control, [21] b_byte from AIU, [22] clear at first
    OP_MCAST  = 6'd6,   // [3:0] src_a, [7:4] src_b, [15:8] mix, [16] src_a from AIU
    OP_STORE  = 6'd7    // write activation bytes of all PEs at AGU2 address
  } opcode_e;

  localparam int unsigned AGU_A = 0;   // operand read
  localparam int unsigned AGU_M = 1;   // multicast source read
  localparam int unsigned AGU_W = 2;   // store address

  // 64-bit row of the DMPA vertical bus
  typedef logic [N_COL-1:0][63:0] row_t;

endpackage
