// cconnect - Column Connect: joins one column memory to the vertical bus.
//
// Each computing block, and each L2 column, has one. The DMPA broadcasts the
// same vertical request (bank, address, read or write) to every CCONNECT of
// a cluster or of the global memory, and each one moves its own 64-bit slice
// of the 1024-bit row. The CCONNECT also shares the column's banks between
// that vertical traffic and the one local request of the cycle. Accesses to
// different banks proceed together. On a bank conflict a local request
// marked loc_hi (the write-back of a running program) wins and the vertical
// one is refused (vert_blocked; hi_bank must equal loc_bank whenever loc_hi is
// set, and loc_hi implies loc_req); otherwise the vertical one wins and the
// local one is refused (loc_blocked). Read data comes back one cycle later on
// loc_rdata or vert_rdata, routed by the bank each one read. The priority
// rule is this design's choice.
module cconnect #(
  parameter int unsigned NBANKS = 4,
  parameter int unsigned AW     = 10,
  parameter int unsigned DW     = 64,
  localparam int unsigned BW    = (NBANKS > 1) ? $clog2(NBANKS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // local side
  input  logic                          loc_req,
  input  logic                          loc_hi,
  input  logic [BW-1:0]                 hi_bank,
  input  logic                          loc_we,
  input  logic [BW-1:0]                 loc_bank,
  input  logic [AW-1:0]                 loc_addr,
  input  logic [DW-1:0]                 loc_wdata,
  input  logic [DW/8-1:0]               loc_be,
  output logic                          loc_blocked,
  output logic [DW-1:0]                 loc_rdata,
  // vertical side
  input  logic                          vert_req,
  input  logic                          vert_we,
  input  logic [BW-1:0]                 vert_bank,
  input  logic [AW-1:0]                 vert_addr,
  input  logic [DW-1:0]                 vert_wdata,
  output logic                          vert_blocked,
  output logic [DW-1:0]                 vert_rdata,
  // banks
  output logic [NBANKS-1:0]             mem_en,
  output logic [NBANKS-1:0]             mem_we,
  output logic [NBANKS-1:0][DW/8-1:0]   mem_be,
  output logic [NBANKS-1:0][AW-1:0]     mem_addr,
  output logic [NBANKS-1:0][DW-1:0]     mem_wdata,
  input  logic [NBANKS-1:0][DW-1:0]     mem_rdata
);
  logic          conflict, loc_go, vert_go;
  logic [BW-1:0] loc_rbank, vert_rbank;

  assign conflict     = loc_req && vert_req && (loc_bank == vert_bank);
  assign loc_blocked  = conflict && !loc_hi;
  // does not look at vert_req, so the DMPA may test it before asking; uses
  // hi_bank (the bank of the loc_hi request, given on its own) so that it
  // does not depend on the low-priority local path either
  assign vert_blocked = loc_hi && (hi_bank == vert_bank);
  assign loc_go       = loc_req && !loc_blocked;
  assign vert_go      = vert_req && !(conflict && loc_hi);

  always_comb begin
    for (int k = 0; k < NBANKS; k++) begin
      mem_en[k]    = 1'b0;
      mem_we[k]    = 1'b0;
      mem_be[k]    = '0;
      mem_addr[k]  = '0;
      mem_wdata[k] = '0;
      if (vert_go && vert_bank == BW'(k)) begin
        mem_en[k]    = 1'b1;
        mem_we[k]    = vert_we;
        mem_be[k]    = '1;
        mem_addr[k]  = vert_addr;
        mem_wdata[k] = vert_wdata;
      end else if (loc_go && loc_bank == BW'(k)) begin
        mem_en[k]    = 1'b1;
        mem_we[k]    = loc_we;
        mem_be[k]    = loc_be;
        mem_addr[k]  = loc_addr;
        mem_wdata[k] = loc_wdata;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loc_rbank  <= '0;
      vert_rbank <= '0;
    end else begin
      if (loc_go && !loc_we)   loc_rbank  <= loc_bank;
      if (vert_go && !vert_we) vert_rbank <= vert_bank;
    end
  end

  assign loc_rdata  = mem_rdata[loc_rbank];
  assign vert_rdata = mem_rdata[vert_rbank];

  // never two grants on one bank
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    !(loc_go && vert_go && loc_bank == vert_bank));
endmodule
