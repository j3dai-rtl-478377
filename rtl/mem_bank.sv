// mem_bank - single-port synchronous SRAM with byte write enables.
//
// Stands for the SRAM macros of the design: the four banks of every
// computing block, the sixteen L2 columns, the CPU data and instruction
// memories and the cluster instruction memory. One access per cycle; a read
// returns its word on rdata in the next cycle, and rdata holds until the
// next read. Writes with be[i] set replace byte i. Written as an array so
// that synthesis maps it to a memory; the macro itself is process-specific.
module mem_bank #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned DW    = 64,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic            clk,
  input  logic            en,
  input  logic            we,
  input  logic [DW/8-1:0] be,
  input  logic [AW-1:0]   addr,
  input  logic [DW-1:0]   wdata,
  output logic [DW-1:0]   rdata
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int i = 0; i < DW/8; i++)
          if (be[i]) mem[addr][8*i +: 8] <= wdata[8*i +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
