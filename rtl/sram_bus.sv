// sram_bus - a single-port SRAM on the system bus (the CPU's 256 KB data and
// 256 KB instruction memories).
//
// Always ready; a read returns its word with rvalid one cycle after it is
// accepted, and a write is acknowledged the same way. Byte enables apply to
// writes. addr is the byte offset in the memory; it wraps at the size.
module sram_bus
  import j3dai_pkg::*;
#(
  parameter int unsigned WORDS = 32768
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  localparam int unsigned AW = $clog2(WORDS);
  logic v_q;

  mem_bank #(.WORDS(WORDS), .DW(64)) u_mem (
    .clk, .en(req.valid), .we(req.we), .be(req.be), .addr(req.addr[3 +: AW]),
    .wdata(req.wdata), .rdata(rsp.rdata));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= req.valid;

  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = v_q;
endmodule
