// cluster_router - routes words between the computing blocks of a cluster.
//
// Takes the bank words just read by all computing blocks and forms one word
// for the multicast register: byte i comes from block src_b when mix[i] is
// set and from block src_a otherwise. With mix = 0 it copies one block's
// word; other masks mix two sources, as the paper's "mixing of data coming
// from multiple sources". Combinational; the byte-mask encoding is our
// choice.
module cluster_router #(
  parameter int unsigned N_NCB = 16,
  parameter int unsigned NB    = 8,
  localparam int unsigned SW   = (N_NCB > 1) ? $clog2(N_NCB) : 1
) (
  input  logic [N_NCB-1:0][NB-1:0][7:0] words,
  input  logic [SW-1:0]                 src_a,
  input  logic [SW-1:0]                 src_b,
  input  logic [NB-1:0]                 mix,
  output logic [NB-1:0][7:0]            out
);
  always_comb
    for (int i = 0; i < NB; i++)
      out[i] = mix[i] ? words[src_b][i] : words[src_a][i];
endmodule
