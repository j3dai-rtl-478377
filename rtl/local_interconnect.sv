// local_interconnect - the accelerator's own bus, between the system bus
// and the clusters and DMPA.
//
// Decodes the 16 MB accelerator window in 1 MB slots: slot c (c < N_CLUSTERS)
// is cluster c, slot 7 the DMPA registers, slot 15 a broadcast window. A
// write to the broadcast window reaches every cluster at the same offset in
// one transfer, so one program (or one set of registers, or one start
// command) is loaded into all clusters at once. It completes when all
// clusters are ready in the same cycle; until then it is offered to all of
// them, so a cluster that is ready early may take the same write more than
// once. That is harmless for memory and register writes (same data, same
// address); a broadcast start should be issued only while every cluster is
// idle, when all are ready at once. A read there returns cluster 0. Requests pass
// through combinationally; the response of the slave accepted last cycle is
// returned. Unused slots answer zero. The broadcast window is this design's
// way of running the clusters as one program; the paper names the local
// interconnect without detail.
module local_interconnect
  import j3dai_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 6
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  bus_req_t                   req,     // addr = offset in the window
  output bus_rsp_t                   rsp,
  output bus_req_t [N_CLUSTERS-1:0]  cl_req,  // addr = offset in the cluster
  input  bus_rsp_t [N_CLUSTERS-1:0]  cl_rsp,
  output bus_req_t                   dm_req,
  input  bus_rsp_t                   dm_rsp
);
  logic [3:0] slot, slot_q;
  logic       bcast, all_ready, acc_q;
  bus_req_t   fwd;

  assign slot  = req.addr[23:20];
  assign bcast = (slot == 4'(BCAST_SLOT));

  always_comb begin
    fwd       = req;
    fwd.addr  = {12'd0, req.addr[19:0]};
    all_ready = 1'b1;
    for (int c = 0; c < N_CLUSTERS; c++) all_ready &= cl_rsp[c].ready;
    for (int c = 0; c < N_CLUSTERS; c++) begin
      cl_req[c]       = fwd;
      cl_req[c].valid = req.valid && ((slot == 4'(c)) || (bcast && req.we));
    end
    dm_req       = fwd;
    dm_req.valid = req.valid && (slot == 4'(DMPA_SLOT));

    rsp.ready = 1'b1;
    if (bcast)                        rsp.ready = req.we ? all_ready : cl_rsp[0].ready;
    else if (slot == 4'(DMPA_SLOT))   rsp.ready = dm_rsp.ready;
    else for (int c = 0; c < N_CLUSTERS; c++)
      if (slot == 4'(c)) rsp.ready = cl_rsp[c].ready;
    // a broadcast read goes to cluster 0
    if (bcast && !req.we) cl_req[0].valid = req.valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= '0;
      acc_q  <= 1'b0;
    end else begin
      acc_q  <= req.valid && rsp.ready;
      slot_q <= bcast ? 4'd0 : slot;
    end
  end

  always_comb begin
    rsp.rvalid = acc_q;
    rsp.rdata  = '0;
    if (slot_q == 4'(DMPA_SLOT)) rsp.rdata = dm_rsp.rdata;
    for (int c = 0; c < N_CLUSTERS; c++)
      if (slot_q == 4'(c)) rsp.rdata = cl_rsp[c].rdata;
  end
endmodule
