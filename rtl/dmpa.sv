// dmpa - Direct Memory Parallel Access unit.
//
// Moves whole 1024-bit rows (16 columns x 64 bits) between the global
// memory and the cluster memories, one row per cycle, by broadcasting the
// same control to every CCONNECT of the source and of the destinations.
// The source is the L2, one cluster, or the image stream from the ISP; the
// destination is any set of L2 and clusters (a multicast, e.g. to copy the
// same parameters into several clusters). A cluster row is the same local
// address (bank & word) in all 16 computing blocks; an L2 row is one row of
// the 16 L2 columns.
//
// Pipeline: a row read in cycle t is written in cycle t+1, so N rows take
// N+1 cycles when nothing is in the way. A one-row buffer absorbs the cycles
// in which a destination bank is held by a cluster's write-back
// (cl_blocked); a blocked source read is retried. The ISP source collects 16
// beats of 64 bits into the buffer before each write.
//
// Registers (byte offset): 0x00 CTRL: write bit0 = start, bit1 = irq enable,
// [7:4] source (0 = L2, c+1 = cluster c, 15 = ISP), [23:8] destination mask
// (bit0 = L2, bit c+1 = cluster c; the source is removed from it); 0x08
// SRC_ROW, 0x10 DST_ROW, 0x18 NROWS, 0x20 STATUS (bit0 busy, bit1 done,
// write 1 to bit1 to clear), 0x28 CYCLES of the last transfer, 0x30 STALLS.
// Every accepted access is answered one cycle later. The paper gives the
// unit's purpose and its 1024-bit-per-cycle rate; the register map, the
// buffer and the stall rule are this design's own.
module dmpa
  import j3dai_pkg::*;
#(
  parameter int unsigned N_CLUSTERS = 6,
  parameter int unsigned N_COL      = 16
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  bus_req_t                               req,
  output bus_rsp_t                               rsp,
  // L2
  output logic                                   l2_req,
  output logic                                   l2_we,
  output logic [ROW_W-1:0]                       l2_row,
  output logic [N_COL-1:0][63:0]                 wdata,
  input  logic [N_COL-1:0][63:0]                 l2_rdata,
  // clusters
  output logic [N_CLUSTERS-1:0]                  cl_req,
  output logic [N_CLUSTERS-1:0]                  cl_we,
  output logic [N_CLUSTERS-1:0][LADDR_W-1:0]     cl_addr,
  input  logic [N_CLUSTERS-1:0][N_COL-1:0][63:0] cl_rdata,
  input  logic [N_CLUSTERS-1:0]                  cl_blocked,
  // ISP stream
  input  logic                                   isp_valid,
  input  logic [63:0]                            isp_data,
  output logic                                   isp_ready,
  output logic                                   irq
);
  localparam logic [3:0] SRC_ISP = 4'd15;
  localparam int unsigned BW = $clog2(N_COL);

  logic             busy, done, irq_en;
  logic [3:0]       src;
  logic [15:0]      dst;
  logic [ROW_W-1:0] src_row, dst_row, nrows, rd_cnt, wr_cnt;
  logic [31:0]      cycles, stalls;
  logic             pend, bvalid;
  logic [N_COL-1:0][63:0] buffer, src_rdata;
  logic [BW-1:0]    beat;
  logic             have, wr_req, wr_ok, rd_want, rd_ok, do_wr, do_rd, src_blk;
  logic [63:0]      rreg;
  logic             rv;

  // ---- datapath control ----
  always_comb begin
    src_rdata = l2_rdata;
    src_blk   = 1'b0;
    for (int c = 0; c < N_CLUSTERS; c++)
      if (src == 4'(c+1)) begin
        src_rdata = cl_rdata[c];
        src_blk   = cl_blocked[c];
      end
    have    = bvalid || pend;
    wr_req  = busy && have;
    wr_ok   = 1'b1;
    for (int c = 0; c < N_CLUSTERS; c++)
      if (dst[c+1] && cl_blocked[c]) wr_ok = 1'b0;
    do_wr   = wr_req && wr_ok;
    rd_want = busy && (src != SRC_ISP) && (rd_cnt != nrows) && (!have || do_wr);
    rd_ok   = !src_blk;
    do_rd   = rd_want && rd_ok;
    wdata   = bvalid ? buffer : src_rdata;

    l2_req = (src == 4'd0 && rd_want) || (dst[0] && wr_req);
    l2_we  = dst[0] && wr_req;
    l2_row = l2_we ? dst_row + wr_cnt : src_row + rd_cnt;
    for (int c = 0; c < N_CLUSTERS; c++) begin
      cl_req[c]  = (src == 4'(c+1) && rd_want) || (dst[c+1] && wr_req);
      cl_we[c]   = dst[c+1] && wr_req;
      cl_addr[c] = cl_we[c] ? LADDR_W'(dst_row + wr_cnt) : LADDR_W'(src_row + rd_cnt);
    end
  end

  assign isp_ready = busy && (src == SRC_ISP) && !bvalid && (rd_cnt != nrows);
  assign irq       = done && irq_en;

  // ---- registers and sequencing ----
  logic wr_reg;
  assign wr_reg = req.valid && req.we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; irq_en <= 1'b0;
      src <= '0; dst <= '0; src_row <= '0; dst_row <= '0; nrows <= '0;
      rd_cnt <= '0; wr_cnt <= '0; cycles <= '0; stalls <= '0;
      pend <= 1'b0; bvalid <= 1'b0; buffer <= '0; beat <= '0;
    end else begin
      if (wr_reg && !busy) begin
        unique case (req.addr[7:3])
          5'd0: begin
            irq_en <= req.wdata[1];
            src    <= req.wdata[7:4];
            dst    <= req.wdata[23:8] & ~(16'd1 << req.wdata[7:4]);
            if (req.wdata[0]) begin
              busy   <= 1'b1;
              done   <= 1'b0;
              rd_cnt <= '0;
              wr_cnt <= '0;
              cycles <= '0;
              stalls <= '0;
              beat   <= '0;
            end
          end
          5'd1: src_row <= req.wdata[ROW_W-1:0];
          5'd2: dst_row <= req.wdata[ROW_W-1:0];
          5'd3: nrows   <= req.wdata[ROW_W-1:0];
          5'd4: if (req.wdata[1]) done <= 1'b0;
          default: ;
        endcase
      end
      if (busy) begin
        cycles <= cycles + 1'b1;
        if ((wr_req && !wr_ok) || (rd_want && !rd_ok)) stalls <= stalls + 1'b1;
        // buffer: keep an unwritten row, drop a written one
        if (src == SRC_ISP) begin
          if (do_wr) bvalid <= 1'b0;
          if (isp_valid && isp_ready) begin
            buffer[beat] <= isp_data;
            beat <= beat + 1'b1;
            if (beat == BW'(N_COL-1)) begin
              bvalid <= 1'b1;
              rd_cnt <= rd_cnt + 1'b1;
            end
          end
        end else begin
          if (pend && !do_wr) buffer <= src_rdata;
          bvalid <= have && !do_wr;
          pend   <= do_rd;
          if (do_rd) rd_cnt <= rd_cnt + 1'b1;
        end
        if (do_wr) begin
          wr_cnt <= wr_cnt + 1'b1;
          if (wr_cnt + 1'b1 == nrows) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        if (nrows == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---- register reads ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv   <= 1'b0;
      rreg <= '0;
    end else begin
      rv <= req.valid;
      unique case (req.addr[7:3])
        5'd0:    rreg <= {40'd0, dst, src, 2'd0, irq_en, 1'b0};
        5'd1:    rreg <= 64'(src_row);
        5'd2:    rreg <= 64'(dst_row);
        5'd3:    rreg <= 64'(nrows);
        5'd4:    rreg <= {62'd0, done, busy};
        5'd5:    rreg <= 64'(cycles);
        5'd6:    rreg <= 64'(stalls);
        default: rreg <= '0;
      endcase
    end
  end
  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rreg;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    !(pend && bvalid));
endmodule
