// dma - memory-to-memory copier on the system bus.
//
// A bus master that copies LEN 64-bit words from SRC to DST (byte
// addresses, 8-byte aligned), one read then one write per word, and a bus
// slave for its registers: 0x00 SRC, 0x08 DST, 0x10 LEN, 0x18 CTRL (write
// bit0 = start, bit1 = irq enable), 0x20 STATUS (bit0 busy, bit1 done, write
// 1 to bit1 to clear). Each word costs at least four cycles (request, read
// answer, write request, write answer); being limited to the 64-bit bus is
// what the DMPA avoids for accelerator traffic. The paper names a DMA for
// memory-to-memory transfer; its registers and sequencing are our choice.
module dma
  import j3dai_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,      // register port
  output bus_rsp_t rsp,
  output bus_req_t m_req,    // master port
  input  bus_rsp_t m_rsp,
  output logic     irq
);
  typedef enum logic [2:0] { D_IDLE, D_RD, D_RWAIT, D_WR, D_WWAIT } dstate_e;
  dstate_e     st;
  logic [31:0] src, dst, len, cnt;
  logic [63:0] data, rreg;
  logic        done, irq_en, rv;

  always_comb begin
    m_req       = '0;
    m_req.be    = '1;
    m_req.valid = (st == D_RD) || (st == D_WR);
    m_req.we    = (st == D_WR);
    m_req.addr  = (st == D_WR) ? dst + (cnt << 3) : src + (cnt << 3);
    m_req.wdata = data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; src <= '0; dst <= '0; len <= '0; cnt <= '0;
      data <= '0; done <= 1'b0; irq_en <= 1'b0;
    end else begin
      if (req.valid && req.we && st == D_IDLE) begin
        unique case (req.addr[7:3])
          5'd0: src <= req.wdata[31:0];
          5'd1: dst <= req.wdata[31:0];
          5'd2: len <= req.wdata[31:0];
          5'd3: begin
            irq_en <= req.wdata[1];
            if (req.wdata[0]) begin
              cnt  <= '0;
              done <= 1'b0;
              st   <= (len == '0) ? D_IDLE : D_RD;
              if (len == '0) done <= 1'b1;
            end
          end
          5'd4: if (req.wdata[1]) done <= 1'b0;
          default: ;
        endcase
      end
      unique case (st)
        D_RD:    if (m_rsp.ready) st <= D_RWAIT;
        D_RWAIT: if (m_rsp.rvalid) begin data <= m_rsp.rdata; st <= D_WR; end
        D_WR:    if (m_rsp.ready) st <= D_WWAIT;
        D_WWAIT: if (m_rsp.rvalid) begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == len) begin st <= D_IDLE; done <= 1'b1; end
          else st <= D_RD;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv <= 1'b0;
      rreg <= '0;
    end else begin
      rv <= req.valid;
      unique case (req.addr[7:3])
        5'd0: rreg <= 64'(src);
        5'd1: rreg <= 64'(dst);
        5'd2: rreg <= 64'(len);
        5'd3: rreg <= {62'd0, irq_en, 1'b0};
        5'd4: rreg <= {62'd0, done, (st != D_IDLE)};
        default: rreg <= '0;
      endcase
    end
  end
  assign rsp.ready  = 1'b1;
  assign rsp.rvalid = rv;
  assign rsp.rdata  = rreg;
  assign irq        = done && irq_en;
endmodule
