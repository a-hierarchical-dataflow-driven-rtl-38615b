// dma_engine: programmable burst DMA (the L2 DMA of a cluster and the main
// DMA of the design top are two instances).
//
// The scheduler writes SRC, DST (byte addresses) and LEN (32-bit words) on
// the cfg port and then 1 to CTRL. The engine copies in bursts: it reads up
// to BURST words from the source into a local buffer (back-to-back requests,
// so the latency of one access is paid once per burst), then writes them to
// the destination, and repeats until LEN words are moved. CTRL reads [0] busy;
// STAT reads {bursts done[31:16], done pending[0]} and a write of 1 to STAT[0]
// clears the pending flag, which also drives irq. Register layout, burst
// length and completion flag are this design's choices; burst transfers are
// the architecture's.
module dma_engine import wbp_pkg::*; #(
  parameter int unsigned BURST = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t cfg_req,
  output bus_rsp_t cfg_rsp,
  output bus_req_t m_req,
  input  bus_rsp_t m_rsp,
  output logic     irq,
  output logic     busy
);
  localparam int unsigned BW = $clog2(BURST + 1);
  typedef enum logic [1:0] { D_IDLE, D_READ, D_WRITE } dstate_e;

  dstate_e     state;
  logic [31:0] src, dst, len, remain;
  logic [31:0] buf_q [BURST];
  logic [BW-1:0] n, issued, done_cnt;
  logic [15:0] bursts;
  logic        pend, cfg_rv;
  logic [31:0] cfg_rd;

  assign busy = (state != D_IDLE);
  assign irq  = pend;

  // configuration port
  assign cfg_rsp.gnt    = cfg_req.valid;
  assign cfg_rsp.rvalid = cfg_rv;
  assign cfg_rsp.rdata  = cfg_rd;

  // master port
  always_comb begin
    m_req = '0;
    if (state == D_READ && issued < n) begin
      m_req.valid = 1'b1;
      m_req.be    = 4'hF;
      m_req.addr  = src + 32'(issued) * 4;
    end else if (state == D_WRITE && issued < n) begin
      m_req.valid = 1'b1;
      m_req.we    = 1'b1;
      m_req.be    = 4'hF;
      m_req.addr  = dst + 32'(issued) * 4;
      m_req.wdata = buf_q[issued[$clog2(BURST)-1:0]];
    end
  end

  logic [31:0] first_n;
  assign first_n = (len > BURST) ? BURST : len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      src <= '0; dst <= '0; len <= '0; remain <= '0;
      n <= '0; issued <= '0; done_cnt <= '0; bursts <= '0;
      pend <= 1'b0; cfg_rv <= 1'b0; cfg_rd <= '0;
    end else begin
      cfg_rv <= cfg_req.valid;
      if (cfg_req.valid) begin
        unique case (cfg_req.addr[5:2])
          DMA_SRC:  cfg_rd <= src;
          DMA_DST:  cfg_rd <= dst;
          DMA_LEN:  cfg_rd <= len;
          DMA_CTRL: cfg_rd <= {31'b0, busy};
          DMA_STAT: cfg_rd <= {bursts, 15'b0, pend};
          default:  cfg_rd <= '0;
        endcase
        if (cfg_req.we && state == D_IDLE) begin
          unique case (cfg_req.addr[5:2])
            DMA_SRC: src <= cfg_req.wdata;
            DMA_DST: dst <= cfg_req.wdata;
            DMA_LEN: len <= cfg_req.wdata;
            DMA_CTRL: if (cfg_req.wdata[0] && len != 0) begin
              state    <= D_READ;
              remain   <= len;
              n        <= BW'(first_n);
              issued   <= '0;
              done_cnt <= '0;
              bursts   <= '0;
            end
            default: ;
          endcase
        end
        if (cfg_req.we && cfg_req.addr[5:2] == DMA_STAT && cfg_req.wdata[0]) pend <= 1'b0;
      end

      unique case (state)
        D_READ: begin
          if (m_req.valid && m_rsp.gnt) issued <= issued + 1'b1;
          if (m_rsp.rvalid) begin
            buf_q[done_cnt[$clog2(BURST)-1:0]] <= m_rsp.rdata;
            done_cnt <= done_cnt + 1'b1;
            if (done_cnt + 1'b1 == n) begin
              state    <= D_WRITE;
              issued   <= '0;
              done_cnt <= '0;
            end
          end
        end
        D_WRITE: begin
          if (m_req.valid && m_rsp.gnt) issued <= issued + 1'b1;
          if (m_rsp.rvalid) begin
            done_cnt <= done_cnt + 1'b1;
            if (done_cnt + 1'b1 == n) begin
              logic [31:0] left;
              left     = remain - 32'(n);
              bursts   <= bursts + 1'b1;
              src      <= src + 32'(n) * 4;
              dst      <= dst + 32'(n) * 4;
              remain   <= left;
              issued   <= '0;
              done_cnt <= '0;
              n        <= BW'((left > BURST) ? BURST : left);
              if (left == 0) begin
                state <= D_IDLE;
                pend  <= 1'b1;
              end else state <= D_READ;
            end
          end
        end
        default: ;
      endcase
    end
  end
endmodule
