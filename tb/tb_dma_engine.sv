// tb_dma_engine: programs the DMA through its register port and lets it
// copy blocks inside a behavioural memory that stalls grants at random.
// Checks the copied words, that words outside the block are untouched, the
// busy flag, the done flag/irq and its clearing, and the number of bursts
// (ceil(LEN/BURST)).
module tb_dma_engine;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bus_req_t req = '0, mreq; bus_rsp_t rsp, mrsp;
  logic irq, busy;
  `include "tb_bus_tasks.svh"

  dma_engine #(.BURST(8)) dut (.clk, .rst_n, .cfg_req(req), .cfg_rsp(rsp),
    .m_req(mreq), .m_rsp(mrsp), .irq, .busy);

  logic [31:0] mem [1024];
  logic g_r, rv_q; logic [31:0] rd_q;
  always_ff @(posedge clk) g_r <= ($urandom_range(0, 3) != 0);
  assign mrsp.gnt = mreq.valid && g_r;
  assign mrsp.rvalid = rv_q;
  assign mrsp.rdata = rd_q;
  always_ff @(posedge clk) begin
    rv_q <= mrsp.gnt;
    if (mrsp.gnt) begin
      rd_q <= mem[mreq.addr[11:2]];
      if (mreq.we) mem[mreq.addr[11:2]] <= mreq.wdata;
    end
  end

  task automatic copy(int src, int dst, int len);
    logic [31:0] q;
    bus_wr(4 * DMA_SRC, src);
    bus_wr(4 * DMA_DST, dst);
    bus_wr(4 * DMA_LEN, len);
    bus_wr(4 * DMA_CTRL, 1);
    expect_rd("busy", 4 * DMA_CTRL, 1);
    do bus_rd(4 * DMA_CTRL, q); while (q[0]);
    expect_eq("irq after copy", irq, 1);
    expect_rd("stat", 4 * DMA_STAT, {16'((len + 7) / 8), 16'h1});
    bus_wr(4 * DMA_STAT, 1);
    expect_eq("irq cleared", irq, 0);
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    begin
      logic [31:0] ref_m [1024];
      for (int i = 0; i < 1024; i++) ref_m[i] = mem[i];
      copy(32'h100, 32'h800, 37);
      for (int i = 0; i < 37; i++) ref_m[32'h800/4 + i] = ref_m[32'h100/4 + i];
      copy(32'h000, 32'hC00, 8);
      for (int i = 0; i < 8; i++) ref_m[32'hC00/4 + i] = ref_m[i];
      copy(32'h400, 32'h404, 1);
      ref_m[32'h404/4] = ref_m[32'h400/4];
      for (int i = 0; i < 1024; i++) expect_eq($sformatf("word %0d", i), mem[i], ref_m[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
