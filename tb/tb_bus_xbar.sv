// tb_bus_xbar: 3 masters, 3 memories and an unmapped hole. Masters issue
// random reads and writes; each master checks its read data against a
// shared reference model, so misrouted requests or responses show up. Also
// checks that unmapped addresses are answered with 0, that two masters are
// served in the same cycle when they address different slaves, and that
// round-robin arbitration lets every master through a contended slave.
module tb_bus_xbar;
  import wbp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NM = 3, NS = 3;
  localparam logic [NS-1:0][31:0] BASE = {32'h0000_2000, 32'h0000_1000, 32'h0000_0000};
  localparam logic [NS-1:0][31:0] MASK = {32'hFFFF_F000, 32'hFFFF_F000, 32'hFFFF_F000};
  bus_req_t mreq [NM]; bus_rsp_t mrsp [NM];
  bus_req_t sreq [NS]; bus_rsp_t srsp [NS];

  bus_xbar #(.NM(NM), .NS(NS), .BASE(BASE), .MASK(MASK)) dut (
    .clk, .rst_n, .m_req(mreq), .m_rsp(mrsp), .s_req(sreq), .s_rsp(srsp));
  for (genvar s = 0; s < NS; s++) begin : g_m
    spm #(.BYTES(256)) u_mem (.clk, .rst_n, .req(sreq[s]), .rsp(srsp[s]));
  end

  logic [31:0] model [NS][64];
  logic        pv [NM]; logic [31:0] pd [NM]; logic pw [NM];
  int wins [NM] = '{0, 0, 0};
  int parallel = 0;

  initial begin
    for (int m = 0; m < NM; m++) begin mreq[m] = '0; pv[m] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) for (int i = 0; i < 64; i++) begin
      @(negedge clk); mreq[0] = '{1, 1, 4'hF, 32'(s * 32'h1000 + 4 * i), 32'(s * 1000 + i)};
      #1; while (!mrsp[0].gnt) begin @(negedge clk); #1; end
      model[s][i] = s * 1000 + i;
    end
    @(negedge clk); mreq[0] = '0;
    for (int n = 0; n < 4000; n++) begin
      int ng;
      @(negedge clk);
      for (int m = 0; m < NM; m++) if (pv[m]) begin
        checks++;
        if (!mrsp[m].rvalid || (!pw[m] && mrsp[m].rdata !== pd[m])) begin
          failures++; $display("FAIL master %0d response at %0d: %h exp %h", m, n, mrsp[m].rdata, pd[m]);
        end
      end
      for (int m = 0; m < NM; m++) if (!mreq[m].valid || pv[m]) begin
        int s, a;
        s = (n < 2000) ? $urandom_range(0, 3) : 1;   // second half: all on slave 1
        a = $urandom_range(0, 63);
        mreq[m] = '{($urandom_range(0, 3) != 0), ($urandom_range(0, 2) == 0), 4'hF,
                    32'(s * 32'h1000 + 4 * a), $urandom};
      end
      #1;
      ng = 0;
      for (int m = 0; m < NM; m++) begin
        pv[m] = mreq[m].valid && mrsp[m].gnt;
        pw[m] = mreq[m].we;
        if (pv[m]) begin
          int s, a;
          s = mreq[m].addr[13:12]; a = mreq[m].addr[7:2];
          ng++;
          if (n >= 2000) wins[m]++;
          if (s == 3) pd[m] = 0;
          else begin
            pd[m] = model[s][a];
            if (mreq[m].we) model[s][a] = mreq[m].wdata;
          end
        end
      end
      if (ng > 1) parallel++;
      // after a grant the master may issue a new request next cycle
      for (int m = 0; m < NM; m++) if (pv[m]) ;
    end
    checks++; if (parallel == 0) begin failures++; $display("FAIL: no parallel grants"); end
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (wins[m] < 200) begin failures++; $display("FAIL: master %0d starved (%0d)", m, wins[m]); end
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
