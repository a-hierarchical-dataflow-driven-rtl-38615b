// Bus-master tasks shared by the testbenches. The including module must
// declare clk, a bus_req_t named BUS_REQ and a bus_rsp_t named BUS_RSP
// (macros below, default req/rsp), plus int checks and failures.
// Requests are driven at the falling edge; the grant is sampled just before
// the rising edge, the response in the following low phase.
`ifndef TB_BUS_TASKS_SVH
`define TB_BUS_TASKS_SVH
`ifndef BUS_REQ
`define BUS_REQ req
`endif
`ifndef BUS_RSP
`define BUS_RSP rsp
`endif

task automatic bus_access(input logic we, input logic [3:0] be, input logic [31:0] a,
                          input logic [31:0] d, output logic [31:0] q);
  @(negedge clk);
  `BUS_REQ = '{valid: 1'b1, we: we, be: be, addr: a, wdata: d};
  #1;
  while (!`BUS_RSP.gnt) begin @(negedge clk); #1; end
  @(negedge clk);
  `BUS_REQ = '0;
  q = `BUS_RSP.rdata;
  checks++;
  if (!`BUS_RSP.rvalid) begin
    failures++;
    $display("FAIL: no response one cycle after grant, addr %08x", a);
  end
endtask

task automatic bus_wr(input logic [31:0] a, input logic [31:0] d);
  logic [31:0] q;
  bus_access(1'b1, 4'hF, a, d, q);
endtask

task automatic bus_rd(input logic [31:0] a, output logic [31:0] q);
  bus_access(1'b0, 4'hF, a, 32'h0, q);
endtask

task automatic expect_rd(input string what, input logic [31:0] a, input logic [31:0] e);
  logic [31:0] q;
  bus_rd(a, q);
  checks++;
  if (q !== e) begin
    failures++;
    $display("FAIL %s: addr %08x read %08x expected %08x", what, a, q, e);
  end
endtask

task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] e);
  checks++;
  if (got !== e) begin
    failures++;
    $display("FAIL %s: got %08x expected %08x", what, got, e);
  end
endtask
`endif
