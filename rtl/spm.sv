// spm: single-port scratchpad memory (T-SPM, CS-SPM and CD-SPM).
//
// Every tile and every cluster owns one single-ported private SRAM. It serves
// one access per cycle: the request is always granted, and the read data (or
// the write acknowledge) comes back with rvalid one cycle later. Byte enables
// select which bytes a write changes. The address is taken modulo the memory
// size (the surrounding decoder has already chosen this memory).
// The memory is written as a plain array; a chip would use a foundry macro.
// Default size 64 KiB is the T-SPM size printed in the tile figure.
module spm import wbp_pkg::*; #(
  parameter int unsigned BYTES = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [31:0] rdata_q;
  logic        rvalid_q;
  logic [AW-1:0] idx;

  assign idx = req.addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (req.valid) begin
      if (req.we) begin
        for (int b = 0; b < 4; b++)
          if (req.be[b]) mem[idx][8*b +: 8] <= req.wdata[8*b +: 8];
      end
      rdata_q <= mem[idx];
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= req.valid;

  assign rsp.gnt    = 1'b1;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;
endmodule
