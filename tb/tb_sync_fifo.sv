// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, the full and empty flags and the count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push_valid = 0, pop_ready = 0, push_ready, pop_valid;
  logic [15:0] push_data = 0, pop_data;
  logic [2:0] count;
  int fulls = 0;
  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_data,
    .pop_valid, .pop_ready, .pop_data, .count);
  logic [15:0] model[$];

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      push_valid = ($urandom_range(0, 2) != 0) ^ (n > 1000);
      pop_ready  = ($urandom_range(0, 2) == 0) ^ (n > 1000);
      push_data  = 16'($urandom);
      #1;
      checks++;
      if (push_ready != (model.size() < 4) || pop_valid != (model.size() > 0) ||
          32'(count) != model.size()) begin
        failures++; $display("FAIL flags at %0d: size %0d count %0d", n, model.size(), count);
      end
      if (!push_ready) fulls++;
      if (pop_valid && pop_ready) begin
        checks++;
        if (pop_data !== model[0]) begin failures++; $display("FAIL data %h exp %h", pop_data, model[0]); end
      end
      @(posedge clk);
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL: never full"); end
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
