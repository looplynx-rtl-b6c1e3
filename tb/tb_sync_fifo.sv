// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// full/empty flags and the occupancy count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  always #5 clk = ~clk;
  sync_fifo #(.WIDTH(16), .DEPTH(8)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      in_valid  = ($urandom % 100) < ((i / 500) % 2 ? 80 : 30);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 30 : 80);
      in_data   = 16'($urandom);
      #1;
      checks++;
      if (in_ready !== (q.size() < 8) || out_valid !== (q.size() > 0) || count !== 4'(q.size())) begin
        failures++;
        if (failures < 5) $display("FAIL flags i=%0d size=%0d", i, q.size());
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== q[0]) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
