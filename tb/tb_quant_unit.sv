// tb_quant_unit: random accumulators, biases and scales against the
// requantisation formula, with random back-pressure; checks one-cycle latency.
module tb_quant_unit;
  import looplynx_pkg::*;
  logic clk = 0, rst_n = 0;
  quant_cfg_t cfg;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic signed [31:0] acc [N_GROUP], bias [N_GROUP];
  pack_t out_data;
  pack_t exp_q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  quant_unit dut (.clk, .rst_n, .cfg_i (cfg), .in_valid, .in_ready, .acc_i (acc), .bias_i (bias),
                  .out_valid, .out_ready, .out_data);

  function automatic pack_t model();
    pack_t r;
    for (int g = 0; g < N_GROUP; g++) begin
      longint s, p;
      s = longint'(acc[g]) + longint'(bias[g]);
      p = s * longint'(cfg.mult);
      if (cfg.shift != 0) p = p + (64'sd1 <<< (cfg.shift - 1));
      p = p >>> cfg.shift;
      r[8*g +: 8] = (p > 127) ? 8'sd127 : (p < -128) ? -8'sd128 : 8'(p);
    end
    return r;
  endfunction

  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    cfg = '{mult: 16'd3, shift: 6'd10};
    for (int g = 0; g < N_GROUP; g++) begin acc[g] = 0; bias[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 4) != 0;
        if (i % 300 == 0) cfg = '{mult: 16'($urandom), shift: 6'($urandom_range(0, 30))};
        for (int g = 0; g < N_GROUP; g++) begin
          acc[g]  = (i % 3 == 0) ? 32'($urandom) : 32'($signed($urandom_range(0, 200000)) - 100000);
          bias[g] = 32'($signed($urandom_range(0, 2000)) - 1000);
        end
      end
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0 || out_data !== exp_q[0]) begin
          failures++;
          if (failures < 5) $display("FAIL at %0d", i);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(exp_q.pop_front());
      if (in_valid && in_ready) exp_q.push_back(model());
      @(negedge clk);
      // one cycle of latency: an accepted input is visible the next cycle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
