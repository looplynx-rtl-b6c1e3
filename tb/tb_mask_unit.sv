// tb_mask_unit: random key positions against the causal rule t > pos.
module tb_mask_unit;
  import looplynx_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [LEN_W-1:0] pos = 0, t = 0;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_masked, out_last;
  logic signed [31:0] in_score = 0, out_score;
  int checks = 0, failures = 0, n_masked = 0;
  always #5 clk = ~clk;
  mask_unit dut (.clk, .rst_n, .pos_i (pos), .in_valid, .in_ready, .in_score, .in_t (t), .in_last,
                 .out_valid, .out_ready, .out_score, .out_masked, .out_last);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      logic [LEN_W-1:0] tt, pp;
      logic signed [31:0] ss;
      pp = LEN_W'($urandom_range(0, 40)); tt = LEN_W'($urandom_range(0, 48)); ss = 32'($urandom);
      pos = pp; t = tt; in_score = ss; in_last = (i % 7 == 0); in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_score !== ss || out_masked !== (tt > pp) || out_last !== (i % 7 == 0)) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d pos=%0d masked=%0d", tt, pp, out_masked);
      end
      n_masked += out_masked;
    end
    checks++; if (n_masked == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
