// tb_mac_unit: random multiply-accumulate sequences against a software accumulator.
module tb_mac_unit;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [7:0] w = 0, x = 0;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint model = 0;
  always #5 clk = ~clk;
  mac_unit dut (.clk, .rst_n, .en_i (en), .clr_i (clr), .w_i (w), .x_i (x), .acc_o (acc));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (acc !== 0) failures++;
    for (int i = 0; i < 2000; i++) begin
      en  = ($urandom % 4) != 0;
      clr = ($urandom % 50) == 0;
      w   = 8'($urandom); x = 8'($urandom);
      if (i < 40) begin w = -128; x = -128; clr = (i == 0); en = 1; end   // extreme products
      if (en) model = (clr ? 0 : model) + longint'(w) * longint'(x);
      @(negedge clk);
      checks++;
      if (acc !== 32'(model)) begin
        failures++;
        if (failures < 5) $display("FAIL i=%0d acc=%0d model=%0d", i, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
