// tb_onchip_buffer: random writes and reads on both read ports against an
// array model; checks the one-cycle read latency and read-before-write.
module tb_onchip_buffer;
  import looplynx_pkg::*;
  logic clk = 0;
  logic wr_en = 0, rd0_en = 0, rd1_en = 0;
  buf_addr_t wr_addr = 0, rd0_addr = 0, rd1_addr = 0;
  pack_t wr_data = 0, rd0_data, rd1_data;
  pack_t model [64];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  onchip_buffer #(.DEPTH(64)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd0_en, .rd0_addr, .rd0_data,
                                   .rd1_en, .rd1_addr, .rd1_data);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    // fill
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = BUF_AW'(a); wr_data = {8{$urandom}}; model[a] = wr_data;
    end
    for (int i = 0; i < 2000; i++) begin
      pack_t e0, e1;
      @(negedge clk);
      wr_en = $urandom % 2; wr_addr = BUF_AW'($urandom_range(0, 63)); wr_data = {8{$urandom}};
      rd0_en = 1; rd0_addr = BUF_AW'($urandom_range(0, 63));
      rd1_en = 1; rd1_addr = (i % 5 == 0) ? wr_addr : BUF_AW'($urandom_range(0, 63));
      e0 = model[rd0_addr]; e1 = model[rd1_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      rd0_en = 0; rd1_en = 0; wr_en = 0;
      checks += 2;
      if (rd0_data !== e0) failures++;
      if (rd1_data !== e1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
