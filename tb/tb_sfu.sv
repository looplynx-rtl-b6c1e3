// tb_sfu: the activation unit against a buffer model. Random datapacks are
// converted in runs of random length with random act_k; every output lane is
// compared with a reference of the hard-sigmoid GELU formula, the words
// around the destination must stay untouched, and the run must take
// n_words + 3 cycles (one datapack per cycle after the pipeline fill).
// A last check confirms GELU's shape: large positive inputs pass almost
// unchanged and large negative inputs go to about zero.
module tb_sfu;
  import looplynx_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy;
  buf_addr_t src, dst;
  logic [LEN_W-1:0] nw;
  logic [15:0] k;
  logic rd_en, wr_en;
  buf_addr_t rd_addr, wr_addr;
  pack_t rd_data, mem_wr, mem [256], gold [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sfu dut (.clk, .rst_n, .start_i (start), .src_i (src), .dst_i (dst), .n_words_i (nw), .act_k_i (k),
           .busy_o (busy), .buf_rd_en (rd_en), .buf_rd_addr (rd_addr), .buf_rd_data (rd_data),
           .buf_wr_en (wr_en), .buf_wr_addr (wr_addr), .buf_wr_data (mem_wr));
  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr[7:0]];
    if (wr_en) mem[wr_addr[7:0]] <= mem_wr;
  end

  function automatic int ref_gelu(int x, int kk);
    int t, hs;
    t = ((x * kk) >>> 8) + 128;
    hs = (t < 0) ? 0 : (t > 256) ? 256 : t;
    return (x * hs + 128) >>> 8;
  endfunction

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 30; rep++) begin
      int cyc, n;
      for (int a = 0; a < 256; a++) begin mem[a] = {8{$urandom}}; gold[a] = mem[a]; end
      n   = 1 + $urandom % 60;
      src = BUF_AW'($urandom % 64);
      dst = BUF_AW'(128 + $urandom % 64);
      nw  = LEN_W'(n);
      k   = (rep == 0) ? 16'd300 : 16'($urandom % 1024);
      for (int w = 0; w < n; w++)
        for (int g = 0; g < 32; g++)
          gold[dst + w][8*g +: 8] = 8'(ref_gelu(int'($signed(mem[src + w][8*g +: 8])), int'(k)));
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != n + 3) begin failures++; $display("FAIL %0d words took %0d cycles", n, cyc); end
      for (int a = 0; a < 256; a++) begin
        checks++;
        if (mem[a] !== gold[a]) begin failures++; if (failures < 6) $display("FAIL word %0d", a); end
      end
    end
    // shape of the reference formula at act_k = 300
    checks++;
    if (ref_gelu(120, 300) < 110 || ref_gelu(-120, 300) != 0 || ref_gelu(0, 300) != 0) begin
      failures++; $display("FAIL GELU shape");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
