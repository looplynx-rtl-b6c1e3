// tb_fused_ln_res_kernel: the LN&Res kernel against a buffer model with two
// read ports and one write port. The parameter RAM is loaded with random
// gamma/beta for 4 layer norms; then 24 calls with random vectors of 128 or
// 256 elements, with and without the residual add, check:
//   - the residual stream x' = sat8(x + y) written back in place,
//   - every normalised output h against a reference of the same arithmetic
//     (integer square root, 2^20 / std, gamma/beta scaling),
//   - that nothing outside the x and h regions is written,
//   - the call time 2*n_words + 42 cycles (one datapack per cycle in each
//     pass, residual overlapped with the statistics pass),
//   - a statistical property: with gamma = 1.0 and beta = 0, h has mean ~0
//     and mean square ~1.0 (32^2 in Q.5).
module tb_fused_ln_res_kernel;
  import looplynx_pkg::*;
  localparam int XB = 10, YB = 40, HB = 70;
  logic clk = 0, rst_n = 0, start = 0, busy, do_res;
  logic [7:0] ln_idx;
  logic [LEN_W-1:0] nw;
  logic prm_wr_en = 0;
  logic [15:0] prm_wr_addr = 0;
  pack_t prm_wr_data = '0;
  logic rd0_en, rd1_en, wr_en;
  buf_addr_t rd0_addr, rd1_addr, wr_addr;
  pack_t rd0_data, rd1_data, wr_data;
  pack_t mem [128], gold [128];
  logic signed [7:0] gam [4][256], bet [4][256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fused_ln_res_kernel dut (
    .clk, .rst_n, .start_i (start), .x_base_i (BUF_AW'(XB)), .y_base_i (BUF_AW'(YB)),
    .h_base_i (BUF_AW'(HB)), .do_res_i (do_res), .ln_idx_i (ln_idx), .n_words_i (nw), .busy_o (busy),
    .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .rd0_en, .rd0_addr, .rd0_data, .rd1_en, .rd1_addr, .rd1_data, .wr_en, .wr_addr, .wr_data);

  always @(posedge clk) begin
    if (rd0_en) rd0_data <= mem[rd0_addr[6:0]];
    if (rd1_en) rd1_data <= mem[rd1_addr[6:0]];
    if (wr_en) mem[wr_addr[6:0]] <= wr_data;
  end

  function automatic longint isqrt(longint v);
    longint r;
    r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic int s8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 26; rep++) begin
      int n, L, lg, cyc, mode;
      int xv [256];
      longint sum, sq, vn, sd, inv, mean, msum, msq;
      n = (rep % 2) ? 8 : 4; L = 32 * n; lg = (n == 8) ? 8 : 7;
      mode = (rep >= 24) ? 1 : 0;   // last two calls: unit gamma, zero beta
      // parameter RAM: layer norm i at words 2*i*n (gamma) and 2*i*n + n (beta)
      for (int i = 0; i < 4; i++)
        for (int e = 0; e < L; e++) begin
          gam[i][e] = mode ? 8'sd32 : 8'(16 + $urandom % 32);
          bet[i][e] = mode ? 8'sd0 : 8'(int'($urandom % 9) - 4);
        end
      for (int i = 0; i < 4; i++)
        for (int w = 0; w < 2 * n; w++) begin
          @(negedge clk);
          prm_wr_en = 1; prm_wr_addr = 16'(2 * i * n + w);
          for (int g = 0; g < 32; g++)
            prm_wr_data[8*g +: 8] = (w < n) ? gam[i][32*w + g] : bet[i][32*(w - n) + g];
        end
      @(negedge clk); prm_wr_en = 0;
      for (int a = 0; a < 128; a++) begin mem[a] = {8{$urandom}}; gold[a] = mem[a]; end
      for (int w = 0; w < n; w++)
        for (int g = 0; g < 32; g++) begin
          mem[XB + w][8*g +: 8] = 8'(int'($urandom % 81) - 40);
          mem[YB + w][8*g +: 8] = 8'(int'($urandom % 81) - 40 + 10 * (g % 3));
          gold[XB + w] = mem[XB + w]; gold[YB + w] = mem[YB + w];
        end
      do_res = (rep % 3 != 2);
      ln_idx = 8'($urandom % 4);
      nw = LEN_W'(n);
      // reference
      sum = 0; sq = 0;
      for (int e = 0; e < L; e++) begin
        int a, b;
        a = int'($signed(mem[XB + e / 32][8*(e%32) +: 8]));
        b = int'($signed(mem[YB + e / 32][8*(e%32) +: 8]));
        xv[e] = do_res ? s8(a + b) : a;
        gold[XB + e / 32][8*(e%32) +: 8] = 8'(xv[e]);
        sum += xv[e]; sq += xv[e] * xv[e];
      end
      vn = ((sq <<< lg) - sum * sum);
      vn = (vn <<< 8) >>> (2 * lg);
      sd = isqrt(vn + 256);
      inv = (longint'(1) <<< 20) / sd;
      mean = s8((sum + (longint'(1) <<< (lg - 1))) >>> lg);
      msum = 0; msq = 0;
      for (int e = 0; e < L; e++) begin
        longint t;
        int h;
        t = longint'(xv[e] - mean) * inv * longint'(gam[ln_idx][e]);
        h = s8(((t + 32768) >>> 16) + longint'(bet[ln_idx][e]));
        gold[HB + e / 32][8*(e%32) +: 8] = 8'(h);
        msum += h; msq += h * h;
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 2 * n + 42) begin failures++; $display("FAIL call of %0d words took %0d cycles", n, cyc); end
      if (rep == 0) $display("call of %0d words: %0d cycles", n, cyc);
      for (int a = 0; a < 128; a++) begin
        checks++;
        if (mem[a] !== gold[a]) begin failures++; if (failures < 6) $display("FAIL rep %0d word %0d", rep, a); end
      end
      if (mode) begin
        checks++;
        if (msum / L > 2 || msum / L < -2 || msq / L < 700 || msq / L > 1300) begin
          failures++; $display("FAIL normalisation: mean %0d meansq %0d", msum / L, msq / L);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
