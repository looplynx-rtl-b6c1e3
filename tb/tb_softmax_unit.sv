// tb_softmax_unit: streams 40 heads of random length (1..48 scores, random
// causal masks) into alternating EXP-buffer banks. A producer thread writes
// head h+1 while the divider of head h is still running; a consumer thread
// waits for each bank to become ready, reads every weight and compares it
// with a reference model of the same number formats, then releases the bank.
// Checks: every weight, that the weights of a head sum to about 1.0 (256),
// the divider latency (41 iterations, bank ready 42 cycles after the last
// score), that scores of the next head were accepted while the divider was
// busy (the EXP buffer's purpose), and that masked scores get weight 0.
module tb_softmax_unit;
  import looplynx_pkg::*;
  localparam int MS = 64, NH = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_masked = 0, in_last = 0, in_bank = 0, rd_bank = 0;
  logic signed [31:0] in_score = 0;
  logic [1:0] bank_rdy, release_s = 0;
  logic [LEN_W-1:0] rd_idx = 0;
  logic [8:0] p;
  int checks = 0, failures = 0, overlap = 0;
  longint cyc = 0;
  int len [NH];
  int sc [NH][MS];
  bit mk [NH][MS];
  longint t_last [NH];
  bit pend [2];
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  softmax_unit #(.MAX_SEQ(MS)) dut (
    .clk, .rst_n, .sm_mult_i (16'd64), .sm_shift_i (5'd8),
    .in_valid, .in_ready, .in_score, .in_masked, .in_last, .in_bank,
    .bank_rdy_o (bank_rdy), .release_i (release_s), .rd_bank, .rd_idx, .p_o (p));

  always @(posedge clk) if (in_valid && in_ready && dut.div_busy) overlap++;

  function automatic longint ref_e(int s, bit m);
    longint z, ip, mant;
    if (m) return 0;
    z = (longint'(s) * 64) >>> 8;
    if (z < -4096) z = -4096;
    if (z > 4095) z = 4095;
    ip = z >>> 8;
    mant = 256 + (z & 255);
    return (ip >= -8) ? ((mant << (ip + 8)) & 64'hFFFF_FFFF) : (mant >> (-(ip + 8)));
  endfunction

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int h = 0; h < NH; h++) begin
      int pos;
      len[h] = 1 + $urandom % 48;
      pos = $urandom % len[h];
      for (int i = 0; i < len[h]; i++) begin
        sc[h][i] = int'($urandom % 4001) - 2000;
        mk[h][i] = (i > pos);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      // producer
      for (int h = 0; h < NH; h++) begin
        wait (!pend[h % 2]);
        @(negedge clk);
        for (int i = 0; i < len[h]; i++) begin
          in_valid = 1; in_score = sc[h][i]; in_masked = mk[h][i];
          in_last = (i == len[h] - 1); in_bank = h % 2;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (in_last) t_last[h] = cyc;
          @(negedge clk);
        end
        in_valid = 0; in_last = 0;
        pend[h % 2] = 1;
      end
      // consumer
      for (int h = 0; h < NH; h++) begin
        longint lat, esum, tot;
        int b;
        b = h % 2;
        @(negedge clk);
        while (!bank_rdy[b]) @(negedge clk);
        lat = cyc - t_last[h];
        checks++;
        if (lat != 42) begin failures++; $display("FAIL head %0d divider latency %0d", h, lat); end
        esum = 0;
        for (int i = 0; i < len[h]; i++) esum += ref_e(sc[h][i], mk[h][i]);
        tot = 0;
        rd_bank = b;
        for (int i = 0; i < len[h]; i++) begin
          longint r, ep;
          rd_idx = LEN_W'(i);
          #1;
          r  = (longint'(1) <<< 40) / esum;
          ep = (ref_e(sc[h][i], mk[h][i]) * r) >>> 32;
          if (ep > 256) ep = 256;
          checks++;
          if (int'(p) != ep || (mk[h][i] && p != 0)) begin
            failures++;
            if (failures < 8) $display("FAIL head %0d idx %0d p %0d exp %0d", h, i, p, ep);
          end
          tot += p;
        end
        checks++;
        if (tot < 256 - len[h] - 1 || tot > 257) begin failures++; $display("FAIL head %0d sum %0d", h, tot); end
        @(negedge clk);
        release_s[b] = 1; @(negedge clk); release_s[b] = 0;
        pend[b] = 0;
      end
    join
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no score accepted during a division"); end
    $display("overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
