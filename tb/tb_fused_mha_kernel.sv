// tb_fused_mha_kernel: the MHA kernel with 4 local heads of 64 dimensions
// and a 64-entry cache, against HBM channel models for the K and V caches
// and a buffer model holding q, k and v. For 12 calls at random positions
// and layers it checks:
//   - the k and v vectors of the token were appended at position pos,
//   - every output datapack against a reference attention (scores q.k over
//     the cached keys, causal mask, the softmax number formats, p * v),
//   - the number of masked scores (keys pos+1 .. n_tok-1 of every head),
//   - that stage A of one head ran while stage B of another did (overlap),
//   - a latency bound: the head pipeline streams one key beat per cycle, so
//     a call takes at most heads * (n_tok * 2 + 70) + append + 60 cycles.
module tb_fused_mha_kernel;
  import looplynx_pkg::*;
  localparam int NHN = 4, HD = 64, HDW = 2, MS = 64, H0 = 1, QB = 0, KB = 16, VB = 32;
  localparam int KC = 100, VC = 300;
  logic clk = 0, rst_n = 0, start = 0, busy, overlap, masked;
  logic [LEN_W-1:0] pos;
  logic [7:0] layer;
  logic rd0_en, rd1_en;
  buf_addr_t rd0_addr, rd1_addr;
  pack_t rd0_data, rd1_data, bmem [64];
  logic krq_v, krq_r, krd_v, krd_r, kwr_v, kwr_r, vrq_v, vrq_r, vrd_v, vrd_r, vwr_v, vwr_r;
  hbm_rd_req_t krq, vrq;
  hbm_wr_req_t kwr, vwr;
  pack_t krd, vrd;
  logic out_valid, out_ready;
  pack_t out_data;
  pack_t outs [$];
  int checks = 0, failures = 0, n_masked = 0, n_overlap = 0;
  always #5 clk = ~clk;

  fused_mha_kernel #(.N_HEAD_NODE(NHN), .HEAD_DIM(HD), .MAX_SEQ(MS), .KEY_GRAN(8)) dut (
    .clk, .rst_n, .start_i (start), .pos_i (pos), .layer_i (layer), .head0_i (8'(H0)),
    .q_base_i (BUF_AW'(QB)), .k_base_i (BUF_AW'(KB)), .v_base_i (BUF_AW'(VB)),
    .kc_base_i (HBM_AW'(KC)), .vc_base_i (HBM_AW'(VC)), .sm_mult_i (16'd64), .sm_shift_i (5'd8),
    .busy_o (busy), .overlap_o (overlap), .masked_o (masked),
    .rd0_en, .rd0_addr, .rd0_data, .rd1_en, .rd1_addr, .rd1_data,
    .k_rd_req_valid (krq_v), .k_rd_req_ready (krq_r), .k_rd_req (krq),
    .k_rd_data_valid (krd_v), .k_rd_data_ready (krd_r), .k_rd_data (krd),
    .k_wr_valid (kwr_v), .k_wr_ready (kwr_r), .k_wr (kwr),
    .v_rd_req_valid (vrq_v), .v_rd_req_ready (vrq_r), .v_rd_req (vrq),
    .v_rd_data_valid (vrd_v), .v_rd_data_ready (vrd_r), .v_rd_data (vrd),
    .v_wr_valid (vwr_v), .v_wr_ready (vwr_r), .v_wr (vwr),
    .out_valid, .out_ready, .out_data);

  hbm_channel_model #(.SEED(500), .LATENCY(8)) u_k (
    .clk, .rst_n, .rd_req_valid (krq_v), .rd_req_ready (krq_r), .rd_req (krq),
    .rd_data_valid (krd_v), .rd_data_ready (krd_r), .rd_data (krd), .wr_valid (kwr_v), .wr_ready (kwr_r), .wr (kwr));
  hbm_channel_model #(.SEED(700), .LATENCY(8)) u_v (
    .clk, .rst_n, .rd_req_valid (vrq_v), .rd_req_ready (vrq_r), .rd_req (vrq),
    .rd_data_valid (vrd_v), .rd_data_ready (vrd_r), .rd_data (vrd), .wr_valid (vwr_v), .wr_ready (vwr_r), .wr (vwr));

  always @(posedge clk) begin
    if (rd0_en) rd0_data <= bmem[rd0_addr[5:0]];
    if (rd1_en) rd1_data <= bmem[rd1_addr[5:0]];
    if (out_valid && out_ready) outs.push_back(out_data);
    n_masked  += masked;
    n_overlap += overlap;
  end

  function automatic longint ref_e(longint s, bit m);
    longint z, ip, mant;
    if (m) return 0;
    z = (s * 64) >>> 8;
    if (z < -4096) z = -4096;
    if (z > 4095) z = 4095;
    ip = z >>> 8;
    mant = 256 + (z & 255);
    return (ip >= -8) ? ((mant << (ip + 8)) & 64'hFFFF_FFFF) : (mant >> (-(ip + 8)));
  endfunction

  function automatic int cache_addr(int base, int l, int h, int t, int i);
    return base + ((l * NHN + h) * MS + t) * HDW + i;
  endfunction

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 12; rep++) begin
      int p, ntok, cyc, m0;
      p = (rep == 0) ? 0 : (rep == 1) ? MS - 1 : int'($urandom % MS);
      ntok = ((p + 8) / 8) * 8; if (ntok > MS) ntok = MS;
      pos = LEN_W'(p); layer = 8'($urandom % 2);
      for (int a = 0; a < 64; a++) bmem[a] = {8{$urandom}};
      outs.delete();
      m0 = n_masked;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (busy) begin out_ready = (rep < 6) ? 1'b1 : ($urandom % 3 != 0); @(negedge clk); cyc++; end
      out_ready = 1;
      if (rep < 6) begin
        checks++;
        if (cyc > NHN * (ntok * HDW + 70) + NHN * HDW * 3 + 60) begin
          failures++; $display("FAIL call at pos %0d took %0d cycles", p, cyc);
        end
      end
      if (rep < 2) $display("pos %0d: %0d cycles", p, cyc);
      // appended vectors
      for (int h = 0; h < NHN; h++)
        for (int i = 0; i < HDW; i++) begin
          checks += 2;
          if (u_k.beat(cache_addr(KC, layer, h, p, i)) !== bmem[KB + (H0 + h) * HDW + i]) begin failures++; $display("FAIL k append"); end
          if (u_v.beat(cache_addr(VC, layer, h, p, i)) !== bmem[VB + (H0 + h) * HDW + i]) begin failures++; $display("FAIL v append"); end
        end
      checks++;
      if (n_masked - m0 != NHN * (ntok - p - 1)) begin failures++; $display("FAIL masked %0d", n_masked - m0); end
      checks++;
      if (outs.size() != NHN * HDW) begin failures++; $display("FAIL %0d output packs", outs.size()); end
      else for (int h = 0; h < NHN; h++) begin
        longint s [MS], e [MS], esum, recip;
        int pw [MS];
        for (int t = 0; t < ntok; t++) begin
          s[t] = 0;
          for (int i = 0; i < HDW; i++) begin
            pack_t kb, qb;
            kb = u_k.beat(cache_addr(KC, layer, h, t, i));
            qb = bmem[QB + (H0 + h) * HDW + i];
            for (int g = 0; g < 32; g++) s[t] += longint'($signed(kb[8*g +: 8])) * longint'($signed(qb[8*g +: 8]));
          end
          s[t] = longint'(32'(s[t]));
        end
        esum = 0;
        for (int t = 0; t < ntok; t++) begin e[t] = ref_e(s[t], t > p); esum += e[t]; end
        recip = (longint'(1) <<< 40) / esum;
        for (int t = 0; t < ntok; t++) begin
          longint q;
          q = (e[t] * recip) >>> 32;
          pw[t] = (q > 256) ? 256 : int'(q);
        end
        for (int i = 0; i < HDW; i++)
          for (int g = 0; g < 32; g++) begin
            longint acc;
            int r;
            acc = 0;
            for (int t = 0; t < ntok; t++) begin
              pack_t vb;
              vb = u_v.beat(cache_addr(VC, layer, h, t, i));
              acc += longint'($signed(vb[8*g +: 8])) * pw[t];
            end
            acc = (acc + 128) >>> 8;
            r = (acc > 127) ? 127 : (acc < -128) ? -128 : int'(acc);
            checks++;
            if ($signed(outs[h * HDW + i][8*g +: 8]) != r) begin
              failures++;
              if (failures < 8) $display("FAIL pos %0d head %0d dim %0d: %0d vs %0d", p, h, 32 * i + g,
                                         $signed(outs[h * HDW + i][8*g +: 8]), r);
            end
          end
      end
    end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL stages A and B never overlapped"); end
    $display("overlap cycles %0d", n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
