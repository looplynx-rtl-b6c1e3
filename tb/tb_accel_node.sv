// tb_accel_node: one complete node (N_NODES = 1, its ring output looped back
// to its input through a FIFO) on a small model: L_EMBED 128, L_FFN 256,
// 2 heads of 64, 1 layer, 2 MP channels. HBM channel models hold the
// weights and the KV cache. Two tokens run (positions 0 and 3). At the end of
// every stage the testbench looks into the shared buffer and checks the
// stage's result against a reference computed from the buffer contents the
// stage started from:
//   LN1/LN2/LNF: residual add and layer norm; Q K V O FFN1 FFN2: matrix-vector
//   product with biases and requantisation from the HBM weights; Act: GELU
//   approximation; Atten: k and v appended to the KV cache at pos.
// It also checks the MP stage time against the rate of the MP kernel (one
// block of N_CHANNEL*32 rows per k_len cycles) and that every stage ran.
module tb_accel_node;
  import looplynx_pkg::*;
  localparam int NC = 2, LE = 128, LF = 256, NH = 2, HD = 64, NL = 1, MS = 16;
  localparam int EW = LE / 32, FW = LF / 32, BR = NC * 32, HDW = HD / 32;
  localparam int A_X = 0, A_H = EW, A_Q = 2*EW, A_K = 3*EW, A_V = 4*EW, A_ATT = 5*EW, A_O = 6*EW,
                 A_F1 = 7*EW, A_A = 7*EW + FW, A_F2 = 7*EW + 2*FW, WORDS = 8*EW + 2*FW;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [LEN_W-1:0] pos;
  quant_cfg_t qcfg [N_MP_OPS];
  logic host_wr_en = 0, host_rd_en = 0, prm_wr_en = 0;
  buf_addr_t host_wr_addr = '0, host_rd_addr = '0;
  pack_t host_wr_data = '0, host_rd_data, prm_wr_data = '0;
  logic [15:0] prm_wr_addr = '0;
  logic rin_valid, rin_ready, rout_valid, rout_ready;
  pack_t rin_data, rout_data;
  logic w_rq_v [NC], w_rq_r [NC], w_rd_v [NC], w_rd_r [NC];
  hbm_rd_req_t w_rq [NC];
  pack_t w_rd [NC];
  logic krq_v, krq_r, krd_v, krd_r, kwr_v, kwr_r, vrq_v, vrq_r, vrd_v, vrd_r, vwr_v, vwr_r;
  hbm_rd_req_t krq, vrq;
  hbm_wr_req_t kwr, vwr;
  pack_t krd, vrd;
  stage_e stage;
  logic ev_stall, ev_overlap, ev_masked, ev_fwd, ev_tile;
  int checks = 0, failures = 0;
  int n_stage [16];
  logic signed [7:0] gam [3][LE], bet [3][LE];
  always #5 clk = ~clk;

  accel_node #(.N_NODES(1), .N_CHANNEL(NC), .L_EMBED(LE), .L_FFN(LF), .N_HEAD(NH), .HEAD_DIM(HD),
               .N_LAYER(NL), .MAX_SEQ(MS)) dut (
    .clk, .rst_n, .node_id_i (8'd0), .start_i (start), .pos_i (pos), .busy_o (busy), .done_o (done),
    .qcfg_i (qcfg), .sm_mult_i (16'd64), .sm_shift_i (5'd8), .act_k_i (16'd300),
    .host_wr_en, .host_wr_addr, .host_wr_data, .host_rd_en, .host_rd_addr, .host_rd_data,
    .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .rin_valid, .rin_ready, .rin_data, .rout_valid, .rout_ready, .rout_data,
    .w_rd_req_valid (w_rq_v), .w_rd_req_ready (w_rq_r), .w_rd_req (w_rq),
    .w_rd_data_valid (w_rd_v), .w_rd_data_ready (w_rd_r), .w_rd_data (w_rd),
    .k_rd_req_valid (krq_v), .k_rd_req_ready (krq_r), .k_rd_req (krq),
    .k_rd_data_valid (krd_v), .k_rd_data_ready (krd_r), .k_rd_data (krd),
    .k_wr_valid (kwr_v), .k_wr_ready (kwr_r), .k_wr (kwr),
    .v_rd_req_valid (vrq_v), .v_rd_req_ready (vrq_r), .v_rd_req (vrq),
    .v_rd_data_valid (vrd_v), .v_rd_data_ready (vrd_r), .v_rd_data (vrd),
    .v_wr_valid (vwr_v), .v_wr_ready (vwr_r), .v_wr (vwr),
    .stage_o (stage), .ev_mp_stall_o (ev_stall), .ev_overlap_o (ev_overlap), .ev_masked_o (ev_masked),
    .ev_fwd_o (ev_fwd), .ev_tile_o (ev_tile));

  // ring of one node: output back to input
  sync_fifo #(.WIDTH(PACK_W), .DEPTH(4)) u_ring (
    .clk, .rst_n, .in_valid (rout_valid), .in_ready (rout_ready), .in_data (rout_data),
    .out_valid (rin_valid), .out_ready (rin_ready), .out_data (rin_data), .count ());

  for (genvar c = 0; c < NC; c++) begin : g_w
    hbm_channel_model #(.SEED(10 + c), .LAYOUT(1), .LATENCY(8), .L_EMBED(LE), .L_FFN(LF), .N_NODES(1),
                        .N_CHANNEL(NC)) u_h (
      .clk, .rst_n, .rd_req_valid (w_rq_v[c]), .rd_req_ready (w_rq_r[c]), .rd_req (w_rq[c]),
      .rd_data_valid (w_rd_v[c]), .rd_data_ready (w_rd_r[c]), .rd_data (w_rd[c]),
      .wr_valid (1'b0), .wr_ready (), .wr ('0));
  end
  hbm_channel_model #(.SEED(500), .LATENCY(8)) u_k (
    .clk, .rst_n, .rd_req_valid (krq_v), .rd_req_ready (krq_r), .rd_req (krq),
    .rd_data_valid (krd_v), .rd_data_ready (krd_r), .rd_data (krd), .wr_valid (kwr_v), .wr_ready (kwr_r), .wr (kwr));
  hbm_channel_model #(.SEED(700), .LATENCY(8)) u_v (
    .clk, .rst_n, .rd_req_valid (vrq_v), .rd_req_ready (vrq_r), .rd_req (vrq),
    .rd_data_valid (vrd_v), .rd_data_ready (vrd_r), .rd_data (vrd), .wr_valid (vwr_v), .wr_ready (vwr_r), .wr (vwr));

  // ---------------- references ----------------
  function automatic pack_t wbeat(int c, int addr);
    return (c == 0) ? g_w[0].u_h.beat(addr) : g_w[1].u_h.beat(addr);
  endfunction
  function automatic int rows(int op); return (op == 4) ? LF : LE; endfunction
  function automatic int kl(int op); return (op == 5) ? LF : LE; endfunction
  function automatic int off(int op);
    int o = 0;
    for (int i = 0; i < op; i++) o += (rows(i) / BR) * (kl(i) + 4);
    return o;
  endfunction
  function automatic int s8(longint v); return (v > 127) ? 127 : (v < -128) ? -128 : int'(v); endfunction
  function automatic int el(int addr, int e);   // element e of the vector at buffer word addr
    return int'($signed(dut.u_buf.mem[addr + e / 32][8*(e%32) +: 8]));
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic check_mp(int op, int in_a, int out_a);
    int bad;
    bad = 0;
    for (int r = 0; r < rows(op); r++) begin
      int b, c, g, base;
      longint acc, p;
      pack_t bb;
      b = r / BR; c = (r / 32) % NC; g = r % 32;
      base = off(op) + b * (kl(op) + 4);
      acc = 0;
      for (int j = 0; j < kl(op); j++) begin
        pack_t w;
        w = wbeat(c, base + j);
        acc += longint'($signed(w[8*g +: 8])) * el(in_a, j);
      end
      bb = wbeat(c, base + kl(op) + g / 8);
      acc += longint'($signed(bb[32*(g%8) +: 32]));
      p = (acc * longint'(qcfg[op].mult) + (longint'(1) <<< (qcfg[op].shift - 1))) >>> qcfg[op].shift;
      if (el(out_a, r) != s8(p)) begin
        bad++;
        if (bad < 4 && failures < 2) $display("  row %0d got %0d exp %0d (acc %0d)", r, el(out_a, r), s8(p), acc);
      end
    end
    chk(bad == 0, $sformatf("MP op %0d: %0d rows differ", op, bad));
  endtask

  // layer norm of the vector xv with parameter set idx, compared with H
  task automatic check_ln(int xv [LE], int idx);
    longint sum, sq, vn, sd, inv, mean;
    int bad;
    sum = 0; sq = 0; bad = 0;
    for (int e = 0; e < LE; e++) begin sum += xv[e]; sq += xv[e] * xv[e]; end
    vn = ((sq <<< 7) - sum * sum);
    vn = (vn <<< 8) >>> 14;
    sd = 0;
    while ((sd + 1) * (sd + 1) <= vn + 256) sd++;
    inv = (longint'(1) <<< 20) / sd;
    mean = s8((sum + 64) >>> 7);
    for (int e = 0; e < LE; e++) begin
      longint t;
      t = longint'(xv[e] - mean) * inv * longint'(gam[idx][e]);
      if (el(A_H, e) != s8(((t + 32768) >>> 16) + longint'(bet[idx][e]))) bad++;
    end
    chk(bad == 0, $sformatf("layer norm %0d: %0d elements differ", idx, bad));
  endtask

  // ---------------- stage-by-stage checking ----------------
  int xprev [LE];
  int p_cur;
  stage_e last = ST_IDLE;
  longint t_enter, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_stage[0] += ev_stall; n_stage[13] += ev_overlap; n_stage[14] += ev_masked; n_stage[15] += ev_fwd;
  end

  always @(negedge clk) if (stage != last) begin
    int xv [LE];
    longint dur;
    dur = cyc - t_enter;
    t_enter = cyc;
    n_stage[int'(last)]++;
    for (int e = 0; e < LE; e++) xv[e] = el(A_X, e);
    unique case (last)
      ST_LN1: begin
        chk(xv == xprev, "LN1 of layer 0 must not change X");
        check_ln(xv, 0);
      end
      ST_LN2: begin
        int ok = 1;
        for (int e = 0; e < LE; e++) if (xv[e] != s8(xprev[e] + el(A_O, e))) ok = 0;
        chk(ok, "residual add before LN2");
        check_ln(xv, 1);
      end
      ST_LNF: begin
        int ok = 1;
        for (int e = 0; e < LE; e++) if (xv[e] != s8(xprev[e] + el(A_F2, e))) ok = 0;
        chk(ok, "residual add before the final layer norm");
        check_ln(xv, 2);
      end
      ST_Q, ST_K, ST_V, ST_O, ST_FFN1, ST_FFN2: begin
        int op, blocks;
        op = (last == ST_Q) ? 0 : (last == ST_K) ? 1 : (last == ST_V) ? 2 : (last == ST_O) ? 3 :
             (last == ST_FFN1) ? 4 : 5;
        check_mp(op, (op == 3) ? A_ATT : (op == 5) ? A_A : A_H,
                 (op == 0) ? A_Q : (op == 1) ? A_K : (op == 2) ? A_V : (op == 3) ? A_O : (op == 4) ? A_F1 : A_F2);
        blocks = rows(op) / BR;
        chk(dur <= blocks * (kl(op) + 4) + 60, $sformatf("MP op %0d took %0d cycles", op, dur));
      end
      ST_ACT: begin
        int bad = 0;
        for (int e = 0; e < LF; e++) begin
          int x, t, hs;
          x = el(A_F1, e);
          t = ((x * 300) >>> 8) + 128;
          hs = (t < 0) ? 0 : (t > 256) ? 256 : t;
          if (el(A_A, e) != ((x * hs + 128) >>> 8)) bad++;
        end
        chk(bad == 0, "activation");
      end
      ST_ATTN: begin
        int ok = 1;
        for (int h = 0; h < NH; h++)
          for (int i = 0; i < HDW; i++) begin
            int a;
            a = (h * MS + p_cur) * HDW + i;
            if (u_k.beat(a) !== dut.u_buf.mem[A_K + h * HDW + i]) ok = 0;
            if (u_v.beat(a) !== dut.u_buf.mem[A_V + h * HDW + i]) ok = 0;
          end
        chk(ok, "KV cache append");
      end
      default: ;
    endcase
    if (last == ST_IDLE || last == ST_ATTN || last == ST_FFN2) xprev = xv;
    last = stage;
  end

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < 16; i++) n_stage[i] = 0;
    for (int i = 0; i < N_MP_OPS; i++) begin qcfg[i].mult = 16'd3; qcfg[i].shift = (i == 5) ? 6'd11 : 6'd10; end
    pos = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++)
      for (int e = 0; e < LE; e++) begin gam[i][e] = 8'(20 + $urandom % 24); bet[i][e] = 8'(int'($urandom % 5) - 2); end
    for (int i = 0; i < 3; i++)
      for (int w = 0; w < 2 * EW; w++) begin
        @(negedge clk);
        prm_wr_en = 1; prm_wr_addr = 16'(i * 2 * EW + w);
        for (int g = 0; g < 32; g++) prm_wr_data[8*g +: 8] = (w < EW) ? gam[i][32*w + g] : bet[i][32*(w - EW) + g];
      end
    @(negedge clk); prm_wr_en = 0;
    for (int tok = 0; tok < 2; tok++) begin
      for (int w = 0; w < EW; w++) begin
        @(negedge clk);
        host_wr_en = 1; host_wr_addr = BUF_AW'(w);
        for (int g = 0; g < 32; g++) host_wr_data[8*g +: 8] = 8'(int'($urandom % 101) - 50);
      end
      @(negedge clk); host_wr_en = 0;
      p_cur = (tok == 0) ? 0 : 3;
      pos = LEN_W'(p_cur);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      // the host reads the output back through its port
      host_rd_en = 1; host_rd_addr = BUF_AW'(A_H); @(negedge clk); host_rd_en = 0;
      chk(host_rd_data === dut.u_buf.mem[A_H], "host read port");
    end
    for (int s = 1; s <= 11; s++) chk(n_stage[s] == 2, $sformatf("stage %0d ran %0d times", s, n_stage[s]));
    chk(n_stage[14] > 0, "masked keys observed");
    $display("stall %0d overlap %0d masked %0d fwd %0d", n_stage[0], n_stage[13], n_stage[14], n_stage[15]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
