// tb_looplynx_top_full: two tokens through the full-size LoopLynx cluster.
//
// The cluster keeps all of its default parameters: 4 nodes, 8 HBM weight
// channels x 32 MAC units per node, GPT-2 345M sizes (embedding 1024, FFN
// 4096, 16 heads of 64, 24 blocks). Tokens at positions 0 and 1 run through
// all 24 blocks. The HBM weight channels drop 7% of the beats at random:
// one 32-byte beat per cycle at 285 MHz is 9.12 GB/s, the paper's channel
// peak is 8.49 GB/s (93%). The test checks that all nodes end with the same output, that the
// output is not degenerate, that the Q projection of block 0 matches a
// reference matrix-vector product, and that the token takes fewer cycles than
// the 2.55 ms x 285 MHz the paper reports for this configuration. Mechanism
// counts are printed and every mechanism must occur.
module tb_looplynx_top_full;
  import looplynx_pkg::*;
  localparam int unsigned N_NODES   = 4;
  localparam int unsigned N_CHANNEL = 8;
  localparam int unsigned L_EMBED   = 1024;
  localparam int unsigned L_FFN     = 4096;
  localparam int unsigned N_HEAD    = 16;
  localparam int unsigned HEAD_DIM  = 64;
  localparam int unsigned N_LAYER   = 24;
  localparam int unsigned MAX_SEQ   = 1024;
  localparam int unsigned N_TOK     = 2;
  localparam int          GAP_PCT   = 7;
  localparam int unsigned EW  = L_EMBED / 32;
  localparam int unsigned HN  = N_HEAD / N_NODES;
  // Paper: 2.55 ms per token at 285 MHz for 4 nodes on GPT-2 345M (24 blocks).
  // Budget scales with the work per node per block relative to that configuration.
  localparam longint PAPER_CYCLES = 64'd726750;
  localparam longint BUDGET = (PAPER_CYCLES * N_LAYER * (L_EMBED / 1024.0) * (L_EMBED / 1024.0)
                               * 4 / N_NODES * 8 / N_CHANNEL) / 24 + 64'd20000;
  localparam longint WATCHDOG = BUDGET * N_TOK * 4 + 64'd100000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic             start, busy, done;
  logic [LEN_W-1:0] pos;
  quant_cfg_t       qcfg [N_MP_OPS];
  logic             host_wr_en = 1'b0, host_rd_en = 1'b0, prm_wr_en = 1'b0;
  buf_addr_t        host_wr_addr = '0, host_rd_addr = '0;
  pack_t            host_wr_data = '0, prm_wr_data = '0;
  logic [15:0]      prm_wr_addr = '0;
  pack_t            host_rd_data [N_NODES];

  logic        w_rd_req_valid [N_NODES][N_CHANNEL], w_rd_req_ready [N_NODES][N_CHANNEL];
  hbm_rd_req_t w_rd_req [N_NODES][N_CHANNEL];
  logic        w_rd_data_valid [N_NODES][N_CHANNEL], w_rd_data_ready [N_NODES][N_CHANNEL];
  pack_t       w_rd_data [N_NODES][N_CHANNEL];
  logic        k_rd_req_valid [N_NODES], k_rd_req_ready [N_NODES], k_rd_data_valid [N_NODES], k_rd_data_ready [N_NODES];
  logic        v_rd_req_valid [N_NODES], v_rd_req_ready [N_NODES], v_rd_data_valid [N_NODES], v_rd_data_ready [N_NODES];
  hbm_rd_req_t k_rd_req [N_NODES], v_rd_req [N_NODES];
  pack_t       k_rd_data [N_NODES], v_rd_data [N_NODES];
  logic        k_wr_valid [N_NODES], k_wr_ready [N_NODES], v_wr_valid [N_NODES], v_wr_ready [N_NODES];
  hbm_wr_req_t k_wr [N_NODES], v_wr [N_NODES];
  stage_e      stage [N_NODES];
  logic        ev_stall [N_NODES], ev_overlap [N_NODES], ev_masked [N_NODES], ev_fwd [N_NODES], ev_tile [N_NODES];

  looplynx_top dut (
    .clk, .rst_n, .start_i (start), .pos_i (pos), .busy_o (busy), .done_o (done),
    .qcfg_i (qcfg), .sm_mult_i (16'd64), .sm_shift_i (5'd8), .act_k_i (16'd300),
    .host_wr_en, .host_wr_addr, .host_wr_data, .host_rd_en, .host_rd_addr, .host_rd_data,
    .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .w_rd_req_valid, .w_rd_req_ready, .w_rd_req, .w_rd_data_valid, .w_rd_data_ready, .w_rd_data,
    .k_rd_req_valid, .k_rd_req_ready, .k_rd_req, .k_rd_data_valid, .k_rd_data_ready, .k_rd_data,
    .k_wr_valid, .k_wr_ready, .k_wr,
    .v_rd_req_valid, .v_rd_req_ready, .v_rd_req, .v_rd_data_valid, .v_rd_data_ready, .v_rd_data,
    .v_wr_valid, .v_wr_ready, .v_wr,
    .stage_o (stage), .ev_mp_stall_o (ev_stall), .ev_overlap_o (ev_overlap),
    .ev_masked_o (ev_masked), .ev_fwd_o (ev_fwd), .ev_tile_o (ev_tile)
  );

  for (genvar n = 0; n < N_NODES; n++) begin : g_hbm
    for (genvar c = 0; c < N_CHANNEL; c++) begin : g_w
      hbm_channel_model #(.SEED(1000 * n + c), .LAYOUT(1), .LATENCY(8), .GAP_PCT(GAP_PCT),
                          .L_EMBED(L_EMBED), .L_FFN(L_FFN), .N_NODES(N_NODES), .N_CHANNEL(N_CHANNEL)) u_w (
        .clk, .rst_n,
        .rd_req_valid (w_rd_req_valid[n][c]), .rd_req_ready (w_rd_req_ready[n][c]), .rd_req (w_rd_req[n][c]),
        .rd_data_valid (w_rd_data_valid[n][c]), .rd_data_ready (w_rd_data_ready[n][c]), .rd_data (w_rd_data[n][c]),
        .wr_valid (1'b0), .wr_ready (), .wr ('0)
      );
    end
    hbm_channel_model #(.SEED(500 + n), .LATENCY(8)) u_k (
      .clk, .rst_n,
      .rd_req_valid (k_rd_req_valid[n]), .rd_req_ready (k_rd_req_ready[n]), .rd_req (k_rd_req[n]),
      .rd_data_valid (k_rd_data_valid[n]), .rd_data_ready (k_rd_data_ready[n]), .rd_data (k_rd_data[n]),
      .wr_valid (k_wr_valid[n]), .wr_ready (k_wr_ready[n]), .wr (k_wr[n])
    );
    hbm_channel_model #(.SEED(700 + n), .LATENCY(8)) u_v (
      .clk, .rst_n,
      .rd_req_valid (v_rd_req_valid[n]), .rd_req_ready (v_rd_req_ready[n]), .rd_req (v_rd_req[n]),
      .rd_data_valid (v_rd_data_valid[n]), .rd_data_ready (v_rd_data_ready[n]), .rd_data (v_rd_data[n]),
      .wr_valid (v_wr_valid[n]), .wr_ready (v_wr_ready[n]), .wr (v_wr[n])
    );
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters ----------------
  longint n_stall = 0, n_overlap = 0, n_masked = 0, n_fwd = 0, n_tile = 0, n_kvw = 0;
  longint n_stage [16];
  stage_e prev_stage = ST_IDLE;
  initial for (int i = 0; i < 16; i++) n_stage[i] = 0;
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N_NODES; n++) begin
      n_stall   += ev_stall[n];
      n_overlap += ev_overlap[n];
      n_masked  += ev_masked[n];
      n_fwd     += ev_fwd[n];
      n_tile    += ev_tile[n];
      n_kvw     += (k_wr_valid[n] && k_wr_ready[n]) ? 1 : 0;
    end
    if (stage[0] != prev_stage) n_stage[stage[0]]++;
    prev_stage <= stage[0];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- reference for the Q projection of block 0 ----------------
  // Node n's share of Q rows r (0..L_EMBED/N_NODES-1): block b = r / (N_CHANNEL*32),
  // channel c = (r / 32) % N_CHANNEL, lane g = r % 32. Weights from the channel model.
  function automatic logic signed [7:0] ref_q(input int n, input int r, input logic signed [7:0] h [L_EMBED],
                                              input quant_cfg_t qc);
    int b, c, g, base;
    longint acc;
    logic signed [47:0] p;
    b = r / (N_CHANNEL * 32); c = (r / 32) % N_CHANNEL; g = r % 32;
    base = b * (L_EMBED + 4);
    acc = 0;
    for (int j = 0; j < L_EMBED; j++)
      acc += longint'(tb_util_pkg::gen_byte(1000 * n + c, base + j, g)) * longint'(h[j]);
    acc += longint'(tb_util_pkg::gen_bias(1000 * n + c, base + L_EMBED + g / 8, g % 8));
    p = 48'(acc) * 48'(qc.mult);
    if (qc.shift != 0) p = p + (48'sd1 <<< (qc.shift - 1));
    p = p >>> qc.shift;
    return sat8(p);
  endfunction

  pack_t rd_word [N_NODES];
  task automatic host_read(input int addr);
    @(negedge clk);
    host_rd_en = 1'b1; host_rd_addr = BUF_AW'(addr);
    @(negedge clk);
    host_rd_en = 1'b0;
    for (int n = 0; n < N_NODES; n++) rd_word[n] = host_rd_data[n];
  endtask

  logic signed [7:0] h0 [L_EMBED];
  logic signed [7:0] outv [L_EMBED];
  bit   q_checked = 0;
  int   n_q_bad = 0;

  // capture H and the Q output of block 0, token 0, in node 0 (hierarchical peek into the buffer)
  always @(posedge clk) begin
    if (!q_checked && dut.g_node[0].u_node.u_sched.stage == ST_K && dut.g_node[0].u_node.u_sched.layer == 0) begin
      q_checked = 1;
      for (int w = 0; w < EW; w++)
        for (int g = 0; g < 32; g++)
          h0[32 * w + g] = $signed(dut.g_node[0].u_node.u_buf.mem[EW + w][8 * g +: 8]);
      for (int n = 0; n < N_NODES; n++)
        for (int r = 0; r < L_EMBED / N_NODES; r += (L_EMBED / N_NODES) / 8) begin
          int gr;
          logic signed [7:0] got;
          gr  = n * (L_EMBED / N_NODES) + r;
          got = $signed(dut.g_node[0].u_node.u_buf.mem[2 * EW + gr / 32][8 * (gr % 32) +: 8]);
          if (got !== ref_q(n, r, h0, qcfg[OP_Q])) n_q_bad++;
          checks++;
        end
      if (n_q_bad != 0) begin
        failures += n_q_bad;
        $display("FAIL: %0d Q-projection outputs differ from the reference", n_q_bad);
      end
    end
  end

  initial begin
    #(2 * WATCHDOG);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tok_pos [3] = '{0, 1, 9};
    start = 1'b0; pos = '0;
    for (int i = 0; i < N_MP_OPS; i++) begin
      qcfg[i].mult  = 16'd3;
      qcfg[i].shift = (i == OP_FFN2) ? 6'd11 : 6'd10;
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    // layer-norm parameters: gamma ~ 1.0 (32 in Q2.5), beta small
    for (int i = 0; i < 2 * N_LAYER + 1; i++)
      for (int w = 0; w < 2 * EW; w++) begin
        @(negedge clk);
        prm_wr_en = 1'b1; prm_wr_addr = 16'(i * 2 * EW + w);
        for (int g = 0; g < 32; g++)
          prm_wr_data[8 * g +: 8] = (w < EW) ? 8'(24 + (g + w + i) % 16) : 8'((g % 5) - 2);
      end
    @(negedge clk); prm_wr_en = 1'b0;

    for (int t = 0; t < N_TOK; t++) begin
      longint t0, dt;
      int n_sat, n_zero;
      bit same;
      // host writes the token embedding into the residual stream of all nodes
      for (int w = 0; w < EW; w++) begin
        @(negedge clk);
        host_wr_en = 1'b1; host_wr_addr = BUF_AW'(w);
        for (int g = 0; g < 32; g++) host_wr_data[8 * g +: 8] = 8'($urandom_range(0, 100) - 50);
      end
      @(negedge clk); host_wr_en = 1'b0;
      pos = LEN_W'(tok_pos[t]);
      start = 1'b1;
      @(negedge clk); start = 1'b0;
      t0 = cyc;
      while (!done) @(negedge clk);
      dt = cyc - t0;
      $display("token %0d at position %0d: %0d cycles (budget %0d)", t, tok_pos[t], dt, BUDGET);
      check(dt <= BUDGET, "token latency exceeds the budget derived from the paper");
      // all nodes must hold the same output; the output must not be degenerate
      same = 1; n_sat = 0; n_zero = 0;
      for (int w = 0; w < EW; w++) begin
        host_read(EW + w);
        for (int n = 1; n < N_NODES; n++) if (rd_word[n] !== rd_word[0]) same = 0;
        for (int g = 0; g < 32; g++) begin
          outv[32 * w + g] = $signed(rd_word[0][8 * g +: 8]);
          if (outv[32 * w + g] == 127 || outv[32 * w + g] == -128) n_sat++;
          if (outv[32 * w + g] == 0) n_zero++;
        end
      end
      check(same, "nodes disagree on the final output");
      check(n_sat < L_EMBED / 4, "final output mostly saturated");
      check(n_zero < L_EMBED / 2, "final output mostly zero");
      // residual streams must agree as well
      same = 1;
      for (int w = 0; w < EW; w++) begin
        host_read(w);
        for (int n = 1; n < N_NODES; n++) if (rd_word[n] !== rd_word[0]) same = 0;
      end
      check(same, "nodes disagree on the residual stream");
    end

    check(q_checked, "Q projection never observed");
    // every mechanism must have happened
    for (int s = int'(ST_LN1); s <= int'(ST_LNF); s++) begin
      check(n_stage[s] > 0, $sformatf("stage %0d never ran", s));
    end
    check(n_stage[ST_LN1] == N_TOK * N_LAYER, "stage 1 count differs from blocks x tokens");
    check(n_stall > 0,   "no MP stall observed");
    check(n_overlap > 0, "no head-wise pipeline overlap observed");
    check(n_masked > 0,  "no masked key observed");
    check(n_fwd > 0,     "router never forwarded");
    check(n_tile > 0,    "router finished no tile");
    check(n_kvw == N_TOK * N_LAYER * N_NODES * HN * (HEAD_DIM / 32), "KV-cache append count wrong");
    $display("mechanisms: stage1=%0d stall=%0d overlap=%0d masked=%0d forwards=%0d tiles=%0d kv_writes=%0d",
             n_stage[ST_LN1], n_stall, n_overlap, n_masked, n_fwd, n_tile, n_kvw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
