// tb_scheduler: the scheduler driving fake kernels. Each fake kernel raises
// busy the cycle after its start pulse and holds it for a random time; the
// router's busy is independent of the MP/MHA kernel's. Over two tokens of a
// 3-layer model it checks:
//   - the stage order LN1 Q K V Atten O LN2 FFN FFN-Act FFN ... LNF, with the
//     right kernel started in every stage (and the router with MP and MHA),
//   - the operands: weight base of every MP op in the HBM layout, k_len and
//     block counts, input and output buffer regions, router slot stride/tile sizes, layer-norm index and
//     residual flag, SFU lengths,
//   - that no kernel is started while another one is still busy,
//   - the scheduling overhead: at most 3 idle cycles between the end of one
//     stage and the start of the next,
//   - a one-cycle done pulse per token.
module tb_scheduler;
  import looplynx_pkg::*;
  localparam int NN = 2, NC = 2, LE = 256, LF = 1024, NH = 4, HD = 64, NL = 3;
  localparam int EW = LE / 32, FW = LF / 32, BR = NC * 32;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  stage_e stage;
  logic [7:0] layer;
  logic ln_start, ln_do_res, mp_start, mha_start, sfu_start, rt_start, rt_from_mha;
  buf_addr_t ln_x, ln_y, ln_h, mp_in, sfu_src, sfu_dst, rt_base;
  logic [7:0] ln_idx;
  logic [LEN_W-1:0] ln_words, mp_k_len, mp_blocks, sfu_words, rt_stride, rt_tile_packs, rt_tiles;
  hbm_addr_t mp_w_base;
  mp_op_e mp_op;
  int cnt [5];     // remaining busy cycles: ln, mp, mha, sfu, rt
  logic ln_busy, mp_busy, mha_busy, sfu_busy, rt_busy;
  int checks = 0, failures = 0, idle_run = 0, max_idle = 0, n_done = 0;
  string seq;
  always #5 clk = ~clk;

  scheduler #(.N_NODES(NN), .N_CHANNEL(NC), .L_EMBED(LE), .L_FFN(LF), .N_HEAD(NH), .HEAD_DIM(HD), .N_LAYER(NL)) dut (
    .clk, .rst_n, .start_i (start), .busy_o (busy), .done_o (done), .stage_o (stage), .layer_o (layer),
    .ln_start, .ln_x, .ln_y, .ln_h, .ln_do_res, .ln_idx, .ln_words, .ln_busy,
    .mp_start, .mp_in, .mp_k_len, .mp_blocks, .mp_w_base, .mp_op, .mp_busy,
    .mha_start, .mha_busy, .sfu_start, .sfu_src, .sfu_dst, .sfu_words, .sfu_busy,
    .rt_start, .rt_from_mha, .rt_base, .rt_stride, .rt_tile_packs, .rt_tiles, .rt_busy);

  assign ln_busy = cnt[0] > 0; assign mp_busy = cnt[1] > 0; assign mha_busy = cnt[2] > 0;
  assign sfu_busy = cnt[3] > 0; assign rt_busy = cnt[4] > 0;

  function automatic int rows(int op); return (op == 4) ? LF / NN : LE / NN; endfunction
  function automatic int kl(int op); return (op == 5) ? LF : LE; endfunction
  function automatic int off(int op);
    int o = 0;
    for (int i = 0; i < op; i++) o += (rows(i) / BR) * (kl(i) + 4);
    return o;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (stage %0d layer %0d)", what, stage, layer); end
  endtask

  always @(posedge clk) if (rst_n) begin
    logic any;
    for (int i = 0; i < 5; i++) if (cnt[i] > 0) cnt[i]--;
    any = ln_start || mp_start || mha_start || sfu_start || rt_start;
    if (any) begin
      chk(!(ln_busy || mp_busy || mha_busy || sfu_busy || rt_busy), "start while a kernel is busy");
      if (!(stage == ST_LN1 && layer == 0)) max_idle = (idle_run > max_idle) ? idle_run : max_idle;
    end
    idle_run = (ln_busy || mp_busy || mha_busy || sfu_busy || rt_busy || any) ? 0 : idle_run + 1;
    if (ln_start) begin
      int idx;
      cnt[0] = 1 + $urandom % 20; seq = {seq, "L"};
      idx = (stage == ST_LNF) ? 2 * NL : (stage == ST_LN2) ? 2 * layer + 1 : 2 * layer;
      chk(ln_idx == idx && ln_words == EW && ln_x == 0 && ln_h == EW, "LN operands");
      chk(ln_do_res == !(stage == ST_LN1 && layer == 0), "LN residual flag");
      chk(ln_y == ((stage == ST_LN2) ? 6 * EW : 7 * EW + 2 * FW), "LN branch address");
    end
    if (mp_start) begin
      int op;
      op = int'(mp_op);
      cnt[1] = 1 + $urandom % 30; seq = {seq, $sformatf("%0d", op)};
      chk(mp_w_base == HBM_AW'(layer * off(6) + off(op)), "MP weight base");
      chk(mp_k_len == kl(op) && mp_blocks == rows(op) / BR, "MP sizes");
      chk(mp_in == ((op == 3) ? 5 * EW : (op == 5) ? 7 * EW + FW : EW), "MP input address");
      chk(rt_base == ((op == 0) ? 2 * EW : (op == 1) ? 3 * EW : (op == 2) ? 4 * EW : (op == 3) ? 6 * EW :
                      (op == 4) ? 7 * EW : 7 * EW + 2 * FW), "MP output address");
      chk(rt_start && !rt_from_mha && rt_stride == rows(op) / 32 && rt_tile_packs == NC && rt_tiles == rows(op) / BR,
          "router config for MP");
    end
    if (mha_start) begin
      cnt[2] = 1 + $urandom % 30; seq = {seq, "A"};
      chk(rt_start && rt_from_mha && rt_base == 5 * EW && rt_stride == (NH / NN) * 2 && rt_tile_packs == 2 &&
          rt_tiles == NH / NN, "router config for MHA");
    end
    if (sfu_start) begin
      cnt[3] = 1 + $urandom % 20; seq = {seq, "S"};
      chk(sfu_src == 7 * EW && sfu_dst == 7 * EW + FW && sfu_words == FW, "SFU operands");
    end
    if (rt_start) begin
      cnt[4] = 1 + $urandom % 40;
      chk(mp_start || mha_start, "router started alone");
    end
    if (done) n_done++;
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    string exp;
    for (int i = 0; i < 5; i++) cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exp = "";
    for (int l = 0; l < NL; l++) exp = {exp, "L012A3L4S5"};
    exp = {exp, "L"};
    for (int tok = 0; tok < 2; tok++) begin
      int cyc, d0;
      seq = ""; d0 = n_done;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (busy) begin @(negedge clk); cyc++; end
      chk(seq == exp, "stage order");
      if (seq != exp) $display("  got %s\n  exp %s", seq, exp);
      repeat (2) @(negedge clk);
      chk(n_done == d0 + 1, "one done pulse");
    end
    $display("largest gap between stages %0d cycles", max_idle);
    chk(max_idle <= 3, "scheduling overhead");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
