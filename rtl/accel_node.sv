// accel_node: one LoopLynx accelerator node (one SLR of an Alveo U50 in the paper).
//
// The node holds the macro dataflow kernels - fused MP, fused MHA, fused
// LN&Res and the SFU - around a shared on-chip buffer, a scheduler that runs
// them one after another for each transformer block, and a router that joins
// the node to the ring. The kernels never talk to each other directly: every
// result lands in the buffer (MP and MHA results through the router, which
// all-gathers them from every node), and the next kernel reads it from there.
// Weights sit in N_CHANNEL HBM channels (one per MP slice); the node's share
// of the KV cache sits in one K and one V channel.
// Host side: while the node is idle the host writes the token embedding into
// the buffer (word 0 on, the residual stream X) and reads the result (the
// final layer norm output H, words L_EMBED/32 on) through host_*; the
// layer-norm parameters are loaded through prm_*. start_i runs one token
// through all N_LAYER blocks at position pos_i; done_o pulses at the end.
// The buffer ports are shared by priority (router, LN&Res, SFU, host for
// writes); only one kernel runs at a time, so there is never a conflict.
//
// Lint notes: verilator reports SYNCASYNCNET on rst_n because the
// concurrent assertions sample it in "disable iff" besides its use as the
// asynchronous reset; the assertions are not circuit. The empty .count()
// pin of the Q FIFO is left open on purpose: only valid/ready are needed.
module accel_node
  import looplynx_pkg::*;
#(
  parameter int unsigned N_NODES   = 4,
  parameter int unsigned N_CHANNEL = 8,
  parameter int unsigned L_EMBED   = 1024,
  parameter int unsigned L_FFN     = 4096,
  parameter int unsigned N_HEAD    = 16,
  parameter int unsigned HEAD_DIM  = 64,
  parameter int unsigned N_LAYER   = 24,
  parameter int unsigned MAX_SEQ   = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       node_id_i,
  // control
  input  logic             start_i,
  input  logic [LEN_W-1:0] pos_i,
  output logic             busy_o,
  output logic             done_o,
  input  quant_cfg_t       qcfg_i [N_MP_OPS],
  input  logic [15:0]      sm_mult_i,
  input  logic [4:0]       sm_shift_i,
  input  logic [15:0]      act_k_i,
  // host access to the buffer and the layer-norm parameters
  input  logic             host_wr_en,
  input  buf_addr_t        host_wr_addr,
  input  pack_t            host_wr_data,
  input  logic             host_rd_en,
  input  buf_addr_t        host_rd_addr,
  output pack_t            host_rd_data,
  input  logic             prm_wr_en,
  input  logic [15:0]      prm_wr_addr,
  input  pack_t            prm_wr_data,
  // ring
  input  logic             rin_valid,
  output logic             rin_ready,
  input  pack_t            rin_data,
  output logic             rout_valid,
  input  logic             rout_ready,
  output pack_t            rout_data,
  // HBM: weight channels
  output logic             w_rd_req_valid  [N_CHANNEL],
  input  logic             w_rd_req_ready  [N_CHANNEL],
  output hbm_rd_req_t      w_rd_req        [N_CHANNEL],
  input  logic             w_rd_data_valid [N_CHANNEL],
  output logic             w_rd_data_ready [N_CHANNEL],
  input  pack_t            w_rd_data       [N_CHANNEL],
  // HBM: K cache channel
  output logic             k_rd_req_valid,
  input  logic             k_rd_req_ready,
  output hbm_rd_req_t      k_rd_req,
  input  logic             k_rd_data_valid,
  output logic             k_rd_data_ready,
  input  pack_t            k_rd_data,
  output logic             k_wr_valid,
  input  logic             k_wr_ready,
  output hbm_wr_req_t      k_wr,
  // HBM: V cache channel
  output logic             v_rd_req_valid,
  input  logic             v_rd_req_ready,
  output hbm_rd_req_t      v_rd_req,
  input  logic             v_rd_data_valid,
  output logic             v_rd_data_ready,
  input  pack_t            v_rd_data,
  output logic             v_wr_valid,
  input  logic             v_wr_ready,
  output hbm_wr_req_t      v_wr,
  // observation of the dataflow mechanisms
  output stage_e           stage_o,
  output logic             ev_mp_stall_o,   // MP slice waits / router back-pressure
  output logic             ev_overlap_o,    // head-wise pipeline: two heads in flight
  output logic             ev_masked_o,     // causal mask removed a key
  output logic             ev_fwd_o,        // router forwarded a datapack
  output logic             ev_tile_o        // router finished a tile
);
  localparam int unsigned EW        = L_EMBED / N_GROUP;
  localparam int unsigned FW        = L_FFN / N_GROUP;
  localparam int unsigned BUF_WORDS = 8 * EW + 2 * FW;
  localparam int unsigned HN        = N_HEAD / N_NODES;

  // ---------------- scheduler ----------------
  logic ln_start, mp_start, mha_start, sfu_start, rt_start, rt_from_mha;
  buf_addr_t ln_x, ln_y, ln_h, mp_in, sfu_src, sfu_dst, rt_base;
  logic ln_do_res;
  logic [7:0] ln_idx, layer;
  logic [LEN_W-1:0] ln_words, mp_k_len, mp_blocks, sfu_words, rt_stride, rt_tile_packs, rt_tiles;
  hbm_addr_t mp_w_base;
  mp_op_e mp_op;
  logic ln_busy, mp_busy, mha_busy, sfu_busy, rt_busy;

  scheduler #(
    .N_NODES(N_NODES), .N_CHANNEL(N_CHANNEL), .L_EMBED(L_EMBED), .L_FFN(L_FFN),
    .N_HEAD(N_HEAD), .HEAD_DIM(HEAD_DIM), .N_LAYER(N_LAYER)
  ) u_sched (
    .clk, .rst_n, .start_i, .busy_o, .done_o, .stage_o, .layer_o (layer),
    .ln_start, .ln_x, .ln_y, .ln_h, .ln_do_res, .ln_idx, .ln_words, .ln_busy,
    .mp_start, .mp_in, .mp_k_len, .mp_blocks, .mp_w_base, .mp_op, .mp_busy,
    .mha_start, .mha_busy,
    .sfu_start, .sfu_src, .sfu_dst, .sfu_words, .sfu_busy,
    .rt_start, .rt_from_mha, .rt_base, .rt_stride, .rt_tile_packs, .rt_tiles, .rt_busy
  );

  // ---------------- shared buffer ----------------
  logic      b_wr_en, b_rd0_en, b_rd1_en;
  buf_addr_t b_wr_addr, b_rd0_addr, b_rd1_addr;
  pack_t     b_wr_data, b_rd0_data, b_rd1_data;

  onchip_buffer #(.DEPTH(BUF_WORDS)) u_buf (
    .clk,
    .wr_en (b_wr_en), .wr_addr (b_wr_addr), .wr_data (b_wr_data),
    .rd0_en (b_rd0_en), .rd0_addr (b_rd0_addr), .rd0_data (b_rd0_data),
    .rd1_en (b_rd1_en), .rd1_addr (b_rd1_addr), .rd1_data (b_rd1_data)
  );
  assign host_rd_data = b_rd1_data;

  // ---------------- fused MP kernel ----------------
  logic mp_rd_en; buf_addr_t mp_rd_addr;
  logic mp_out_valid, mp_out_ready; pack_t mp_out_data;

  fused_mp_kernel #(.N_CHANNEL(N_CHANNEL)) u_mp (
    .clk, .rst_n,
    .start_i (mp_start), .in_base_i (mp_in), .k_len_i (mp_k_len), .n_blocks_i (mp_blocks),
    .w_base_i (mp_w_base), .qcfg_i (qcfg_i[mp_op]), .busy_o (mp_busy), .stall_o (ev_mp_stall_o),
    .buf_rd_en (mp_rd_en), .buf_rd_addr (mp_rd_addr), .buf_rd_data (b_rd0_data),
    .rd_req_valid (w_rd_req_valid), .rd_req_ready (w_rd_req_ready), .rd_req (w_rd_req),
    .rd_data_valid (w_rd_data_valid), .rd_data_ready (w_rd_data_ready), .rd_data (w_rd_data),
    .out_valid (mp_out_valid), .out_ready (mp_out_ready), .out_data (mp_out_data)
  );

  // ---------------- fused MHA kernel ----------------
  logic mha_rd0_en, mha_rd1_en; buf_addr_t mha_rd0_addr, mha_rd1_addr;
  logic mha_out_valid, mha_out_ready; pack_t mha_out_data;

  fused_mha_kernel #(.N_HEAD_NODE(HN), .HEAD_DIM(HEAD_DIM), .MAX_SEQ(MAX_SEQ)) u_mha (
    .clk, .rst_n,
    .start_i (mha_start), .pos_i, .layer_i (layer), .head0_i (8'(32'(node_id_i) * HN)),
    .q_base_i (BUF_AW'(2 * EW)), .k_base_i (BUF_AW'(3 * EW)), .v_base_i (BUF_AW'(4 * EW)),
    .kc_base_i ('0), .vc_base_i ('0), .sm_mult_i, .sm_shift_i,
    .busy_o (mha_busy), .overlap_o (ev_overlap_o), .masked_o (ev_masked_o),
    .rd0_en (mha_rd0_en), .rd0_addr (mha_rd0_addr), .rd0_data (b_rd0_data),
    .rd1_en (mha_rd1_en), .rd1_addr (mha_rd1_addr), .rd1_data (b_rd1_data),
    .k_rd_req_valid, .k_rd_req_ready, .k_rd_req, .k_rd_data_valid, .k_rd_data_ready, .k_rd_data,
    .k_wr_valid, .k_wr_ready, .k_wr,
    .v_rd_req_valid, .v_rd_req_ready, .v_rd_req, .v_rd_data_valid, .v_rd_data_ready, .v_rd_data,
    .v_wr_valid, .v_wr_ready, .v_wr,
    .out_valid (mha_out_valid), .out_ready (mha_out_ready), .out_data (mha_out_data)
  );

  // ---------------- fused LN&Res kernel ----------------
  logic ln_rd0_en, ln_rd1_en, ln_wr_en; buf_addr_t ln_rd0_addr, ln_rd1_addr, ln_wr_addr; pack_t ln_wr_data;

  fused_ln_res_kernel #(.PRM_DEPTH((2 * N_LAYER + 1) * 2 * EW)) u_ln (
    .clk, .rst_n,
    .start_i (ln_start), .x_base_i (ln_x), .y_base_i (ln_y), .h_base_i (ln_h),
    .do_res_i (ln_do_res), .ln_idx_i (ln_idx), .n_words_i (ln_words), .busy_o (ln_busy),
    .prm_wr_en, .prm_wr_addr, .prm_wr_data,
    .rd0_en (ln_rd0_en), .rd0_addr (ln_rd0_addr), .rd0_data (b_rd0_data),
    .rd1_en (ln_rd1_en), .rd1_addr (ln_rd1_addr), .rd1_data (b_rd1_data),
    .wr_en (ln_wr_en), .wr_addr (ln_wr_addr), .wr_data (ln_wr_data)
  );

  // ---------------- SFU ----------------
  logic sfu_rd_en, sfu_wr_en; buf_addr_t sfu_rd_addr, sfu_wr_addr; pack_t sfu_wr_data;

  sfu u_sfu (
    .clk, .rst_n,
    .start_i (sfu_start), .src_i (sfu_src), .dst_i (sfu_dst), .n_words_i (sfu_words),
    .act_k_i, .busy_o (sfu_busy),
    .buf_rd_en (sfu_rd_en), .buf_rd_addr (sfu_rd_addr), .buf_rd_data (b_rd0_data),
    .buf_wr_en (sfu_wr_en), .buf_wr_addr (sfu_wr_addr), .buf_wr_data (sfu_wr_data)
  );

  // ---------------- router (local source: quantiser FIFO or MHA output) ----------------
  logic q_fifo_valid, q_fifo_ready; pack_t q_fifo_data;
  logic loc_valid, loc_ready; pack_t loc_data;
  logic rt_wr_en; buf_addr_t rt_wr_addr; pack_t rt_wr_data;
  logic wb_valid; buf_addr_t wb_addr; pack_t wb_data;

  sync_fifo #(.WIDTH(PACK_W), .DEPTH(16)) u_qfifo (
    .clk, .rst_n,
    .in_valid (mp_out_valid), .in_ready (mp_out_ready), .in_data (mp_out_data),
    .out_valid (q_fifo_valid), .out_ready (q_fifo_ready && !rt_from_mha), .out_data (q_fifo_data),
    .count ()
  );
  assign loc_valid     = rt_from_mha ? mha_out_valid : q_fifo_valid;
  assign loc_data      = rt_from_mha ? mha_out_data  : q_fifo_data;
  assign q_fifo_ready  = loc_ready;
  assign mha_out_ready = loc_ready && rt_from_mha;

  router #(.N_NODES(N_NODES)) u_router (
    .clk, .rst_n, .node_id_i,
    .start_i (rt_start), .out_base_i (rt_base), .node_stride_i (rt_stride),
    .tile_packs_i (rt_tile_packs), .n_tiles_i (rt_tiles), .busy_o (rt_busy),
    .loc_valid, .loc_ready, .loc_data,
    .rin_valid, .rin_ready, .rin_data, .rout_valid, .rout_ready, .rout_data,
    .buf_wr_en (rt_wr_en), .buf_wr_addr (rt_wr_addr), .buf_wr_data (rt_wr_data),
    .tile_done_o (ev_tile_o), .fwd_o (ev_fwd_o)
  );

  // router -> buffer through a one-entry register (the FIFO of Fig. 6(a))
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0; wb_addr <= '0; wb_data <= '0;
    end else begin
      wb_valid <= rt_wr_en;
      wb_addr  <= rt_wr_addr;
      wb_data  <= rt_wr_data;
    end
  end

  // ---------------- buffer port sharing ----------------
  always_comb begin
    b_wr_en = 1'b1;
    if (wb_valid)       begin b_wr_addr = wb_addr;      b_wr_data = wb_data;      end
    else if (ln_wr_en)  begin b_wr_addr = ln_wr_addr;   b_wr_data = ln_wr_data;   end
    else if (sfu_wr_en) begin b_wr_addr = sfu_wr_addr;  b_wr_data = sfu_wr_data;  end
    else begin
      b_wr_en   = host_wr_en && !busy_o;
      b_wr_addr = host_wr_addr;
      b_wr_data = host_wr_data;
    end
    b_rd0_en   = mp_rd_en || mha_rd0_en || ln_rd0_en || sfu_rd_en;
    b_rd0_addr = mp_rd_en ? mp_rd_addr : mha_rd0_en ? mha_rd0_addr : ln_rd0_en ? ln_rd0_addr : sfu_rd_addr;
    b_rd1_en   = mha_rd1_en || ln_rd1_en || (host_rd_en && !busy_o);
    b_rd1_addr = mha_rd1_en ? mha_rd1_addr : ln_rd1_en ? ln_rd1_addr : host_rd_addr;
  end

  // At most one kernel drives a buffer read port in any cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({mp_rd_en, mha_rd0_en, ln_rd0_en, sfu_rd_en}));
  assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({wb_valid, ln_wr_en, sfu_wr_en}));
endmodule
