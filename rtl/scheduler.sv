// scheduler: the state machine that reuses the macro dataflow kernels in time.
//
// LoopLynx builds one large kernel per kind of operator and lets a scheduler
// activate them in turn. For every transformer block the schedule is the
// paper's: 1 LN (fused LN&Res), 2 Q, 3 K, 4 V (fused MP), 5 Atten (fused MHA),
// 6 O (fused MP), 7 LN (fused LN&Res), 8 FFN (fused MP), 9 Act (SFU),
// 10 FFN (fused MP). Stage 1 of block 0 only normalises the input embedding;
// stage 1 of block l > 0 first adds the previous block's FFN output to the
// residual stream. After the last block one more residual + layer norm (the
// final norm of GPT-2) produces the node's output.
// For each stage the scheduler pulses the kernel's start with its operands
// (buffer addresses, HBM weight addresses, lengths) and waits until the kernel
// and, for MP and MHA stages, the router are idle again. Buffer map, in
// datapack words (EW = L_EMBED/32, FW = L_FFN/32):
//   X 0, H EW, Q 2EW, K 3EW, V 4EW, ATT 5EW, O 6EW, F1 7EW, A 7EW+FW, F2 7EW+2FW.
// HBM layout of the MP channels: per layer the ops Q, K, V, O, FFN1, FFN2
// follow each other, each n_blocks*(k_len+4) beats. The buffer map, the HBM
// layout and the handshake are this design's choices.
module scheduler
  import looplynx_pkg::*;
#(
  parameter int unsigned N_NODES   = 4,
  parameter int unsigned N_CHANNEL = 8,
  parameter int unsigned L_EMBED   = 1024,
  parameter int unsigned L_FFN     = 4096,
  parameter int unsigned N_HEAD    = 16,
  parameter int unsigned HEAD_DIM  = 64,
  parameter int unsigned N_LAYER   = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  output logic             busy_o,
  output logic             done_o,         // one-cycle pulse at the end of a token
  output stage_e           stage_o,
  output logic [7:0]       layer_o,
  // fused LN&Res
  output logic             ln_start,
  output buf_addr_t        ln_x, ln_y, ln_h,
  output logic             ln_do_res,
  output logic [7:0]       ln_idx,
  output logic [LEN_W-1:0] ln_words,
  input  logic             ln_busy,
  // fused MP
  output logic             mp_start,
  output buf_addr_t        mp_in,
  output logic [LEN_W-1:0] mp_k_len,
  output logic [LEN_W-1:0] mp_blocks,
  output hbm_addr_t        mp_w_base,
  output mp_op_e           mp_op,
  input  logic             mp_busy,
  // fused MHA
  output logic             mha_start,
  input  logic             mha_busy,
  // SFU
  output logic             sfu_start,
  output buf_addr_t        sfu_src, sfu_dst,
  output logic [LEN_W-1:0] sfu_words,
  input  logic             sfu_busy,
  // router
  output logic             rt_start,
  output logic             rt_from_mha,   // local source: 0 = MP quantiser, 1 = MHA
  output buf_addr_t        rt_base,
  output logic [LEN_W-1:0] rt_stride,
  output logic [LEN_W-1:0] rt_tile_packs,
  output logic [LEN_W-1:0] rt_tiles,
  input  logic             rt_busy
);
  localparam int unsigned EW   = L_EMBED / N_GROUP;
  localparam int unsigned FW   = L_FFN / N_GROUP;
  localparam int unsigned HDW  = HEAD_DIM / N_GROUP;
  localparam int unsigned HN   = N_HEAD / N_NODES;     // heads per node
  localparam int unsigned BR   = N_CHANNEL * N_GROUP;  // rows per MP block
  localparam int unsigned A_X = 0, A_H = EW, A_Q = 2*EW, A_K = 3*EW, A_V = 4*EW,
                          A_ATT = 5*EW, A_O = 6*EW, A_F1 = 7*EW, A_A = 7*EW + FW, A_F2 = 7*EW + 2*FW;

  function automatic int unsigned op_rows(input int unsigned op);   // rows per node
    return ((op == 32'(OP_FFN1)) ? L_FFN : L_EMBED) / N_NODES;
  endfunction
  function automatic int unsigned op_k(input int unsigned op);
    return (op == 32'(OP_FFN2)) ? L_FFN : L_EMBED;
  endfunction
  function automatic int unsigned op_beats(input int unsigned op);
    return (op_rows(op) / BR) * (op_k(op) + N_GROUP / 8);
  endfunction
  function automatic int unsigned op_off(input int unsigned op);
    int unsigned o = 0;
    for (int unsigned i = 0; i < op; i++) o += op_beats(i);
    return o;
  endfunction
  localparam int unsigned LAYER_BEATS = op_off(N_MP_OPS);

  stage_e     stage;
  logic [7:0] layer;
  logic       issued, waited;

  assign stage_o = stage;
  assign layer_o = layer;
  assign busy_o  = (stage != ST_IDLE);

  // operands of the current stage
  mp_op_e cur_op;
  always_comb begin
    unique case (stage)
      ST_Q:    cur_op = OP_Q;
      ST_K:    cur_op = OP_K;
      ST_V:    cur_op = OP_V;
      ST_O:    cur_op = OP_O;
      ST_FFN1: cur_op = OP_FFN1;
      default: cur_op = OP_FFN2;
    endcase
  end

  logic is_mp;
  assign is_mp = (stage == ST_Q) || (stage == ST_K) || (stage == ST_V) ||
                 (stage == ST_O) || (stage == ST_FFN1) || (stage == ST_FFN2);

  always_comb begin
    mp_op     = cur_op;
    mp_in     = BUF_AW'((cur_op == OP_O) ? A_ATT : (cur_op == OP_FFN2) ? A_A : A_H);
    mp_k_len  = LEN_W'(op_k(32'(cur_op)));
    mp_blocks = LEN_W'(op_rows(32'(cur_op)) / BR);
    mp_w_base = HBM_AW'(32'(layer) * LAYER_BEATS + op_off(32'(cur_op)));
    ln_x      = BUF_AW'(A_X);
    ln_y      = BUF_AW'((stage == ST_LN2) ? A_O : A_F2);
    ln_h      = BUF_AW'(A_H);
    ln_do_res = !(stage == ST_LN1 && layer == 0);
    ln_idx    = (stage == ST_LNF) ? 8'(2 * N_LAYER) : (stage == ST_LN2) ? 8'(2 * layer + 1) : 8'(2 * layer);
    ln_words  = LEN_W'(EW);
    sfu_src   = BUF_AW'(A_F1);
    sfu_dst   = BUF_AW'(A_A);
    sfu_words = LEN_W'(FW);
    rt_from_mha = (stage == ST_ATTN);
    if (stage == ST_ATTN) begin
      rt_base       = BUF_AW'(A_ATT);
      rt_stride     = LEN_W'(HN * HDW);
      rt_tile_packs = LEN_W'(HDW);
      rt_tiles      = LEN_W'(HN);
    end else begin
      unique case (cur_op)
        OP_Q:    rt_base = BUF_AW'(A_Q);
        OP_K:    rt_base = BUF_AW'(A_K);
        OP_V:    rt_base = BUF_AW'(A_V);
        OP_O:    rt_base = BUF_AW'(A_O);
        OP_FFN1: rt_base = BUF_AW'(A_F1);
        default: rt_base = BUF_AW'(A_F2);
      endcase
      rt_stride     = LEN_W'(op_rows(32'(cur_op)) / N_GROUP);
      rt_tile_packs = LEN_W'(N_CHANNEL);
      rt_tiles      = LEN_W'(op_rows(32'(cur_op)) / BR);
    end
  end

  logic launch;
  assign launch    = busy_o && (stage != ST_DONE) && !issued;
  assign ln_start  = launch && (stage == ST_LN1 || stage == ST_LN2 || stage == ST_LNF);
  assign mp_start  = launch && is_mp;
  assign mha_start = launch && (stage == ST_ATTN);
  assign sfu_start = launch && (stage == ST_ACT);
  assign rt_start  = launch && (is_mp || stage == ST_ATTN);

  logic all_idle;
  assign all_idle = !ln_busy && !mp_busy && !mha_busy && !sfu_busy && !rt_busy;

  function automatic stage_e next_stage(input stage_e s, input logic [7:0] l);
    unique case (s)
      ST_LN1:  return ST_Q;
      ST_Q:    return ST_K;
      ST_K:    return ST_V;
      ST_V:    return ST_ATTN;
      ST_ATTN: return ST_O;
      ST_O:    return ST_LN2;
      ST_LN2:  return ST_FFN1;
      ST_FFN1: return ST_ACT;
      ST_ACT:  return ST_FFN2;
      ST_FFN2: return (32'(l) + 1 < N_LAYER) ? ST_LN1 : ST_LNF;
      ST_LNF:  return ST_DONE;
      default: return ST_IDLE;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage  <= ST_IDLE;
      layer  <= '0;
      issued <= 1'b0;
      waited <= 1'b0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (stage == ST_IDLE) begin
        if (start_i) begin
          stage  <= ST_LN1;
          layer  <= '0;
          issued <= 1'b0;
        end
      end else if (stage == ST_DONE) begin
        done_o <= 1'b1;
        stage  <= ST_IDLE;
      end else if (!issued) begin
        issued <= 1'b1;
        waited <= 1'b0;
      end else if (!waited) begin
        waited <= 1'b1;           // kernels raise busy the cycle after start
      end else if (all_idle) begin
        issued <= 1'b0;
        if (stage == ST_FFN2) layer <= layer + 1'b1;
        stage <= next_stage(stage, layer);
      end
    end
  end

  initial begin
    assert (N_HEAD % N_NODES == 0) else $error("scheduler: heads must divide evenly over nodes");
    assert (L_EMBED % (N_NODES * BR) == 0 && L_FFN % (N_NODES * BR) == 0)
      else $error("scheduler: every node needs whole MP blocks");
  end
endmodule
