// fused_mha_kernel: the fused multi-head attention (MHA) kernel.
//
// Attention for the heads this node owns (the KV cache is split head-wise
// across nodes). For the token at position pos it
//  1. appends the token's k and v vectors of each local head to the K and V
//     caches in HBM (one K channel, one V channel);
//  2. runs a two-stage head-wise pipeline:
//     stage A (head h): the first MAC hardware streams the head's cached keys
//       from HBM and forms the scores q.k (32 lanes, HEAD_DIM/32 beats per
//       key), the mask unit marks keys beyond pos, and the softmax unit turns
//       the scores into exponents in the EXP buffer and sums them (softmax.1);
//     stage B (head h-1): once the sum of head h-1 has been divided, the second
//       MAC hardware streams the cached values and accumulates p_t * v_t for
//       every key (token mixing with softmax.2 weights), then sends the head's
//       output, HEAD_DIM/32 datapacks, to the router.
//     Stage A of head h runs while stage B of head h-1 does, so the
//     softmax division of one head hides behind the score computation of the
//     next (paper Fig. 4(b)); overlap_o is high in cycles where both run.
// Keys are fetched in groups of KEY_GRAN so every burst is a whole number
// of keys; the surplus keys beyond pos are masked.
// HBM layout (this design's choice): head h of layer l, position t, beat i at
//   cache_base + ((l * N_HEAD_NODE + h) * MAX_SEQ + t) * HEAD_DIM/32 + i.
// Output scaling: out = sat8((sum_t p_t * v_t + 128) >>> 8), p in Q0.8, so the
// output keeps the scale of v. The paper gives the two MAC hardwares, the
// mask and softmax units and the head-wise pipeline; the single K/V channel,
// the formats and the layouts are this design's choice.
//
// Lint note: k_dma_busy and v_dma_busy are kept for waveform inspection;
// the phase machine tracks completion from its own beat counters.
module fused_mha_kernel
  import looplynx_pkg::*;
#(
  parameter int unsigned N_HEAD_NODE = 4,     // 16 heads / 4 nodes
  parameter int unsigned HEAD_DIM    = 64,
  parameter int unsigned MAX_SEQ     = 1024,
  parameter int unsigned KEY_GRAN    = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start_i,
  input  logic [LEN_W-1:0] pos_i,
  input  logic [7:0]       layer_i,
  input  logic [7:0]       head0_i,       // first global head owned by this node
  input  buf_addr_t        q_base_i,
  input  buf_addr_t        k_base_i,
  input  buf_addr_t        v_base_i,
  input  hbm_addr_t        kc_base_i,
  input  hbm_addr_t        vc_base_i,
  input  logic [15:0]      sm_mult_i,
  input  logic [4:0]       sm_shift_i,
  output logic             busy_o,
  output logic             overlap_o,
  output logic             masked_o,      // a masked score entered the softmax
  // shared buffer read ports
  output logic             rd0_en,
  output buf_addr_t        rd0_addr,
  input  pack_t            rd0_data,
  output logic             rd1_en,
  output buf_addr_t        rd1_addr,
  input  pack_t            rd1_data,
  // K cache channel
  output logic             k_rd_req_valid,
  input  logic             k_rd_req_ready,
  output hbm_rd_req_t      k_rd_req,
  input  logic             k_rd_data_valid,
  output logic             k_rd_data_ready,
  input  pack_t            k_rd_data,
  output logic             k_wr_valid,
  input  logic             k_wr_ready,
  output hbm_wr_req_t      k_wr,
  // V cache channel
  output logic             v_rd_req_valid,
  input  logic             v_rd_req_ready,
  output hbm_rd_req_t      v_rd_req,
  input  logic             v_rd_data_valid,
  output logic             v_rd_data_ready,
  input  pack_t            v_rd_data,
  output logic             v_wr_valid,
  input  logic             v_wr_ready,
  output hbm_wr_req_t      v_wr,
  // head outputs towards the router
  output logic             out_valid,
  input  logic             out_ready,
  output pack_t            out_data
);
  localparam int unsigned HDW = HEAD_DIM / N_GROUP;       // datapacks per head vector
  localparam int unsigned HW  = (HDW > 1) ? $clog2(HDW) : 1;
  localparam int unsigned NHW = $clog2(N_HEAD_NODE + 1);

  // ---------------- command registers ----------------
  logic [LEN_W-1:0] pos, n_tok;
  logic [7:0]       layer, head0;
  buf_addr_t        q_base, k_base, v_base;
  hbm_addr_t        kc_base, vc_base;
  logic [15:0]      sm_mult;
  logic [4:0]       sm_shift;

  function automatic hbm_addr_t head_base(input hbm_addr_t base, input logic [7:0] l,
                                          input logic [NHW-1:0] h);
    return base + HBM_AW'((32'(l) * N_HEAD_NODE + 32'(h)) * MAX_SEQ * HDW);
  endfunction

  // ---------------- top-level phases ----------------
  typedef enum logic [1:0] {P_IDLE, P_APPEND, P_HEADS} phase_e;
  phase_e phase;
  logic [NHW-1:0] ap_h;         // append: head
  logic [HW-1:0]  ap_i;         // append: beat
  logic           ap_rd, ap_have, k_done, v_done;

  // ---------------- stage A ----------------
  typedef enum logic [1:0] {A_IDLE, A_Q, A_RUN} astate_e;
  astate_e          a_st;
  logic [NHW-1:0]   ha;
  logic [HW-1:0]    a_qi;
  logic             a_qpend;
  logic signed [7:0] q_reg [HEAD_DIM];
  logic [HW-1:0]    a_bi;         // beat within key
  logic [LEN_W-1:0] a_t;          // key index
  logic signed [31:0] a_acc;
  logic             k_dma_start, k_dma_busy;
  logic             k_valid, k_ready;
  pack_t            k_data;
  logic [1:0]       bank_busy;

  // ---------------- stage B ----------------
  typedef enum logic [1:0] {B_IDLE, B_RUN, B_OUT} bstate_e;
  bstate_e          b_st;
  logic [NHW-1:0]   hb;
  logic [HW-1:0]    b_bi;
  logic [LEN_W-1:0] b_t;
  logic signed [31:0] b_acc [HEAD_DIM];
  logic             v_dma_start, v_dma_busy;
  logic             v_valid, v_ready;
  pack_t            v_data;
  logic [8:0]       p_w;
  logic [1:0]       sm_bank_rdy, sm_release;

  // ---------------- score path: MAC -> mask -> softmax ----------------
  logic               sc_valid, sc_ready, sc_last;
  logic signed [31:0] sc_score;
  logic               mk_valid, mk_ready, mk_masked, mk_last;
  logic signed [31:0] mk_score;
  logic               mk_bank;

  assign busy_o    = (phase != P_IDLE);
  assign overlap_o = (a_st == A_RUN) && (b_st == B_RUN);

  // buffer reads: append uses both ports, stage A uses port 0 for q
  assign rd0_en   = (phase == P_APPEND && ap_rd) || (a_st == A_Q && !a_qpend);
  assign rd0_addr = (phase == P_APPEND) ? k_base + BUF_AW'((32'(head0) + 32'(ap_h)) * HDW + 32'(ap_i))
                                        : q_base + BUF_AW'((32'(head0) + 32'(ha)) * HDW + 32'(a_qi));
  assign rd1_en   = (phase == P_APPEND && ap_rd);
  assign rd1_addr = v_base + BUF_AW'((32'(head0) + 32'(ap_h)) * HDW + 32'(ap_i));

  // KV append writes
  assign k_wr_valid = (phase == P_APPEND) && ap_have && !k_done;
  assign v_wr_valid = (phase == P_APPEND) && ap_have && !v_done;
  assign k_wr.addr  = head_base(kc_base, layer, ap_h) + HBM_AW'(32'(pos) * HDW + 32'(ap_i));
  assign v_wr.addr  = head_base(vc_base, layer, ap_h) + HBM_AW'(32'(pos) * HDW + 32'(ap_i));
  assign k_wr.data  = rd0_data;
  assign v_wr.data  = rd1_data;

  dma_engine #(.MAX_BURST(32), .FIFO_DEPTH(64)) u_kdma (
    .clk, .rst_n,
    .start_i (k_dma_start), .base_i (head_base(kc_base, layer, ha)),
    .beats_i (32'(n_tok) * HDW), .busy_o (k_dma_busy),
    .rd_req_valid (k_rd_req_valid), .rd_req_ready (k_rd_req_ready), .rd_req (k_rd_req),
    .rd_data_valid(k_rd_data_valid), .rd_data_ready(k_rd_data_ready), .rd_data (k_rd_data),
    .out_valid (k_valid), .out_ready (k_ready), .out_data (k_data)
  );

  dma_engine #(.MAX_BURST(32), .FIFO_DEPTH(64)) u_vdma (
    .clk, .rst_n,
    .start_i (v_dma_start), .base_i (head_base(vc_base, layer, hb)),
    .beats_i (32'(n_tok) * HDW), .busy_o (v_dma_busy),
    .rd_req_valid (v_rd_req_valid), .rd_req_ready (v_rd_req_ready), .rd_req (v_rd_req),
    .rd_data_valid(v_rd_data_valid), .rd_data_ready(v_rd_data_ready), .rd_data (v_rd_data),
    .out_valid (v_valid), .out_ready (v_ready), .out_data (v_data)
  );

  // first MAC hardware: 32-lane dot product per beat
  logic signed [31:0] dot;
  always_comb begin
    dot = '0;
    for (int g = 0; g < N_GROUP; g++)
      dot = dot + 32'($signed(k_data[8*g +: 8])) * 32'(q_reg[32'(a_bi) * N_GROUP + g]);
  end

  assign k_ready  = (a_st == A_RUN) && (a_bi != HW'(HDW - 1) || sc_ready);
  assign sc_valid = (a_st == A_RUN) && k_valid && (a_bi == HW'(HDW - 1));
  assign sc_score = a_acc + dot;
  assign sc_last  = (a_t == n_tok - 1'b1);

  logic mk_in_bank;
  mask_unit u_mask (
    .clk, .rst_n, .pos_i (pos),
    .in_valid (sc_valid), .in_ready (sc_ready), .in_score (sc_score),
    .in_t (a_t), .in_last (sc_last),
    .out_valid (mk_valid), .out_ready (mk_ready), .out_score (mk_score),
    .out_masked (mk_masked), .out_last (mk_last)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mk_in_bank <= 1'b0;
    else if (sc_valid && sc_ready) mk_in_bank <= ha[0];
  end
  assign mk_bank  = mk_in_bank;
  assign masked_o = mk_valid && mk_ready && mk_masked;

  softmax_unit #(.MAX_SEQ(MAX_SEQ)) u_softmax (
    .clk, .rst_n, .sm_mult_i (sm_mult), .sm_shift_i (sm_shift),
    .in_valid (mk_valid), .in_ready (mk_ready), .in_score (mk_score),
    .in_masked (mk_masked), .in_last (mk_last), .in_bank (mk_bank),
    .bank_rdy_o (sm_bank_rdy), .release_i (sm_release),
    .rd_bank (hb[0]), .rd_idx (b_t), .p_o (p_w)
  );

  // second MAC hardware: p_t * v_t into HEAD_DIM accumulators, 32 per beat
  assign v_ready   = (b_st == B_RUN);
  assign out_valid = (b_st == B_OUT);
  always_comb begin
    for (int g = 0; g < N_GROUP; g++) begin
      logic signed [31:0] r;
      r = (b_acc[32'(b_bi) * N_GROUP + g] + 32'sd128) >>> 8;
      out_data[8*g +: 8] = sat8(48'(r));
    end
  end

  // ---------------- control ----------------
  logic [31:0] nt_c;            // keys to fetch: pos+1 rounded up to KEY_GRAN
  logic        ap_kd, ap_vd;    // append: beat accepted by the K / V channel
  assign nt_c  = ((32'(pos_i) + KEY_GRAN) / KEY_GRAN) * KEY_GRAN;
  assign ap_kd = k_done || k_wr_ready;
  assign ap_vd = v_done || v_wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE; pos <= '0; n_tok <= '0; layer <= '0; head0 <= '0;
      q_base <= '0; k_base <= '0; v_base <= '0; kc_base <= '0; vc_base <= '0;
      sm_mult <= '0; sm_shift <= '0;
      ap_h <= '0; ap_i <= '0; ap_rd <= 1'b0; ap_have <= 1'b0; k_done <= 1'b0; v_done <= 1'b0;
      a_st <= A_IDLE; ha <= '0; a_qi <= '0; a_qpend <= 1'b0; a_bi <= '0; a_t <= '0; a_acc <= '0;
      k_dma_start <= 1'b0; bank_busy <= '0;
      b_st <= B_IDLE; hb <= '0; b_bi <= '0; b_t <= '0; v_dma_start <= 1'b0; sm_release <= '0;
      for (int d = 0; d < HEAD_DIM; d++) begin q_reg[d] <= '0; b_acc[d] <= '0; end
    end else begin
      k_dma_start <= 1'b0;
      v_dma_start <= 1'b0;
      sm_release  <= '0;
      unique case (phase)
        P_IDLE: if (start_i) begin
          pos <= pos_i; layer <= layer_i; head0 <= head0_i;
          q_base <= q_base_i; k_base <= k_base_i; v_base <= v_base_i;
          kc_base <= kc_base_i; vc_base <= vc_base_i;
          sm_mult <= sm_mult_i; sm_shift <= sm_shift_i;
          n_tok <= LEN_W'((nt_c > MAX_SEQ) ? MAX_SEQ : nt_c);
          ap_h <= '0; ap_i <= '0; ap_rd <= 1'b1; ap_have <= 1'b0;
          phase <= P_APPEND;
        end
        P_APPEND: begin
          if (ap_rd) begin
            ap_rd <= 1'b0; ap_have <= 1'b1; k_done <= 1'b0; v_done <= 1'b0;
          end else if (ap_have) begin
            k_done <= ap_kd;
            v_done <= ap_vd;
            if (ap_kd && ap_vd) begin
              ap_have <= 1'b0;
              if (ap_i == HW'(HDW - 1)) begin
                ap_i <= '0;
                if (ap_h == NHW'(N_HEAD_NODE - 1)) begin
                  phase <= P_HEADS;
                  ha <= '0; hb <= '0; a_st <= A_IDLE; b_st <= B_IDLE;
                end else begin
                  ap_h <= ap_h + 1'b1;
                  ap_rd <= 1'b1;
                end
              end else begin
                ap_i <= ap_i + 1'b1;
                ap_rd <= 1'b1;
              end
            end
          end
        end
        P_HEADS: begin
          // ---- stage A ----
          unique case (a_st)
            A_IDLE: if (ha != NHW'(N_HEAD_NODE) && !bank_busy[ha[0]]) begin
              a_st <= A_Q; a_qi <= '0; a_qpend <= 1'b0;
              bank_busy[ha[0]] <= 1'b1;
            end
            A_Q: begin
              if (!a_qpend) a_qpend <= 1'b1;
              else begin
                for (int g = 0; g < N_GROUP; g++) q_reg[32'(a_qi) * N_GROUP + g] <= rd0_data[8*g +: 8];
                a_qpend <= 1'b0;
                if (a_qi == HW'(HDW - 1)) begin
                  a_st <= A_RUN; a_bi <= '0; a_t <= '0; a_acc <= '0;
                  k_dma_start <= 1'b1;
                end else a_qi <= a_qi + 1'b1;
              end
            end
            A_RUN: if (k_valid && k_ready) begin
              if (a_bi == HW'(HDW - 1)) begin
                a_bi  <= '0;
                a_acc <= '0;
                if (sc_last) begin
                  a_st <= A_IDLE;
                  ha   <= ha + 1'b1;
                end else a_t <= a_t + 1'b1;
              end else begin
                a_bi  <= a_bi + 1'b1;
                a_acc <= a_acc + dot;
              end
            end
            default: a_st <= A_IDLE;
          endcase
          // ---- stage B ----
          unique case (b_st)
            B_IDLE: if (hb == NHW'(N_HEAD_NODE)) begin
              phase <= P_IDLE;
            end else if (sm_bank_rdy[hb[0]]) begin
              b_st <= B_RUN; b_bi <= '0; b_t <= '0;
              for (int d = 0; d < HEAD_DIM; d++) b_acc[d] <= '0;
              v_dma_start <= 1'b1;
            end
            B_RUN: if (v_valid) begin
              for (int g = 0; g < N_GROUP; g++)
                b_acc[32'(b_bi) * N_GROUP + g] <= b_acc[32'(b_bi) * N_GROUP + g]
                    + 32'($signed(v_data[8*g +: 8])) * 32'($signed({1'b0, p_w}));
              if (b_bi == HW'(HDW - 1)) begin
                b_bi <= '0;
                if (b_t == n_tok - 1'b1) begin
                  b_st <= B_OUT;
                  b_t  <= '0;
                end else b_t <= b_t + 1'b1;
              end else b_bi <= b_bi + 1'b1;
            end
            B_OUT: if (out_ready) begin
              if (b_bi == HW'(HDW - 1)) begin
                b_bi <= '0;
                b_st <= B_IDLE;
                sm_release[hb[0]] <= 1'b1;
                bank_busy[hb[0]]  <= 1'b0;
                hb <= hb + 1'b1;
              end else b_bi <= b_bi + 1'b1;
            end
            default: b_st <= B_IDLE;
          endcase
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  initial assert (HEAD_DIM % N_GROUP == 0) else $error("fused_mha_kernel: HEAD_DIM must be a multiple of 32");
endmodule
