// fused_ln_res_kernel: the fused layer-norm and residual (LN&Res) kernel.
//
// Residual connection and layer normalisation sit on the critical path
// between the linear layers and attention. Following the paper, the kernel
// widens them to a full datapack per cycle (32 lanes) and overlaps the
// residual addition with the first layer-norm pass:
//   pass 1: x' = sat8(x + y) (or x' = x when do_res_i = 0) is written back to
//           the residual stream and, in the same cycle, sum(x') and
//           sum(x'^2) are accumulated ("Residual" overlapped with "LN.1 mean &
//           var");
//   stats : mean = round(sum / L), var = (L*sumsq - sum^2) / L^2 in Q.8,
//           std = isqrt(var + 1) in Q.4 (16 cycles), inv = 2^20 / std (21 cycles);
//   pass 2: h = sat8(((x' - mean) * inv * gamma + 2^15) >>> 16 + beta) ("LN.2").
// gamma and beta are int8 with 5 fractional bits; the output h has the same
// 5 fractional bits. They live in a parameter RAM inside the kernel, loaded by
// the host through prm_wr_*: layer norm i uses words i*2*n_words (gamma) and
// i*2*n_words + n_words (beta). The vector length L = 32*n_words must be a
// power of two. Number formats, epsilon (1 in int8 units) and the sequential
// square root and divider are this design's choices; the paper gives the
// fusion and the overlap. Timing: 2*n_words + 42 cycles per call; busy_o
// stays high until the last output word has been written.
//
// Lint notes: prm_wr_addr is 16 bits wide so the host can use one address
// format for every node; only its low PAW bits index the parameter RAM.
// var_q8 is 64 bits for headroom during the shift; only the low 32 bits
// feed the square-root step because the variance in Q.8 fits in them.
module fused_ln_res_kernel
  import looplynx_pkg::*;
#(
  parameter int unsigned PRM_DEPTH = 3136      // (2*24+1) layer norms x 2 x 32 words
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  buf_addr_t        x_base_i,     // residual stream (read, then overwritten)
  input  buf_addr_t        y_base_i,     // branch output to add
  input  buf_addr_t        h_base_i,     // normalised output
  input  logic             do_res_i,
  input  logic [7:0]       ln_idx_i,
  input  logic [LEN_W-1:0] n_words_i,
  output logic             busy_o,
  // parameter RAM load port
  input  logic             prm_wr_en,
  input  logic [15:0]      prm_wr_addr,
  input  pack_t            prm_wr_data,
  // shared buffer
  output logic             rd0_en,
  output buf_addr_t        rd0_addr,
  input  pack_t            rd0_data,
  output logic             rd1_en,
  output buf_addr_t        rd1_addr,
  input  pack_t            rd1_data,
  output logic             wr_en,
  output buf_addr_t        wr_addr,
  output pack_t            wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_P1, S_VAR, S_SQRT, S_DIV, S_P2} state_e;
  state_e state;

  localparam int unsigned PAW = $clog2(PRM_DEPTH);

  // parameter RAM (gamma / beta), synchronous read
  pack_t prm [PRM_DEPTH];
  pack_t gam_q, bet_q;
  logic [15:0] prm_base;
  always_ff @(posedge clk) begin
    if (prm_wr_en) prm[prm_wr_addr[PAW-1:0]] <= prm_wr_data;
  end

  buf_addr_t        x_base, y_base, h_base;
  logic             do_res;
  logic [LEN_W-1:0] n_words, rd_cnt, wr_cnt;
  logic [4:0]       log2l;
  logic             rd_pend;
  logic signed [31:0] sum;
  logic        [39:0] sumsq;
  logic signed [7:0]  mean;
  logic        [31:0] sq_op, sq_res, sq_one;
  logic        [20:0] inv, div_rem;
  logic        [4:0]  it;

  assign busy_o = (state != S_IDLE) || wr_en;   // stays up until the last write lands

  // ---------------- pass 1 datapath ----------------
  pack_t            xr;
  logic signed [15:0] p1_sum;
  logic        [20:0] p1_sq;
  always_comb begin
    p1_sum = '0;
    p1_sq  = '0;
    for (int g = 0; g < N_GROUP; g++) begin
      logic signed [8:0] s;
      s = do_res ? 9'($signed(rd0_data[8*g +: 8])) + 9'($signed(rd1_data[8*g +: 8]))
                 : 9'($signed(rd0_data[8*g +: 8]));
      xr[8*g +: 8] = sat8(48'(s));
      p1_sum = p1_sum + 16'($signed(xr[8*g +: 8]));
      p1_sq  = p1_sq  + 21'(16'($signed(xr[8*g +: 8])) * 16'($signed(xr[8*g +: 8])));
    end
  end

  // ---------------- pass 2 datapath ----------------
  pack_t hn;
  always_comb begin
    for (int g = 0; g < N_GROUP; g++) begin
      logic signed [9:0]  d;
      logic signed [47:0] t;
      d = 10'($signed(rd0_data[8*g +: 8])) - 10'(mean);
      t = 48'(d) * $signed({1'b0, inv}) * 48'($signed(gam_q[8*g +: 8]));
      t = ((t + 48'sd32768) >>> 16) + 48'($signed(bet_q[8*g +: 8]));
      hn[8*g +: 8] = sat8(t);
    end
  end

  // ---------------- statistics ----------------
  // var in Q.8: ((L*sumsq - sum^2) << 8) >> 2*log2(L)
  logic signed [63:0] var_l2, var_q8;
  logic        [21:0] dv_r;      // divider partial remainder (numerator 2^20)
  assign var_l2 = (64'(sumsq) <<< log2l) - 64'(sum) * 64'(sum);
  assign var_q8 = (var_l2 <<< 8) >>> (2 * log2l);
  assign dv_r   = {div_rem, (it == 5'd0) ? 1'b1 : 1'b0};

  // ---------------- read address generation ----------------
  logic rd_go;
  assign rd_go    = ((state == S_P1) || (state == S_P2)) && (rd_cnt != n_words);
  assign rd0_en   = rd_go;
  assign rd1_en   = rd_go && (state == S_P1);
  assign rd0_addr = x_base + BUF_AW'(rd_cnt);
  assign rd1_addr = y_base + BUF_AW'(rd_cnt);

  always_ff @(posedge clk) begin
    if (rd_go && state == S_P2) begin
      gam_q <= prm[PAW'(prm_base + 16'(rd_cnt))];
      bet_q <= prm[PAW'(prm_base + 16'(n_words) + 16'(rd_cnt))];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {x_base, y_base, h_base} <= '0;
      do_res <= 1'b0; n_words <= '0; rd_cnt <= '0; wr_cnt <= '0; log2l <= '0;
      rd_pend <= 1'b0; sum <= '0; sumsq <= '0; mean <= '0; prm_base <= '0;
      sq_op <= '0; sq_res <= '0; sq_one <= '0; inv <= '0; div_rem <= '0; it <= '0;
      wr_en <= 1'b0; wr_addr <= '0; wr_data <= '0;
    end else begin
      rd_pend <= rd_go;
      wr_en   <= 1'b0;
      if (rd_go) rd_cnt <= rd_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start_i) begin
          x_base <= x_base_i; y_base <= y_base_i; h_base <= h_base_i;
          do_res <= do_res_i; n_words <= n_words_i;
          prm_base <= 16'(ln_idx_i) * 16'(2 * n_words_i);
          rd_cnt <= '0; wr_cnt <= '0; sum <= '0; sumsq <= '0;
          log2l  <= 5'd5;
          for (int b = 0; b < LEN_W; b++) if (n_words_i[b]) log2l <= 5'(b + 5);
          state  <= S_P1;
        end
        S_P1: begin
          if (rd_pend) begin
            wr_en   <= 1'b1;
            wr_addr <= x_base + BUF_AW'(wr_cnt);
            wr_data <= xr;
            sum     <= sum + 32'(p1_sum);
            sumsq   <= sumsq + 40'(p1_sq);
            wr_cnt  <= wr_cnt + 1'b1;
            if (wr_cnt == n_words - 1'b1) state <= S_VAR;
          end
        end
        S_VAR: begin
          // var in Q.8: ((L*sumsq - sum^2) << 8) >> 2*log2(L), plus epsilon (1.0 = 256)
          sq_op  <= 32'(var_q8) + 32'd256;
          sq_res <= '0;
          sq_one <= 32'h4000_0000;
          mean   <= sat8(48'((64'(sum) + (64'sd1 <<< (log2l - 1))) >>> log2l));
          it     <= '0;
          state  <= S_SQRT;
        end
        S_SQRT: begin
          if (sq_op >= sq_res + sq_one) begin
            sq_op  <= sq_op - (sq_res + sq_one);
            sq_res <= (sq_res >> 1) + sq_one;
          end else begin
            sq_res <= sq_res >> 1;
          end
          sq_one <= sq_one >> 2;
          it <= it + 1'b1;
          if (it == 5'd15) begin
            it <= '0; inv <= '0; div_rem <= '0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          // inv = 2^20 / std, restoring division, one quotient bit per cycle
          if (dv_r >= 22'(sq_res)) begin
            div_rem <= 21'(dv_r - 22'(sq_res));
            inv     <= {inv[19:0], 1'b1};
          end else begin
            div_rem <= 21'(dv_r);
            inv     <= {inv[19:0], 1'b0};
          end
          it <= it + 1'b1;
          if (it == 5'd20) begin
            rd_cnt <= '0; wr_cnt <= '0;
            state  <= S_P2;
          end
        end
        S_P2: begin
          if (rd_pend) begin
            wr_en   <= 1'b1;
            wr_addr <= h_base + BUF_AW'(wr_cnt);
            wr_data <= hn;
            wr_cnt  <= wr_cnt + 1'b1;
            if (wr_cnt == n_words - 1'b1) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
