// sfu: special function unit - the activation between the two FFN layers.
//
// The paper's schedule runs stage 9 ("Act") on the SFU; the model is GPT-2,
// whose activation is GELU. The paper names the unit only. This unit reads
// n_words datapacks from the shared buffer, applies a GELU approximation to
// all 32 int8 lanes of each, and writes the results back at another address.
// GELU(x) = x * sigmoid(1.702 x) is approximated with a hard sigmoid:
//   hs = clamp(128 + ((x * act_k) >>> 8), 0, 256)        (Q0.8)
//   y  = (x * hs + 128) >>> 8
// where act_k = round(0.4255 * s * 2^16) folds the slope of the sigmoid at 0
// (1.702/4) and the activation scale s. The output keeps the input scale.
// The approximation is this design's choice. Throughput is one datapack per
// cycle after a 2-cycle pipeline fill; busy_o drops after the last write.
module sfu
  import looplynx_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  buf_addr_t        src_i,
  input  buf_addr_t        dst_i,
  input  logic [LEN_W-1:0] n_words_i,
  input  logic [15:0]      act_k_i,
  output logic             busy_o,
  output logic             buf_rd_en,
  output buf_addr_t        buf_rd_addr,
  input  pack_t            buf_rd_data,
  output logic             buf_wr_en,
  output buf_addr_t        buf_wr_addr,
  output pack_t            buf_wr_data
);
  logic             active;
  buf_addr_t        src;
  logic [LEN_W-1:0] rd_left, wr_left;
  logic [15:0]      act_k;
  logic             rd_pend;
  pack_t            y;

  assign busy_o      = active;
  assign buf_rd_en   = active && (rd_left != 0);
  assign buf_rd_addr = src;

  function automatic logic signed [7:0] gelu_q(input logic signed [7:0] x, input logic [15:0] k);
    logic signed [25:0] t;
    logic signed [17:0] hs;
    logic signed [25:0] p;
    t  = 26'(x) * $signed({1'b0, k});
    t  = (t >>> 8) + 26'sd128;
    if (t < 0)         hs = 18'sd0;
    else if (t > 256)  hs = 18'sd256;
    else               hs = 18'(t);
    p = 26'(x) * 26'(hs) + 26'sd128;
    return 8'(p >>> 8);
  endfunction

  always_comb begin
    for (int g = 0; g < N_GROUP; g++) y[8*g +: 8] = gelu_q(buf_rd_data[8*g +: 8], act_k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active      <= 1'b0;
      src         <= '0;
      rd_left     <= '0;
      wr_left     <= '0;
      act_k       <= '0;
      rd_pend     <= 1'b0;
      buf_wr_en   <= 1'b0;
      buf_wr_addr <= '0;
      buf_wr_data <= '0;
    end else begin
      rd_pend   <= buf_rd_en;
      buf_wr_en <= rd_pend;
      if (rd_pend) buf_wr_data <= y;
      if (buf_wr_en) buf_wr_addr <= buf_wr_addr + 1'b1;
      if (start_i && !active) begin
        active      <= (n_words_i != 0);
        src         <= src_i;
        buf_wr_addr <= dst_i;
        rd_left     <= n_words_i;
        wr_left     <= n_words_i;
        act_k       <= act_k_i;
      end else if (active) begin
        if (buf_rd_en) begin
          src     <= src + 1'b1;
          rd_left <= rd_left - 1'b1;
        end
        if (buf_wr_en) begin
          wr_left <= wr_left - 1'b1;
          if (wr_left == 1) active <= 1'b0;
        end
      end
    end
  end
endmodule
