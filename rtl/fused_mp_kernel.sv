// fused_mp_kernel: the fused matrix processing (MP) macro dataflow kernel.
//
// Computes one block matrix-vector product y = W x of a linear layer for this
// node's share of the output rows (weights are split across nodes along the
// output dimension). N_CHANNEL MP slices, each behind its own DMA engine and
// HBM channel, form the MPU; together they produce a block of
// N_CHANNEL x 32 output rows. The input vector is streamed from the shared
// on-chip buffer one element per cycle and broadcast to all slices. When a
// block's accumulations end, every slice parks its results in its output bank
// and starts the next block while the MUX feeds the banks, one slice per
// cycle, to the quantisation unit (bias addition + requantisation). Quantised
// datapacks leave on out_* towards the router, in row order: pack p of block b
// holds rows b*N_CHANNEL*32 + p*32 .. +31 of this node's share.
// All units are joined by FIFOs or valid/ready handshakes, as in the paper.
// HBM layout (this design's choice): in every channel, block b of the layer
// starts at beat w_base + b*(k_len + 4): k_len weight beats then 4 bias beats.
// Timing: one block takes k_len cycles when HBM keeps up; the first pack
// appears about k_len + 8 cycles after start; busy_o drops after the last
// pack has been handed to the router.
//
// Lint notes: SYNCASYNCNET on rst_n comes from the "disable iff" of the
// assertion, not from circuit logic. The vector FIFO's in_ready pin is
// left open because the fill logic never pushes more than the free space
// it has counted (vf_cnt). The per-channel dma_busy bits are kept for
// waveform inspection; completion is taken from the packing counters.
module fused_mp_kernel
  import looplynx_pkg::*;
#(
  parameter int unsigned N_CHANNEL = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start_i,
  input  buf_addr_t        in_base_i,     // buffer word address of the input vector
  input  logic [LEN_W-1:0] k_len_i,       // input vector length (multiple of 32)
  input  logic [LEN_W-1:0] n_blocks_i,    // blocks of N_CHANNEL*32 rows
  input  hbm_addr_t        w_base_i,
  input  quant_cfg_t       qcfg_i,
  output logic             busy_o,
  output logic             stall_o,       // the MPU or its output path is waiting
  // shared buffer read port (1-cycle latency)
  output logic             buf_rd_en,
  output buf_addr_t        buf_rd_addr,
  input  pack_t            buf_rd_data,
  // HBM channels
  output logic             rd_req_valid  [N_CHANNEL],
  input  logic             rd_req_ready  [N_CHANNEL],
  output hbm_rd_req_t      rd_req        [N_CHANNEL],
  input  logic             rd_data_valid [N_CHANNEL],
  output logic             rd_data_ready [N_CHANNEL],
  input  pack_t            rd_data       [N_CHANNEL],
  // quantised output stream
  output logic             out_valid,
  input  logic             out_ready,
  output pack_t            out_data
);
  localparam int unsigned CH_W = (N_CHANNEL > 1) ? $clog2(N_CHANNEL) : 1;

  // ---------------- command registers ----------------
  buf_addr_t        in_base;
  logic [LEN_W-1:0] k_len;
  quant_cfg_t       qcfg;
  logic [LEN_W-1:0] kw;                 // words per input vector
  logic [31:0]      vec_words_left;     // buffer words still to read (all blocks)
  logic [LEN_W-1:0] vec_word_idx;       // word index within the vector
  logic [31:0]      packs_left;         // output packs still to emit
  logic             active;

  assign kw     = k_len >> 5;
  assign busy_o = active;

  // ---------------- vector stream from the buffer ----------------
  logic        vf_in_valid, vf_out_valid, vf_pop;
  pack_t       vf_out;
  logic [3:0]  vf_cnt;
  logic        rd_pend;
  logic [4:0]  byte_idx;
  logic [LEN_W-1:0] col;                // column within the block
  logic        step;
  logic [N_CHANNEL-1:0] mac_rdy;

  assign buf_rd_en   = active && (vec_words_left != 0) && (32'(vf_cnt) + 32'(rd_pend) < 8);
  assign buf_rd_addr = in_base + BUF_AW'(vec_word_idx);
  assign vf_in_valid = rd_pend;

  sync_fifo #(.WIDTH(PACK_W), .DEPTH(8)) u_vec_fifo (
    .clk, .rst_n,
    .in_valid (vf_in_valid), .in_ready (), .in_data (buf_rd_data),
    .out_valid (vf_out_valid), .out_ready (vf_pop), .out_data (vf_out),
    .count (vf_cnt)
  );

  assign step   = vf_out_valid && (&mac_rdy);
  assign vf_pop = step && ((byte_idx == 5'd31) || (col == k_len - 1'b1));

  // ---------------- DMA engines + MP slices ----------------
  logic               w_valid [N_CHANNEL];
  logic               w_ready [N_CHANNEL];
  pack_t              w_data  [N_CHANNEL];
  logic               o_valid [N_CHANNEL];
  logic               o_ready [N_CHANNEL];
  logic signed [31:0] o_acc   [N_CHANNEL][N_GROUP];
  logic signed [31:0] o_bias  [N_CHANNEL][N_GROUP];
  logic [N_CHANNEL-1:0] slice_stall;
  logic [N_CHANNEL-1:0] dma_busy;

  for (genvar c = 0; c < N_CHANNEL; c++) begin : g_ch
    dma_engine u_dma (
      .clk, .rst_n,
      .start_i      (start_i && !active),
      .base_i       (w_base_i),
      .beats_i      (32'(n_blocks_i) * (32'(k_len_i) + 32'(N_GROUP / 8))),
      .busy_o       (dma_busy[c]),
      .rd_req_valid (rd_req_valid[c]),
      .rd_req_ready (rd_req_ready[c]),
      .rd_req       (rd_req[c]),
      .rd_data_valid(rd_data_valid[c]),
      .rd_data_ready(rd_data_ready[c]),
      .rd_data      (rd_data[c]),
      .out_valid    (w_valid[c]),
      .out_ready    (w_ready[c]),
      .out_data     (w_data[c])
    );
    mp_slice u_slice (
      .clk, .rst_n,
      .k_len_i   (k_len),
      .w_valid   (w_valid[c]),
      .w_ready   (w_ready[c]),
      .w_data    (w_data[c]),
      .mac_rdy_o (mac_rdy[c]),
      .step_i    (step),
      .x_i       (vf_out[8*byte_idx +: 8]),
      .o_valid   (o_valid[c]),
      .o_ready   (o_ready[c]),
      .o_acc     (o_acc[c]),
      .o_bias    (o_bias[c]),
      .stall_o   (slice_stall[c])
    );
  end

  // ---------------- MUX: slices -> quantisation unit ----------------
  logic [CH_W-1:0] sel;
  logic            q_in_ready;

  for (genvar c = 0; c < N_CHANNEL; c++) begin : g_oready
    assign o_ready[c] = q_in_ready && (sel == CH_W'(c));
  end

  quant_unit u_quant (
    .clk, .rst_n,
    .cfg_i     (qcfg),
    .in_valid  (o_valid[sel]),
    .in_ready  (q_in_ready),
    .acc_i     (o_acc[sel]),
    .bias_i    (o_bias[sel]),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data)
  );

  // a stall: an output bank is still full, the router back-pressures, or the
  // lockstep MAC step waits for a channel whose DMA has not delivered yet
  assign stall_o = (|slice_stall) || (out_valid && !out_ready) ||
                   (vf_out_valid && !step && (|mac_rdy));

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active         <= 1'b0;
      in_base        <= '0;
      k_len          <= '0;
      qcfg           <= '0;
      vec_words_left <= '0;
      vec_word_idx   <= '0;
      packs_left     <= '0;
      rd_pend        <= 1'b0;
      byte_idx       <= '0;
      col            <= '0;
      sel            <= '0;
    end else begin
      rd_pend <= buf_rd_en;
      if (start_i && !active) begin
        active         <= 1'b1;
        in_base        <= in_base_i;
        k_len          <= k_len_i;
        qcfg           <= qcfg_i;
        vec_words_left <= 32'(n_blocks_i) * 32'(k_len_i >> 5);
        vec_word_idx   <= '0;
        packs_left     <= 32'(n_blocks_i) * N_CHANNEL;
        byte_idx       <= '0;
        col            <= '0;
        sel            <= '0;
      end else if (active) begin
        if (buf_rd_en) begin
          vec_words_left <= vec_words_left - 1;
          vec_word_idx   <= (vec_word_idx == kw - 1'b1) ? '0 : vec_word_idx + 1'b1;
        end
        if (step) begin
          byte_idx <= vf_pop ? 5'd0 : byte_idx + 1'b1;
          col      <= (col == k_len - 1'b1) ? '0 : col + 1'b1;
        end
        if (o_valid[sel] && q_in_ready)
          sel <= (sel == CH_W'(N_CHANNEL - 1)) ? '0 : sel + 1'b1;
        if (out_valid && out_ready) begin
          packs_left <= packs_left - 1;
          if (packs_left == 1) active <= 1'b0;
        end
      end
    end
  end

  // The input vector is consumed a datapack at a time.
  assert property (@(posedge clk) disable iff (!rst_n) start_i && !active |-> k_len_i[4:0] == 5'd0);
endmodule
