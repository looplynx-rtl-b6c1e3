// looplynx_top: a LoopLynx cluster - N_NODES accelerator nodes on a ring.
//
// Each node runs the same schedule on the same input (the host broadcasts the
// token embedding to all nodes) but owns a different share of the work: the
// weights of every linear layer are split across nodes along the output
// dimension, and the KV cache head-wise. After each MP block and each
// attention head the routers all-gather the partial results round the ring,
// so every node's buffer holds the full vectors again (model parallelism,
// paper Fig. 2). Node i sends to node (i-1) mod N_NODES through a FIFO; in
// the paper two nodes share one Alveo U50 (one per SLR) and boards are joined
// by AXI-Stream links - here every ring hop is the same FIFO.
// The defaults are the paper's 4-node (two-FPGA) configuration of a GPT-2
// 345M model: 8 HBM weight channels x 32 MAC units per node, embedding 1024,
// FFN 4096, 16 heads of 64, 24 blocks. HBM and the host are outside: their
// ports are the top's ports, flattened over nodes. start_i runs one token at
// position pos_i through the whole model on all nodes; done_o rises when all
// nodes have finished. The host writes and parameter loads are broadcast;
// host_rd_data returns one word per node.
//
// Lint notes: SYNCASYNCNET on rst_n comes from the assertions' "disable
// iff". The ring FIFOs' count pins are left open: only valid/ready are used.
module looplynx_top
  import looplynx_pkg::*;
#(
  parameter int unsigned N_NODES   = 4,
  parameter int unsigned N_CHANNEL = 8,
  parameter int unsigned L_EMBED   = 1024,
  parameter int unsigned L_FFN     = 4096,
  parameter int unsigned N_HEAD    = 16,
  parameter int unsigned HEAD_DIM  = 64,
  parameter int unsigned N_LAYER   = 24,
  parameter int unsigned MAX_SEQ   = 1024,
  parameter int unsigned RING_FIFO = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  logic [LEN_W-1:0] pos_i,
  output logic             busy_o,
  output logic             done_o,
  input  quant_cfg_t       qcfg_i [N_MP_OPS],
  input  logic [15:0]      sm_mult_i,
  input  logic [4:0]       sm_shift_i,
  input  logic [15:0]      act_k_i,
  input  logic             host_wr_en,
  input  buf_addr_t        host_wr_addr,
  input  pack_t            host_wr_data,
  input  logic             host_rd_en,
  input  buf_addr_t        host_rd_addr,
  output pack_t            host_rd_data [N_NODES],
  input  logic             prm_wr_en,
  input  logic [15:0]      prm_wr_addr,
  input  pack_t            prm_wr_data,
  // HBM weight channels
  output logic             w_rd_req_valid  [N_NODES][N_CHANNEL],
  input  logic             w_rd_req_ready  [N_NODES][N_CHANNEL],
  output hbm_rd_req_t      w_rd_req        [N_NODES][N_CHANNEL],
  input  logic             w_rd_data_valid [N_NODES][N_CHANNEL],
  output logic             w_rd_data_ready [N_NODES][N_CHANNEL],
  input  pack_t            w_rd_data       [N_NODES][N_CHANNEL],
  // HBM KV cache channels
  output logic             k_rd_req_valid  [N_NODES],
  input  logic             k_rd_req_ready  [N_NODES],
  output hbm_rd_req_t      k_rd_req        [N_NODES],
  input  logic             k_rd_data_valid [N_NODES],
  output logic             k_rd_data_ready [N_NODES],
  input  pack_t            k_rd_data       [N_NODES],
  output logic             k_wr_valid      [N_NODES],
  input  logic             k_wr_ready      [N_NODES],
  output hbm_wr_req_t      k_wr            [N_NODES],
  output logic             v_rd_req_valid  [N_NODES],
  input  logic             v_rd_req_ready  [N_NODES],
  output hbm_rd_req_t      v_rd_req        [N_NODES],
  input  logic             v_rd_data_valid [N_NODES],
  output logic             v_rd_data_ready [N_NODES],
  input  pack_t            v_rd_data       [N_NODES],
  output logic             v_wr_valid      [N_NODES],
  input  logic             v_wr_ready      [N_NODES],
  output hbm_wr_req_t      v_wr            [N_NODES],
  // observation
  output stage_e           stage_o         [N_NODES],
  output logic             ev_mp_stall_o   [N_NODES],
  output logic             ev_overlap_o    [N_NODES],
  output logic             ev_masked_o     [N_NODES],
  output logic             ev_fwd_o        [N_NODES],
  output logic             ev_tile_o       [N_NODES]
);
  logic  rout_valid [N_NODES], rout_ready [N_NODES];
  pack_t rout_data  [N_NODES];
  logic  rin_valid  [N_NODES], rin_ready  [N_NODES];
  pack_t rin_data   [N_NODES];
  logic  [N_NODES-1:0] node_busy, node_done_seen;
  logic  node_done [N_NODES];

  for (genvar i = 0; i < N_NODES; i++) begin : g_node
    accel_node #(
      .N_NODES(N_NODES), .N_CHANNEL(N_CHANNEL), .L_EMBED(L_EMBED), .L_FFN(L_FFN),
      .N_HEAD(N_HEAD), .HEAD_DIM(HEAD_DIM), .N_LAYER(N_LAYER), .MAX_SEQ(MAX_SEQ)
    ) u_node (
      .clk, .rst_n, .node_id_i (8'(i)),
      .start_i, .pos_i, .busy_o (node_busy[i]), .done_o (node_done[i]),
      .qcfg_i, .sm_mult_i, .sm_shift_i, .act_k_i,
      .host_wr_en, .host_wr_addr, .host_wr_data,
      .host_rd_en, .host_rd_addr, .host_rd_data (host_rd_data[i]),
      .prm_wr_en, .prm_wr_addr, .prm_wr_data,
      .rin_valid (rin_valid[i]), .rin_ready (rin_ready[i]), .rin_data (rin_data[i]),
      .rout_valid (rout_valid[i]), .rout_ready (rout_ready[i]), .rout_data (rout_data[i]),
      .w_rd_req_valid (w_rd_req_valid[i]), .w_rd_req_ready (w_rd_req_ready[i]), .w_rd_req (w_rd_req[i]),
      .w_rd_data_valid (w_rd_data_valid[i]), .w_rd_data_ready (w_rd_data_ready[i]), .w_rd_data (w_rd_data[i]),
      .k_rd_req_valid (k_rd_req_valid[i]), .k_rd_req_ready (k_rd_req_ready[i]), .k_rd_req (k_rd_req[i]),
      .k_rd_data_valid (k_rd_data_valid[i]), .k_rd_data_ready (k_rd_data_ready[i]), .k_rd_data (k_rd_data[i]),
      .k_wr_valid (k_wr_valid[i]), .k_wr_ready (k_wr_ready[i]), .k_wr (k_wr[i]),
      .v_rd_req_valid (v_rd_req_valid[i]), .v_rd_req_ready (v_rd_req_ready[i]), .v_rd_req (v_rd_req[i]),
      .v_rd_data_valid (v_rd_data_valid[i]), .v_rd_data_ready (v_rd_data_ready[i]), .v_rd_data (v_rd_data[i]),
      .v_wr_valid (v_wr_valid[i]), .v_wr_ready (v_wr_ready[i]), .v_wr (v_wr[i]),
      .stage_o (stage_o[i]), .ev_mp_stall_o (ev_mp_stall_o[i]), .ev_overlap_o (ev_overlap_o[i]),
      .ev_masked_o (ev_masked_o[i]), .ev_fwd_o (ev_fwd_o[i]), .ev_tile_o (ev_tile_o[i])
    );

    // ring hop: node i -> node (i-1) mod N_NODES
    localparam int unsigned DST = (i + N_NODES - 1) % N_NODES;
    sync_fifo #(.WIDTH(PACK_W), .DEPTH(RING_FIFO)) u_ring_fifo (
      .clk, .rst_n,
      .in_valid (rout_valid[i]), .in_ready (rout_ready[i]), .in_data (rout_data[i]),
      .out_valid (rin_valid[DST]), .out_ready (rin_ready[DST]), .out_data (rin_data[DST]),
      .count ()
    );
  end

  // done: every node has signalled the end of the token
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      node_done_seen <= '0;
      done_o         <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) node_done_seen <= '0;
      else begin
        for (int i = 0; i < N_NODES; i++) if (node_done[i]) node_done_seen[i] <= 1'b1;
        if (&node_done_seen) begin
          done_o         <= 1'b1;
          node_done_seen <= '0;
        end
      end
    end
  end
  assign busy_o = |node_busy;
endmodule
