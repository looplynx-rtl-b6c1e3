// tb_router: four routers joined in a ring through FIFOs (node i sends to
// node i-1), each with a random local source and its own buffer. Random
// gaps on every ring hop and on the local sources. After two syncs of
// several tiles every buffer must hold every node's datapacks in that node's
// slot, and the first datapack router 0 writes in each tile must land in
// slot 1 (its offset, Fig. 6(c)).
module tb_router;
  import looplynx_pkg::*;
  localparam int N = 4, NP = 3, NT = 2, STRIDE = NP * NT, BASE = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy [N];
  logic loc_valid [N], loc_ready [N], rin_valid [N], rin_ready [N], rout_valid [N], rout_ready [N];
  pack_t loc_data [N], rin_data [N], rout_data [N];
  logic f_valid [N], f_ready [N], gate [N];
  pack_t f_data [N];
  logic wr_en [N], tile_done [N], fwd [N];
  buf_addr_t wr_addr [N];
  pack_t wr_data [N];
  pack_t mem [N][64];
  pack_t src [N][NT * NP];
  int sent [N];
  int checks = 0, failures = 0, n_fwd = 0, n_tiles = 0;
  int first_slot [NT];
  int r0_writes = 0;
  always #5 clk = ~clk;

  for (genvar i = 0; i < N; i++) begin : g
    router #(.N_NODES(N)) dut (
      .clk, .rst_n, .node_id_i (8'(i)), .start_i (start), .out_base_i (BUF_AW'(BASE)),
      .node_stride_i (LEN_W'(STRIDE)), .tile_packs_i (LEN_W'(NP)), .n_tiles_i (LEN_W'(NT)), .busy_o (busy[i]),
      .loc_valid (loc_valid[i]), .loc_ready (loc_ready[i]), .loc_data (loc_data[i]),
      .rin_valid (rin_valid[i]), .rin_ready (rin_ready[i]), .rin_data (rin_data[i]),
      .rout_valid (rout_valid[i]), .rout_ready (rout_ready[i]), .rout_data (rout_data[i]),
      .buf_wr_en (wr_en[i]), .buf_wr_addr (wr_addr[i]), .buf_wr_data (wr_data[i]),
      .tile_done_o (tile_done[i]), .fwd_o (fwd[i]));
    sync_fifo #(.WIDTH(PACK_W), .DEPTH(4)) u_f (
      .clk, .rst_n, .in_valid (rout_valid[i]), .in_ready (rout_ready[i]), .in_data (rout_data[i]),
      .out_valid (f_valid[i]), .out_ready (f_ready[i]), .out_data (f_data[i]), .count ());
    localparam int D = (i + N - 1) % N;
    assign rin_valid[D] = f_valid[i] && gate[i];
    assign f_ready[i]   = rin_ready[D] && gate[i];
    assign rin_data[D]  = f_data[i];
    assign loc_data[i]  = src[i][sent[i] % (NT * NP)];
    always @(posedge clk) begin
      if (loc_valid[i] && loc_ready[i]) sent[i] <= sent[i] + 1;
      if (wr_en[i]) mem[i][wr_addr[i]] <= wr_data[i];
      n_fwd   += fwd[i];
      n_tiles += tile_done[i];
    end
  end

  // router 0: the first write of every tile goes to slot (0 + 1) mod N
  always @(posedge clk) if (wr_en[0]) begin
    if (r0_writes % (N * NP) == 0 && (r0_writes / (N * NP)) < NT)
      first_slot[r0_writes / (N * NP)] = (int'(wr_addr[0]) - BASE) / STRIDE;
    r0_writes++;
  end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; gate[i] = 0; loc_valid[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      int cyc;
      for (int i = 0; i < N; i++) begin
        sent[i] = 0;
        for (int k = 0; k < NT * NP; k++) src[i][k] = {8{$urandom}};
        for (int a = 0; a < 64; a++) mem[i][a] = '0;
      end
      r0_writes = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (busy[0] || busy[1] || busy[2] || busy[3]) begin
        for (int i = 0; i < N; i++) begin
          gate[i]      = (rep == 0) ? 1'b1 : ($urandom % 3 != 0);
          loc_valid[i] = (sent[i] < NT * NP) && ((rep == 0) || ($urandom % 2 == 0));
        end
        @(negedge clk);
        cyc++;
      end
      if (rep == 0) begin
        // no gaps: 2 tiles x 4 rounds x 3 packs = 24 packets out per node + pipeline
        $display("sync of %0d tiles took %0d cycles", NT, cyc);
        checks++;
        if (cyc > NT * N * NP + 12) begin failures++; $display("FAIL slow sync"); end
      end
      for (int i = 0; i < N; i++)
        for (int k = 0; k < N; k++)
          for (int j = 0; j < NT * NP; j++) begin
            checks++;
            if (mem[i][BASE + k * STRIDE + j] !== src[k][j]) begin
              failures++;
              if (failures < 6) $display("FAIL node %0d slot %0d pack %0d", i, k, j);
            end
          end
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (first_slot[t] != 1) begin failures++; $display("FAIL router 0 tile %0d starts at slot %0d", t, first_slot[t]); end
      end
    end
    checks++;
    if (n_fwd != 2 * N * NT * (N - 1) * NP || n_tiles != 2 * N * NT) begin
      failures++; $display("FAIL forwards %0d tiles %0d", n_fwd, n_tiles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
