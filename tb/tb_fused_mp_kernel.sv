// tb_fused_mp_kernel: the MP kernel with two slices (N_CHANNEL = 2) against
// two HBM channel models and a buffer model. A random int8 input vector of
// k_len = 128 is placed in the buffer; the kernel computes n_blocks = 3
// blocks (192 rows). Every output datapack is compared with a reference
// matrix-vector product + bias + requantisation computed from the same HBM
// contents. Run 0 has no back-pressure and checks the block rate (one input
// element per cycle, so about k_len cycles per block); run 1 adds random
// back-pressure on the output and checks that stall_o is raised.
module tb_fused_mp_kernel;
  import looplynx_pkg::*;
  localparam int NC = 2, KLEN = 128, NB = 3, WB = 10, IB = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, stall;
  quant_cfg_t qcfg;
  logic buf_rd_en;
  buf_addr_t buf_rd_addr;
  pack_t buf_rd_data, bmem [64];
  logic rq_v [NC], rq_r [NC], rd_v [NC], rd_r [NC];
  hbm_rd_req_t rq [NC];
  pack_t rd [NC];
  logic out_valid, out_ready;
  pack_t out_data;
  logic signed [7:0] x [KLEN];
  int checks = 0, failures = 0, n_out = 0, n_stall = 0;
  always #5 clk = ~clk;

  fused_mp_kernel #(.N_CHANNEL(NC)) dut (
    .clk, .rst_n, .start_i (start), .in_base_i (BUF_AW'(IB)), .k_len_i (LEN_W'(KLEN)),
    .n_blocks_i (LEN_W'(NB)), .w_base_i (HBM_AW'(WB)), .qcfg_i (qcfg), .busy_o (busy), .stall_o (stall),
    .buf_rd_en, .buf_rd_addr, .buf_rd_data,
    .rd_req_valid (rq_v), .rd_req_ready (rq_r), .rd_req (rq),
    .rd_data_valid (rd_v), .rd_data_ready (rd_r), .rd_data (rd),
    .out_valid, .out_ready, .out_data);

  for (genvar c = 0; c < NC; c++) begin : g_ch
    hbm_channel_model #(.SEED(40 + c), .LATENCY(8)) u_h (
      .clk, .rst_n, .rd_req_valid (rq_v[c]), .rd_req_ready (rq_r[c]), .rd_req (rq[c]),
      .rd_data_valid (rd_v[c]), .rd_data_ready (rd_r[c]), .rd_data (rd[c]),
      .wr_valid (1'b0), .wr_ready (), .wr ('0));
  end

  always @(posedge clk) if (buf_rd_en) buf_rd_data <= bmem[buf_rd_addr];

  function automatic pack_t hbm(int c, int addr);
    return (c == 0) ? g_ch[0].u_h.beat(addr) : g_ch[1].u_h.beat(addr);
  endfunction

  function automatic pack_t ref_pack(int b, int c);
    pack_t r, wbeat, bbeat;
    for (int g = 0; g < N_GROUP; g++) begin
      longint acc, p;
      acc = 0;
      for (int j = 0; j < KLEN; j++) begin
        wbeat = hbm(c, WB + b * (KLEN + 4) + j);
        acc += longint'($signed(wbeat[8*g +: 8])) * longint'(x[j]);
      end
      bbeat = hbm(c, WB + b * (KLEN + 4) + KLEN + g / 8);
      acc += longint'($signed(bbeat[32*(g%8) +: 32]));
      p = (acc * longint'(qcfg.mult) + (longint'(1) <<< (qcfg.shift - 1))) >>> qcfg.shift;
      r[8*g +: 8] = sat8(48'(p));
    end
    return r;
  endfunction

  always @(posedge clk) if (rst_n) begin
    n_stall += stall;
    if (out_valid && out_ready) begin
      pack_t e;
      e = ref_pack(n_out / NC, n_out % NC);
      checks++;
      if (out_data !== e) begin
        failures++;
        if (failures < 5) $display("FAIL pack %0d: %h vs %h", n_out, out_data, e);
      end
      n_out++;
    end
  end

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    qcfg.mult = 16'd5; qcfg.shift = 6'd8;
    out_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      int cyc;
      for (int j = 0; j < KLEN; j++) x[j] = 8'($urandom);
      for (int w = 0; w < KLEN / 32; w++)
        for (int i = 0; i < 32; i++) bmem[IB + w][8*i +: 8] = x[32*w + i];
      n_out = 0; n_stall = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (busy) begin
        out_ready = (rep == 0) ? 1'b1 : ($urandom % 4 == 0);
        @(negedge clk); cyc++;
      end
      out_ready = 1;
      $display("run %0d: %0d cycles, %0d stall cycles", rep, cyc, n_stall);
      checks++;
      if (n_out != NB * NC) begin failures++; $display("FAIL %0d packs", n_out); end
      if (rep == 0) begin
        // rate: a block is k_len cycles of MAC plus 4 bias beats; fill latency once
        checks++;
        if (cyc > NB * (KLEN + 4) + 40) begin failures++; $display("FAIL slow: %0d cycles", cyc); end
        checks++;
        if (cyc < NB * KLEN) begin failures++; $display("FAIL impossibly fast"); end
      end else begin
        checks++;
        if (n_stall == 0) begin failures++; $display("FAIL no stall seen"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
