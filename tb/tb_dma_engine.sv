// tb_dma_engine: reads transfers of several lengths from an HBM channel
// model with bandwidth gaps and random output back-pressure; checks every
// beat against the channel content, the burst limit, and that with a free
// channel and no back-pressure the stream runs at close to one beat per cycle.
module tb_dma_engine;
  import looplynx_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy;
  hbm_addr_t base = 0;
  logic [31:0] beats = 0;
  logic rq_v, rq_r, rd_v, rd_r, out_valid, out_ready = 1;
  hbm_rd_req_t rq;
  pack_t rd, out_data;
  int checks = 0, failures = 0, gap_pct = 0;
  always #5 clk = ~clk;

  dma_engine #(.MAX_BURST(32), .FIFO_DEPTH(64)) dut (
    .clk, .rst_n, .start_i (start), .base_i (base), .beats_i (beats), .busy_o (busy),
    .rd_req_valid (rq_v), .rd_req_ready (rq_r), .rd_req (rq),
    .rd_data_valid (rd_v), .rd_data_ready (rd_r), .rd_data (rd),
    .out_valid, .out_ready, .out_data);
  hbm_channel_model #(.SEED(7), .LATENCY(6), .GAP_PCT(0)) u_hbm (
    .clk, .rst_n, .rd_req_valid (rq_v), .rd_req_ready (rq_r), .rd_req (rq),
    .rd_data_valid (rd_v), .rd_data_ready (rd_r), .rd_data (rd),
    .wr_valid (1'b0), .wr_ready (), .wr ('0));

  always @(posedge clk) if (rq_v && rq_r && rq.len > 32) begin failures++; $display("FAIL burst too long"); end

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int lens [4] = '{1, 31, 100, 700};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      int got, t0, bp;
      bp = (k >= 4);
      base = HBM_AW'($urandom_range(0, 100000)); beats = lens[k % 4];
      start = 1; @(negedge clk); start = 0;
      got = 0; t0 = $time;
      while (got < beats) begin
        out_ready = bp ? ($urandom % 3 != 0) : 1'b1;
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (out_data !== tb_util_pkg::gen_weight_beat(7, int'(base) + got, 0)) begin
            failures++;
            if (failures < 5) $display("FAIL beat %0d of transfer %0d", got, k);
          end
          got++;
        end
        @(negedge clk);
      end
      if (!bp && beats == 700) begin
        int cyc;
        cyc = ($time - t0) / 10;
        $display("700 beats in %0d cycles", cyc);
        checks++;
        if (cyc > 700 * 5 / 4 + 40) begin failures++; $display("FAIL throughput"); end
      end
      repeat (3) @(negedge clk);
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
