// hbm_channel_model: behavioural model of one HBM pseudo-channel.
//
// Not synthesizable logic of the accelerator: it stands in for the HBM stack
// and its controller, which the accelerator only uses. It accepts read
// requests (address in 32-byte beats, length in beats) into a small queue;
// the first beat of a request is ready LATENCY cycles after the request
// arrived (requests are pipelined), then one beat per cycle. It optionally
// drops data-valid at random (GAP_PCT percent) to model bandwidth gaps. Beats
// written through the write port are stored; other beats come from
// tb_util_pkg::gen_weight_beat(). For a weight channel (LAYOUT = 1) the model
// knows which beats hold biases: per layer the ops Q, K, V, O, FFN1, FFN2
// follow each other, each n_blocks blocks of k_len weight beats + 4 bias beats.
module hbm_channel_model
  import looplynx_pkg::*;
#(
  parameter int SEED      = 1,
  parameter int LAYOUT    = 0,
  parameter int LATENCY   = 8,
  parameter int GAP_PCT   = 0,
  parameter int L_EMBED   = 1024,
  parameter int L_FFN     = 4096,
  parameter int N_NODES   = 4,
  parameter int N_CHANNEL = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  hbm_rd_req_t rd_req,
  output logic        rd_data_valid,
  input  logic        rd_data_ready,
  output pack_t       rd_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  hbm_wr_req_t wr
);
  pack_t       mem [int];
  hbm_rd_req_t q [$];
  longint      tq [$];   // arrival cycle of each queued request
  longint      now;
  int          cur_addr, cur_left, wait_cnt;
  logic        gap;
  int          reads, writes;

  function automatic bit is_bias_beat(input int addr);
    int rows, k, blk, off, a;
    int layer_beats;
    layer_beats = 0;
    for (int op = 0; op < 6; op++) begin
      rows = ((op == 4) ? L_FFN : L_EMBED) / N_NODES;
      k    = (op == 5) ? L_FFN : L_EMBED;
      layer_beats += (rows / (N_CHANNEL * 32)) * (k + 4);
    end
    a = addr % layer_beats;
    for (int op = 0; op < 6; op++) begin
      rows = ((op == 4) ? L_FFN : L_EMBED) / N_NODES;
      k    = (op == 5) ? L_FFN : L_EMBED;
      blk  = (rows / (N_CHANNEL * 32)) * (k + 4);
      if (a < blk) begin
        off = a % (k + 4);
        return off >= k;
      end
      a -= blk;
    end
    return 0;
  endfunction

  function automatic pack_t beat(input int addr);
    if (mem.exists(addr)) return mem[addr];
    return tb_util_pkg::gen_weight_beat(SEED, addr, LAYOUT != 0 && is_bias_beat(addr));
  endfunction

  assign rd_req_ready  = (q.size() < 4);
  assign wr_ready      = 1'b1;
  assign rd_data_valid = (cur_left > 0) && (wait_cnt == 0) && !gap;
  assign rd_data       = beat(cur_addr);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
      tq.delete();
      now <= 0;
      cur_left <= 0; cur_addr <= 0; wait_cnt <= 0; gap <= 1'b0;
      reads <= 0; writes <= 0;
    end else begin
      now <= now + 1;
      gap <= (GAP_PCT > 0) && (($urandom % 100) < GAP_PCT);
      if (rd_req_valid && rd_req_ready) begin q.push_back(rd_req); tq.push_back(now); end
      if (wr_valid) begin
        mem[int'(wr.addr)] = wr.data;
        writes <= writes + 1;
      end
      if (cur_left == 0) begin
        if (q.size() > 0) begin
          hbm_rd_req_t r;
          longint t;
          r = q.pop_front();
          t = tq.pop_front();
          cur_addr <= int'(r.addr);
          cur_left <= int'(r.len);
          // requests are pipelined: the latency counts from the request's arrival
          wait_cnt <= (t + LATENCY > now) ? int'(t + LATENCY - now) : 0;
        end
      end else if (wait_cnt > 0) begin
        wait_cnt <= wait_cnt - 1;
      end else if (rd_data_valid && rd_data_ready) begin
        cur_addr <= cur_addr + 1;
        cur_left <= cur_left - 1;
        reads    <= reads + 1;
      end
    end
  end
endmodule
