// tb_mp_slice: drives one MP slice with random weights, biases and vector
// elements, steps it whenever it is ready (randomly delayed), and compares
// every packed result (32 row sums and 32 biases) with a reference. The
// output bank is drained slowly at times, so the slice must stall without
// losing a block.
module tb_mp_slice;
  import looplynx_pkg::*;
  localparam int K = 40, NB = 6;
  logic clk = 0, rst_n = 0;
  logic w_valid = 0, w_ready, mac_rdy, step, o_valid, o_ready = 0, stall;
  pack_t w_data = 0;
  logic signed [7:0] x = 0;
  logic signed [31:0] o_acc [N_GROUP], o_bias [N_GROUP];
  logic signed [7:0] W [NB][N_GROUP][K];
  logic signed [7:0] X [NB][K];
  logic signed [31:0] Bv [NB][N_GROUP];
  int checks = 0, failures = 0, stalls = 0;
  int beat = 0, blk = 0, col = 0, outb = 0;
  logic want_step;
  always #5 clk = ~clk;

  mp_slice dut (.clk, .rst_n, .k_len_i (LEN_W'(K)), .w_valid, .w_ready, .w_data,
    .mac_rdy_o (mac_rdy), .step_i (step), .x_i (x), .o_valid, .o_ready, .o_acc, .o_bias, .stall_o (stall));

  // stream: per block K weight beats then 4 bias beats
  always_comb begin
    int b, o;
    b = beat / (K + 4); o = beat % (K + 4);
    w_valid = (b < NB);
    w_data  = '0;
    x       = '0;
    if (b < NB) begin
      if (o < K) begin
        for (int g = 0; g < N_GROUP; g++) w_data[8*g +: 8] = W[b][g][o];
        x = X[b][o];
      end else begin
        for (int i = 0; i < 8; i++) w_data[32*i +: 32] = Bv[b][8*(o-K) + i];
      end
    end
  end
  assign step = mac_rdy && want_step;

  always @(posedge clk) if (rst_n) begin
    if (w_valid && w_ready) beat <= beat + 1;
    stalls += stall;
    if (o_valid && o_ready) begin
      for (int g = 0; g < N_GROUP; g++) begin
        longint s;
        s = 0;
        for (int j = 0; j < K; j++) s += longint'(W[outb][g][j]) * longint'(X[outb][j]);
        checks += 2;
        if (o_acc[g] !== 32'(s) || o_bias[g] !== Bv[outb][g]) begin
          failures++;
          if (failures < 40 && g < 3) $display("FAIL block %0d row %0d: %0d vs %0d", outb, g, o_acc[g], s);
        end
      end
      outb <= outb + 1;
    end
  end

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int b = 0; b < NB; b++) begin
      for (int j = 0; j < K; j++) X[b][j] = 8'($urandom);
      for (int g = 0; g < N_GROUP; g++) begin
        Bv[b][g] = 32'($urandom);
        for (int j = 0; j < K; j++) W[b][g][j] = 8'($urandom);
      end
    end
    want_step = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (outb < NB) begin
      want_step = ($urandom % 4) != 0;
      o_ready   = (outb < 2) ? 1'b0 : (($urandom % 8) == 0);   // slow drain first: forces stalls
      if (outb < 2 && $time > 20000) o_ready = 1'b1;
      @(negedge clk);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
