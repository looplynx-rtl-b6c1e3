// mac_unit: one multiply-accumulate unit of an MP slice.
//
// Each MAC unit owns one output row of the current weight block. Per step it
// multiplies one int8 weight with the broadcast int8 vector element and adds
// the product into a 32-bit accumulator (the "X -> + with feedback" pair drawn
// in the paper's MPU). clr_i marks the first element of a row: the product
// then replaces the accumulator instead of being added, so no separate reset
// cycle is needed between blocks. One product per cycle, result visible the
// cycle after the last step. The 32-bit accumulator width is this design's
// choice (int8 x int8 over up to 2^16 elements cannot overflow 32 bits).
module mac_unit (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en_i,
  input  logic               clr_i,
  input  logic signed [7:0]  w_i,
  input  logic signed [7:0]  x_i,
  output logic signed [31:0] acc_o
);
  logic signed [15:0] prod;
  assign prod = w_i * x_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc_o <= '0;
    else if (en_i)  acc_o <= (clr_i ? 32'sd0 : acc_o) + 32'(prod);
  end
endmodule
