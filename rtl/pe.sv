// pe: input-stationary processing element with down-forward accumulation.
// The PE keeps one stationary operand w (a V, G or k_sum element). Each cycle it
// multiplies the input a_in that travels left to right by w, adds the product to
// the partial sum psum_in arriving from the PE above, and registers the result
// into psum_out for the PE below; a_in is registered into a_out for the PE on the
// right. Both outputs therefore lag their inputs by one cycle. w is written when
// w_load is high. This matches the PE drawn with the down-forward accumulation
// dataflow (multiplier, adder, registers); the reset values and the truncation of
// the sum to ACC_W bits are choices of this design.
module pe #(
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_in,
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [ACC_W-1:0]  psum_out
);
  logic signed [DATA_W-1:0]   w_q;
  logic signed [2*DATA_W-1:0] prod;

  assign prod = a_in * w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      a_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      a_out    <= a_in;
      psum_out <= psum_in + ACC_W'(prod);
    end
  end
endmodule
