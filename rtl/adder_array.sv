// adder_array: DIM element-wise adder lanes (paper: 64 x 1, 16-bit) plus the
// extra adder unit. Lane c registers out[c] = a[c] + b[c], or a[c] - b[c] when
// sub is high, one cycle after in_valid[c]; out_valid[c] follows in_valid[c].
// The lanes compute K-hat = K - mean(K) (Step 1, sub = 1) and
// T_N = QG + sqrt(d) v_sum (Step 5, sub = 0). The extra unit registers
// ext_out = ext_a + ext_b one cycle after ext_valid and gives the Taylor
// denominator t_D = Q k_sum^T + n sqrt(d) (Step 4). Lanes are independent, so in
// Step 5 they can work on the skewed output of the systolic array, lane c on
// column c. The paper gives the functions; operand widths (ACC_W, wider than
// 16 bits so that post-processing runs at product scale) are this design's.
module adder_array #(
  parameter int unsigned DIM   = vit_pkg::DEF_DIM,
  parameter int unsigned ACC_W = vit_pkg::DEF_ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sub,
  input  logic [DIM-1:0]          in_valid,
  input  logic signed [ACC_W-1:0] a [DIM],
  input  logic signed [ACC_W-1:0] b [DIM],
  output logic [DIM-1:0]          out_valid,
  output logic signed [ACC_W-1:0] out [DIM],
  input  logic                    ext_valid,
  input  logic signed [ACC_W-1:0] ext_a,
  input  logic signed [ACC_W-1:0] ext_b,
  output logic                    ext_out_valid,
  output logic signed [ACC_W-1:0] ext_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= '0;
      ext_out_valid <= 1'b0;
      ext_out       <= '0;
      for (int c = 0; c < DIM; c++) out[c] <= '0;
    end else begin
      out_valid     <= in_valid;
      ext_out_valid <= ext_valid;
      if (ext_valid) ext_out <= ext_a + ext_b;
      for (int c = 0; c < DIM; c++)
        if (in_valid[c]) out[c] <= sub ? (a[c] - b[c]) : (a[c] + b[c]);
    end
  end
endmodule
