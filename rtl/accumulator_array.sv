// accumulator_array: DIM accumulator lanes (paper: 64 x 1, 16-bit) that form
// column (token-wise) sums. Each cycle with acc_en high, lane c adds din[c] to
// the register of the bank selected by bank. Bank 0 collects 1^T K in Step 1 and,
// after clr[0], k_sum = 1^T K-hat in Step 3; bank 1 collects v_sum = 1^T V.
// clr[b] zeroes bank b (and wins over an add in the same cycle). The sums are
// visible on sum0/sum1 the cycle after the add. The paper names the three sums;
// keeping two banks behind one adder per lane, so that v_sum (summed while V is
// loaded) and k_sum (summed while K-hat is streamed) can coexist, is this
// design's choice, as is the ACC_W-bit width of the sums.
module accumulator_array #(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [1:0]               clr,
  input  logic                     acc_en,
  input  logic                     bank,
  input  logic signed [DATA_W-1:0] din  [DIM],
  output logic signed [ACC_W-1:0]  sum0 [DIM],
  output logic signed [ACC_W-1:0]  sum1 [DIM]
);
  for (genvar c = 0; c < DIM; c++) begin : g_lane
    logic signed [ACC_W-1:0] addend, base, nxt;
    assign base   = bank ? sum1[c] : sum0[c];
    assign addend = ACC_W'(din[c]);
    assign nxt    = base + addend;          // the lane's single adder

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sum0[c] <= '0;
        sum1[c] <= '0;
      end else begin
        if (clr[0])                     sum0[c] <= '0;
        else if (acc_en && !bank)       sum0[c] <= nxt;
        if (clr[1])                     sum1[c] <= '0;
        else if (acc_en && bank)        sum1[c] <= nxt;
      end
    end
  end
endmodule
