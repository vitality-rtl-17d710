// systolic_array: SA-General (DIM x DIM) and SA-Diag (DIM x 1) with the register
// level that stages their inputs, and a tag path that names each output row.
//
// Input staging: every SA row r owns a DIM-entry shift register whose entry 0
// drives row r; all entries move one place towards entry 0 each cycle and zero
// enters at the top.
//   FEED_ROWLOAD: feed_vec is written whole into row feed_row. Loading row r in
//     cycle t0 + r makes row r emit feed_vec[0], feed_vec[1], ... from cycle
//     t0 + r + 1, which is the skew the array needs. This streams K-hat^T: token r
//     of a chunk goes to row r as soon as the adder array has produced it.
//   FEED_SKEW: element r of feed_vec is written into entry r of row r, so it
//     reaches the array r cycles later. This streams Q rows, and the same
//     staged inputs are broadcast to SA-Diag.
// Tags: tag_valid/tag_idx given in the cycle the first staged element of an
// output row is written are delayed by the height of the array, so
// they line up with column 0 and with SA-Diag (DIM+1 cycles after the write), and then move one column to the
// right per cycle like the partial sums. col_valid[c]/col_idx[c] thus mark which
// output row psum_out[c] holds in each cycle.
// The paper shows the two sub-arrays, the input broadcast to both and the
// down-forward accumulation; the staging registers and the tags are this
// design's own.
module systolic_array
  import vit_pkg::*;
#(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input staging
  input  feed_mode_e               feed_mode,
  input  logic                     feed_valid,
  input  logic [IDX_W-1:0]         feed_row,
  input  logic signed [DATA_W-1:0] feed_vec [DIM],
  input  logic                     tag_valid,
  input  logic [IDX_W-1:0]         tag_idx,
  // stationary operands
  input  logic [DIM-1:0]           wg_load,
  input  logic signed [DATA_W-1:0] wg_row [DIM],
  input  logic                     wd_load,
  input  logic signed [DATA_W-1:0] wd_col [DIM],
  // outputs
  output logic signed [ACC_W-1:0]  col_psum  [DIM],
  output logic [DIM-1:0]           col_valid,
  output logic [IDX_W-1:0]         col_idx   [DIM],
  output logic signed [ACC_W-1:0]  diag_psum,
  output logic                     diag_valid,
  output logic [IDX_W-1:0]         diag_idx
);
  logic signed [DATA_W-1:0] stage [DIM][DIM];
  logic signed [DATA_W-1:0] a_in  [DIM];

  // ---------------- input staging registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < DIM; r++)
        for (int p = 0; p < DIM; p++) stage[r][p] <= '0;
    end else begin
      for (int r = 0; r < DIM; r++) begin
        for (int p = 0; p < DIM - 1; p++) stage[r][p] <= stage[r][p+1];
        stage[r][DIM-1] <= '0;
        if (feed_valid) begin
          if (feed_mode == FEED_ROWLOAD) begin
            if (feed_row == IDX_W'(r))
              for (int p = 0; p < DIM; p++) stage[r][p] <= feed_vec[p];
          end else begin
            stage[r][r] <= feed_vec[r];
          end
        end else if (feed_mode == FEED_SKEW) begin
          stage[r][r] <= '0;
        end
      end
    end
  end

  for (genvar r = 0; r < DIM; r++) begin : g_ain
    assign a_in[r] = stage[r][0];
  end

  // ---------------- the two sub-arrays ----------------
  sa_general #(.DIM(DIM), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_general (
    .clk, .rst_n,
    .w_load  (wg_load),
    .w_row   (wg_row),
    .a_in    (a_in),
    .psum_out(col_psum)
  );

  sa_diag #(.DIM(DIM), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_diag (
    .clk, .rst_n,
    .w_load  (wd_load),
    .w_col   (wd_col),
    .a_in    (a_in),
    .psum_out(diag_psum)
  );

  // ---------------- output row tags ----------------
  // tv_pipe[s] is visible s+1 cycles after the tag was given. Column 0 (and
  // SA-Diag) deliver the row DIM+1 cycles after its first element was written,
  // column c another c cycles later.
  localparam int unsigned TAGLEN = 2 * DIM;
  logic             tv_pipe [TAGLEN];
  logic [IDX_W-1:0] ti_pipe [TAGLEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < TAGLEN; s++) begin
        tv_pipe[s] <= 1'b0;
        ti_pipe[s] <= '0;
      end
    end else begin
      tv_pipe[0] <= tag_valid;
      ti_pipe[0] <= tag_idx;
      for (int s = 1; s < TAGLEN; s++) begin
        tv_pipe[s] <= tv_pipe[s-1];
        ti_pipe[s] <= ti_pipe[s-1];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < DIM; c++) begin
      col_valid[c] = tv_pipe[DIM+c];
      col_idx[c]   = ti_pipe[DIM+c];
    end
  end
  assign diag_valid = tv_pipe[DIM];
  assign diag_idx   = ti_pipe[DIM];
endmodule
