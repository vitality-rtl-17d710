// sa_general: the larger part of the systolic array, a DIM x DIM grid of
// input-stationary PEs (paper: 64 x 64, 16-bit). Row r receives its input stream
// a_in[r] at the left edge; the stream moves one PE to the right per cycle. Partial
// sums start at zero at the top edge and move one PE down per cycle, so column c
// delivers at the bottom the dot product of an input vector with its stationary
// column, DIM + c cycles after element 0 of that vector entered row 0 (the
// caller skews row r by r cycles). Stationary operands are written one row per
// cycle: w_load[r] writes w_row[0..DIM-1] into row r. Used with V stationary
// for G = K-hat^T V and with G stationary for QG. The row-by-row write port is
// this design's choice; the paper does not say how operands are loaded.
module sa_general #(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [DIM-1:0]           w_load,
  input  logic signed [DATA_W-1:0] w_row  [DIM],
  input  logic signed [DATA_W-1:0] a_in   [DIM],
  output logic signed [ACC_W-1:0]  psum_out [DIM]
);
  logic signed [DATA_W-1:0] a_h [DIM][DIM+1];   // horizontal links; the last one of a row leaves the array unused
  logic signed [ACC_W-1:0]  p_v [DIM+1][DIM];   // vertical links

  for (genvar r = 0; r < DIM; r++) begin : g_row
    assign a_h[r][0] = a_in[r];
    for (genvar c = 0; c < DIM; c++) begin : g_col
      pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .w_load  (w_load[r]),
        .w_in    (w_row[c]),
        .a_in    (a_h[r][c]),
        .psum_in (p_v[r][c]),
        .a_out   (a_h[r][c+1]),
        .psum_out(p_v[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < DIM; c++) begin : g_edge
    assign p_v[0][c]   = '0;
    assign psum_out[c] = p_v[DIM][c];
  end
endmodule
