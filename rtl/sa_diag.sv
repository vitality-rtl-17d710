// sa_diag: the small part of the systolic array, one column of DIM
// input-stationary PEs (paper: 64 x 1, 16-bit) that holds k_sum^T. The same
// input element that enters row r of SA-General is broadcast to row r here, so
// Q k_sum^T for a query leaves the bottom in the same cycle as column 0 of QG
// for that query, DIM cycles after its element 0 entered row 0. All DIM stationary
// operands are written in one cycle when w_load is high (this design's choice).
// The PEs' horizontal outputs are left unconnected: nothing sits to the right
// of this column, so the lint tool reports them as unused.
module sa_diag #(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     w_load,
  input  logic signed [DATA_W-1:0] w_col [DIM],
  input  logic signed [DATA_W-1:0] a_in  [DIM],
  output logic signed [ACC_W-1:0]  psum_out
);
  logic signed [ACC_W-1:0]  p_v [DIM+1];
  logic signed [DATA_W-1:0] a_pass [DIM];   // registered copies of a_in, not used further

  assign p_v[0]   = '0;
  assign psum_out = p_v[DIM];

  for (genvar r = 0; r < DIM; r++) begin : g_row
    pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .w_load  (w_load),
      .w_in    (w_col[r]),
      .a_in    (a_in[r]),
      .psum_in (p_v[r]),
      .a_out   (a_pass[r]),
      .psum_out(p_v[r+1])
    );
  end
endmodule
