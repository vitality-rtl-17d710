// divider_array: DIM divider lanes (paper: 64 x 1, 16-bit) that can be set to
// two division patterns, as in the paper's divider drawing:
//   DIV_SINGLE  every lane divides by one shared divisor held in Reg(n); used in
//               Step 1 to turn the column sums 1^T K into the mean of the keys.
//   DIV_MULTI   lane c divides by its own Divisor Reg. The Divisor Regs form a
//               shift chain: chain_in enters register 0 each cycle and moves one
//               register to the right per cycle. Used in Step 6, Z = T_N / t_D:
//               the systolic array delivers row i of QG in column c c cycles
//               after column 0, so t_D(i) entering the chain together with lane
//               0's dividend meets lane c's dividend c cycles later.
// Each lane registers its dividend (the Reg beside each Div in the drawing) and
// its selected divisor, divides combinationally and registers the quotient, so
// q_valid[c] and quot[c] follow in_valid[c] by two cycles; q_single[c] tells the
// pattern that produced the quotient. Quotients are truncated towards zero and
// clipped to DATA_W bits; division by zero gives the largest value of the
// dividend's sign. The shift chain, the two patterns and the Reg(n) broadcast
// follow the paper; widths, clipping and the two-cycle latency are this design's.
module divider_array
  import vit_pkg::*;
#(
  parameter int unsigned DIM    = vit_pkg::DEF_DIM,
  parameter int unsigned DATA_W = vit_pkg::DEF_DATA_W,
  parameter int unsigned ACC_W  = vit_pkg::DEF_ACC_W,
  parameter int unsigned NUM_W  = vit_pkg::DEF_ACC_W + vit_pkg::FRAC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  div_mode_e                mode,
  input  logic                     n_load,
  input  logic signed [ACC_W-1:0]  n_val,
  input  logic signed [ACC_W-1:0]  chain_in,
  input  logic [DIM-1:0]           in_valid,
  input  logic signed [NUM_W-1:0]  dividend [DIM],
  output logic [DIM-1:0]           q_valid,
  output logic [DIM-1:0]           q_single,
  output logic signed [DATA_W-1:0] quot [DIM]
);
  logic signed [ACC_W-1:0] reg_n;
  logic signed [ACC_W-1:0] div_regs [DIM];   // Divisor Regs (shift chain)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_n <= ACC_W'(1);
      for (int c = 0; c < DIM; c++) div_regs[c] <= '0;
    end else begin
      if (n_load) reg_n <= n_val;
      div_regs[0] <= chain_in;
      for (int c = 1; c < DIM; c++) div_regs[c] <= div_regs[c-1];
    end
  end

  for (genvar c = 0; c < DIM; c++) begin : g_lane
    logic                    v_q, single_q;
    logic signed [NUM_W-1:0] num_q;
    logic signed [ACC_W-1:0] den_q;
    logic signed [NUM_W-1:0] den_ext, q_full;
    logic signed [DATA_W-1:0] q_sat;

    // stage 1: dividend register and divisor multiplexer
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q      <= 1'b0;
        single_q <= 1'b0;
        num_q    <= '0;
        den_q    <= ACC_W'(1);
      end else begin
        v_q <= in_valid[c];
        if (in_valid[c]) begin
          single_q <= (mode == DIV_SINGLE);
          num_q    <= dividend[c];
          // in DIV_MULTI the divisor for this dividend is the one entering
          // register c in this cycle, i.e. the content of register c-1
          // (chain_in for lane 0)
          if (mode == DIV_SINGLE)  den_q <= reg_n;
          else if (c == 0)         den_q <= chain_in;
          else                     den_q <= div_regs[(c == 0) ? 0 : c-1];
        end
      end
    end

    // stage 2: divide, clip, register
    assign den_ext = NUM_W'(den_q);
    always_comb begin
      if (den_q == '0)
        q_full = num_q[NUM_W-1] ? NUM_W'(sat(-64'sd1 <<< 62, DATA_W))
                                : NUM_W'(sat(64'sd1 <<< 62, DATA_W));
      else
        q_full = num_q / den_ext;
      q_sat = DATA_W'(sat(longint'(q_full), DATA_W));
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q_valid[c]  <= 1'b0;
        q_single[c] <= 1'b0;
        quot[c]     <= '0;
      end else begin
        q_valid[c]  <= v_q;
        q_single[c] <= single_q;
        if (v_q) quot[c] <= q_sat;
      end
    end
  end
endmodule
