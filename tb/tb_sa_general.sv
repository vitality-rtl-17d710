// tb_sa_general: a 6 x 6 SA-General gets random stationary operands B (one row
// per cycle) and a stream of random vectors a_i, element k of a_i entering row
// k at cycle t_i + k. Column c must deliver a_i . B(:, c) exactly DIM + c cycles
// after t_i (input stationary, down-forward accumulation).
module tb_sa_general;
  localparam int D = 6, NV = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [D-1:0] w_load = '0;
  logic signed [15:0] w_row [D], a_in [D];
  logic signed [31:0] psum_out [D];
  logic signed [15:0] B [D][D], A [NV][D];
  int checks = 0, failures = 0, cyc = 0;

  sa_general #(.DIM(D)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  int t_start;
  // drive: vector i element k at cycle t_start + i + k
  always_comb
    for (int k = 0; k < D; k++) begin
      automatic int i = cyc - t_start - k;
      a_in[k] = (t_start > 0 && i >= 0 && i < NV) ? A[i][k] : 16'sd0;
    end
  // check: column c holds vector i at cycle t_start + i + D + c
  always @(negedge clk) if (t_start > 0)
    for (int c = 0; c < D; c++) begin
      automatic int i = cyc - t_start - D - c;
      if (i >= 0 && i < NV) begin
        automatic int e = 0;
        for (int k = 0; k < D; k++) e += int'(A[i][k]) * int'(B[k][c]);
        checks++;
        if (psum_out[c] !== e) begin failures++; $display("col %0d vec %0d: %0d vs %0d", c, i, psum_out[c], e); end
      end
    end

  initial begin
    t_start = 0;
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) B[r][c] = 16'($signed(12'($urandom)));
    for (int i = 0; i < NV; i++) for (int k = 0; k < D; k++) A[i][k] = 16'($signed(12'($urandom)));
    for (int c = 0; c < D; c++) w_row[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < D; r++) begin
      @(negedge clk);
      w_load = '0; w_load[r] = 1'b1;
      for (int c = 0; c < D; c++) w_row[c] = B[r][c];
    end
    @(negedge clk); w_load = '0;
    t_start = cyc + 1;
    repeat (NV + 3 * D + 4) @(negedge clk);
    if (checks != NV * D) begin failures++; $display("only %0d outputs checked", checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
