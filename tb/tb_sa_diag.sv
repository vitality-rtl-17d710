// tb_sa_diag: an 8-row SA-Diag gets a random stationary column k (loaded in one
// cycle) and random vectors q_i, element r of q_i given to row r at cycle
// t_i + r. The bottom must deliver q_i . k exactly DIM cycles after t_i.
module tb_sa_diag;
  localparam int D = 8, NV = 25;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic w_load = 1'b0;
  logic signed [15:0] w_col [D], a_in [D];
  logic signed [31:0] psum_out;
  logic signed [15:0] kv [D], Qm [NV][D];
  int checks = 0, failures = 0, cyc = 0, t_start = 0;

  sa_diag #(.DIM(D)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  always_comb
    for (int r = 0; r < D; r++) begin
      automatic int i = cyc - t_start - r;
      a_in[r] = (t_start > 0 && i >= 0 && i < NV) ? Qm[i][r] : 16'sd0;
    end
  always @(negedge clk) if (t_start > 0) begin
    automatic int i = cyc - t_start - D;
    if (i >= 0 && i < NV) begin
      automatic int e = 0;
      for (int r = 0; r < D; r++) e += int'(Qm[i][r]) * int'(kv[r]);
      checks++;
      if (psum_out !== e) begin failures++; $display("vec %0d: %0d vs %0d", i, psum_out, e); end
    end
  end

  initial begin
    for (int r = 0; r < D; r++) begin kv[r] = 16'($urandom); w_col[r] = kv[r]; end
    for (int i = 0; i < NV; i++) for (int r = 0; r < D; r++) Qm[i][r] = 16'($signed(10'($urandom)));
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); w_load = 1'b1;
    @(negedge clk); w_load = 1'b0;
    for (int r = 0; r < D; r++) w_col[r] = 16'($urandom);   // must not be taken
    t_start = cyc + 1;
    repeat (NV + 2 * D + 4) @(negedge clk);
    if (checks != NV) begin failures++; $display("only %0d outputs checked", checks); end
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
