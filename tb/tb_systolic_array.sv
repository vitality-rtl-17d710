// tb_systolic_array: a 6 x 6 systolic array run through both uses.
//  1. G pass: random V rows become the stationary operands of SA-General; six
//     random K-hat rows are handed over in FEED_ROWLOAD mode, row r in cycle
//     t0 + r, with tags 0..5. Every tagged output of column c must equal
//     G(i, c) = sum_r Khat(r, i) V(r, c); all 36 must appear.
//  2. Q pass: random G stationary in SA-General and k in SA-Diag; 10 random Q
//     rows in FEED_SKEW mode, one per cycle, tagged with their index. Column c
//     must give Q(i,:) . G(:, c) and SA-Diag Q(i,:) . k, tagged i, and
//     SA-Diag's row i must appear in the same cycle as column 0's.
module tb_systolic_array;
  import vit_pkg::*;
  localparam int D = 6, NQ = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  feed_mode_e feed_mode = FEED_ROWLOAD;
  logic feed_valid = 1'b0, tag_valid = 1'b0, wd_load = 1'b0;
  logic [IDX_W-1:0] feed_row = '0, tag_idx = '0;
  logic signed [15:0] feed_vec [D], wg_row [D], wd_col [D];
  logic [D-1:0] wg_load = '0;
  logic signed [31:0] col_psum [D], diag_psum;
  logic [D-1:0] col_valid;
  logic [IDX_W-1:0] col_idx [D], diag_idx;
  logic diag_valid;

  systolic_array #(.DIM(D)) dut (.*);

  logic signed [15:0] V [D][D], KH [D][D], G [D][D], Km [D], Qm [NQ][D];
  int checks = 0, failures = 0, seen = 0, pass = 0;

  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < D; c++) if (col_valid[c]) begin
      automatic int i = int'(col_idx[c]);
      automatic int e = 0;
      if (pass == 1) for (int r = 0; r < D; r++) e += int'(KH[r][i]) * int'(V[r][c]);
      else           for (int k = 0; k < D; k++) e += int'(Qm[i][k]) * int'(G[k][c]);
      checks++; seen++;
      if (col_psum[c] !== e) begin failures++; $display("pass %0d col %0d row %0d: %0d vs %0d", pass, c, i, col_psum[c], e); end
    end
    if (pass == 2) begin
      checks++;
      if (diag_valid !== col_valid[0] || (diag_valid && diag_idx !== col_idx[0])) begin
        failures++; $display("SA-Diag out of step with column 0");
      end
      if (diag_valid) begin
        automatic int e = 0;
        for (int k = 0; k < D; k++) e += int'(Qm[int'(diag_idx)][k]) * int'(Km[k]);
        checks++; seen++;
        if (diag_psum !== e) begin failures++; $display("diag row %0d: %0d vs %0d", diag_idx, diag_psum, e); end
      end
    end
  end

  initial begin
    for (int r = 0; r < D; r++) begin
      Km[r] = 16'($signed(10'($urandom)));
      for (int c = 0; c < D; c++) begin
        V[r][c] = 16'($signed(10'($urandom))); KH[r][c] = 16'($signed(10'($urandom)));
        G[r][c] = 16'($signed(10'($urandom)));
      end
    end
    for (int i = 0; i < NQ; i++) for (int k = 0; k < D; k++) Qm[i][k] = 16'($signed(10'($urandom)));
    for (int c = 0; c < D; c++) begin feed_vec[c] = '0; wg_row[c] = '0; wd_col[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // ---- pass 1 ----
    pass = 1;
    for (int r = 0; r < D; r++) begin
      @(negedge clk); wg_load = '0; wg_load[r] = 1'b1;
      for (int c = 0; c < D; c++) wg_row[c] = V[r][c];
    end
    @(negedge clk); wg_load = '0;
    feed_mode = FEED_ROWLOAD;
    for (int r = 0; r < D; r++) begin
      feed_valid = 1'b1; feed_row = IDX_W'(r); tag_valid = 1'b1; tag_idx = IDX_W'(r);
      for (int c = 0; c < D; c++) feed_vec[c] = KH[r][c];
      @(negedge clk);
    end
    feed_valid = 1'b0; tag_valid = 1'b0;
    repeat (3 * D) @(negedge clk);
    checks++;
    if (seen != D * D) begin failures++; $display("pass 1 saw %0d outputs", seen); end
    // ---- pass 2 ----
    seen = 0; pass = 2;
    feed_mode = FEED_SKEW;
    for (int r = 0; r < D; r++) begin
      wg_load = '0; wg_load[r] = 1'b1;
      for (int c = 0; c < D; c++) wg_row[c] = G[r][c];
      wd_load = (r == 0);
      for (int c = 0; c < D; c++) wd_col[c] = Km[c];
      @(negedge clk);
    end
    wg_load = '0; wd_load = 1'b0;
    for (int i = 0; i < NQ; i++) begin
      feed_valid = 1'b1; tag_valid = 1'b1; tag_idx = IDX_W'(i);
      for (int c = 0; c < D; c++) feed_vec[c] = Qm[i][c];
      @(negedge clk);
    end
    feed_valid = 1'b0; tag_valid = 1'b0;
    repeat (3 * D) @(negedge clk);
    checks++;
    if (seen != NQ * (D + 1)) begin failures++; $display("pass 2 saw %0d outputs", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
