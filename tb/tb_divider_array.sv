// tb_divider_array: 8 lanes in both patterns.
//  Single divisor: Reg(n) is loaded with several n; random dividends on all
//  lanes must give trunc(x / n), clipped to 16 bits, two cycles later.
//  Multiple divisors: for rows t = 0..R-1 the divisor d_t enters the chain in
//  cycle t0 + t while lane c gets its dividend of row t in cycle t0 + t + c (the
//  skew of the systolic array). Lane c must return trunc(x(t,c) / d_t), clipped,
//  two cycles after its input; zero divisors and overflowing quotients are
//  included. q_single must tell the two patterns apart.
module tb_divider_array;
  import vit_pkg::*;
  localparam int D = 8, R = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  div_mode_e mode = DIV_SINGLE;
  logic n_load = 1'b0;
  logic signed [31:0] n_val = 32'sd1, chain_in = '0;
  logic [D-1:0] in_valid = '0, q_valid, q_single;
  logic signed [39:0] dividend [D];
  logic signed [15:0] quot [D];
  int checks = 0, failures = 0, cyc = 0;

  divider_array #(.DIM(D)) dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  // scoreboard: expected quotient per lane and output cycle
  shortint exp_q [D][int];
  bit      exp_s [D][int];

  function automatic shortint ref_div(longint x, longint d);
    if (d == 0) return (x < 0) ? -16'sd32768 : 16'sd32767;
    return shortint'(sat(x / d, 16));
  endfunction

  always @(negedge clk) if (rst_n)
    for (int c = 0; c < D; c++) begin
      if (q_valid[c]) begin
        checks++;
        if (!exp_q[c].exists(cyc)) begin failures++; $display("lane %0d: unexpected output at %0d", c, cyc); end
        else begin
          if (quot[c] !== exp_q[c][cyc] || q_single[c] !== exp_s[c][cyc]) begin
            failures++; $display("lane %0d cycle %0d: %0d vs %0d", c, cyc, quot[c], exp_q[c][cyc]);
          end
          exp_q[c].delete(cyc);
        end
      end
    end

  longint dv [R];
  longint xs [R][D];

  initial begin
    for (int c = 0; c < D; c++) dividend[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // ---- single divisor ----
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      n_load = 1'b1; n_val = 32'(1 + $urandom % 400); in_valid = '0; mode = DIV_SINGLE;
      @(negedge clk);
      n_load = 1'b0; in_valid = '1;
      for (int c = 0; c < D; c++) begin
        dividend[c] = 40'($signed(26'($urandom)));
        exp_q[c][cyc + 2] = ref_div(dividend[c], n_val);
        exp_s[c][cyc + 2] = 1'b1;
      end
      @(negedge clk); in_valid = '0;
    end
    repeat (4) @(negedge clk);
    // ---- multiple divisors ----
    mode = DIV_MULTI;
    for (int t = 0; t < R; t++) begin
      dv[t] = (t == 5) ? 0 : (t == 9) ? 3 : longint'($signed(24'($urandom)));
      for (int c = 0; c < D; c++) xs[t][c] = longint'($signed(32'($urandom)));
    end
    for (int s = 0; s < R + D; s++) begin
      chain_in = (s < R) ? 32'(dv[s]) : 32'sd7;
      for (int c = 0; c < D; c++) begin
        automatic int t = s - c;
        in_valid[c] = (t >= 0 && t < R);
        dividend[c] = in_valid[c] ? 40'(xs[t][c]) : 40'sd12345;
        if (in_valid[c]) begin
          exp_q[c][cyc + 2] = ref_div(xs[t][c], dv[t]);
          exp_s[c][cyc + 2] = 1'b0;
        end
      end
      @(negedge clk);
    end
    in_valid = '0;
    repeat (4) @(negedge clk);
    for (int c = 0; c < D; c++) begin
      checks++;
      if (exp_q[c].num() != 0) begin failures++; $display("lane %0d: %0d results missing", c, exp_q[c].num()); end
    end
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
