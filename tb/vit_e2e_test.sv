// vit_e2e_test: end-to-end test of vitality_top for one array size. For each
// run it fills Q, K and V with random Q8.8 rows, starts the accelerator, waits
// for done, reads every Z row back and compares it with
//   (a) a bit-exact model of the fixed-point algorithm written here
//       (mean by truncating division, K-hat clipped to 16 bits, 32-bit sums,
//       G and k_sum clipped to 16 bits, Z = (T_N << 8) / t_D clipped), and
//   (b) the Taylor attention in real arithmetic, within a tolerance.
// It also checks the cycle count of the run, that Z rows are written one per
// cycle, and counts the mechanisms of the design: chunks of DIM tokens,
// zero-padded tokens, single-divisor and multiple-divisors divisions, K-hat rows
// entering the array while it is still busy with earlier rows, and Z rows
// written while Q is still streaming. A mechanism that never happens is a
// failure. Parameters: DIM and DEPTH of the accelerator, the token counts of
// two runs and log2(sqrt(d)).
module vit_e2e_test #(
  parameter int unsigned DIM   = vit_pkg::DEF_DIM,
  parameter int unsigned DEPTH = 400,
  parameter int unsigned N_A   = 197,
  parameter int unsigned N_B   = 64,
  parameter int unsigned SH    = 3,
  parameter int unsigned WATCHDOG = 200000
) (
  output logic finished
);
  import vit_pkg::*;
  localparam int unsigned DATA_W = DEF_DATA_W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [IDX_W-1:0] n_tokens = '0;
  logic [3:0] log2_sqrt_d = '0;
  logic ld_we = 1'b0;
  logic [1:0] ld_sel = '0;
  logic [IDX_W-1:0] ld_addr = '0;
  logic [DIM*DATA_W-1:0] ld_data = '0;
  logic o_re = 1'b0;
  logic [IDX_W-1:0] o_raddr = '0;
  logic [DIM*DATA_W-1:0] o_rdata;

  if (DIM == DEF_DIM && DEPTH == 400) begin : g_dut
    vitality_top dut (.*);
  end else begin : g_dut
    vitality_top #(.DIM(DIM), .DEPTH(DEPTH)) dut (.*);
  end

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters ----------------
  int n_chunks = 0, n_pad = 0, n_div_single = 0, n_div_multi = 0;
  int n_overlap = 0, n_fused = 0, n_owrite = 0, burst = 0, max_burst = 0;
  logic prev_owe = 1'b0;
  always @(posedge clk) if (rst_n) begin
    automatic cmd_t c = g_dut.dut.cmd;
    automatic logic qa = g_dut.dut.q_active;
    automatic logic [DIM-1:0] qv = g_dut.dut.q_valid;
    automatic logic [DIM-1:0] qs = g_dut.dut.q_single;
    automatic logic owe = g_dut.dut.o_we;
    if (c.op == OP_VLOAD && c.row == '0) n_chunks++;
    if ((c.op == OP_VLOAD || c.op == OP_KHAT) && !c.tok_valid) n_pad++;
    if (qv[0] && qs[0]) n_div_single++;
    if (qv[0] && !qs[0]) n_div_multi++;
    // a K-hat row enters the array while earlier rows of the chunk are in flight
    if (g_dut.dut.cmd_d2.op == OP_KHAT && g_dut.dut.cmd_d2.row != '0 && g_dut.dut.u_sa.tv_pipe[0]) n_overlap++;
    if (owe && c.op == OP_Q) n_fused++;
    if (owe) begin
      n_owrite++;
      burst = prev_owe ? burst + 1 : 1;
      if (burst > max_burst) max_burst = burst;
    end
    prev_owe <= owe;
  end

  // ---------------- data and reference ----------------
  shortint Q [DEPTH][DIM], K [DEPTH][DIM], V [DEPTH][DIM];

  function automatic shortint sat16(longint x);
    return shortint'(sat(x, DATA_W));
  endfunction

  task automatic load_rows(input int sel, input int n);
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      ld_we = 1'b1; ld_sel = 2'(sel); ld_addr = IDX_W'(t);
      for (int c = 0; c < DIM; c++)
        ld_data[c*DATA_W +: DATA_W] = (sel == 0) ? Q[t][c] : (sel == 1) ? K[t][c] : V[t][c];
    end
    @(negedge clk); ld_we = 1'b0;
  endtask

  task automatic run(input int n, input int sh);
    int mean [DIM], ksum [DIM], vsum [DIM];
    shortint khat [DEPTH][DIM];
    int g [DIM][DIM];
    shortint gq [DIM][DIM], ksq [DIM];
    real kmr [DIM], gr [DIM][DIM], ksr [DIM], vsr [DIM];
    real maxerr;
    int t0, t1, exp_cycles, nch;
    // random inputs in [-1, 1)
    for (int t = 0; t < n; t++)
      for (int c = 0; c < DIM; c++) begin
        Q[t][c] = shortint'($signed(10'($urandom)) >>> 1);
        K[t][c] = shortint'($signed(10'($urandom)) >>> 1) + 16'sd64;   // keys with an offset
        V[t][c] = shortint'($signed(10'($urandom)) >>> 1);
      end
    load_rows(0, n); load_rows(1, n); load_rows(2, n);

    // bit-exact model
    for (int c = 0; c < DIM; c++) begin
      int s; s = 0;
      for (int t = 0; t < n; t++) s += K[t][c];
      mean[c] = sat16(longint'(s / n));
    end
    for (int t = 0; t < n; t++)
      for (int c = 0; c < DIM; c++) khat[t][c] = sat16(longint'(K[t][c]) - mean[c]);
    for (int c = 0; c < DIM; c++) begin
      ksum[c] = 0; vsum[c] = 0;
      for (int t = 0; t < n; t++) begin ksum[c] += khat[t][c]; vsum[c] += V[t][c]; end
      ksq[c] = sat16(ksum[c]);
    end
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        g[i][j] = 0;
        for (int t = 0; t < n; t++) g[i][j] += int'(khat[t][i]) * int'(V[t][j]);
        gq[i][j] = sat16(longint'(g[i][j]) >>> FRAC_W);
      end
    // real-valued model
    for (int c = 0; c < DIM; c++) begin
      kmr[c] = 0; vsr[c] = 0;
      for (int t = 0; t < n; t++) begin kmr[c] += K[t][c] / 256.0; vsr[c] += V[t][c] / 256.0; end
      kmr[c] = kmr[c] / n; ksr[c] = 0;
      for (int t = 0; t < n; t++) ksr[c] += K[t][c] / 256.0 - kmr[c];
    end
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++) begin
        gr[i][j] = 0;
        for (int t = 0; t < n; t++) gr[i][j] += (K[t][i] / 256.0 - kmr[i]) * (V[t][j] / 256.0);
      end

    // run
    @(negedge clk);
    n_tokens = IDX_W'(n); log2_sqrt_d = 4'(sh); start = 1'b1;
    t0 = cyc;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    t1 = cyc;
    nch = (n + DIM - 1) / DIM;
    exp_cycles = n + 5 + nch * (2*DIM + 2*DIM + 4) + DIM + n + 2*DIM + 4;
    checks++;
    if (t1 - t0 > exp_cycles + 8 || t1 - t0 < n + 2*DIM) begin
      failures++; $display("cycle count %0d outside expected bound %0d", t1 - t0, exp_cycles);
    end
    $display("run n=%0d sh=%0d DIM=%0d: %0d cycles (bound %0d)", n, sh, DIM, t1 - t0, exp_cycles);

    // read back and compare
    maxerr = 0.0;
    for (int i = 0; i < n; i++) begin
      longint qg, qk, tn, td;
      real zr, num, den, err;
      @(negedge clk); o_re = 1'b1; o_raddr = IDX_W'(i);
      @(negedge clk); o_re = 1'b0;
      qk = 0;
      for (int k = 0; k < DIM; k++) qk = longint'(int'(qk) + int'(Q[i][k]) * int'(ksq[k]));
      qk = longint'(int'(qk));
      td = longint'(int'(qk + (longint'(n) <<< (2*FRAC_W + sh))));
      den = 0;
      for (int k = 0; k < DIM; k++) den += (Q[i][k] / 256.0) * ksr[k];
      den += n * (2.0 ** sh);
      for (int j = 0; j < DIM; j++) begin
        shortint z, got;
        int acc;
        acc = 0;
        for (int k = 0; k < DIM; k++) acc += int'(Q[i][k]) * int'(gq[k][j]);
        qg = acc;
        tn = longint'(int'(qg + (longint'(vsum[j]) <<< (FRAC_W + sh))));
        if (td == 0) z = (tn < 0) ? -16'sd32768 : 16'sd32767;
        else z = sat16((tn <<< FRAC_W) / td);
        got = shortint'(o_rdata[j*DATA_W +: DATA_W]);
        checks++;
        if (got !== z) begin
          failures++;
          if (failures < 10) $display("Z[%0d][%0d] = %0d, expected %0d", i, j, got, z);
        end
        num = vsr[j] * (2.0 ** sh);
        for (int k = 0; k < DIM; k++) num += (Q[i][k] / 256.0) * gr[k][j];
        zr = num / den;
        err = (got / 256.0) - zr; if (err < 0) err = -err;
        if (err > maxerr) maxerr = err;
      end
    end
    checks++;
    if (maxerr > 0.05) begin failures++; $display("real-valued error %f too large", maxerr); end
    $display("largest difference from real-valued Taylor attention: %f", maxerr);
  endtask

  initial begin
    finished = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(N_A, SH);
    run(N_B, SH);
    // every mechanism must have happened
    checks += 7;
    if (n_chunks < 2)      begin failures++; $display("multi-chunk G accumulation never happened"); end
    if (n_pad < 1)         begin failures++; $display("zero padding never happened"); end
    if (n_div_single < 2)  begin failures++; $display("single-divisor division never happened"); end
    if (n_div_multi < 1)   begin failures++; $display("multiple-divisors division never happened"); end
    if (n_overlap < 1)     begin failures++; $display("K-hat streaming overlap never happened"); end
    if (n_fused < 1)       begin failures++; $display("fused post-processing never happened"); end
    if (max_burst < ((N_A < N_B) ? N_A : N_B)) begin
      failures++; $display("Z rows not written one per cycle (longest burst %0d)", max_burst);
    end
    $display("chunks=%0d padded=%0d single_div=%0d multi_div=%0d overlap=%0d fused=%0d z_rows=%0d burst=%0d",
             n_chunks, n_pad, n_div_single, n_div_multi, n_overlap, n_fused, n_owrite, max_burst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    finished = 1'b1;
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
