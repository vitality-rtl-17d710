// vitality_top: accelerator for the linear Taylor attention of one head,
//   Z = diag^-1(n sqrt(d) 1 + Q k_sum^T) (sqrt(d) 1 v_sum + Q G),
//   G = K-hat^T V,  K-hat = K - 1 mean(K),  k_sum = 1^T K-hat,  v_sum = 1^T V.
// It holds the four on-chip buffers (Q, K, V, O), the three pre/post-processors
// (accumulator, adder and divider arrays of DIM lanes), the systolic array
// (SA-General DIM x DIM, SA-Diag DIM x 1) and the controller.
//
// Use: write Q, K and V rows (one token of DIM Q8.8 elements per word) through
// the ld_* port, pulse start with n_tokens (1..400) and log2_sqrt_d (log2 of
// sqrt(d), e.g. 3 for d = 64), wait for done, read Z rows through o_*. Rows of a
// head with d < DIM carry zeros in the unused lanes.
//
// Dataflow (down-forward accumulation, everything input stationary):
//   Step 1  K rows -> accumulator bank 0 -> divider (single divisor n) -> mean.
//   Step 2  per chunk of DIM tokens: V rows stationary in SA-General; K rows ->
//           adder array (K - mean) -> staging registers -> SA rows; column c
//           delivers G(i,c) for i = 0..DIM-1, added into the G buffer.
//   Step 3  v_sum is summed while V is loaded, k_sum while K-hat is streamed.
//   Steps 4-6  G (requantised to Q8.8) stationary in SA-General, k_sum in
//           SA-Diag, Q broadcast to both. Column c of QG goes to adder lane c
//           (+ sqrt(d) v_sum(c) = T_N), SA-Diag to the extra adder
//           (+ n sqrt(d) = t_D), t_D enters the divisor chain, lane c divides;
//           a triangular delay line aligns the lanes into Z rows.
// Post-processing runs at product scale (2*FRAC_W fractional bits); G and k_sum
// are clipped to DATA_W bits before they become stationary operands. sqrt(d) is
// applied as a shift, so d must be a power of four (16, 64, 256). The G buffer,
// the fixed-point scaling and the buffer ports are this design's choices; the
// block set, the step order and the overlaps follow the paper.
// Timing: about n + 5 + ceil(n/DIM) * (4*DIM + 4) + DIM + n + 2*DIM cycles,
// one Z row per cycle while Q streams.
module vitality_top
  import vit_pkg::*;
#(
  parameter int unsigned DIM   = vit_pkg::DEF_DIM,
  parameter int unsigned DEPTH = 400
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [IDX_W-1:0]        n_tokens,
  input  logic [3:0]              log2_sqrt_d,
  output logic                    busy,
  output logic                    done,
  // buffer load port (from DRAM side): sel 0 = Q, 1 = K, 2 = V
  input  logic                    ld_we,
  input  logic [1:0]              ld_sel,
  input  logic [IDX_W-1:0]        ld_addr,
  input  logic [DIM*DEF_DATA_W-1:0]ld_data,
  // output buffer read port (to DRAM side), one-cycle latency
  input  logic                    o_re,
  input  logic [IDX_W-1:0]        o_raddr,
  output logic [DIM*DEF_DATA_W-1:0]o_rdata
);
  localparam int unsigned DATA_W = DEF_DATA_W;
  localparam int unsigned ACC_W  = DEF_ACC_W;
  localparam int unsigned NUM_W  = ACC_W + FRAC_W;
  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ---------------- controller ----------------
  cmd_t       cmd, cmd_d1, cmd_d2;
  logic [1:0] acc_clr;
  logic       gbuf_clr, div_issue, q_active;
  logic       o_we;
  logic [IDX_W-1:0] o_waddr;
  logic [DIM-1:0]   col_valid;

  vitality_ctrl #(.DIM(DIM)) u_ctrl (
    .clk, .rst_n, .start, .n_tokens,
    .g_last_valid(col_valid[DIM-1] && !q_active),
    .o_write     (o_we),
    .cmd, .acc_clr, .gbuf_clr, .div_issue, .q_active, .busy, .done
  );

  logic [3:0]       sh_q;
  logic [IDX_W-1:0] n_reg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_d1 <= '0;
      cmd_d2 <= '0;
      sh_q   <= '0;
      n_reg  <= '0;
    end else begin
      cmd_d1 <= cmd;
      cmd_d2 <= cmd_d1;
      if (start && !busy) begin
        sh_q  <= log2_sqrt_d;
        n_reg <= n_tokens;
      end
    end
  end

  // ---------------- on-chip buffers ----------------
  logic [DIM*DATA_W-1:0] q_rd, k_rd, v_rd, o_wdata;
  logic q_re, k_re, v_re;
  assign q_re = (cmd.op == OP_Q);
  assign k_re = ((cmd.op == OP_KSUM) || (cmd.op == OP_KHAT)) && cmd.tok_valid;
  assign v_re = (cmd.op == OP_VLOAD) && cmd.tok_valid;

  sram_buffer #(.DIM(DIM), .DEPTH(DEPTH)) u_qbuf (
    .clk, .we(ld_we && ld_sel == 2'd0), .waddr(ld_addr), .wdata(ld_data),
    .re(q_re), .raddr(cmd.addr), .rdata(q_rd));
  sram_buffer #(.DIM(DIM), .DEPTH(DEPTH)) u_kbuf (
    .clk, .we(ld_we && ld_sel == 2'd1), .waddr(ld_addr), .wdata(ld_data),
    .re(k_re), .raddr(cmd.addr), .rdata(k_rd));
  sram_buffer #(.DIM(DIM), .DEPTH(DEPTH)) u_vbuf (
    .clk, .we(ld_we && ld_sel == 2'd2), .waddr(ld_addr), .wdata(ld_data),
    .re(v_re), .raddr(cmd.addr), .rdata(v_rd));
  sram_buffer #(.DIM(DIM), .DEPTH(DEPTH)) u_obuf (
    .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .re(o_re), .raddr(o_raddr), .rdata(o_rdata));

  // rows read in the previous cycle, zero for padding tokens
  data_t q_vec [DIM], k_vec [DIM], v_vec [DIM];
  always_comb begin
    for (int c = 0; c < DIM; c++) begin
      q_vec[c] = q_rd[c*DATA_W +: DATA_W];
      k_vec[c] = cmd_d1.tok_valid ? data_t'(k_rd[c*DATA_W +: DATA_W]) : data_t'(0);
      v_vec[c] = cmd_d1.tok_valid ? data_t'(v_rd[c*DATA_W +: DATA_W]) : data_t'(0);
    end
  end

  // ---------------- accumulator array ----------------
  acc_t  sum0 [DIM], sum1 [DIM];
  data_t acc_din [DIM];
  data_t khat [DIM];
  logic  acc_en, acc_bank;
  always_comb begin
    acc_en   = 1'b0;
    acc_bank = 1'b0;
    for (int c = 0; c < DIM; c++) acc_din[c] = k_vec[c];
    if (cmd_d1.op == OP_KSUM) begin
      acc_en = 1'b1;
    end else if (cmd_d1.op == OP_VLOAD) begin
      acc_en = cmd_d1.tok_valid; acc_bank = 1'b1;
      for (int c = 0; c < DIM; c++) acc_din[c] = v_vec[c];
    end else if (cmd_d2.op == OP_KHAT) begin
      acc_en = cmd_d2.tok_valid;
      for (int c = 0; c < DIM; c++) acc_din[c] = khat[c];
    end
  end

  accumulator_array #(.DIM(DIM)) u_acc (
    .clk, .rst_n, .clr(acc_clr), .acc_en, .bank(acc_bank), .din(acc_din),
    .sum0, .sum1);

  // ---------------- adder array and extra adder ----------------
  data_t kmean [DIM];
  acc_t  add_a [DIM], add_b [DIM], add_out [DIM];
  logic [DIM-1:0] add_in_valid, add_out_valid;
  logic  add_sub;
  acc_t  col_psum [DIM];
  logic [IDX_W-1:0] col_idx [DIM];
  acc_t  diag_psum;
  logic  diag_valid;
  logic [IDX_W-1:0] diag_idx;
  acc_t  t_d;
  logic  t_d_valid;

  always_comb begin
    add_sub = (cmd_d1.op == OP_KHAT);
    for (int c = 0; c < DIM; c++) begin
      if (add_sub) begin
        add_a[c] = acc_t'(k_vec[c]);
        add_b[c] = acc_t'(kmean[c]);
      end else begin
        add_a[c] = col_psum[c];
        add_b[c] = sum1[c] <<< (FRAC_W + 32'(sh_q));   // sqrt(d) v_sum at product scale
      end
      add_in_valid[c] = add_sub ? 1'b1 : (col_valid[c] && q_active);
    end
  end

  adder_array #(.DIM(DIM)) u_add (
    .clk, .rst_n, .sub(add_sub), .in_valid(add_in_valid), .a(add_a), .b(add_b),
    .out_valid(add_out_valid), .out(add_out),
    .ext_valid(diag_valid && q_active), .ext_a(diag_psum),
    .ext_b(acc_t'(n_reg) <<< (2*FRAC_W + 32'(sh_q))),          // n sqrt(d)
    .ext_out_valid(t_d_valid), .ext_out(t_d));

  always_comb
    for (int c = 0; c < DIM; c++)
      khat[c] = cmd_d2.tok_valid ? data_t'(sat(longint'(add_out[c]), DATA_W)) : data_t'(0);

  // ---------------- systolic array ----------------
  logic [DIM-1:0] wg_load;
  data_t wg_row [DIM], wd_col [DIM], feed_vec [DIM];
  logic  feed_valid, tag_valid, wd_load;
  logic [IDX_W-1:0] feed_row, tag_idx;
  feed_mode_e feed_mode;
  acc_t gbuf [DIM][DIM];

  always_comb begin
    wg_load = '0;
    wd_load = (cmd.op == OP_GLOAD) && (cmd.row == '0);
    for (int c = 0; c < DIM; c++) begin
      wg_row[c] = v_vec[c];
      wd_col[c] = data_t'(sat(longint'(sum0[c]), DATA_W));
    end
    if (cmd_d1.op == OP_VLOAD) begin
      wg_load[cmd_d1.row[$clog2(DIM)-1:0]] = 1'b1;
    end else if (cmd.op == OP_GLOAD) begin
      wg_load[cmd.row[$clog2(DIM)-1:0]] = 1'b1;
      for (int c = 0; c < DIM; c++)
        wg_row[c] = data_t'(sat(longint'(longint'(gbuf[cmd.row[$clog2(DIM)-1:0]][c]) >>> FRAC_W), DATA_W));
    end

    feed_mode  = q_active ? FEED_SKEW : FEED_ROWLOAD;
    feed_valid = 1'b0;
    feed_row   = cmd_d2.row;
    tag_valid  = 1'b0;
    tag_idx    = cmd_d2.row;
    for (int c = 0; c < DIM; c++) feed_vec[c] = khat[c];
    if (cmd_d2.op == OP_KHAT) begin
      feed_valid = 1'b1;
      tag_valid  = 1'b1;
    end else if (cmd_d1.op == OP_Q) begin
      feed_valid = 1'b1;
      tag_valid  = 1'b1;
      tag_idx    = cmd_d1.addr;
      for (int c = 0; c < DIM; c++) feed_vec[c] = q_vec[c];
    end
  end

  systolic_array #(.DIM(DIM)) u_sa (
    .clk, .rst_n, .feed_mode, .feed_valid, .feed_row, .feed_vec,
    .tag_valid, .tag_idx, .wg_load, .wg_row, .wd_load, .wd_col,
    .col_psum, .col_valid, .col_idx, .diag_psum, .diag_valid, .diag_idx);

  // G buffer: column c adds G(col_idx[c], c) of the current chunk
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < DIM; r++)
        for (int c = 0; c < DIM; c++) gbuf[r][c] <= '0;
    end else if (gbuf_clr) begin
      for (int r = 0; r < DIM; r++)
        for (int c = 0; c < DIM; c++) gbuf[r][c] <= '0;
    end else if (!q_active) begin
      for (int c = 0; c < DIM; c++)
        if (col_valid[c])
          gbuf[col_idx[c][$clog2(DIM)-1:0]][c] <= gbuf[col_idx[c][$clog2(DIM)-1:0]][c] + col_psum[c];
    end
  end

  // ---------------- divider array ----------------
  logic signed [NUM_W-1:0] div_num [DIM];
  logic [DIM-1:0] div_in_valid, q_valid, q_single;
  data_t quot [DIM];

  always_comb
    for (int c = 0; c < DIM; c++) begin
      div_num[c]      = q_active ? (NUM_W'(add_out[c]) <<< FRAC_W) : NUM_W'(sum0[c]);
      div_in_valid[c] = q_active ? add_out_valid[c] : div_issue;
    end

  divider_array #(.DIM(DIM)) u_div (
    .clk, .rst_n, .mode(q_active ? DIV_MULTI : DIV_SINGLE),
    .n_load(start && !busy), .n_val(acc_t'(n_tokens)), .chain_in(t_d),
    .in_valid(div_in_valid), .dividend(div_num),
    .q_valid, .q_single, .quot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < DIM; c++) kmean[c] <= '0;
    end else if (q_valid[0] && q_single[0]) begin
      for (int c = 0; c < DIM; c++) kmean[c] <= quot[c];
    end
  end

  // ---------------- de-skew Z lanes into rows ----------------
  // lane c is delayed by DIM-1-c cycles; the row index follows column DIM-1
  // through the adder (1 cycle) and the divider (2 cycles).
  data_t zdel [DIM][DIM];
  logic [IDX_W-1:0] idx_d [3];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < DIM; c++)
        for (int s = 0; s < DIM; s++) zdel[c][s] <= '0;
      for (int s = 0; s < 3; s++) idx_d[s] <= '0;
    end else begin
      for (int c = 0; c < DIM; c++) begin
        zdel[c][0] <= quot[c];
        for (int s = 1; s < DIM; s++) zdel[c][s] <= zdel[c][s-1];
      end
      idx_d[0] <= col_idx[DIM-1];
      idx_d[1] <= idx_d[0];
      idx_d[2] <= idx_d[1];
    end
  end

  always_comb begin
    for (int c = 0; c < DIM; c++)
      o_wdata[c*DATA_W +: DATA_W] = (c == DIM-1) ? quot[c] : zdel[c][DIM-2-c];
    o_we    = q_active && q_valid[DIM-1] && !q_single[DIM-1];
    o_waddr = idx_d[2];
  end

  // SA-Diag and column 0 deliver the same query in the same cycle, and t_D
  // meets lane 0 of T_N in the divider
  a_diag_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                   diag_valid |-> (col_valid[0] && diag_idx == col_idx[0]));
  a_td_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                 (t_d_valid && q_active) |-> add_out_valid[0]);
  // the controller never lets weights be written while a stream is in flight
  a_no_double_load: assert property (@(posedge clk) disable iff (!rst_n)
                                     !((cmd_d1.op == OP_VLOAD) && (cmd.op == OP_GLOAD)));
endmodule
