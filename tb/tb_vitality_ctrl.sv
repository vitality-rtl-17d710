// tb_vitality_ctrl: runs the controller (DIM = 4) for n = 10 and n = 4 tokens
// with random g_last_valid / o_write pulses standing in for the datapath. The
// non-empty commands must come in exactly this order: KSUM 0..n-1; per chunk
// VLOAD then KHAT for tokens chunk*DIM + 0..DIM-1 (tok_valid only below n);
// GLOAD 0..DIM-1; Q 0..n-1. One division is issued between KSUM and the first
// VLOAD, bank 0 is cleared after it, done comes once per run after n o_write
// pulses were seen in the Q phases, and busy covers the run.
module tb_vitality_ctrl;
  import vit_pkg::*;
  localparam int D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, g_last_valid = 1'b0, o_write = 1'b0;
  logic [IDX_W-1:0] n_tokens = '0;
  cmd_t cmd;
  logic [1:0] acc_clr;
  logic gbuf_clr, div_issue, q_active, busy, done;
  int checks = 0, failures = 0;

  vitality_ctrl #(.DIM(D)) dut (.*);

  cmd_t exp_list [$];
  int div_seen, clr0_seen, done_seen, o_cnt;
  bit after_ksum;

  always @(negedge clk) begin
    g_last_valid = 1'($urandom);
    o_write      = q_active && 1'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (cmd.op != OP_NONE) begin
      checks++;
      if (exp_list.size() == 0) begin failures++; $display("unexpected command op=%0d", cmd.op); end
      else begin
        automatic cmd_t e = exp_list.pop_front();
        if (cmd.op != e.op || cmd.addr != e.addr || cmd.tok_valid != e.tok_valid ||
            ((cmd.op == OP_VLOAD || cmd.op == OP_KHAT || cmd.op == OP_GLOAD) && cmd.row != e.row)) begin
          failures++;
          $display("command op=%0d addr=%0d row=%0d v=%0d, expected op=%0d addr=%0d row=%0d v=%0d",
                   cmd.op, cmd.addr, cmd.row, cmd.tok_valid, e.op, e.addr, e.row, e.tok_valid);
        end
        if (cmd.op == OP_VLOAD && div_seen != 1) begin failures++; $display("VLOAD before the division"); end
      end
    end
    if (div_issue) div_seen++;
    if (acc_clr == 2'b01) clr0_seen++;
    if (o_write) o_cnt++;
    if (done) done_seen++;
  end

  task automatic run(input int n);
    automatic int nch = (n + D - 1) / D;
    cmd_t c;
    exp_list.delete();
    c = '0;
    for (int t = 0; t < n; t++) begin c.op = OP_KSUM; c.addr = IDX_W'(t); c.tok_valid = 1; exp_list.push_back(c); end
    for (int k = 0; k < nch; k++) begin
      for (int r = 0; r < D; r++) begin
        c.op = OP_VLOAD; c.addr = IDX_W'(k*D + r); c.row = IDX_W'(r); c.tok_valid = (k*D + r < n); exp_list.push_back(c);
      end
      for (int r = 0; r < D; r++) begin
        c.op = OP_KHAT; c.addr = IDX_W'(k*D + r); c.row = IDX_W'(r); c.tok_valid = (k*D + r < n); exp_list.push_back(c);
      end
    end
    for (int r = 0; r < D; r++) begin c.op = OP_GLOAD; c.addr = IDX_W'(r); c.row = IDX_W'(r); c.tok_valid = 1; exp_list.push_back(c); end
    for (int t = 0; t < n; t++) begin c.op = OP_Q; c.addr = IDX_W'(t); c.row = '0; c.tok_valid = 1; exp_list.push_back(c); end
    div_seen = 0; clr0_seen = 0; done_seen = 0; o_cnt = 0;
    @(negedge clk); n_tokens = IDX_W'(n); start = 1'b1;
    @(negedge clk); start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks += 5;
    if (exp_list.size() != 0) begin failures++; $display("%0d commands missing", exp_list.size()); end
    if (div_seen != 1)  begin failures++; $display("%0d divisions issued", div_seen); end
    if (clr0_seen != 1) begin failures++; $display("bank 0 cleared %0d times", clr0_seen); end
    if (done_seen != 1) begin failures++; $display("done seen %0d times", done_seen); end
    if (o_cnt != n || busy) begin failures++; $display("done after %0d row writes, busy=%0d", o_cnt, busy); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(10);
    run(4);
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
