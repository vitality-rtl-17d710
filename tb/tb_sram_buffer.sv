// tb_sram_buffer: fills a 400-row buffer with random rows, then issues random
// reads mixed with random writes; every read must return, one cycle later, the
// last row written to that address (a model array kept here).
module tb_sram_buffer;
  localparam int W = 64 * 16, DEPTH = 400;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re = 1'b0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sram_buffer dut (.*);

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int k = 0; k < W / 32; k++) r[k*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1'b1; waddr = 9'(a); wdata = rnd_row(); model[a] = wdata;
    end
    @(negedge clk); we = 1'b0;
    for (int k = 0; k < 500; k++) begin
      automatic logic [W-1:0] expv;
      @(negedge clk);
      re = 1'b1; raddr = 9'($urandom % DEPTH);
      we = 1'($urandom); waddr = 9'($urandom % DEPTH); wdata = rnd_row();
      if (we && waddr == raddr) begin we = 1'b0; end
      expv = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expv) begin failures++; $display("read %0d mismatch", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
