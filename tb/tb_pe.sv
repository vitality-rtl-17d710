// tb_pe: drives one PE with random stationary operands, inputs and partial sums
// and checks after each clock that psum_out = psum_in + a_in * w and
// a_out = a_in (one-cycle latency), and that w changes only when w_load is high.
module tb_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic w_load = 1'b0;
  logic signed [15:0] w_in = '0, a_in = '0, a_out;
  logic signed [31:0] psum_in = '0, psum_out;
  int checks = 0, failures = 0;

  pe dut (.*);

  initial begin
    automatic logic signed [15:0] w_model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 400; k++) begin
      automatic logic signed [31:0] exp_p;
      @(negedge clk);
      w_load  = ($urandom % 4) == 0;
      w_in    = 16'($urandom);
      a_in    = 16'($urandom);
      psum_in = 32'($urandom) >>> 4;
      exp_p   = psum_in + 32'(a_in * w_model);
      @(posedge clk); #1;
      if (w_load) w_model = w_in;
      checks += 2;
      if (psum_out !== exp_p) begin failures++; $display("psum %0d expected %0d", psum_out, exp_p); end
      if (a_out !== a_in) begin failures++; $display("a_out %0d expected %0d", a_out, a_in); end
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
