// tb_accumulator_array: random rows are summed into bank 0 and bank 1 in
// random order, with clears in between; after every cycle both banks of all
// lanes must equal a model kept here (sum visible one cycle after the add,
// clear winning over an add).
module tb_accumulator_array;
  localparam int D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [1:0] clr = '0;
  logic acc_en = 1'b0, bank = 1'b0;
  logic signed [15:0] din [D];
  logic signed [31:0] sum0 [D], sum1 [D];
  int m0 [D], m1 [D];
  int checks = 0, failures = 0;

  accumulator_array #(.DIM(D)) dut (.*);

  initial begin
    for (int c = 0; c < D; c++) begin din[c] = '0; m0[c] = 0; m1[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      acc_en = ($urandom % 4) != 0;
      bank   = 1'($urandom);
      clr    = (($urandom % 40) == 0) ? 2'($urandom) : 2'b00;
      for (int c = 0; c < D; c++) din[c] = 16'($urandom);
      @(posedge clk); #1;
      for (int c = 0; c < D; c++) begin
        if (clr[0]) m0[c] = 0; else if (acc_en && !bank) m0[c] += din[c];
        if (clr[1]) m1[c] = 0; else if (acc_en &&  bank) m1[c] += din[c];
        checks += 2;
        if (sum0[c] !== m0[c]) begin failures++; $display("lane %0d bank0 %0d vs %0d", c, sum0[c], m0[c]); end
        if (sum1[c] !== m1[c]) begin failures++; $display("lane %0d bank1 %0d vs %0d", c, sum1[c], m1[c]); end
      end
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
