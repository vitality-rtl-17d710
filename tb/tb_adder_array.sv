// tb_adder_array: random operands, random per-lane valid and random add/sub;
// one cycle later every valid lane must hold a + b or a - b, invalid lanes their
// previous value, out_valid must equal the delayed in_valid, and the extra adder
// must hold ext_a + ext_b.
module tb_adder_array;
  localparam int D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic sub = 1'b0, ext_valid = 1'b0, ext_out_valid;
  logic [D-1:0] in_valid = '0, out_valid;
  logic signed [31:0] a [D], b [D], out [D], ext_a = '0, ext_b = '0, ext_out;
  int model [D], mext;
  int checks = 0, failures = 0;

  adder_array #(.DIM(D)) dut (.*);

  initial begin
    for (int c = 0; c < D; c++) begin a[c] = '0; b[c] = '0; model[c] = 0; end
    mext = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      sub = 1'($urandom); in_valid = D'($urandom); ext_valid = 1'($urandom);
      ext_a = 32'($urandom); ext_b = 32'($urandom);
      for (int c = 0; c < D; c++) begin a[c] = 32'($urandom); b[c] = 32'($urandom); end
      @(posedge clk); #1;
      for (int c = 0; c < D; c++) if (in_valid[c]) model[c] = sub ? a[c] - b[c] : a[c] + b[c];
      if (ext_valid) mext = ext_a + ext_b;
      checks += 2;
      if (out_valid !== in_valid) begin failures++; $display("out_valid mismatch"); end
      if (ext_out_valid !== ext_valid || ext_out !== mext) begin failures++; $display("extra adder %0d vs %0d", ext_out, mext); end
      for (int c = 0; c < D; c++) begin
        checks++;
        if (out[c] !== model[c]) begin failures++; $display("lane %0d: %0d vs %0d", c, out[c], model[c]); end
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
