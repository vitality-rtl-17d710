// tb_vitality_top: end-to-end test at a reduced array size (8 x 8 systolic
// array, 8-lane pre/post-processors, 64-row buffers). Two heads are run: 19
// tokens (three chunks, the last one zero-padded) and 8 tokens (one full chunk),
// with sqrt(d) = 2. See vit_e2e_test for what is checked.
module tb_vitality_top;
  logic finished;
  vit_e2e_test #(.DIM(8), .DEPTH(64), .N_A(37), .N_B(8), .SH(1), .WATCHDOG(20000)) u_test (.finished);
endmodule
