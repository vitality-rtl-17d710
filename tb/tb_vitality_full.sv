// tb_vitality_full: end-to-end test with the accelerator at its default size
// (64 x 64 SA-General, 64 x 1 SA-Diag, 64-lane arrays, 4 x 50 KB buffers). Two
// heads with d = 64 (sqrt(d) = 8): 197 tokens, as in DeiT (four chunks, the
// last one zero-padded), and 64 tokens. See vit_e2e_test for what is checked.
module tb_vitality_full;
  logic finished;
  vit_e2e_test #(.N_A(197), .N_B(64), .SH(3), .WATCHDOG(60000)) u_test (.finished);
endmodule
