// tb_meadow_top: end-to-end test of the MEADOW top level at reduced size.
// Two lanes of three Q PEs (8 parallel PEs, 2 broadcasting PEs, 2 softmax
// modules), 1024-word BRAMs. Runs a TPHS attention head over 40 tokens (20 token groups) of
// 128 features, three GEMM jobs (8 tokens x 70 outputs; plain, ReLU, GeLU)
// and an LN job over 10 tokens, all checked against references in the
// harness, and counts every mechanism of the design. The sizes are this
// testbench's choice; the structure tested is the same as at full size.
module tb_meadow_top;
  meadow_top_harness #(
    .FULL(1'b0), .LANES(2), .Q_PES(3), .MAX_T(64), .LN_MAXF(256), .BRAM_DEPTH(1024),
    .T(40), .DCH(2), .G_TOK(8), .G_OUT(70), .LN_TOK(10)
  ) u_h ();
endmodule
