// tb_meadow_top_full: end-to-end test of the MEADOW top level with every
// parameter at its default (12 lanes of 6 Q PEs, 84 parallel and 12
// broadcasting PEs, 12 softmax, 8 LN and 8 NL modules, 1 MB BRAMs).
// Runs one TPHS attention head over 40 tokens of 64 features (four token
// groups, so the stages of successive groups overlap), one GEMM job with
// GeLU and ReLU variants (84 tokens x 64 outputs) and an LN job over 16
// tokens, checked as in the reduced-size test. The job sizes are this
// testbench's choice, kept small so the run stays within minutes.
module tb_meadow_top_full;
  meadow_top_harness #(
    .FULL(1'b1), .LANES(12), .Q_PES(6), .MAX_T(1024), .LN_MAXF(2048), .BRAM_DEPTH(16384),
    .T(40), .DCH(1), .G_TOK(84), .G_OUT(64), .LN_TOK(16), .WATCHDOG(400000)
  ) u_h ();
endmodule
