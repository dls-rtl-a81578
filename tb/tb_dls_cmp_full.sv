// tb_dls_cmp_full: end-to-end test of the DLS chip at its default sizes
// (16 cores, 64 KB 4-way private caches, 16 x 1 MB 4-way LLC banks).
module tb_dls_cmp_full;
  dls_cmp_harness #(.FULL(1'b1), .PHASES(6), .OPS(120), .KBLK(10), .WATCHDOG(600000)) h ();
endmodule
