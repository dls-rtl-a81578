// tb_dls_cmp: end-to-end test of the DLS chip at reduced cache sizes
// (2-set, 2-way private caches and LLC banks) so that every protocol path,
// evictions and LLC recalls included, is exercised within a short run.
module tb_dls_cmp;
  dls_cmp_harness #(.FULL(1'b0), .PC_SETS(2), .PC_WAYS(2), .LLC_SETS(2), .LLC_WAYS(2),
                    .PHASES(10), .OPS(60), .KBLK(6)) h ();
endmodule
