// tb_grasp_top_full: the same end-to-end test with grasp_top at its default size
// (8 cores, 16MB 16-way LLC in eight 2MB slices, 10-cycle access, two ABR pairs).
// Eviction and ageing need sets to fill, which the short run only does in phases A
// and B; it is not required to happen in the multi-core phase.
module tb_grasp_top_full;
  grasp_top_harness #(.USE_DEFAULTS(1'b1), .NC(8), .NS(8), .WAYS(16), .SETS(2048), .LAT(10),
                      .C_ACCESSES(3000), .A_ACCESSES(1500), .REQUIRE_ALL(1'b1)) h ();
endmodule
