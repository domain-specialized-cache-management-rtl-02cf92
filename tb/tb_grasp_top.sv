// tb_grasp_top: end-to-end test of GRASP at reduced size (4 cores, 4 slices of
// 16 sets x 4 ways, a 16KB LLC), where every mechanism happens many times.
// See grasp_top_harness for the phases and checks.
module tb_grasp_top;
  grasp_top_harness #(.USE_DEFAULTS(1'b0), .NC(4), .NS(4), .WAYS(4), .SETS(16), .LAT(10),
                      .C_ACCESSES(400), .A_ACCESSES(1500), .REQUIRE_ALL(1'b1)) h ();
endmodule
