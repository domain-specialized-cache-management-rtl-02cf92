// grasp_pkg: types and constants shared by the GRASP last-level-cache blocks.
//
// GRASP classifies every LLC request into one of four reuse classes and sends the
// class to the LLC as a 2-bit Reuse Hint next to the physical address. The LLC uses
// the hint only to pick the insertion and hit-promotion value of the per-block 3-bit
// RRIP re-reference prediction value (RRPV); eviction is plain RRIP. The 2-bit width
// of the hint and the 3-bit RRPV follow the paper; the binary code of each hint value
// and the address widths are this design's own choices.
package grasp_pkg;

  // Reuse Hint, 2 bits. Default (00) is what an access gets when no Address Bound
  // Register pair is set, so a core that never programs its ABRs sees plain RRIP.
  typedef enum logic [1:0] {
    HINT_DEFAULT  = 2'b00,
    HINT_LOW      = 2'b01,
    HINT_MODERATE = 2'b10,
    HINT_HIGH     = 2'b11
  } reuse_hint_e;

  localparam int unsigned RRPV_W   = 3;                    // per-block counter width
  localparam logic [RRPV_W-1:0] RRPV_MAX  = '1;            // 7: evict first ("LRU")
  localparam logic [RRPV_W-1:0] RRPV_NEAR = RRPV_MAX - 1'b1; // 6: "near LRU"
  localparam logic [RRPV_W-1:0] RRPV_MRU  = '0;            // 0: "MRU"

  localparam int unsigned VA_W = 48;   // virtual address width (assumed)
  localparam int unsigned PA_W = 48;   // physical address width (assumed)

endpackage
