// grasp_classifier: turns the virtual address of a memory access into the 2-bit
// Reuse Hint that travels with the request to the LLC.
//
// For every Property Array whose ABR pair is set, two range checks are made against
// the bounds that abr_file derives: inside the array and below the end of the High
// Reuse Region gives High-Reuse, inside the array and below the end of the Moderate
// Reuse Region gives Moderate-Reuse. Any other address, including those of the Vertex
// and Edge Arrays and the cold tail of the Property Array, is Low-Reuse. With no pair
// set the hint is Default. This is the paper's comparison-based classification; if
// two arrays' regions overlapped, High-Reuse wins over Moderate-Reuse (this design's
// choice, the paper does not consider it).
//
// Purely combinational: the hint is ready in the same cycle as the address, so the
// check runs side by side with address translation. Only the bounds' comparisons are
// on the path; the adders that form the bounds sit in abr_file.
module grasp_classifier
  import grasp_pkg::*;
#(
  parameter int unsigned NUM_PA = 2
) (
  input  logic [VA_W-1:0]   va,
  input  logic [NUM_PA-1:0] pa_valid,
  input  logic [VA_W-1:0]   start_q [NUM_PA],
  input  logic [VA_W-1:0]   end_q   [NUM_PA],
  input  logic [VA_W:0]     hr_end  [NUM_PA],
  input  logic [VA_W:0]     mr_end  [NUM_PA],
  output reuse_hint_e       hint
);

  logic [NUM_PA-1:0] in_high, in_mod;

  always_comb begin
    for (int i = 0; i < NUM_PA; i++) begin
      logic in_array;
      in_array   = pa_valid[i] && (va >= start_q[i]) && (va <= end_q[i]);
      in_high[i] = in_array && ({1'b0, va} < hr_end[i]);
      in_mod[i]  = in_array && ({1'b0, va} >= hr_end[i]) && ({1'b0, va} < mr_end[i]);
    end
    if (pa_valid == '0)   hint = HINT_DEFAULT;
    else if (|in_high)    hint = HINT_HIGH;
    else if (|in_mod)     hint = HINT_MODERATE;
    else                  hint = HINT_LOW;
  end

endmodule
