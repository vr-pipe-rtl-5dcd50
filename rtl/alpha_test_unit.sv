// alpha_test_unit: detects the moment a pixel becomes early-terminated.
//
// After the blend, the pixel is newly terminated when its previous alpha was
// below the threshold and its blended alpha reaches it:
//   terminated = (old_alpha < alpha_th) & (new_alpha >= alpha_th).
// Checking the old alpha too (as the paper does) sends one termination update
// per pixel instead of one per fragment blended after termination. The
// threshold is a run-time input; its usual value is 0.996 (65273 in UNORM16).
// Combinational.
//
// Interface: old_alpha, new_alpha, alpha_th (UNORM16) in; terminated out.
// From the paper: the two-sided condition and the 0.996 threshold. Own
// choice: the fixed-point comparison instead of FP16 comparators.
module alpha_test_unit (
  input  logic [15:0] old_alpha,
  input  logic [15:0] new_alpha,
  input  logic [15:0] alpha_th,
  output logic        terminated
);
  always_comb terminated = (old_alpha < alpha_th) && (new_alpha >= alpha_th);
endmodule
