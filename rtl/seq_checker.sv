// seq_checker -- Sequence Checker: decides whether one data qubit's tagged
// syndrome pattern is a leakage signature.
//
// Purely combinational: the pattern is matched against a minimised
// sum-of-products template, so the decision settles in one short logic
// level (well inside a 1 ns cycle). No state, no clock.
//
// Interface:
//   pattern  x6..x0 of the pattern. For the surface-code template only
//            x4..x0 are used: x4..x2 carry the length tag ("0" for four
//            parity bits, "10" for three, "110" for two), the rest the
//            parity flips in read order.
//   leak     1 = pattern is a leakage signature, schedule an LRC.
//
// The templates are the published minimised expressions (see
// gladiator_pkg). PSET picks which one is built; the engine uses the
// surface-code set. Offering the other code families through one parameter
// is a choice of this implementation.
module seq_checker
  import gladiator_pkg::*;
#(
  parameter pattern_set_e PSET = PSET_SURFACE
) (
  input  logic [6:0] pattern,
  output logic       leak
);

  always_comb begin
    unique case (PSET)
      PSET_SURFACE: leak = match_surface(pattern[4:0]);
      PSET_COLOR:   leak = match_color(pattern[3:0]);
      PSET_COLOR_D: leak = match_color_d(pattern);
      PSET_BPC:     leak = match_bpc(pattern);
      default:      leak = 1'b0;
    endcase
  end

endmodule
