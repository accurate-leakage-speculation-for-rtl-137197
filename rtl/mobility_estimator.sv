// mobility_estimator -- classifies leakage mobility (how readily leakage
// moves between neighbouring qubits) as low or high.
//
// Each time a round's result is published (update), every data qubit the
// sequence checker flagged as leaked contributes its 2..4 neighbouring
// parity qubits as "pairs", and every such neighbour that multi-level
// readout found leaked in the same round as a "leaked pair". The estimate
// is leaked_pairs / pairs, the probability that a parity qubit is leaked
// given that its neighbouring data qubit is flagged. Mobility is high when
// that probability is at or above THRESH_PCT percent (5 %), low below it;
// no decision is made before the first pair is counted. `clear` restarts
// the estimate. Counters saturate at their maximum.
//
// Timing: counts update on the clock edge that samples update; the
// classification is combinational from the counts. Reset is active-low,
// synchronous.
//
// From the source: the conditional probability and the 5 % threshold
// (a 5 % mobility belongs to the high regime). Own choices: counting per
// (flagged data qubit, neighbour) pair, using the MLR of the same round,
// counter widths and saturation.
module mobility_estimator
  import gladiator_pkg::*;
#(
  parameter int unsigned D          = 11,
  parameter int unsigned CNT_W      = 32,
  parameter int unsigned THRESH_PCT = 5,
  localparam int unsigned ND    = D * D,
  localparam int unsigned NA    = D * D - 1,
  localparam int unsigned INC_W = $clog2(4 * D * D + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             update,
  input  logic [ND-1:0]    spec_mask,
  input  logic [NA-1:0]    mlr_leaked,
  output logic [CNT_W-1:0] pairs,
  output logic [CNT_W-1:0] leaked_pairs,
  output logic             estimate_valid,
  output logic             mobility_high
);

  // Per data qubit: neighbour count and leaked-neighbour count, if flagged.
  logic [ND-1:0][2:0] q_pairs, q_leaked;

  for (genvar q = 0; q < int'(ND); q++) begin : g_q
    localparam int N = adj_count(int'(D), q);
    logic [3:0] nb;
    for (genvar k = 0; k < 4; k++) begin : g_k
      if (k < N) begin : g_used
        localparam int A = adj_anc(int'(D), q, k);
        assign nb[k] = mlr_leaked[A];
      end
      if (k >= N) begin : g_pad
        assign nb[k] = 1'b0;
      end
    end
    assign q_pairs[q]  = spec_mask[q] ? 3'(N) : 3'd0;
    assign q_leaked[q] = spec_mask[q] ? 3'($countones(nb)) : 3'd0;
  end

  logic [INC_W-1:0] inc_pairs, inc_leaked;
  always_comb begin
    inc_pairs  = '0;
    inc_leaked = '0;
    for (int unsigned q = 0; q < ND; q++) begin
      inc_pairs  = inc_pairs  + INC_W'(q_pairs[q]);
      inc_leaked = inc_leaked + INC_W'(q_leaked[q]);
    end
  end

  function automatic logic [CNT_W-1:0] sat_add(input logic [CNT_W-1:0] a,
                                               input logic [INC_W-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + (CNT_W + 1)'(b);
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      pairs        <= '0;
      leaked_pairs <= '0;
    end else if (update) begin
      pairs        <= sat_add(pairs, inc_pairs);
      leaked_pairs <= sat_add(leaked_pairs, inc_leaked);
    end
  end

  // leaked/pairs >= THRESH_PCT/100, without a divider.
  logic [CNT_W+7:0] lhs, rhs;
  assign lhs            = (CNT_W + 8)'(leaked_pairs) * (CNT_W + 8)'(100);
  assign rhs            = (CNT_W + 8)'(pairs) * (CNT_W + 8)'(THRESH_PCT);
  assign estimate_valid = (pairs != '0);
  assign mobility_high  = estimate_valid && (lhs >= rhs);

endmodule
