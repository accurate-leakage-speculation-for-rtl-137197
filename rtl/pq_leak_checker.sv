// pq_leak_checker -- Parity Qubit Leakage Checker.
//
// Multi-level readout (MLR) of the parity qubits reports, per parity qubit,
// whether it was found in a leaked state. A data qubit is flagged when any
// of the parity qubits it interacts with is leaked, because leakage moves
// between a data qubit and its parity qubits through the shared CNOTs.
// All D*D flags are formed in parallel by an OR over each data qubit's 2..4
// neighbours (same adjacency as the pattern generator). Combinational.
//
// Interface:
//   mlr_leaked[a]  1 = parity qubit a read out as leaked this round.
//   pq_leak[q]     1 = a neighbour of data qubit q is leaked.
//
// The source gives the function ("if the associated parity qubit is
// leaked"); the OR over all neighbours is this design's reading of it.
module pq_leak_checker
  import gladiator_pkg::*;
#(
  parameter int unsigned D = 11,
  localparam int unsigned ND = D * D,
  localparam int unsigned NA = D * D - 1
) (
  input  logic [NA-1:0] mlr_leaked,
  output logic [ND-1:0] pq_leak
);

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
    assign pq_leak[q] = |nb;
  end

endmodule
