// dpag -- Data-Parity Adjacency Generator for a rotated surface code of
// distance D.
//
// The syndrome arrives as one flip bit per parity qubit, A1..A(D*D-1) on
// syndrome[0..]. Each data qubit needs the flips of its own 2, 3 or 4
// neighbouring parity qubits, read clockwise from the north-west corner and
// length-tagged into a 5-bit pattern x4..x0 ("0"+4 bits, "10"+3 bits,
// "110"+2 bits). The per-qubit gather is fixed wiring worked out at
// elaboration from the code layout (gladiator_pkg). On top of it sits a
// multiplexer network: the D*D data qubits are dealt out to NCHK shared
// sequence checkers, checker c serving data qubits c*SLOTS .. c*SLOTS+SLOTS-1,
// one per clock. For the current slot index the generator presents, to
// every checker, the tagged pattern of the data qubit it is serving.
//
// Interface (all combinational):
//   syndrome    parity flips of one QEC round, captured by the caller.
//   slot        time slot 0..SLOTS-1 within the round.
//   pattern[c]  tagged pattern for checker c.
//   qvalid[c]   1 when checker c has a data qubit in this slot (the last
//               checker may serve fewer than SLOTS qubits).
//
// From the source: the tag scheme, the read order (3x3 example layout),
// the sharing of one checker by up to 100 data qubits. Own choice: the
// block-wise assignment of qubits to checkers.
module dpag
  import gladiator_pkg::*;
#(
  parameter int unsigned D     = 11,
  parameter int unsigned SLOTS = DEFAULT_SLOTS,
  localparam int unsigned ND     = D * D,
  localparam int unsigned NA     = D * D - 1,
  localparam int unsigned NCHK   = (D * D + SLOTS - 1) / SLOTS,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic [NA-1:0]        syndrome,
  input  logic [SLOT_W-1:0]    slot,
  output logic [NCHK-1:0][4:0] pattern,
  output logic [NCHK-1:0]      qvalid
);

  // Tagged pattern of every data qubit (fixed wiring).
  logic [ND-1:0][4:0] qpat;

  for (genvar q = 0; q < int'(ND); q++) begin : g_q
    localparam int N = adj_count(int'(D), q);
    logic [3:0] raw;
    for (genvar k = 0; k < 4; k++) begin : g_k
      if (k < N) begin : g_used
        localparam int A = adj_anc(int'(D), q, k);
        // first-read parity bit lands in the highest data position
        assign raw[N-1-k] = syndrome[A];
      end
      if (k >= N) begin : g_pad
        assign raw[k] = 1'b0;
      end
    end
    assign qpat[q] = tag_pattern(raw, N);
  end

  // Multiplexer network: slot -> data qubit of each checker.
  always_comb begin
    int unsigned q;
    q = 0;
    for (int unsigned c = 0; c < NCHK; c++) begin
      q = c * SLOTS + 32'(slot);
      if (q < ND && 32'(slot) < SLOTS) begin
        pattern[c] = qpat[q];
        qvalid[c]  = 1'b1;
      end else begin
        pattern[c] = 5'b0;
        qvalid[c]  = 1'b0;
      end
    end
  end

endmodule
