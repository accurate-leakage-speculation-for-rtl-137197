// gladiator_pkg -- shared types, sizes and constant functions of the
// leakage speculation engine.
//
// What it holds:
//   * Size helpers for a rotated surface code of odd distance d: d*d data
//     qubits, d*d-1 parity (ancilla) qubits, and the number of time-shared
//     sequence checkers, ceil(d*d / SLOTS).
//   * The data/parity adjacency of the rotated surface code. Parity qubits
//     sit on the corners of the data-qubit grid ("plaquette" coordinates
//     (i,j), 0 <= i,j <= d). Interior plaquettes are all present; on the
//     four boundaries every other one is present, and the four corners are
//     empty. Parity qubits are numbered row-major over (i,j), data qubits
//     row-major over (row,col). For d = 3 this reproduces the labelling of
//     the 3x3 example layout (D1..D9, A1..A8) exactly, e.g. D5 -> A3 A4 A6 A5
//     and D3 -> A1 A4.
//   * The order in which a data qubit's parity bits are read: clockwise,
//     NW, NE, SE, SW, skipping absent ones (taken from the same example).
//   * The 5-bit tagged pattern: a 4-bit pattern is prefixed with "0",
//     a 3-bit one with "10", a 2-bit one with "110", giving x4..x0.
//   * The minimised Boolean leakage templates. The surface-code template is
//     the one the engine uses; the colour-code, colour-code-two-round and
//     BPC-code templates are provided so the checker can be retargeted.
//
// Design choices not fixed by the source: odd d only; which boundary
// plaquettes are present is chosen to match the d = 3 example layout.
package gladiator_pkg;

  // One checker evaluation per clock; a checker serves at most this many
  // data qubits per QEC round (100 evaluations of 1 ns inside a 100 ns
  // deadline).
  localparam int unsigned DEFAULT_SLOTS = 100;

  typedef enum logic [1:0] {
    PSET_SURFACE = 2'd0,  // 5-bit tagged surface-code template
    PSET_COLOR   = 2'd1,  // colour code, one round, inputs x0..x3
    PSET_COLOR_D = 2'd2,  // colour code, two rounds, inputs x0..x6
    PSET_BPC     = 2'd3   // balanced product cyclic code, inputs x0..x6
  } pattern_set_e;

  // Compass position of a parity qubit around a data qubit, in read order.
  typedef enum logic [1:0] {NW = 2'd0, NE = 2'd1, SE = 2'd2, SW = 2'd3} corner_e;

  function automatic int unsigned num_data(input int unsigned d);
    return d * d;
  endfunction

  function automatic int unsigned num_anc(input int unsigned d);
    return d * d - 1;
  endfunction

  function automatic int unsigned num_checkers(input int unsigned d, input int unsigned slots);
    return (d * d + slots - 1) / slots;
  endfunction

  // Is there a parity qubit on plaquette corner (i,j)?
  function automatic bit anc_present(input int d, input int i, input int j);
    if (i < 0 || j < 0 || i > d || j > d) return 1'b0;
    if ((i == 0 || i == d) && (j == 0 || j == d)) return 1'b0;
    if (i == 0) return (j % 2) == 0;
    if (i == d) return (j % 2) == 1;
    if (j == 0) return (i % 2) == 1;
    if (j == d) return (i % 2) == 0;
    return 1'b1;
  endfunction

  // Row-major index of the parity qubit on (i,j), or -1 if there is none.
  function automatic int anc_index(input int d, input int i, input int j);
    int idx;
    if (!anc_present(d, i, j)) return -1;
    idx = 0;
    for (int ii = 0; ii <= d; ii++)
      for (int jj = 0; jj <= d; jj++)
        if ((ii < i) || (ii == i && jj < j))
          if (anc_present(d, ii, jj)) idx++;
    return idx;
  endfunction

  // Parity qubit at compass position k (NW, NE, SE, SW) of data qubit q.
  function automatic int corner_anc(input int d, input int q, input int k);
    int r, c;
    r = q / d;
    c = q % d;
    case (k)
      0:       return anc_index(d, r,     c);
      1:       return anc_index(d, r,     c + 1);
      2:       return anc_index(d, r + 1, c + 1);
      default: return anc_index(d, r + 1, c);
    endcase
  endfunction

  // Number of parity qubits adjacent to data qubit q (2, 3 or 4).
  function automatic int adj_count(input int d, input int q);
    int n;
    n = 0;
    for (int k = 0; k < 4; k++)
      if (corner_anc(d, q, k) >= 0) n++;
    return n;
  endfunction

  // n-th adjacent parity qubit of data qubit q in read order, -1 past the end.
  function automatic int adj_anc(input int d, input int q, input int n);
    int seen;
    seen = 0;
    for (int k = 0; k < 4; k++) begin
      if (corner_anc(d, q, k) >= 0) begin
        if (seen == n) return corner_anc(d, q, k);
        seen++;
      end
    end
    return -1;
  endfunction

  // Tag a pattern of n (2..4) bits, bits[n-1] read first, into x4..x0.
  function automatic logic [4:0] tag_pattern(input logic [3:0] bits, input int n);
    case (n)
      4:       return {1'b0,   bits[3:0]};
      3:       return {2'b10,  bits[2:0]};
      default: return {3'b110, bits[1:0]};
    endcase
  endfunction

  // Surface code, 5-bit tagged pattern.
  function automatic logic match_surface(input logic [4:0] x);
    return (x[0] & x[1] & x[4])
         | (x[0] & x[2] & x[3])
         | (x[2] & x[3] & x[4])
         | (x[2] & x[3] & ~x[1])
         | (x[2] & x[4] & ~x[0] & ~x[1]);
  endfunction

  // Colour code, single round.
  function automatic logic match_color(input logic [3:0] x);
    return (x[0] & x[1] & ~x[2] & ~x[3])
         | (x[0] & x[2] & ~x[1] & ~x[3])
         | (x[1] & x[2] & ~x[0] & ~x[3]);
  endfunction

  // Colour code with two-round history.
  function automatic logic match_color_d(input logic [6:0] x);
    return (x[0] & x[2] & x[5] & ~x[1] & ~x[3] & ~x[6])
         | (x[0] & x[2] & x[5] & ~x[1] & ~x[4] & ~x[6])
         | (x[1] & x[2] & x[5] & ~x[0] & ~x[3] & ~x[6])
         | (x[1] & x[2] & x[5] & ~x[0] & ~x[4] & ~x[6])
         | (x[0] & x[1] & x[3] & x[4] & ~x[2] & ~x[5] & ~x[6])
         | (x[0] & x[1] & x[3] & x[5] & ~x[2] & ~x[4] & ~x[6])
         | (x[0] & x[1] & x[4] & x[5] & ~x[2] & ~x[3] & ~x[6])
         | (x[0] & x[2] & x[3] & x[4] & ~x[1] & ~x[5] & ~x[6])
         | (x[1] & x[2] & x[3] & x[4] & ~x[0] & ~x[5] & ~x[6]);
  endfunction

  // Balanced product cyclic code.
  function automatic logic match_bpc(input logic [6:0] x);
    return (x[0] & x[1] & x[2] & x[3] & ~x[5])
         | (x[0] & x[1] & x[2] & x[4] & ~x[5])
         | (x[0] & x[1] & x[2] & x[5] & ~x[6])
         | (x[0] & x[1] & x[3] & x[4] & ~x[5])
         | (x[0] & x[1] & x[3] & x[5] & ~x[6])
         | (x[0] & x[1] & x[4] & x[5] & ~x[6])
         | (x[0] & x[2] & x[3] & x[4] & ~x[5])
         | (x[1] & x[2] & x[3] & x[4] & ~x[5])
         | (x[0] & x[2] & x[3] & x[5] & ~x[4] & ~x[6])
         | (x[0] & x[2] & x[4] & x[5] & ~x[3] & ~x[6])
         | (x[0] & x[3] & x[4] & x[5] & ~x[2] & ~x[6])
         | (x[1] & x[2] & x[3] & x[5] & ~x[4] & ~x[6])
         | (x[1] & x[2] & x[4] & x[5] & ~x[3] & ~x[6])
         | (x[1] & x[3] & x[4] & x[5] & ~x[2] & ~x[6]);
  endfunction

endpackage
