// tb_ref_pkg -- reference models shared by the testbenches, written
// independently of the RTL package.
//
// * fig_d3_adj: the 3x3 example layout, typed in by hand: for data qubit
//   D1..D9 the 1-based parity qubit numbers in read order (0 = none).
// * ref_adj: the same layout rule for any odd d, computed on a doubled
//   coordinate grid (data qubit (r,c) at (2r+1,2c+1), parity qubits on even
//   points) by scanning for neighbours.
// * ref_surface / ref_color / ref_color_d / ref_bpc: the leakage templates
//   written as cube strings (MSB first, '-' = don't care) and matched
//   character by character.
//
// The hand table FIG_D3_ADJ and the templates are copied from the
// published design; the doubled-grid layout rule is this design's own
// extension to any odd D, coded differently from gladiator_pkg so that a
// shared mistake is unlikely.
package tb_ref_pkg;

  // D1..D9 -> parity qubits, clockwise from north-west.
  localparam int FIG_D3_ADJ [9][4] = '{
    '{3, 2, 0, 0},   // D1
    '{1, 4, 3, 0},   // D2  (printed: 1 0 A1 A4 A3)
    '{1, 4, 0, 0},   // D3  (printed: 1 1 0 A1 A4)
    '{2, 3, 5, 0},   // D4
    '{3, 4, 6, 5},   // D5  (printed: 0 A3 A4 A6 A5)
    '{4, 7, 6, 0},   // D6
    '{5, 8, 0, 0},   // D7
    '{5, 6, 8, 0},   // D8
    '{6, 7, 0, 0}    // D9
  };

  // Parity qubit on doubled-grid point (y,x), y and x even in 0..2d?
  function automatic bit ref_present(int d, int y, int x);
    int e;
    e = 2 * d;
    if (y < 0 || x < 0 || y > e || x > e) return 0;
    if ((y == 0 || y == e) && (x == 0 || x == e)) return 0;
    if (y == 0) return (x / 2) % 2 == 0;
    if (y == e) return (x / 2) % 2 == 1;
    if (x == 0) return (y / 2) % 2 == 1;
    if (x == e) return (y / 2) % 2 == 0;
    return 1;
  endfunction

  function automatic int ref_num(int d, int y, int x);  // 0-based, -1 if none
    int n;
    n = 0;
    if (!ref_present(d, y, x)) return -1;
    for (int yy = 0; yy <= 2 * d; yy += 2)
      for (int xx = 0; xx <= 2 * d; xx += 2) begin
        if (yy == y && xx == x) return n;
        if (ref_present(d, yy, xx)) n++;
      end
    return -1;
  endfunction

  // k-th neighbour (0-based parity index) of data qubit q, -1 past the end.
  function automatic int ref_adj(int d, int q, int k);
    int y, x, n, a;
    int dy[4] = '{-1, -1, 1, 1};
    int dx[4] = '{-1, 1, 1, -1};
    y = 2 * (q / d) + 1;
    x = 2 * (q % d) + 1;
    n = 0;
    for (int i = 0; i < 4; i++) begin
      a = ref_num(d, y + dy[i], x + dx[i]);
      if (a >= 0) begin
        if (n == k) return a;
        n++;
      end
    end
    return -1;
  endfunction

  function automatic int ref_nadj(int d, int q);
    int n;
    n = 0;
    for (int k = 0; k < 4; k++) if (ref_adj(d, q, k) >= 0) n++;
    return n;
  endfunction

  function automatic bit cube_hit(string cube, logic [6:0] x);
    int w;
    w = cube.len();
    for (int i = 0; i < w; i++) begin
      byte ch;
      ch = cube[i];
      if (ch == "1" && !x[w-1-i]) return 0;
      if (ch == "0" &&  x[w-1-i]) return 0;
    end
    return 1;
  endfunction

  function automatic bit ref_surface(logic [4:0] x);
    string c[5] = '{"1--11", "-11-1", "111--", "-110-", "1-100"};
    foreach (c[i]) if (cube_hit(c[i], {2'b0, x})) return 1;
    return 0;
  endfunction

  function automatic bit ref_color(logic [3:0] x);
    string c[3] = '{"0011", "0101", "0110"};
    foreach (c[i]) if (cube_hit(c[i], {3'b0, x})) return 1;
    return 0;
  endfunction

  function automatic bit ref_color_d(logic [6:0] x);
    string c[9] = '{"01-0101", "010-101", "01-0110", "010-110", "0011011",
                    "0101011", "0110011", "0011101", "0011110"};
    foreach (c[i]) if (cube_hit(c[i], x)) return 1;
    return 0;
  endfunction

  function automatic bit ref_bpc(logic [6:0] x);
    string c[14] = '{"-0-1111", "-01-111", "01--111", "-011-11", "01-1-11",
                     "011--11", "-0111-1", "-01111-", "01011-1", "01101-1",
                     "01110-1", "010111-", "011011-", "011101-"};
    foreach (c[i]) if (cube_hit(c[i], x)) return 1;
    return 0;
  endfunction

  // Tagged 5-bit pattern of data qubit q for a syndrome, by the reference.
  function automatic logic [4:0] ref_pattern(int d, int q, logic [1023:0] syn);
    int n;
    logic [4:0] p;
    n = ref_nadj(d, q);
    p = (n == 4) ? 5'b00000 : (n == 3) ? 5'b10000 : 5'b11000;
    for (int k = 0; k < n; k++) p[n-1-k] = syn[ref_adj(d, q, k)];
    return p;
  endfunction

endpackage
