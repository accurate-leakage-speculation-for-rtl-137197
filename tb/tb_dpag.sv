// tb_dpag -- checks the Data-Parity Adjacency Generator.
//  1. D=3, SLOTS=4 (3 shared checkers): random syndromes; every slot's
//     pattern on every checker is compared with the hand-typed 3x3 example
//     layout, and qvalid with the qubit count.
//  2. D=11, SLOTS=100 (defaults, 2 checkers): one-hot syndromes; every
//     parity qubit must appear in the patterns of exactly 4 (interior) or 2
//     (boundary) data qubits, and the tag census must be 4 corner, 4(d-2)
//     edge and (d-2)^2 interior qubits. Patterns are also compared with the
//     coordinate-grid reference.
//
// The 3x3 table and the three tag formats follow the published example;
// the layout for larger D and the slot-to-qubit assignment are this
// design's own and are checked against the independent doubled-grid
// reference in tb_ref_pkg. Combinational: inputs change, compare after #1.
module tb_dpag;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  // ---- instance 1: D=3, SLOTS=4
  logic [7:0]      syn3;
  logic [1:0]      slot3;
  logic [2:0][4:0] pat3;
  logic [2:0]      qv3;
  dpag #(.D(3), .SLOTS(4)) u3 (.syndrome(syn3), .slot(slot3), .pattern(pat3), .qvalid(qv3));

  // ---- instance 2: defaults
  logic [119:0]    syn11;
  logic [6:0]      slot11;
  logic [1:0][4:0] pat11;
  logic [1:0]      qv11;
  dpag u11 (.syndrome(syn11), .slot(slot11), .pattern(pat11), .qvalid(qv11));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [4:0] fig_pattern(int q, logic [7:0] s);
    int n;
    logic [4:0] p;
    n = 0;
    for (int k = 0; k < 4; k++) if (FIG_D3_ADJ[q][k] != 0) n++;
    p = (n == 4) ? 5'b00000 : (n == 3) ? 5'b10000 : 5'b11000;
    for (int k = 0; k < n; k++) p[n-1-k] = s[FIG_D3_ADJ[q][k]-1];
    return p;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int deg[120];
    int ntag[3];
    // the three printed examples, by name
    syn3 = 8'b0011_1100;  // A3..A6 = 1
    slot3 = 0; #1;
    chk(pat3[1] == 5'b01111, "D5 pattern with A3..A6 set");           // D5 = q4 -> checker 1 slot 0
    syn3 = 8'b0000_1001;  // A1, A4
    slot3 = 2; #1;
    chk(pat3[0] == 5'b11011, "D3 = 110 A1 A4");
    slot3 = 1; #1;
    chk(pat3[0] == 5'b10110, "D2 = 10 A1 A4 A3");
    // random sweep against the typed layout
    for (int t = 0; t < 200; t++) begin
      syn3 = 8'($urandom);
      for (int s = 0; s < 4; s++) begin
        slot3 = 2'(s); #1;
        for (int c = 0; c < 3; c++) begin
          int q;
          q = c * 4 + s;
          chk(qv3[c] == (q < 9), $sformatf("qvalid c%0d s%0d", c, s));
          if (q < 9)
            chk(pat3[c] == fig_pattern(q, syn3),
                $sformatf("d3 q%0d got %b exp %b", q, pat3[c], fig_pattern(q, syn3)));
        end
      end
    end
    // D=11: one-hot degree test
    foreach (deg[a]) deg[a] = 0;
    ntag = '{0, 0, 0};
    for (int a = 0; a < 120; a++) begin
      syn11 = '0;
      syn11[a] = 1'b1;
      for (int s = 0; s < 100; s++) begin
        slot11 = 7'(s); #1;
        for (int c = 0; c < 2; c++) begin
          int q;
          q = c * 100 + s;
          if (q < 121) begin
            chk(qv11[c], "qvalid d11");
            if (a == 0) begin
              if (pat11[c][4] == 1'b0) ntag[0]++;
              else if (pat11[c][3] == 1'b0) ntag[1]++;
              else ntag[2]++;
            end
            if (pat11[c][4] == 1'b0 ? |pat11[c][3:0] :
                pat11[c][3] == 1'b0 ? |pat11[c][2:0] : |pat11[c][1:0])
              deg[a]++;
            if (a < 3 || a > 116)
              chk(pat11[c] == ref_pattern(11, q, 1024'(syn11)), $sformatf("d11 q%0d a%0d", q, a));
          end else begin
            chk(!qv11[c], "qvalid d11 off");
          end
        end
      end
    end
    begin
      int n4, n2;
      n4 = 0; n2 = 0;
      foreach (deg[a]) begin
        if (deg[a] == 4) n4++;
        else if (deg[a] == 2) n2++;
      end
      chk(n4 == 100 && n2 == 20, $sformatf("degrees: %0d weight-4, %0d weight-2", n4, n2));
      chk(ntag[0] == 81 && ntag[1] == 36 && ntag[2] == 4,
          $sformatf("tags %0d/%0d/%0d", ntag[0], ntag[1], ntag[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
