// tb_pq_leak_checker -- checks the parity-qubit leakage flags.
//  D=3: random MLR vectors against the hand-typed 3x3 example layout.
//  D=11 (default): every single leaked parity qubit must flag exactly its
//  2 or 4 neighbours, as given by the coordinate-grid reference.
//
// The OR of neighbouring MLR flags follows the published scheme; the
// layout beyond D=3 is this design's own rule (reference in tb_ref_pkg).
// Combinational: compare after #1.
module tb_pq_leak_checker;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [7:0]   mlr3;
  logic [8:0]   pq3;
  logic [119:0] mlr11;
  logic [120:0] pq11;

  pq_leak_checker #(.D(3)) u3  (.mlr_leaked(mlr3),  .pq_leak(pq3));
  pq_leak_checker          u11 (.mlr_leaked(mlr11), .pq_leak(pq11));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      mlr3 = (t < 8) ? 8'(1 << t) : 8'($urandom) & 8'($urandom);
      #1;
      for (int q = 0; q < 9; q++) begin
        bit e;
        e = 0;
        for (int k = 0; k < 4; k++)
          if (FIG_D3_ADJ[q][k] != 0 && mlr3[FIG_D3_ADJ[q][k]-1]) e = 1;
        chk(pq3[q] == e, $sformatf("d3 mlr=%b q%0d got %b", mlr3, q, pq3[q]));
      end
    end
    for (int a = 0; a < 120; a++) begin
      int n;
      mlr11 = '0;
      mlr11[a] = 1'b1;
      #1;
      n = 0;
      for (int q = 0; q < 121; q++) begin
        bit e;
        e = 0;
        for (int k = 0; k < 4; k++) if (ref_adj(11, q, k) == a) e = 1;
        if (pq11[q]) n++;
        chk(pq11[q] == e, $sformatf("d11 a%0d q%0d", a, q));
      end
      chk(n == 2 || n == 4, $sformatf("d11 a%0d degree %0d", a, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
