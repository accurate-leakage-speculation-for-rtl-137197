// tb_mobility_estimator -- checks the leakage mobility estimate (D=3).
// Random rounds of speculative flags and MLR flags are fed in; the
// testbench counts (flagged data qubit, neighbour) pairs and leaked pairs
// with the hand-typed 3x3 example layout and checks both counters and the
// 5 % classification after every update, including the exact 5 % boundary
// (1 leaked pair in 20 -> high) and clear.
//
// The 5 % threshold is published; counting per (flagged qubit, neighbour)
// pair is this design's own estimator and is what the reference models.
// Inputs are driven nonblocking at posedge; a watchdog ends the run.
module tb_mobility_estimator;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        clear, update;
  logic [8:0]  spec_mask;
  logic [7:0]  mlr_leaked;
  logic [31:0] pairs, leaked_pairs;
  logic        estimate_valid, mobility_high;

  mobility_estimator #(.D(3)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  longint ep, el;

  task automatic round(logic [8:0] sm, logic [7:0] ml);
    spec_mask  = sm;
    mlr_leaked = ml;
    update     <= 1;
    for (int q = 0; q < 9; q++)
      if (sm[q])
        for (int k = 0; k < 4; k++)
          if (FIG_D3_ADJ[q][k] != 0) begin
            ep++;
            if (ml[FIG_D3_ADJ[q][k]-1]) el++;
          end
    @(posedge clk);
    update <= 0;
    @(negedge clk);
    chk(pairs == 32'(ep) && leaked_pairs == 32'(el),
        $sformatf("counts %0d/%0d exp %0d/%0d", leaked_pairs, pairs, el, ep));
    chk(estimate_valid == (ep != 0), "estimate_valid");
    chk(mobility_high == (ep != 0 && el * 100 >= ep * 5),
        $sformatf("class %b at %0d/%0d", mobility_high, el, ep));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nhigh, nlow;
    clear = 0; update = 0; spec_mask = 0; mlr_leaked = 0; ep = 0; el = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    chk(!estimate_valid && !mobility_high, "no estimate after reset");
    // exact boundary: D5 (4 pairs) x5 rounds = 20 pairs, then one leaked
    repeat (5) round(9'b000010000, 8'h00);
    chk(!mobility_high, "0/20 low");
    round(9'b000000000, 8'h00);
    // D3 flagged with A1 leaked: +2 pairs, +1 leaked -> 1/22 < 5 % low
    round(9'b000000100, 8'h01);
    chk(!mobility_high, "1/22 low");
    clear <= 1; @(posedge clk); clear <= 0; @(negedge clk);
    ep = 0; el = 0;
    chk(pairs == 0 && !estimate_valid, "clear");
    repeat (4) round(9'b000010000, 8'h00);                    // 16 pairs
    round(9'b000000001, 8'h00);                               // D1: +2 -> 18
    round(9'b000000100, 8'h01);                               // D3: +2, +1 -> 1/20
    chk(mobility_high, "1/20 = 5 % is high");
    // random rounds
    nhigh = 0; nlow = 0;
    for (int r = 0; r < 300; r++) begin
      if (r % 60 == 0) begin
        clear <= 1; @(posedge clk); clear <= 0; @(negedge clk);
        ep = 0; el = 0;
      end
      round(9'($urandom), (r % 120 < 60) ? 8'($urandom) & 8'($urandom) & 8'($urandom) : 8'h00);
      if (mobility_high) nhigh++; else nlow++;
    end
    chk(nhigh > 0 && nlow > 0, "both regimes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
