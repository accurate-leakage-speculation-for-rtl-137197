// tb_gladiator_sizes -- end-to-end runs of the engine at the other code
// distances used in the published evaluation: d = 7, 13 and 17 (49, 169
// and 289 data qubits), all with the published 100 slots per checker, so
// with 1, 2 and 3 shared sequence checkers. d = 11 is the full-size test;
// d = 25 (625 data qubits, 7 checkers) is not run here because it takes
// minutes to elaborate.
//
// Three independent engines run side by side on one clock, each driven and
// scoreboarded by its own tb_top_driver (FINISH = 0) for 40 rounds, long
// enough for every mechanism the driver counts to happen: template matches
// on 4-, 3- and 2-bit patterns, MLR-only and masked-MLR LRCs, overruns,
// back-to-back rounds, both mobility regimes, two-round hits and misses and
// mode switches. The shared-checker count is only required where there is
// more than one checker. Each engine must also publish every round
// NSLOT + 1 cycles after accepting it (checked inside the driver). The
// distances come from the evaluation; the round count is this testbench's
// own choice. When all three drivers are done their counts are summed.
module tb_gladiator_sizes;
  localparam int S = 100, ROUNDS = 40;
  localparam int DS[3] = '{7, 13, 17};

  logic clk = 0;
  always #1 clk = ~clk;

  int done_n, checks, failures;

  for (genvar i = 0; i < 3; i++) begin : g_d
    localparam int D = DS[i];
    logic             rst_n, round_valid, mlr_en, mob_clear, d_mode, cfg_we, cfg_data;
    logic [9:0]       cfg_addr;
    logic [D*D-2:0]   syndrome, mlr_leaked;
    logic             busy, overrun, lrc_valid, mob_valid, mob_high;
    logic [D*D-1:0]   lrc_mask, spec_mask;
    logic [$clog2(D*D+1)-1:0] lrc_count;
    logic [31:0]      mob_pairs, mob_leaked_pairs;

    gladiator_top #(.D(D), .SLOTS(S)) dut (.*);
    tb_top_driver #(.D(D), .S(S), .ROUNDS(ROUNDS), .FINISH(0)) drv (.*);
  end

  initial begin
    wait (g_d[0].drv.done && g_d[1].drv.done && g_d[2].drv.done);
    checks   = g_d[0].drv.checks   + g_d[1].drv.checks   + g_d[2].drv.checks;
    failures = g_d[0].drv.failures + g_d[1].drv.failures + g_d[2].drv.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog: 40 rounds of at most 4 * 108 cycles each, with margin
  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
