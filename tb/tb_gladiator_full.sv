// tb_gladiator_full -- end-to-end test of the engine at its default size:
// D = 11 (121 data qubits, 120 parity qubits), 100 slots, two shared
// sequence checkers. 120 rounds. Stimulus and scoreboard: tb_top_driver.
//
// Runs at the published size: the top is instantiated without a parameter
// list. All mechanisms are counted by tb_top_driver and each must occur.
module tb_gladiator_full;
  localparam int D = 11, S = 100;
  logic clk = 0;
  always #1 clk = ~clk;

  logic             rst_n, round_valid, mlr_en, mob_clear, d_mode, cfg_we, cfg_data;
  logic [9:0]       cfg_addr;
  logic [D*D-2:0]   syndrome, mlr_leaked;
  logic             busy, overrun, lrc_valid, mob_valid, mob_high;
  logic [D*D-1:0]   lrc_mask, spec_mask;
  logic [6:0]       lrc_count;
  logic [31:0]      mob_pairs, mob_leaked_pairs;

  gladiator_top dut (.*);
  tb_top_driver #(.D(D), .S(S), .ROUNDS(120)) drv (.*);
endmodule
