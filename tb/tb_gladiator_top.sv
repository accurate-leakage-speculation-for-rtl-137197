// tb_gladiator_top -- end-to-end test of the engine at reduced size:
// D = 5 (25 data qubits, 24 parity qubits), SLOTS = 10, so three shared
// sequence checkers, the last serving five data qubits. 300 rounds.
// Stimulus and scoreboard: tb_top_driver.
//
// Size reduced from the published D=11 only to exercise a partly idle last
// checker; all mechanisms are counted by tb_top_driver and each must occur.
module tb_gladiator_top;
  localparam int D = 5, S = 10;
  logic clk = 0;
  always #1 clk = ~clk;

  logic             rst_n, round_valid, mlr_en, mob_clear, d_mode, cfg_we, cfg_data;
  logic [9:0]       cfg_addr;
  logic [D*D-2:0]   syndrome, mlr_leaked;
  logic             busy, overrun, lrc_valid, mob_valid, mob_high;
  logic [D*D-1:0]   lrc_mask, spec_mask;
  logic [4:0]       lrc_count;
  logic [31:0]      mob_pairs, mob_leaked_pairs;

  gladiator_top #(.D(D), .SLOTS(S)) dut (.*);
  tb_top_driver #(.D(D), .S(S), .ROUNDS(300)) drv (.*);
endmodule
