// pattern_table -- programmable leakage-pattern lookup table for two-round
// (windowed) speculation.
//
// The offline stage labels every syndrome pattern as leakage or not; the
// result is a table with one bit per pattern. For single-round surface-code
// speculation that table is small enough to be minimised into fixed logic
// (seq_checker). For two-round speculation the pattern is 10 bits wide
// (two 5-bit tagged patterns, older round in the high half), and its label
// set is calibration data, so it is kept here as a writable 2^W-bit table.
//
// Interface:
//   cfg_we/cfg_addr/cfg_data  synchronous write of one table bit (loaded
//                             after each calibration).
//   rd_addr[i] -> rd_hit[i]   NRD combinational read ports, one per shared
//                             checker, evaluated in the same cycle.
// Reset (active-low, synchronous) clears every bit in one cycle, so no
// pattern is flagged until the table is loaded.
//
// From the source: the table of labelled patterns queried online, and the
// 10-bit two-round pattern. Own choices: the bit-serial write port, the
// reset-to-empty behaviour, the order of the two rounds in the address.
module pattern_table #(
  parameter int unsigned W   = 10,
  parameter int unsigned NRD = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  logic [W-1:0]           cfg_addr,
  input  logic                   cfg_data,
  input  logic [NRD-1:0][W-1:0]  rd_addr,
  output logic [NRD-1:0]         rd_hit
);

  logic [(1 << W)-1:0] table_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      table_q <= '0;
    end else if (cfg_we) begin
      table_q[cfg_addr] <= cfg_data;
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < NRD; i++) rd_hit[i] = table_q[rd_addr[i]];
  end

endmodule
