// gladiator_top -- leakage speculation engine for one distance-D rotated
// surface-code logical qubit.
//
// Every QEC round the controller delivers the parity-qubit flips
// (syndrome) and the multi-level-readout leakage flags (mlr_leaked) with a
// one-cycle round_valid. The engine decides, for each of the D*D data
// qubits, whether a leakage reduction circuit (LRC) must be applied to it in
// the next round, and returns that as lrc_mask with a one-cycle lrc_valid.
//
// Datapath:
//   capture registers -> dpag (per-qubit tagged 5-bit patterns, multiplexed
//   onto NCHK = ceil(D*D/SLOTS) shared checkers) -> seq_checker x NCHK
//   (Boolean leakage templates) -> lrc_scheduler (OR with the parity-qubit
//   leakage flag from pq_leak_checker, per-round mask) -> QEC controller.
//   mobility_estimator watches the published rounds and classifies leakage
//   mobility as low or high.
//
// Timing: one checker evaluation per clock; with the default SLOTS = 100
// and a 1 GHz clock all data qubits are classified 100 ns after capture.
// lrc_valid follows round_valid by min(SLOTS, D*D)+1 cycles. A round that
// arrives while the previous one is still being classified is dropped and
// flagged on `overrun`.
//
// Modes: mlr_en = 1 uses the MLR flags (speculation plus MLR), mlr_en = 0
// uses syndrome speculation alone. d_mode = 1 selects two-round (windowed)
// speculation: each data qubit's 10-bit pattern {previous round, this
// round} is looked up in a programmable pattern table (loaded through the
// cfg_* port) instead of the fixed single-round template. The first round
// after reset has no history and gets no speculative LRCs in that mode
// (MLR flags still apply). d_mode is sampled with each round.
//
// The structure (adjacency generator, sequence checker, parity qubit leakage
// checker, OR, LRC scheduler, QEC controller) follows the published block
// diagram. The QEC controller and the quantum device are outside this
// design; their signals are the ports below.
module gladiator_top
  import gladiator_pkg::*;
#(
  parameter int unsigned D     = 11,
  parameter int unsigned SLOTS = DEFAULT_SLOTS,
  localparam int unsigned ND     = D * D,
  localparam int unsigned NA     = D * D - 1,
  localparam int unsigned NCHK   = (D * D + SLOTS - 1) / SLOTS,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned CNT_W  = $clog2(D * D + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the QEC controller / readout
  input  logic             round_valid,
  input  logic [NA-1:0]    syndrome,
  input  logic [NA-1:0]    mlr_leaked,
  input  logic             mlr_en,
  input  logic             mob_clear,
  input  logic             d_mode,
  // pattern table load (two-round mode)
  input  logic             cfg_we,
  input  logic [9:0]       cfg_addr,
  input  logic             cfg_data,
  // to the QEC controller
  output logic             busy,
  output logic             overrun,
  output logic             lrc_valid,
  output logic [ND-1:0]    lrc_mask,
  output logic [ND-1:0]    spec_mask,
  output logic [CNT_W-1:0] lrc_count,
  // leakage mobility estimate
  output logic [31:0]      mob_pairs,
  output logic [31:0]      mob_leaked_pairs,
  output logic             mob_valid,
  output logic             mob_high
);

  logic [NA-1:0]        syn_q, syn_prev_q, mlr_q;
  logic                 have_prev, hist_q, dmode_q;
  logic                 capture;
  logic [SLOT_W-1:0]    slot;
  logic [NCHK-1:0][4:0] pattern, pattern_prev;
  logic [NCHK-1:0][9:0] win_pattern;
  logic [NCHK-1:0]      qvalid, qvalid_prev, hit1, hit2, seq_hit;
  logic [ND-1:0]        pq_leak;

  // Round capture: this round, the previous round (history window), and
  // whether a previous round exists.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      syn_q      <= '0;
      syn_prev_q <= '0;
      mlr_q      <= '0;
      have_prev  <= 1'b0;
      hist_q     <= 1'b0;
      dmode_q    <= 1'b0;
    end else if (capture) begin
      syn_q      <= syndrome;
      syn_prev_q <= syn_q;
      mlr_q      <= mlr_leaked;
      have_prev  <= 1'b1;
      hist_q     <= have_prev;
      dmode_q    <= d_mode;
    end
  end

  dpag #(.D(D), .SLOTS(SLOTS)) u_dpag (
    .syndrome (syn_q),
    .slot     (slot),
    .pattern  (pattern),
    .qvalid   (qvalid)
  );

  dpag #(.D(D), .SLOTS(SLOTS)) u_dpag_prev (
    .syndrome (syn_prev_q),
    .slot     (slot),
    .pattern  (pattern_prev),
    .qvalid   (qvalid_prev)
  );

  // single-round: fixed template
  for (genvar c = 0; c < int'(NCHK); c++) begin : g_chk
    seq_checker #(.PSET(PSET_SURFACE)) u_seq (
      .pattern ({2'b00, pattern[c]}),
      .leak    (hit1[c])
    );
    assign win_pattern[c] = {pattern_prev[c], pattern[c]};
  end

  // two-round: programmable table
  pattern_table #(.W(10), .NRD(NCHK)) u_tbl (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_we   (cfg_we),
    .cfg_addr (cfg_addr),
    .cfg_data (cfg_data),
    .rd_addr  (win_pattern),
    .rd_hit   (hit2)
  );

  assign seq_hit = dmode_q ? (hit2 & {NCHK{hist_q}}) : hit1;

  // Both adjacency generators serve the same qubits in the same slot.
  a_same_slots: assert property (@(posedge clk) disable iff (!rst_n)
    qvalid_prev == qvalid);

  pq_leak_checker #(.D(D)) u_pq (
    .mlr_leaked (mlr_q),
    .pq_leak    (pq_leak)
  );

  lrc_scheduler #(.D(D), .SLOTS(SLOTS)) u_sched (
    .clk         (clk),
    .rst_n       (rst_n),
    .round_valid (round_valid),
    .mlr_en      (mlr_en),
    .seq_hit     (seq_hit),
    .qvalid      (qvalid),
    .pq_leak     (pq_leak),
    .capture     (capture),
    .busy        (busy),
    .slot        (slot),
    .lrc_valid   (lrc_valid),
    .lrc_mask    (lrc_mask),
    .spec_mask   (spec_mask),
    .lrc_count   (lrc_count),
    .overrun     (overrun)
  );

  mobility_estimator #(.D(D), .CNT_W(32), .THRESH_PCT(5)) u_mob (
    .clk            (clk),
    .rst_n          (rst_n),
    .clear          (mob_clear),
    .update         (lrc_valid),
    .spec_mask      (spec_mask),
    .mlr_leaked     (mlr_q),
    .pairs          (mob_pairs),
    .leaked_pairs   (mob_leaked_pairs),
    .estimate_valid (mob_valid),
    .mobility_high  (mob_high)
  );

endmodule
