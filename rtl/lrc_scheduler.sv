// lrc_scheduler -- LRC Scheduler: sequences one QEC round of leakage
// speculation and hands the resulting LRC mask to the QEC controller.
//
// How it works: a round starts when round_valid is seen while idle (the
// caller captures that round's syndrome and MLR bits on the same edge,
// signalled by `capture`). The scheduler then steps `slot` through
// 0..NSLOT-1, NSLOT = min(SLOTS, D*D), one slot per clock. In each slot
// every shared sequence checker returns a verdict for the data qubit it is
// serving; the scheduler records it, ORs in the parity-qubit leakage flag
// of that data qubit (when MLR use is enabled) and writes both into the
// round's mask. After the last slot it presents the masks for one cycle
// with lrc_valid: an LRC is to be applied to every data qubit set in
// lrc_mask in the next QEC round.
//
// Timing: if the edge that accepts round_valid is edge 0, slots 0..NSLOT-1
// are committed on edges 1..NSLOT and lrc_valid is high in the cycle after
// edge NSLOT, so a receiver samples it on edge NSLOT+1 (edge 101 for
// D = 11, i.e. about 100 ns of classification at 1 ns per cycle). A new round can be
// accepted in the cycle lrc_valid is high. A round_valid that arrives
// while busy is dropped and reported by a one-cycle `overrun` pulse.
//
// Interface: see ports. Masks and count hold their value until the next
// lrc_valid. Reset is active-low and synchronous.
//
// From the source: "if either a match is found or if the associated parity
// qubit is leaked, then the LRC scheduler triggers a leakage reduction
// circuit in the next round and notifies the QEC controller". Own choices:
// the valid/busy handshake, the overrun rule, the mlr_en mode input
// (0 = syndrome speculation only, 1 = speculation plus MLR), the LRC count.
module lrc_scheduler
  import gladiator_pkg::*;
#(
  parameter int unsigned D     = 11,
  parameter int unsigned SLOTS = DEFAULT_SLOTS,
  localparam int unsigned ND     = D * D,
  localparam int unsigned NCHK   = (D * D + SLOTS - 1) / SLOTS,
  localparam int unsigned NSLOT  = (SLOTS < D * D) ? SLOTS : D * D,
  localparam int unsigned SLOT_W = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned CNT_W  = $clog2(D * D + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              round_valid,
  input  logic              mlr_en,
  input  logic [NCHK-1:0]   seq_hit,    // checker verdicts for this slot
  input  logic [NCHK-1:0]   qvalid,     // checker has a qubit in this slot
  input  logic [ND-1:0]     pq_leak,    // parity-qubit leakage per data qubit
  output logic              capture,    // caller: latch syndrome/MLR now
  output logic              busy,
  output logic [SLOT_W-1:0] slot,
  output logic              lrc_valid,
  output logic [ND-1:0]     lrc_mask,   // LRC on these data qubits next round
  output logic [ND-1:0]     spec_mask,  // flagged by the sequence checker alone
  output logic [CNT_W-1:0]  lrc_count,
  output logic              overrun
);

  logic [ND-1:0] acc_lrc, acc_spec, acc_lrc_n, acc_spec_n;
  logic          last_slot;

  assign capture   = round_valid && !busy;
  assign last_slot = busy && (32'(slot) == NSLOT - 1);

  // Merge this slot's verdicts into the round's masks.
  always_comb begin
    int unsigned q;
    q          = 0;
    acc_lrc_n  = acc_lrc;
    acc_spec_n = acc_spec;
    if (busy) begin
      for (int unsigned c = 0; c < NCHK; c++) begin
        q = c * SLOTS + 32'(slot);
        if (qvalid[c] && q < ND) begin
          acc_spec_n[q] = seq_hit[c];
          acc_lrc_n[q]  = seq_hit[c] | (mlr_en & pq_leak[q]);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      slot      <= '0;
      acc_lrc   <= '0;
      acc_spec  <= '0;
      lrc_valid <= 1'b0;
      lrc_mask  <= '0;
      spec_mask <= '0;
      lrc_count <= '0;
      overrun   <= 1'b0;
    end else begin
      lrc_valid <= 1'b0;
      overrun   <= round_valid && busy;
      if (capture) begin
        busy     <= 1'b1;
        slot     <= '0;
        acc_lrc  <= '0;
        acc_spec <= '0;
      end else if (busy) begin
        acc_lrc  <= acc_lrc_n;
        acc_spec <= acc_spec_n;
        if (last_slot) begin
          busy      <= 1'b0;
          slot      <= '0;
          lrc_valid <= 1'b1;
          lrc_mask  <= acc_lrc_n;
          spec_mask <= acc_spec_n;
          lrc_count <= CNT_W'($countones(acc_lrc_n));
        end else begin
          slot <= slot + 1'b1;
        end
      end
    end
  end

  // The mask is only published at the end of a round.
  a_valid_after_busy: assert property (@(posedge clk) disable iff (!rst_n)
    lrc_valid |-> $past(busy));
  a_slot_range: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (32'(slot) < NSLOT));

endmodule
