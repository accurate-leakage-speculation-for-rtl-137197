// tb_top_driver -- stimulus and scoreboard for the whole engine, shared by
// the reduced-size and the full-size end-to-end testbenches.
//
// It plays the QEC controller: it sends ROUNDS rounds of random parity
// flips and MLR leakage flags, each new round in the very cycle the
// previous round's lrc_valid appears (back to back). For every round it
// predicts, from the coordinate-grid reference layout and the cube-string
// templates (tb_ref_pkg), each data qubit's tagged pattern, the sequence
// checker verdict, the parity-qubit leakage flag and hence spec_mask,
// lrc_mask and lrc_count, and compares them with the engine's outputs. It
// also predicts the mobility counters and the 5 % classification, checks
// the latency (NSLOT+1 edges from acceptance to the edge that samples
// lrc_valid) and the throughput, and injects rounds while busy to check
// that they are dropped and reported on overrun.
//
// Mechanism counters (each must fire at least once, else a failure):
// leakage match on a 4-, 3- and 2-bit pattern, a match on a qubit served
// by a checker other than the first, an LRC caused by MLR alone, an MLR
// flag ignored because mlr_en = 0, an overrun, back-to-back acceptance,
// and both mobility regimes.
//
// What it models follows the published flow (pattern match OR MLR flag ->
// LRC next round); the controller's send pattern, the overrun injection and
// the mode schedule are this testbench's own. Ports mirror gladiator_top;
// inputs are driven nonblocking and held across the accepting posedge;
// results are compared at the first negedge with lrc_valid high.
module tb_top_driver #(
  parameter int D      = 5,
  parameter int S      = 10,
  parameter int ROUNDS = 200,
  parameter bit FINISH = 1     // 0: set done and leave the ending to the parent
) (
  input  logic               clk,
  output logic               rst_n,
  output logic               round_valid,
  output logic [D*D-2:0]     syndrome,
  output logic [D*D-2:0]     mlr_leaked,
  output logic               mlr_en,
  output logic               mob_clear,
  output logic               d_mode,
  output logic               cfg_we,
  output logic [9:0]         cfg_addr,
  output logic               cfg_data,
  input  logic               busy,
  input  logic               overrun,
  input  logic               lrc_valid,
  input  logic [D*D-1:0]     lrc_mask,
  input  logic [D*D-1:0]     spec_mask,
  input  logic [$clog2(D*D+1)-1:0] lrc_count,
  input  logic [31:0]        mob_pairs,
  input  logic [31:0]        mob_leaked_pairs,
  input  logic               mob_valid,
  input  logic               mob_high
);
  import tb_ref_pkg::*;

  localparam int ND = D * D, NA = D * D - 1;
  localparam int NSLOT = (S < ND) ? S : ND;
  localparam int WATCHDOG_NS = 4 * ROUNDS * (NSLOT + 8) + 1000;

  int checks = 0, failures = 0;
  bit done = 0;
  int adj[ND][4];
  int nadj[ND];

  // mechanism counters
  int m_hit4 = 0, m_hit3 = 0, m_hit2 = 0, m_hit_shared = 0, m_mlr_only = 0,
      m_mlr_masked = 0, m_overrun = 0, m_b2b = 0, m_mob_high = 0, m_mob_low = 0,
      m_dhit = 0, m_dmiss = 0, m_d_first = 0, m_switch = 0;
  bit tbl[1024];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic check_mob(int r, longint ep, longint el);
    chk(lat == NSLOT + 1, $sformatf("r%0d latency %0d exp %0d", r, lat, NSLOT + 1));
    chk(mob_pairs == 32'(ep) && mob_leaked_pairs == 32'(el),
        $sformatf("r%0d mobility counts %0d/%0d exp %0d/%0d", r, mob_leaked_pairs, mob_pairs, el, ep));
    chk(mob_high == (ep != 0 && el * 100 >= ep * 5), $sformatf("r%0d mobility class", r));
    if (mob_valid && mob_high) m_mob_high++;
    if (mob_valid && !mob_high) m_mob_low++;
  endtask

  // latency monitor (edges from acceptance to lrc_valid sample)
  int cyc = 0, t_acc = 0, lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (round_valid && !busy && rst_n) t_acc <= cyc;
    if (lrc_valid) lat <= cyc - t_acc;
    if (overrun) m_overrun++;
  end

  initial begin
    #(WATCHDOG_NS);
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    logic [ND-1:0] e_spec, e_lrc;
    logic [NA-1:0] syn, ml, syn_prev;
    logic          en, dm, dm_prev;
    longint        ep, el, p_ep, p_el;

    for (int q = 0; q < ND; q++) begin
      nadj[q] = ref_nadj(D, q);
      for (int k = 0; k < 4; k++) adj[q][k] = ref_adj(D, q, k);
    end
    rst_n = 0; round_valid = 0; syndrome = '0; mlr_leaked = '0; mlr_en = 1; mob_clear = 0;
    d_mode = 0; cfg_we = 0; cfg_addr = '0; cfg_data = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // load a random two-round pattern table (about one pattern in three)
    for (int i = 0; i < 1024; i++) begin
      tbl[i]   = ($urandom % 3) == 0;
      cfg_we   <= 1;
      cfg_addr <= 10'(i);
      cfg_data <= tbl[i];
      @(negedge clk);
    end
    cfg_we <= 0;
    syn_prev = '0;
    dm_prev  = 0;
    ep = 0; el = 0; p_ep = 0; p_el = 0;

    for (int r = 0; r < ROUNDS; r++) begin
      bit dense;
      // ---- stimulus for round r
      dense = (r % 3 == 0);
      for (int a = 0; a < NA; a++) begin
        syn[a] = dense ? 1'($urandom) : (($urandom % 8) == 0);
        ml[a]  = (r < ROUNDS / 2) ? (($urandom % 6) == 0) : 1'b0;
      end
      en = (r % 5) != 4;
      dm = (r == 0) || ((r / 10) % 3 == 2);
      if (dm != dm_prev) m_switch++;
      if (r == ROUNDS / 2) begin
        @(negedge clk);
        check_mob(r - 1, ep, el);
        mob_clear <= 1; @(posedge clk); mob_clear <= 0; @(negedge clk);
        ep = 0; el = 0;
        p_ep = 0; p_el = 0;
      end
      // ---- prediction
      for (int q = 0; q < ND; q++) begin
        logic [4:0] p, pp;
        bit pq;
        p = (nadj[q] == 4) ? 5'b00000 : (nadj[q] == 3) ? 5'b10000 : 5'b11000;
        pp = p;
        pq = 0;
        for (int k = 0; k < nadj[q]; k++) begin
          p[nadj[q]-1-k]  = syn[adj[q][k]];
          pp[nadj[q]-1-k] = syn_prev[adj[q][k]];
          if (ml[adj[q][k]]) pq = 1;
        end
        if (!dm) begin
          e_spec[q] = ref_surface(p);
        end else if (r == 0) begin
          e_spec[q] = 1'b0;
          if (tbl[{pp, p}]) m_d_first++;
        end else begin
          e_spec[q] = tbl[{pp, p}];
          if (e_spec[q]) m_dhit++;
          else if (ref_surface(p)) m_dmiss++;
        end
        e_lrc[q]  = e_spec[q] | (en & pq);
        if (e_spec[q]) begin
          if (nadj[q] == 4) m_hit4++;
          else if (nadj[q] == 3) m_hit3++;
          else m_hit2++;
          if (q >= S) m_hit_shared++;
          for (int k = 0; k < nadj[q]; k++) begin
            ep++;
            if (ml[adj[q][k]]) el++;
          end
        end
        if (!e_spec[q] && pq && en) m_mlr_only++;
        if (!e_spec[q] && pq && !en) m_mlr_masked++;
      end
      // ---- send. On even rounds this is the very cycle in which the
      // previous round's lrc_valid is high (back to back); on odd rounds
      // one idle cycle is left first.
      if (r % 2 == 1) @(negedge clk);
      if (r > 0 && lrc_valid) m_b2b++;
      syndrome    <= syn;
      mlr_leaked  <= ml;
      mlr_en      <= en;
      d_mode      <= dm;
      round_valid <= 1;
      syn_prev     = syn;
      dm_prev      = dm;
      @(posedge clk);
      round_valid <= 0;
      syndrome    <= NA'($urandom);    // inputs change after capture
      mlr_leaked  <= '1;
      d_mode      <= !dm;
      @(negedge clk);
      // mobility counters of the previous round (updated on the edge that
      // sampled its lrc_valid, which was at or before this acceptance edge)
      if (r > 0) check_mob(r - 1, p_ep, p_el);
      p_ep = ep;
      p_el = el;
      // a round sent while busy must be dropped
      if (r % 7 == 3) begin
        round_valid <= 1;
        @(posedge clk);
        round_valid <= 0;
      end
      // ---- wait for the result
      do @(negedge clk); while (!lrc_valid);
      chk(spec_mask == e_spec, $sformatf("r%0d spec_mask", r));
      chk(lrc_mask == e_lrc, $sformatf("r%0d lrc_mask", r));
      chk(32'(lrc_count) == $countones(e_lrc), $sformatf("r%0d lrc_count", r));
    end
    @(negedge clk);
    check_mob(ROUNDS - 1, p_ep, p_el);

    $display("D=%0d two-round mode: hits=%0d single-round-only=%0d first-round-suppressed=%0d mode switches=%0d",
             D, m_dhit, m_dmiss, m_d_first, m_switch);
    chk(m_dhit > 0, "no two-round hit");
    chk(m_dmiss > 0, "no single-round match rejected by the two-round table");
    chk(m_d_first > 0, "first round without history not exercised");
    chk(m_switch > 1, "no mode switch");
    $display("D=%0d mechanisms: hit4=%0d hit3=%0d hit2=%0d shared_checker=%0d mlr_only=%0d mlr_masked=%0d overrun=%0d back_to_back=%0d mob_high=%0d mob_low=%0d",
             D, m_hit4, m_hit3, m_hit2, m_hit_shared, m_mlr_only, m_mlr_masked, m_overrun, m_b2b,
             m_mob_high, m_mob_low);
    chk(m_hit4 > 0, "no 4-bit match");
    chk(m_hit3 > 0, "no 3-bit match");
    chk(m_hit2 > 0, "no 2-bit match");
    chk(m_hit_shared > 0 || ND <= S, "no match on a shared checker");
    chk(m_mlr_only > 0, "no MLR-only LRC");
    chk(m_mlr_masked > 0, "no masked MLR");
    chk(m_overrun > 0, "no overrun");
    chk(m_b2b > 0, "no back-to-back round");
    chk(m_mob_high > 0, "no high mobility");
    chk(m_mob_low > 0, "no low mobility");
    done = 1;
    if (FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
