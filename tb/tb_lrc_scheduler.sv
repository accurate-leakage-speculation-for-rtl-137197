// tb_lrc_scheduler -- checks round sequencing of the LRC scheduler.
//  D=5, SLOTS=10: 25 data qubits on 3 shared checkers (the last one serves
//  5 qubits). The testbench plays the checkers: for each round it draws a
//  random verdict per data qubit and random parity-qubit leakage flags, and
//  answers every slot with the verdicts of the qubits being served.
//  Checked per round: lrc_mask, spec_mask, lrc_count, the latency
//  (round_valid to lrc_valid = 10 + 1 cycles), mlr_en = 0 mode, the
//  overrun pulse for a round sent while busy, and back-to-back rounds.
//  A default-size instance (D=11, SLOTS=100) has its latency checked:
//  100 + 1 cycles.
//
// The 100-slot budget per round follows the published sharing argument;
// the handshake, the NSLOT+1 latency, back-to-back acceptance and overrun
// dropping are this design's own and are what is checked here. Inputs are
// driven nonblocking, outputs compared at negedge; a watchdog ends the run.
module tb_lrc_scheduler;
  localparam int D = 5, S = 10, ND = 25, NCHK = 3;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic            round_valid, mlr_en;
  logic [NCHK-1:0] seq_hit, qvalid;
  logic [ND-1:0]   pq_leak;
  logic            capture, busy, lrc_valid, overrun;
  logic [3:0]      slot;
  logic [ND-1:0]   lrc_mask, spec_mask;
  logic [4:0]      lrc_count;

  lrc_scheduler #(.D(D), .SLOTS(S)) dut (.*);

  // default-size instance, latency only
  logic            rv11, cap11, busy11, v11, ov11;
  logic [1:0]      hit11, qv11;
  logic [6:0]      slot11;
  logic [120:0]    m11, s11;
  logic [6:0]      cnt11;
  lrc_scheduler u11 (.clk, .rst_n, .round_valid(rv11), .mlr_en(1'b1), .seq_hit(hit11),
                     .qvalid(qv11), .pq_leak('0), .capture(cap11), .busy(busy11), .slot(slot11),
                     .lrc_valid(v11), .lrc_mask(m11), .spec_mask(s11), .lrc_count(cnt11),
                     .overrun(ov11));
  assign hit11 = 2'b11;
  assign qv11  = {(100 + 32'(slot11)) < 121, 1'b1};

  logic [ND-1:0] verdict;
  always_comb begin
    for (int c = 0; c < NCHK; c++) begin
      int q;
      q = c * S + 32'(slot);
      qvalid[c]  = q < ND;
      seq_hit[c] = (q < ND) ? verdict[q] : 1'b0;
    end
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_overrun = 0;
  always @(posedge clk) if (overrun) n_overrun++;

  // Latency monitor: cycles from the edge that accepts a round (capture)
  // to the edge that first samples lrc_valid high.
  int cyc = 0, t_cap = 0, t_cap11 = 0, last_lat = 0, last_lat11 = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (capture) t_cap <= cyc;
    if (lrc_valid) last_lat <= cyc - t_cap;
    if (cap11) t_cap11 <= cyc;
    if (v11) last_lat11 <= cyc - t_cap11;
  end

  initial begin
    round_valid = 0; mlr_en = 1; verdict = '0; pq_leak = '0; rv11 = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < 40; r++) begin
      logic [ND-1:0] exp_lrc;
      int lat;
      verdict = ND'($urandom) & ND'($urandom);
      pq_leak = ND'($urandom) & ND'($urandom) & ND'($urandom);
      mlr_en  = (r % 4) != 3;
      exp_lrc = verdict | (mlr_en ? pq_leak : '0);
      round_valid <= 1;
      @(posedge clk);
      round_valid <= 0;
      lat = 0;
      @(negedge clk);
      chk(busy == 1'b1, "busy after round_valid");
      if (r == 5) begin   // round sent while busy must be dropped
        round_valid <= 1;
        @(posedge clk);
        round_valid <= 0;
        lat++;
      end
      while (!lrc_valid) begin
        @(posedge clk);
        lat++;
      end
      @(negedge clk);
      chk(last_lat == S + 1, $sformatf("latency %0d", last_lat));
      chk(lrc_mask == exp_lrc, $sformatf("r%0d lrc_mask %h exp %h", r, lrc_mask, exp_lrc));
      chk(spec_mask == verdict, $sformatf("r%0d spec_mask", r));
      chk(lrc_count == 5'($countones(exp_lrc)), $sformatf("r%0d count", r));
      chk(!busy, "idle with lrc_valid");
    end
    chk(n_overrun == 1, $sformatf("overrun pulses %0d", n_overrun));
    // default size latency
    begin
      int lat;
      rv11 <= 1;
      @(posedge clk);
      rv11 <= 0;
      lat = 1;
      while (!v11) begin @(posedge clk); lat++; end
      @(negedge clk);
      chk(last_lat11 == 101, $sformatf("d11 latency %0d", last_lat11));
      chk(&m11 && cnt11 == 121, "d11 full mask");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
