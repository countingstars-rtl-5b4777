// tb_countingstars_top - end-to-end test of the on-board engine at its
// default parameters (4 ports, 2 parsers per port, 65536 counters).
//
// The testbench plays the ground controller: for each period it draws a set
// of flows (src, dst satellite pairs), computes their Cantor ids, searches
// the smallest modulus h under which all ids are distinct (the minimal
// perfect hash seed) and uplinks it. It then offers packets of those flows
// on the four ports, ends the period, and checks every reported counter
// word against its own per-flow, per-port counts: word m must hold the
// counts of the flow whose id is congruent to m modulo h, and words no flow
// maps to must be zero. Headers carry random packet lengths, which the
// default count unit (one per packet) must ignore. It also checks:
//   * the latency from port to counter write (6 cycles) on an idle engine;
//   * the rate: with all four ports offering a packet every cycle, one
//     counter write per cycle, the rest of the traffic stalled at the ports;
//   * a 16-bit port subfield saturating after 65535 packets of one flow;
//   * a seed arriving during a period is applied after it, a refused seed
//     raises seed_err, the previous period's report is sent again before
//     the counters are cleared, and packets between periods are counted as
//     unmeasured;
//   * the report rate of three cycles per counter word.
// Every mechanism must occur at least once.
module tb_countingstars_top;
  import cs_pkg::*;
  localparam int ADDR_W = 16, SEED_W = 17;

  logic clk = 0, rst_n = 0;
  logic [NPORT-1:0] pkt_valid, pkt_ready;
  hdr_t pkt_hdr [NPORT];
  logic seed_valid, period_end;
  logic [SEED_W-1:0] seed;
  logic tx_valid, tx_ready, tx_last, tx_retx;
  logic [ADDR_W-1:0] tx_index;
  counter_t tx_data;
  logic meas_en, seed_err, ev_bypass, ev_sat;
  meas_state_t state;
  logic [31:0] unmeasured;

  countingstars_top dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- ground controller model ----------------
  int fsrc [$], fdst [$];           // flows of the period being driven
  longint fid [$];
  int nsrc [$], ndst [$];           // flows of the next period (ground side)
  longint nid [$];

  function automatic longint cantor_ref(longint s, longint d);
    return (s + d) * (s + d + 1) / 2 + d;
  endfunction

  // Smallest h >= n with all ids distinct modulo h.
  function automatic int min_seed(longint ids [$]);
    for (int h = (ids.size() > 0 ? ids.size() : 1); h <= 65536; h++) begin
      bit used [int];
      bit ok = 1;
      foreach (ids[i]) begin
        int m = int'(ids[i] % h);
        if (used.exists(m)) begin ok = 0; break; end
        used[m] = 1;
      end
      if (ok) return h;
    end
    return 0;
  endfunction

  task automatic new_flow_set(input int n);
    nsrc.delete(); ndst.delete(); nid.delete();
    while (nid.size() < n) begin
      int s = $urandom % 1584, d = $urandom % 1584;
      longint t = cantor_ref(s, d);
      bit dup = 0;
      if (s == d) continue;
      foreach (nid[i]) if (nid[i] == t) dup = 1;
      if (dup) continue;
      nsrc.push_back(s); ndst.push_back(d); nid.push_back(t);
    end
  endtask

  // Start driving and counting the next period's flows.
  task automatic adopt_next();
    fsrc = nsrc; fdst = ndst; fid = nid;
    cnt.delete();
    foreach (fid[i]) cnt[i] = '{default: 0};
  endtask

  // ---------------- reference counts and events ----------------
  longint cnt [int][NPORT];       // flow index -> per-port count
  int mode_rate = 50;             // percent chance a port offers a packet
  int only_flow = -1, only_port = -1;
  bit traffic_on = 0;
  int n_stall = 0, n_bypass = 0, n_sat = 0, n_unmeas = 0, n_drain_wait = 0;
  int n_retx = 0, n_seed_err = 0, n_clear = 0, n_writes = 0;
  int cur_flow [NPORT];

  // Port handshakes are sampled between the drivers' negedge update and the
  // next rising edge, where they are stable.
  always @(negedge clk) if (rst_n) begin
    #2;
    for (int p = 0; p < NPORT; p++) begin
      if (pkt_valid[p] && pkt_ready[p] && meas_en) begin
        int f;
        f = cur_flow[p];
        if (cnt[f][p] < 65535) cnt[f][p]++;
      end
      if (pkt_valid[p] && !meas_en) n_unmeas++;
      if (pkt_valid[p] && !pkt_ready[p]) n_stall++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    n_bypass += int'(ev_bypass);
    n_sat    += int'(ev_sat);
    n_seed_err += int'(seed_err);
    if (state == S_DRAIN && dut.pipe_busy) n_drain_wait++;
    if (state == S_CLEAR) n_clear++;
    if (dut.u_upd.wr_en) n_writes++;
  end

  // Port drivers: a packet stays offered until taken (valid/ready rule).
  initial begin
    pkt_valid = '0;
    for (int p = 0; p < NPORT; p++) begin pkt_hdr[p] = '0; cur_flow[p] = 0; end
    forever begin
      @(negedge clk);
      for (int p = 0; p < NPORT; p++) begin
        if (pkt_valid[p] && !pkt_ready[p]) continue;
        pkt_valid[p] = 0;
        if (!traffic_on || fid.size() == 0) continue;
        if (only_port >= 0 && p != only_port) continue;
        if (int'($urandom % 100) < mode_rate) begin
          int f;
          f = (only_flow >= 0) ? only_flow : int'($urandom % fid.size());
          // bursts of one flow make back-to-back updates of one counter
          if (only_flow < 0 && ($urandom % 4 == 0)) f = 0;
          cur_flow[p] = f;
          pkt_hdr[p] = {16'($urandom), 5'($urandom), 11'(fsrc[f]), 5'($urandom), 11'(fdst[f])};
          pkt_valid[p] = 1;
        end
      end
    end
  end

  // ---------------- report collection ----------------
  counter_t rep_data [$];
  int rep_idx [$];
  bit rep_retx [$];
  int rep_last = 0;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      rep_data.push_back(tx_data); rep_idx.push_back(int'(tx_index)); rep_retx.push_back(tx_retx);
      if (tx_last) rep_last++;
    end
  end
  always @(negedge clk) tx_ready = ($urandom % 5) != 0;

  // Report rate: within one report stream, a word offered right after the
  // previous word was taken must be taken exactly three cycles later when
  // tx_ready is high (read, capture, offer).
  int last_hs = 0, n_rate3 = 0, n_rate_bad = 0;
  bit in_stream = 0, prev_hs = 0, prev_valid = 0;
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      if (in_stream && (prev_hs || !prev_valid)) begin
        if (cyc - last_hs == 3) n_rate3++; else n_rate_bad++;
      end else if (in_stream && cyc - last_hs < 3) n_rate_bad++;
      last_hs = cyc;
      in_stream = !tx_last;
    end
    prev_hs = tx_valid && tx_ready;
    prev_valid = tx_valid;
  end

  task automatic give_seed(input int s);
    @(negedge clk); seed_valid = 1; seed = SEED_W'(s);
    @(negedge clk); seed_valid = 0;
  endtask

  function automatic counter_t expected_word(int m, int h);
    counter_t w = '0;
    foreach (fid[i]) if (int'(fid[i] % h) == m)
      for (int p = 0; p < NPORT; p++) w[p*SUB_W +: SUB_W] = SUB_W'(cnt[i][p]);
    return w;
  endfunction

  // Check the next h report words (one whole report) against the counts.
  task automatic check_report(input int h, input bit retx, output counter_t words [$]);
    int bad = 0;
    words.delete();
    wait (rep_data.size() >= h);
    for (int m = 0; m < h; m++) begin
      counter_t w = rep_data.pop_front();
      int ix = rep_idx.pop_front();
      bit rx = rep_retx.pop_front();
      words.push_back(w);
      if (ix != m || rx != retx || w != expected_word(m, h)) begin
        bad++;
        if (bad < 5) $display("FAIL: report word %0d (idx %0d retx %0d) = %h exp %h", m, ix, rx, w, expected_word(m, h));
      end
    end
    checks++;
    if (bad != 0) failures++;
  endtask

  task automatic end_period();
    @(negedge clk); period_end = 1;
    @(negedge clk); period_end = 0;
  endtask

  initial begin
    int h1, h2, h3, t0, t1, w0;
    counter_t rep [$], rep_again [$];
    bit pending_seen = 0;
    seed_valid = 0; seed = 0; period_end = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // ---------- period 1: 60 flows ----------
    new_flow_set(60);
    h1 = min_seed(nid);
    $display("period 1: %0d flows, seed h = %0d", nid.size(), h1);
    check(h1 >= 60, "seed at least the number of flows");
    adopt_next();
    give_seed(h1);
    wait (meas_en);
    // Latency on an idle engine: one packet on port 4 (index 3).
    @(negedge clk);
    cur_flow[3] = 5; pkt_hdr[3] = {16'd1500, 5'd0, 11'(fsrc[5]), 5'd0, 11'(fdst[5])}; pkt_valid[3] = 1;
    @(posedge clk); #1;
    t0 = cyc;
    pkt_valid[3] = 0;
    while (!dut.u_upd.wr_en) begin @(posedge clk); #1; end
    t1 = cyc + 1;     // the memory takes the write on the next edge
    check(t1 - t0 == 6, $sformatf("port-to-counter latency %0d cycles (expected 6)", t1 - t0));
    check(int'(dut.u_upd.wr_addr) == int'(fid[5] % h1), "packet written at BASE + t mod h");
    // Random traffic, then full rate on all four ports.
    traffic_on = 1; mode_rate = 20;
    repeat (2000) @(posedge clk);
    mode_rate = 100;
    repeat (10) @(posedge clk);
    w0 = n_writes;
    repeat (2000) @(posedge clk);
    check(n_writes - w0 >= 1990, $sformatf("full rate: %0d counter writes in 2000 cycles", n_writes - w0));
    mode_rate = 30;
    repeat (1000) @(posedge clk);
    // The ground computes period 2 ahead; its seed arrives during period 1.
    new_flow_set(60);
    h2 = min_seed(nid);
    give_seed(h2);
    repeat (5) @(posedge clk);
    pending_seen = dut.u_ctrl.pend_valid && meas_en && dut.u_ctrl.cur_seed == SEED_W'(h1);
    check(pending_seen, "early seed held while period 1 runs");
    repeat (500) @(posedge clk);
    // Period ends under traffic: drain, then report.
    end_period();
    repeat (20) @(posedge clk);
    traffic_on = 0;
    check_report(h1, 0, rep);
    // The held seed starts period 2 at once: resend, clear, measure.
    check_report(h1, 1, rep_again);
    check(rep_again == rep, "retransmitted report equals the first");
    wait (meas_en);
    check(dut.u_ctrl.cur_seed == SEED_W'(h2), "period 2 uses the held seed");

    // ---------- period 2: 60 new flows, one port subfield saturates ----------
    $display("period 2: %0d flows, seed h = %0d", nid.size(), h2);
    adopt_next();
    traffic_on = 1; mode_rate = 40;
    repeat (1500) @(posedge clk);
    only_flow = 7; only_port = 2; mode_rate = 100;
    repeat (65600) @(posedge clk);
    check(cnt[7][2] == 65535, "saturation reached in the reference");
    only_flow = -1; only_port = -1; mode_rate = 40;
    repeat (1500) @(posedge clk);
    end_period();
    repeat (10) @(posedge clk);
    traffic_on = 0;
    check_report(h2, 0, rep);
    begin
      counter_t w7;
      longint id7;
      int m7;
      id7 = fid[7];
      m7 = int'(id7 % longint'(h2));
      w7 = rep[m7];
      check(w7[2*SUB_W +: SUB_W] == 16'hFFFF, "port 3 subfield of flow 7 saturated");
    end
    // A refused seed leaves the held data alone.
    give_seed(0);
    repeat (5) @(posedge clk);
    check(state == S_HOLD, "holding after a refused seed");

    // ---------- period 3: the five flows of a small example ----------
    new_flow_set(5);
    h3 = min_seed(nid);
    $display("period 3: %0d flows, seed h = %0d", nid.size(), h3);
    give_seed(h3);
    check_report(h2, 1, rep_again);
    check(rep_again == rep, "period 2 report sent again on the new seed");
    wait (meas_en);
    adopt_next();
    traffic_on = 1; mode_rate = 60;
    repeat (3000) @(posedge clk);
    end_period();
    repeat (10) @(posedge clk);
    traffic_on = 0;
    check_report(h3, 0, rep);
    repeat (20) @(posedge clk);

    check(unmeasured == 32'(n_unmeas), $sformatf("unmeasured %0d exp %0d", unmeasured, n_unmeas));
    check(rep_data.size() == 0, "no stray report words");
    $display("events: stall=%0d bypass=%0d saturate=%0d unmeasured=%0d drain_wait=%0d seed_err=%0d clear=%0d pending_seed=%0d",
             n_stall, n_bypass, n_sat, n_unmeas, n_drain_wait, n_seed_err, n_clear, int'(pending_seen));
    check(n_stall > 0, "port stall happened");
    check(n_bypass > 0, "counter bypass happened");
    check(n_sat > 0, "subfield saturation happened");
    check(n_unmeas > 0, "packets between periods happened");
    check(n_drain_wait > 0, "drain waited for the pipeline");
    check(n_seed_err == 1, "one seed refused");
    check(n_clear > 0, "memory clear happened");
    check(n_rate3 > 0 && n_rate_bad == 0,
          $sformatf("report rate: %0d words at three cycles, %0d off", n_rate3, n_rate_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
