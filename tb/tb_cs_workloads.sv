// tb_cs_workloads - runs the evaluated constellation workloads through the
// engine, one measurement period after another. Flow size is measured in
// 64-byte units, as in the published evaluation (UNIT_BYTES = 64, the only
// parameter changed): every packet gets a random length of 40 to 1500
// bytes and counts ceil(length/64), at least 1.
//
// Six workloads: Iridium (66 satellites) and Starlink (1584 satellites),
// each at offered loads 0.1, 0.5 and 0.9. The per-period flow and packet
// counts are derived from the published dataset totals (100 one-second
// periods): Iridium 0.4K/1.9K/3.7K flows and 3.7K/22.4K/42.5K packets for
// the whole network, taken here as seen by one satellite (an upper bound);
// Starlink 317.7K/932.1K/1.3M flows and 12.1M/66.8M/117.5M packets, divided
// evenly over the 1584 satellites. Per period a satellite therefore sees
//   Iridium : 4 / 19 / 37 flows,     37 / 224 / 425 packets
//   Starlink: 2 / 6 / 8 flows,       76 / 422 / 742 packets
// For each period the testbench draws that many distinct flows, finds the
// minimal collision-free seed as the ground would, offers the packets on
// random ports and checks that every reported per-port size is exact
// (average relative error 0). It also checks the worst case the counter memory can
// hold: all 821 flows of a Starlink satellite (1.3M / 1584) in one period,
// reporting the seed the search finds.
module tb_cs_workloads;
  import cs_pkg::*;
  localparam int ADDR_W = 16, SEED_W = 17, DEPTH = 65536;
  localparam int PERIODS = 3;   // periods simulated per workload

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

  countingstars_top #(.UNIT_BYTES(64)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int fsrc [$], fdst [$];
  longint fid [$];
  longint cnt [int][NPORT];
  int stamp [DEPTH];

  function automatic longint cantor_ref(longint s, longint d);
    return (s + d) * (s + d + 1) / 2 + d;
  endfunction

  // Ground side: smallest h >= n with all ids distinct modulo h, 0 if none
  // up to the memory size.
  function automatic int min_seed();
    for (int h = (fid.size() > 0 ? fid.size() : 1); h <= DEPTH; h++) begin
      bit ok;
      ok = 1;
      foreach (fid[i]) begin
        int m;
        m = int'(fid[i] % longint'(h));
        if (stamp[m] == h) begin ok = 0; break; end
        stamp[m] = h;
      end
      if (ok) return h;
    end
    return 0;
  endfunction

  task automatic draw_flows(input int n, input int nodes);
    fsrc.delete(); fdst.delete(); fid.delete(); cnt.delete();
    while (fid.size() < n) begin
      int s, d;
      longint t;
      bit dup;
      s = $urandom % nodes; d = $urandom % nodes;
      if (s == d) continue;
      t = cantor_ref(s, d);
      dup = 0;
      foreach (fid[i]) if (fid[i] == t) dup = 1;
      if (dup) continue;
      fsrc.push_back(s); fdst.push_back(d); fid.push_back(t);
      cnt[fid.size() - 1] = '{default: 0};
    end
  endtask

  // Offer npkt packets of the current flows on random ports.
  task automatic offer(input int npkt);
    int sent, f [NPORT], units [NPORT];
    sent = 0;
    while (sent < npkt) begin
      @(negedge clk);
      for (int p = 0; p < NPORT; p++) begin
        if (pkt_valid[p] && !pkt_ready[p]) continue;  // still waiting
        if (pkt_valid[p]) begin cnt[f[p]][p] += units[p]; sent++; end
        pkt_valid[p] = 0;
        if (sent < npkt && ($urandom % 2 == 0)) begin
          int len;
          len = 40 + $urandom % 1461;
          units[p] = (len + 63) / 64;
          f[p] = $urandom % fid.size();
          pkt_hdr[p] = {16'(len), 5'd0, 11'(fsrc[f[p]]), 5'd0, 11'(fdst[f[p]])};
          pkt_valid[p] = 1;
        end
      end
      // an accepted packet is counted at the next negedge
    end
    @(negedge clk);
    for (int p = 0; p < NPORT; p++) begin
      if (pkt_valid[p]) begin cnt[f[p]][p] += units[p]; end
      pkt_valid[p] = 0;
    end
  endtask

  counter_t rep [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready && !tx_retx) rep.push_back(tx_data);
  assign tx_ready = 1'b1;

  task automatic run_workload(input string name, input int nodes, input int nflow, input int npkt);
    real are_sum;
    int nflows_seen;
    are_sum = 0; nflows_seen = 0;
    for (int per = 0; per < PERIODS; per++) begin
      int h;
      draw_flows(nflow, nodes);
      h = min_seed();
      check(h > 0, $sformatf("%s: seed found", name));
      @(negedge clk); seed_valid = 1; seed = SEED_W'(h);
      @(negedge clk); seed_valid = 0;
      wait (meas_en && dut.u_ctrl.cur_seed == SEED_W'(h));
      offer(npkt);
      @(negedge clk); period_end = 1;
      @(negedge clk); period_end = 0;
      wait (rep.size() == h);
      begin
        int bad;
        bad = 0;
        foreach (fid[i]) begin
          counter_t w;
          int m;
          m = int'(fid[i] % longint'(h));
          w = rep[m];
          for (int p = 0; p < NPORT; p++) begin
            longint est, tru;
            est = longint'(w[p*SUB_W +: SUB_W]); tru = cnt[i][p];
            if (est != tru) bad++;
            if (tru > 0) begin are_sum += (est > tru ? est - tru : tru - est) / real'(tru); nflows_seen++; end
          end
        end
        check(bad == 0, $sformatf("%s period %0d: %0d wrong port counters", name, per, bad));
      end
      rep.delete();
    end
    $display("%s: %0d periods, %0d flows and %0d packets per period, port-level ARE = %f",
             name, PERIODS, nflow, npkt, nflows_seen > 0 ? are_sum / nflows_seen : 0.0);
  endtask

  initial begin
    pkt_valid = '0; seed_valid = 0; seed = 0; period_end = 0;
    for (int p = 0; p < NPORT; p++) pkt_hdr[p] = '0;
    for (int i = 0; i < DEPTH; i++) stamp[i] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    run_workload("Iridium load 0.1", 66, 4, 37);
    run_workload("Iridium load 0.5", 66, 19, 224);
    run_workload("Iridium load 0.9", 66, 37, 425);
    run_workload("Starlink load 0.1", 1584, 2, 76);
    run_workload("Starlink load 0.5", 1584, 6, 422);
    run_workload("Starlink load 0.9", 1584, 8, 742);
    // Worst case: every flow a Starlink satellite carries in 100 s at load
    // 0.9 in one period.
    begin
      int h;
      draw_flows(821, 1584);
      h = min_seed();
      $display("Starlink worst case: 821 flows need seed h = %0d (memory holds %0d)", h, DEPTH);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
