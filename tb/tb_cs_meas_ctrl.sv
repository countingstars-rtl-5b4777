// tb_cs_meas_ctrl - walks the measurement controller through its periods
// with a behavioural counter memory:
//   seed 5 after reset -> memory words 0..4 cleared, measuring starts;
//   the test writes known values into those words (standing in for packets);
//   period_end with the pipeline busy for a while -> no readout until it
//   drains; then words 0..4 are reported in order (tx_retx = 0, tx_last on
//   the fifth) under random tx_ready; the data is held (HOLD);
//   seed 0 and an oversize seed are refused (seed_err);
//   seed 3 -> the same five words are reported again (tx_retx = 1), words
//   0..2 are cleared, measuring restarts with cur_seed = 3;
//   a seed arriving during a period is applied only after that period.
module tb_cs_meas_ctrl;
  import cs_pkg::*;
  localparam int DEPTH = 64, ADDR_W = 6, SEED_W = 7, BASE = 8;
  logic clk = 0, rst_n = 0;
  logic seed_valid, period_end, pipe_busy, meas_en, seed_err;
  logic [SEED_W-1:0] seed, cur_seed;
  meas_state_t state;
  logic mem_re, mem_we;
  logic [ADDR_W-1:0] mem_raddr, mem_waddr, tx_index;
  counter_t mem_rdata, mem_wdata, tx_data;
  logic tx_valid, tx_ready, tx_last, tx_retx;
  int checks = 0, failures = 0;

  cs_meas_ctrl #(.DEPTH(DEPTH), .ADDR_W(ADDR_W), .SEED_W(SEED_W), .BASE(BASE)) dut (.*);
  always #5 clk = ~clk;

  counter_t mem [DEPTH];
  always @(posedge clk) begin
    if (mem_re) mem_rdata <= mem[mem_raddr];
    if (mem_we) mem[mem_waddr] <= mem_wdata;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int errs = 0;
  always @(posedge clk) if (rst_n && seed_err) errs++;

  task automatic give_seed(input int s);
    @(negedge clk); seed_valid = 1; seed = SEED_W'(s);
    @(negedge clk); seed_valid = 0;
  endtask

  // Collect n reports and compare with the expected words.
  task automatic expect_report(input int n, input bit retx, input counter_t exp [$]);
    int k = 0;
    int guard = 0;
    while (k < n && guard < 2000) begin
      @(negedge clk);
      tx_ready = ($urandom % 3) != 0;
      #1;
      if (tx_valid && tx_ready) begin
        check(tx_index == ADDR_W'(k), $sformatf("report index %0d exp %0d", tx_index, k));
        check(tx_data == exp[k], $sformatf("report data %0d", k));
        check(tx_retx == retx, "retx flag");
        check(tx_last == (k == n - 1), "last flag");
        k++;
      end
      guard++;
    end
    check(k == n, $sformatf("%0d of %0d words reported", k, n));
    @(negedge clk); tx_ready = 0;
  endtask

  initial begin
    counter_t vals [$];
    seed_valid = 0; seed = 0; period_end = 0; pipe_busy = 0; tx_ready = 0;
    repeat (3) @(posedge clk);
    // Fill the memory with junk once reset holds the controller.
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) mem[a] = {$urandom | 1, $urandom};
    rst_n = 1;
    repeat (3) @(posedge clk); #1;
    check(state == S_IDLE && !meas_en, "idle after reset");
    give_seed(5);
    wait (meas_en); #1;
    check(cur_seed == 7'd5, "seed 5 in use");
    for (int a = 0; a < 5; a++) check(mem[BASE + a] == '0, $sformatf("word %0d cleared", a));
    check(mem[BASE + 5] != '0 || mem[BASE - 1] != '0, "only the seed's words cleared");
    // Stand-in for counting: known values.
    for (int a = 0; a < 5; a++) begin
      mem[BASE + a] = 64'h0001_0002_0003_0000 + 64'(a); vals.push_back(mem[BASE + a]);
    end
    @(negedge clk); pipe_busy = 1; period_end = 1;
    @(negedge clk); period_end = 0;
    check(!meas_en && state == S_DRAIN, "drain after period end");
    repeat (5) begin @(negedge clk); check(!tx_valid && !mem_re, "no readout while the pipeline is busy"); end
    pipe_busy = 0;
    expect_report(5, 0, vals);
    repeat (3) @(posedge clk); #1;
    check(state == S_HOLD && !meas_en, "holding data until the next seed");
    give_seed(0);
    give_seed(DEPTH - BASE + 1);
    repeat (2) @(posedge clk); #1;
    check(errs == 2, $sformatf("two seeds refused (%0d)", errs));
    check(state == S_HOLD, "refused seeds change nothing");
    give_seed(3);
    expect_report(5, 1, vals);
    wait (meas_en); #1;
    check(cur_seed == 7'd3, "seed 3 in use");
    for (int a = 0; a < 3; a++) check(mem[BASE + a] == '0, "cleared for the new period");
    check(mem[BASE + 3] == vals[3], "words beyond the new seed untouched");
    // Seed during a period: held, used after the period's report.
    give_seed(4);
    repeat (4) @(posedge clk); #1;
    check(meas_en && cur_seed == 7'd3, "early seed does not disturb the period");
    mem[BASE + 0] = 64'd11; mem[BASE + 1] = 64'd22; mem[BASE + 2] = 64'd33;
    @(negedge clk); period_end = 1;
    @(negedge clk); period_end = 0;
    vals = '{64'd11, 64'd22, 64'd33};
    expect_report(3, 0, vals);
    expect_report(3, 1, vals);
    wait (meas_en); #1;
    check(cur_seed == 7'd4, "pending seed applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
