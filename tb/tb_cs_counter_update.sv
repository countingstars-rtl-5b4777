// tb_cs_counter_update - drives the jump-based counter update with a
// behavioural read-first memory. Random packets, one per cycle or with gaps,
// hit a handful of counters on random ports so that back-to-back updates of
// the same counter (the bypass case) occur often. The test keeps its own
// per-counter, per-port counts and compares the memory with them at the end.
// The first part adds 1 per packet; the second adds random increments of
// 1..40, as when 64-byte units are counted.
// One counter is preloaded with a port subfield at 0xFFFE to check that the
// subfield saturates at 0xFFFF and does not carry into the next port.
module tb_cs_counter_update;
  import cs_pkg::*;
  localparam int ADDR_W = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, rd_en, wr_en, busy, ev_bypass, ev_sat;
  logic [ADDR_W-1:0] in_addr, rd_addr, wr_addr;
  port_idx_t in_port;
  inc_t in_inc;
  counter_t rd_data, wr_data;
  int checks = 0, failures = 0;

  cs_counter_update #(.ADDR_W(ADDR_W)) dut (.*);
  always #5 clk = ~clk;

  // Behavioural simple dual-port memory, read-first.
  counter_t mem [1 << ADDR_W];
  always @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cnt [1 << ADDR_W][NPORT];
  int bypasses = 0, sats = 0, writes = 0;
  always @(posedge clk) if (rst_n) begin
    bypasses += int'(ev_bypass);
    sats += int'(ev_sat);
    writes += int'(wr_en);
  end

  initial begin
    int lat_start, lat_end;
    in_valid = 0; in_addr = 0; in_port = 0; in_inc = 1; rd_data = '0;
    // Preload the memory once reset has settled the block (before reset
    // its write port may carry arbitrary values).
    repeat (2) @(posedge clk);
    @(negedge clk);
    for (int a = 0; a < (1 << ADDR_W); a++) begin
      mem[a] = '0;
      for (int p = 0; p < NPORT; p++) cnt[a][p] = 0;
    end
    // Counter 9, port index 1 starts just below saturation.
    mem[9] = 64'h0000_0000_FFFE_0000; cnt[9][1] = 65534;
    repeat (1) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      int a, p, k;
      @(negedge clk);
      if (n < 3000) begin
        in_valid = ($urandom % 5) != 0;
        a = (n % 50 < 25) ? ($urandom % 3) : ($urandom % 16);
      end else begin
        in_valid = 1; a = 9;     // hammer the saturating counter
      end
      p = $urandom % NPORT;
      if (n >= 3000) p = 1;
      k = (n >= 1500 && n < 3000) ? 1 + $urandom % 40 : 1;
      in_addr = ADDR_W'(a); in_port = port_idx_t'(p); in_inc = inc_t'(k);
      if (in_valid) cnt[a][p] = (cnt[a][p] + k > 65535) ? 65535 : cnt[a][p] + k;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    check(!busy, "idle");
    for (int a = 0; a < (1 << ADDR_W); a++)
      for (int p = 0; p < NPORT; p++)
        check(longint'(mem[a][p*SUB_W +: SUB_W]) == cnt[a][p],
              $sformatf("counter %0d port %0d: %0d exp %0d", a, p, mem[a][p*SUB_W +: SUB_W], cnt[a][p]));
    check(mem[9][31:16] == 16'hFFFF && longint'(mem[9][47:32]) == cnt[9][2], "saturated subfield held at 0xFFFF and did not carry");
    check(bypasses > 100, $sformatf("bypass used %0d times", bypasses));
    check(sats > 900, $sformatf("saturation seen %0d times", sats));
    // Latency: request on edge k is written on edge k+1.
    @(negedge clk); in_valid = 1; in_addr = 4'd15; in_port = 2'd3; in_inc = 1;
    @(posedge clk); #1; in_valid = 0;
    check(wr_en && wr_addr == 4'd15 && wr_data == (mem[15] + 64'h0001_0000_0000_0000), "write one cycle after the request, port 4 jumps by 2^48");
    $display("bypasses=%0d saturations=%0d writes=%0d", bypasses, sats, writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
