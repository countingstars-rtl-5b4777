// tb_cs_port_parsers - one port with its parser group (default M = 2).
// Streams headers into the port with the outputs always taken and checks
// that a packet is accepted every cycle, that packet k comes out of parser
// k mod M, and that each result carries the right Cantor id and port tag.
// A second phase applies random output backpressure and checks that no
// packet is lost or duplicated.
module tb_cs_port_parsers;
  import cs_pkg::*;
  localparam int M = 2;
  logic clk = 0, rst_n = 0;
  port_idx_t port_id = 2'd1;
  logic in_valid, in_ready, busy;
  hdr_t in_hdr;
  logic [M-1:0] out_valid, out_ready;
  flow_rec_t out_rec [M];
  int checks = 0, failures = 0;

  cs_port_parsers #(.M(M)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_t(longint s, longint d);
    return (s + d) * (s + d + 1) / 2 + d;
  endfunction

  longint exp_q [M][$];
  int sent = 0, got = 0, accepted_cycles = 0;

  // Scoreboard on the outputs.
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < M; i++) if (out_valid[i] && out_ready[i]) begin
      longint e;
      checks++;
      if (exp_q[i].size() == 0) begin failures++; $display("FAIL: unexpected output on parser %0d", i); end
      else begin
        e = exp_q[i].pop_front();
        if (longint'(out_rec[i].t) != e || out_rec[i].port != port_id || out_rec[i].inc != inc_t'(1)) begin
          failures++; $display("FAIL: parser %0d t=%0d exp %0d", i, out_rec[i].t, e);
        end
      end
      got++;
    end
  end

  task automatic run(input int n, input bit random_ready);
    int k = 0;
    while (k < n) begin
      longint s, d;
      s = $urandom % 2048; d = $urandom % 2048;
      @(negedge clk);
      in_valid = 1; in_hdr = {16'($urandom), 5'd0, 11'(s), 5'd0, 11'(d)};
      out_ready = random_ready ? M'($urandom) : '1;
      #1;
      while (!in_ready) begin
        @(negedge clk); if (random_ready) out_ready = M'($urandom); #1;
      end
      exp_q[sent % M].push_back(ref_t(s, d));
      @(posedge clk);
      sent++; k++; accepted_cycles++;
    end
    @(negedge clk); in_valid = 0; out_ready = '1;
    repeat (6) @(posedge clk);
  endtask

  initial begin
    int c0, c1;
    in_valid = 0; in_hdr = 0; out_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Full rate: 200 packets must take 200 consecutive cycles.
    c0 = $time;
    run(200, 0);
    c1 = $time;
    check(got == 200, $sformatf("got %0d of 200", got));
    check((c1 - c0) / 10 <= 200 + 8, $sformatf("full rate: %0d cycles for 200 packets", (c1 - c0) / 10));
    run(500, 1);
    check(got == sent, $sformatf("got %0d of %0d under backpressure", got, sent));
    check(!busy, "idle at the end");
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
