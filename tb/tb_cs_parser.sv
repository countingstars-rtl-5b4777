// tb_cs_parser - feeds random (src, dst) headers to one parser and checks
// the Cantor identifier t = (s+d)(s+d+1)/2 + d (computed here with 64-bit
// integers), the port tag, the two-cycle latency and the one-packet-per-two-
// cycles rate, under random output backpressure. The header fields are
// 16 bits wide; bits above the 11-bit id must be masked off. A second
// parser, set to count 64-byte units, runs in lockstep on the same headers
// with random packet lengths; its increment must be ceil(length/64) (at
// least 1), while the default parser's is always 1.
module tb_cs_parser;
  import cs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  hdr_t in_hdr;
  port_idx_t port_id;
  flow_rec_t out_rec;
  logic in_ready_u, out_valid_u, busy_u;
  flow_rec_t out_rec_u;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  cs_parser dut (.*);
  cs_parser #(.UNIT_BYTES(64)) dut_u (
    .clk, .rst_n, .in_valid, .in_ready(in_ready_u), .in_hdr, .port_id,
    .out_valid(out_valid_u), .out_ready, .out_rec(out_rec_u), .busy(busy_u));
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_t(longint s, longint d);
    return (s + d) * (s + d + 1) / 2 + d;
  endfunction

  initial begin
    longint s, d, exp;
    int len, exp_inc;
    int t_in, t_out, accepted, prev_accept;
    in_valid = 0; in_hdr = 0; out_ready = 0; port_id = 2'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Corner values then random.
    for (int n = 0; n < 400; n++) begin
      case (n)
        0: begin s = 0; d = 0; end
        1: begin s = 2047; d = 2047; end
        2: begin s = 2047; d = 0; end
        3: begin s = 0; d = 2047; end
        default: begin s = $urandom % 2048; d = $urandom % 2048; end
      endcase
      port_id = port_idx_t'(n);
      @(negedge clk);
      in_valid = 1;
      // upper header bits carry junk that the AND masks must remove
      case (n)
        0: len = 0;  1: len = 64;  2: len = 65;  3: len = 120;  4: len = 65535;
        default: len = $urandom % 1600;
      endcase
      exp_inc = (len + 63) / 64;
      if (exp_inc == 0) exp_inc = 1;
      in_hdr = {16'(len), 5'($urandom), 11'(s), 5'($urandom), 11'(d)};
      out_ready = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk); #1;
      t_in = cyc;
      in_valid = 0;
      check(busy, "busy after accept");
      out_ready = ($urandom % 3) != 0;
      while (!out_valid) begin @(posedge clk); #1; end
      t_out = cyc;
      check(t_out - t_in == 1, $sformatf("latency %0d cycles", t_out - t_in));
      exp = ref_t(s, d);
      check(out_rec.t == flow_id_t'(exp) && longint'(out_rec.t) == exp, $sformatf("t for (%0d,%0d): got %0d exp %0d", s, d, out_rec.t, exp));
      check(out_rec.port == port_idx_t'(n), "port tag");
      check(out_rec.inc == inc_t'(1), "packet counts one by default");
      check(out_valid_u && in_ready_u == in_ready && out_rec_u.t == out_rec.t && out_rec_u.port == out_rec.port,
            "unit-counting parser in lockstep");
      check(int'(out_rec_u.inc) == exp_inc, $sformatf("length %0d: increment %0d exp %0d", len, out_rec_u.inc, exp_inc));
      check(!in_ready || out_ready, "no accept while result is held");
      while (!out_ready) begin
        @(negedge clk); out_ready = ($urandom % 2) != 0; #1;
        check(out_valid && out_rec.t == flow_id_t'(exp), "result held under backpressure");
      end
    end
    // Rate: with out_ready always high, packets are taken every two cycles.
    @(negedge clk);
    out_ready = 1; in_valid = 1; in_hdr = 32'h0003_0004;
    accepted = 0; prev_accept = -1;
    for (int c = 0; c < 40; c++) begin
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (prev_accept >= 0) check(c - prev_accept == 2, "one packet every two cycles");
        prev_accept = c; accepted++;
      end
    end
    check(accepted == 20, $sformatf("accepted %0d in 40 cycles", accepted));
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
