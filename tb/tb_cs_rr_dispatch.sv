// tb_cs_rr_dispatch - checks that a port hands packets to its parsers in a
// fixed round-robin order, stalls when the parser whose turn it is is busy,
// and never offers a packet to two parsers. Random traffic and random parser
// readiness; the expected turn is tracked by the testbench itself.
module tb_cs_rr_dispatch;
  localparam int M = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [31:0] in_hdr, out_hdr;
  logic [M-1:0] out_valid, out_ready;
  int checks = 0, failures = 0;
  int exp_turn = 0, transfers = 0, stalls = 0;

  cs_rr_dispatch #(.M(M), .HDR_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; in_hdr = 0; out_ready = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4) != 0;
      in_hdr    = $urandom;
      out_ready = M'($urandom);
      #1;
      // Only the expected parser is offered the packet.
      for (int i = 0; i < M; i++)
        check(out_valid[i] == (in_valid && i == exp_turn), $sformatf("out_valid[%0d] cyc %0d", i, cyc));
      check(in_ready == out_ready[exp_turn], "in_ready follows the parser whose turn it is");
      check(out_hdr == in_hdr, "header broadcast");
      @(posedge clk);
      if (in_valid && out_ready[exp_turn]) begin
        exp_turn = (exp_turn + 1) % M;
        transfers++;
      end else if (in_valid) stalls++;
    end
    check(transfers > 500 && stalls > 100, "both transfers and stalls happened");
    $display("transfers=%0d stalls=%0d", transfers, stalls);
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
