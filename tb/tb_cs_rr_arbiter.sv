// tb_cs_rr_arbiter - random requests from N = 5 sources with random output
// backpressure. A model of round-robin arbitration (search from the source
// after the last one granted) predicts each grant; the test checks the grant,
// the registered output one cycle later, and that every request is served.
module tb_cs_rr_arbiter;
  localparam int N = 5, W = 12;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req_valid, req_ready;
  logic [W-1:0] req_data [N];
  logic out_valid, out_ready;
  logic [W-1:0] out_data;
  int checks = 0, failures = 0;

  cs_rr_arbiter #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int last = N - 1;
  logic [W-1:0] exp_data [$];
  int served [N];

  initial begin
    req_valid = '0; out_ready = 1;
    for (int i = 0; i < N; i++) req_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int pick; bit take;
      @(negedge clk);
      // A source keeps its request up until served (valid/ready rule).
      for (int i = 0; i < N; i++) if (!req_valid[i] && ($urandom % 3 == 0)) begin
        req_valid[i] = 1; req_data[i] = W'({i[3:0], 8'($urandom)});
      end
      out_ready = ($urandom % 4) != 0;
      #1;
      take = !out_valid || out_ready;
      pick = -1;
      for (int k = 1; k <= N; k++) if (pick < 0 && req_valid[(last + k) % N]) pick = (last + k) % N;
      for (int i = 0; i < N; i++)
        check(req_ready[i] == (take && pick == i), $sformatf("grant %0d cyc %0d", i, cyc));
      if (out_valid && out_ready) begin
        check(exp_data.size() > 0 && out_data == exp_data[0], "output data");
        if (exp_data.size() > 0) void'(exp_data.pop_front());
      end
      @(posedge clk);
      if (take && pick >= 0) begin
        exp_data.push_back(req_data[pick]);
        served[pick]++;
        last = pick;
        #1 req_valid[pick] = 0;
      end
    end
    for (int i = 0; i < N; i++) check(served[i] > 100, $sformatf("source %0d served %0d", i, served[i]));
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
