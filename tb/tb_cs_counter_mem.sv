// tb_cs_counter_mem - random reads and writes against a model array,
// checking one-cycle read latency, read-first behaviour when a read and a
// write hit the same word on the same edge, and that a read without re
// keeps the previous output.
module tb_cs_counter_mem;
  localparam int DEPTH = 256, W = 64, ADDR_W = 8;
  logic clk = 0;
  logic re, we;
  logic [ADDR_W-1:0] raddr, waddr;
  logic [W-1:0] rdata, wdata;
  int checks = 0, failures = 0;

  cs_counter_mem #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model [DEPTH];

  initial begin
    logic [W-1:0] exp;
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = ADDR_W'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    exp = '0;
    for (int n = 0; n < 3000; n++) begin
      bit do_re;
      @(negedge clk);
      do_re = ($urandom % 4) != 0;
      re = do_re; raddr = ADDR_W'($urandom);
      we = ($urandom % 2) != 0; waddr = (n % 3 == 0) ? raddr : ADDR_W'($urandom); wdata = {$urandom, $urandom};
      if (do_re) exp = model[raddr];       // read-first: old word
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      check(rdata == exp, $sformatf("read n=%0d", n));
    end
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
