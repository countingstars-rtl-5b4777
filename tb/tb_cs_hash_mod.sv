// tb_cs_hash_mod - random flow ids through the modulo hash with a base
// address of 100 and several seeds, including 1, the largest seed and the
// figure's example seeds 4 and 5. Every cycle carries a record; the output
// must be BASE + t mod h exactly HASH stages (2) later, with the port tag
// and the increment carried alongside.
// The worked example of the collision figures (ids 1..5, seed 4 colliding,
// seed 5 collision-free) is checked key by key against its printed keys.
module tb_cs_hash_mod;
  import cs_pkg::*;
  localparam int SEED_W = 17, ADDR_W = 17, BASE = 100;
  logic clk = 0, rst_n = 0;
  logic [SEED_W-1:0] seed;
  logic in_valid, out_valid, busy;
  flow_rec_t in_rec;
  logic [ADDR_W-1:0] out_addr;
  port_idx_t out_port;
  inc_t out_inc;
  int checks = 0, failures = 0;

  cs_hash_mod #(.SEED_W(SEED_W), .ADDR_W(ADDR_W), .STAGES(2), .BASE(BASE)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { longint addr; int port; int inc; } exp_t;
  exp_t pipe [2];

  initial begin
    int seeds [7] = '{4, 5, 1, 65536, 1583, 4290, 77};
    in_valid = 0; in_rec = '0; seed = 17'd4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (seeds[si]) begin
      @(negedge clk); in_valid = 0; seed = SEED_W'(seeds[si]);
      repeat (3) @(posedge clk);
      for (int n = 0; n < 600; n++) begin
        longint t;
        @(negedge clk);
        t = (n < 6) ? n : longint'($urandom % (1 << T_W));
        if (n == 6) t = (1 << T_W) - 1;
        in_valid = 1;
        in_rec.t = flow_id_t'(t);
        in_rec.port = port_idx_t'($urandom);
        in_rec.inc = inc_t'($urandom);
        // out_valid two edges after in_valid.
        pipe[1] = pipe[0];
        pipe[0] = '{addr: BASE + (t % seeds[si]), port: int'(in_rec.port), inc: int'(in_rec.inc)};
        @(posedge clk); #1;
        @(posedge clk); #1;
        check(out_valid, "out_valid after two cycles");
        check(longint'(out_addr) == pipe[0].addr, $sformatf("seed %0d t %0d: addr %0d exp %0d", seeds[si], t, out_addr, pipe[0].addr));
        check(int'(out_port) == pipe[0].port, "port tag");
        check(int'(out_inc) == pipe[0].inc, "increment carried");
      end
    end
    // The worked example of the hash-collision figures: flow ids 1..4 with
    // seed 4 give keys 1,2,3,0; adding flow 5 under seed 4 collides with
    // flow 1 (key 1); the updated seed 5 gives keys 1,2,3,4,0.
    begin
      int fig_keys4 [5] = '{1, 2, 3, 0, 1};
      int fig_keys5 [5] = '{1, 2, 3, 4, 0};
      for (int sd = 4; sd <= 5; sd++) begin
        @(negedge clk); in_valid = 0; seed = SEED_W'(sd);
        repeat (3) @(posedge clk);
        for (int id = 1; id <= 5; id++) begin
          @(negedge clk);
          in_valid = 1; in_rec.t = flow_id_t'(id); in_rec.port = '0;
          @(posedge clk); #1;
          @(posedge clk); #1;
          check(int'(out_addr) - BASE == (sd == 4 ? fig_keys4[id-1] : fig_keys5[id-1]),
                $sformatf("figure example: id %0d seed %0d key %0d", id, sd, int'(out_addr) - BASE));
        end
      end
    end
    // Back-to-back throughput: a record every cycle, results in order.
    begin
      longint q [$];
      int outs = 0;
      @(negedge clk); seed = 17'd1000;
      fork
        for (int n = 0; n < 300; n++) begin
          longint t;
          t = longint'($urandom % (1 << T_W));
          in_valid = 1; in_rec.t = flow_id_t'(t);
          q.push_back(BASE + t % 1000);
          @(negedge clk);
        end
        begin
          @(posedge clk);
          while (outs < 300) begin
            @(posedge clk); #1;
            if (out_valid) begin
              check(q.size() > 0 && longint'(out_addr) == q[0], "pipelined result");
              void'(q.pop_front()); outs++;
            end
          end
        end
      join_any
      in_valid = 0;
      wait (outs == 300);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
