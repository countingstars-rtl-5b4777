// cs_hash_mod - dynamic hash: counter address = BASE + (t mod h).
//
// The ground controller picks, for each satellite and period, the smallest
// modulus h under which the identifiers of all flows the satellite will
// carry are distinct (a minimal perfect hash), and uplinks it as the hash
// seed. On board the hash is a single modulo of the flow identifier t by h;
// the key m = t mod h plus a fixed base address BASE gives the counter
// address. The modulo is computed as a pipelined restoring division that
// keeps only the remainder: each of the STAGES stages shifts in
// ceil(T_W/STAGES) bits of t, most significant first, subtracting h whenever
// the partial remainder reaches it. The pipelined divider, the stage count
// and the base-address adder are this design's choices; the published
// design states only the modulo and the base address.
//
// The record's port number and increment travel alongside unchanged.
//
// Interface: one record per cycle in, no backpressure. seed must be nonzero
// and stay constant while records are in flight (the measurement controller
// changes it only between periods, with the pipeline empty). Latency: STAGES
// cycles from in_valid to out_valid.
module cs_hash_mod
  import cs_pkg::*;
#(
  parameter int unsigned SEED_W = 17,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned STAGES = 2,
  parameter int unsigned BASE   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SEED_W-1:0] seed,
  input  logic              in_valid,
  input  flow_rec_t         in_rec,
  output logic              out_valid,
  output logic [ADDR_W-1:0] out_addr,
  output port_idx_t         out_port,
  output inc_t              out_inc,
  output logic              busy
);
  localparam int unsigned BPS = (T_W + STAGES - 1) / STAGES;  // bits per stage
  localparam int unsigned PADW = BPS * STAGES;                // padded width

  // Stage registers: entry s holds the remainder after (s+1)*BPS bits.
  logic [SEED_W-1:0] rem_q  [STAGES];
  logic [PADW-1:0]   t_q    [STAGES];
  port_idx_t         port_q [STAGES];
  inc_t              inc_q  [STAGES];
  logic [STAGES-1:0] v_q;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    logic [SEED_W-1:0] rem_i, rem_n;
    logic [PADW-1:0]   t_i;
    port_idx_t         port_i;
    inc_t              inc_i;
    logic              v_i;

    if (s == 0) begin : g_first
      assign rem_i  = '0;
      assign t_i    = PADW'(in_rec.t);
      assign port_i = in_rec.port;
      assign inc_i  = in_rec.inc;
      assign v_i    = in_valid;
    end else begin : g_next
      assign rem_i  = rem_q[s-1];
      assign t_i    = t_q[s-1];
      assign port_i = port_q[s-1];
      assign inc_i  = inc_q[s-1];
      assign v_i    = v_q[s-1];
    end

    // BPS restoring-division steps, remainder only.
    always_comb begin
      logic [SEED_W:0] r;
      r = {1'b0, rem_i};
      for (int b = 0; b < BPS; b++) begin
        r = {r[SEED_W-1:0], t_i[PADW-1 - s*BPS - b]};
        if (r >= {1'b0, seed}) r = r - {1'b0, seed};
      end
      rem_n = r[SEED_W-1:0];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        v_q[s]    <= 1'b0;
        rem_q[s]  <= '0;
        t_q[s]    <= '0;
        port_q[s] <= '0;
        inc_q[s]  <= '0;
      end else begin
        v_q[s]    <= v_i;
        rem_q[s]  <= rem_n;
        t_q[s]    <= t_i;
        port_q[s] <= port_i;
        inc_q[s]  <= inc_i;
      end
    end
  end

  assign out_valid = v_q[STAGES-1];
  assign out_addr  = ADDR_W'(BASE) + ADDR_W'(rem_q[STAGES-1]);
  assign out_port  = port_q[STAGES-1];
  assign out_inc   = inc_q[STAGES-1];
  assign busy      = |v_q;

  a_seed: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> seed != '0);

endmodule
