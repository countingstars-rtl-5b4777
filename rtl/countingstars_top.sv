// countingstars_top - on-board CountingStars measurement engine.
//
// Counts, per flow and per output port, the packets a satellite forwards
// when packet-based load balancing spreads one flow over all its ports.
// Data path, one packet per cycle in steady state:
//   port p header stream -> round-robin dispatcher -> M parsers (Cantor flow
//   id t) -> round-robin arbiter over all NPORT*M parsers -> modulo hash
//   (BASE + t mod h, h = uplinked seed) -> jump-based counter update
//   (the packet's increment added to the 16-bit subfield of port p of a
//   64-bit counter) -> counter memory.
// The increment is 1 per packet by default (UNIT_BYTES = 0); UNIT_BYTES =
// 64 counts 64-byte units of the length in header bits [47:32] instead.
// The measurement controller opens and closes periods, swaps in new seeds,
// reports the counters on the tx stream and clears them.
//
// Latency: a packet accepted on a port at clock edge 0 has its counter
// written on edge 6 (parser result on edge 1, arbiter register 2, hash
// stages 3 and 4, memory read 5, memory write 6): 120 ns at the published
// 50 MHz clock, against the 136 ns reported for the published build.
//
// Packets offered while the engine is not measuring (between periods) are
// accepted and not counted; the number of such packets is reported on
// `unmeasured`. This, and the arbiter that merges the ports, are choices of
// this design. Parameters default to the published configuration (4 ports,
// 64-bit counters of 16-bit subfields) and to this design's choices for
// what it leaves open (M = 2 parsers per port, 65536 counters, BASE = 0).
module countingstars_top
  import cs_pkg::*;
#(
  parameter int unsigned M           = 2,
  parameter int unsigned MEM_DEPTH   = cs_pkg::DEF_DEPTH,
  parameter int unsigned BASE        = 0,
  parameter int unsigned HASH_STAGES = 2,
  parameter int unsigned UNIT_BYTES  = 0,
  parameter int unsigned ADDR_W      = $clog2(MEM_DEPTH),
  parameter int unsigned SEED_W      = ADDR_W + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet headers, one stream per output port
  input  logic [NPORT-1:0]  pkt_valid,
  output logic [NPORT-1:0]  pkt_ready,
  input  hdr_t              pkt_hdr [NPORT],
  // hash seed uplink and period boundary
  input  logic              seed_valid,
  input  logic [SEED_W-1:0] seed,
  input  logic              period_end,
  // counter reports
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [ADDR_W-1:0] tx_index,
  output counter_t          tx_data,
  output logic              tx_last,
  output logic              tx_retx,
  // status
  output logic              meas_en,
  output logic              seed_err,
  output meas_state_t       state,
  output logic              ev_bypass,   // a counter update used the bypass
  output logic              ev_sat,      // a port subfield was clipped at 2^16-1
  output logic [31:0]       unmeasured
);
  localparam int unsigned NREQ = NPORT * M;
  localparam int unsigned RECW = $bits(flow_rec_t);

  // ---------------- ports and parsers ----------------
  logic [NPORT-1:0] pp_in_valid, pp_in_ready, pp_busy;
  logic [NREQ-1:0]  par_valid, par_ready;
  logic [RECW-1:0]  par_data [NREQ];

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    flow_rec_t    rec [M];
    logic [M-1:0] v, r;

    // Gate ingress: outside a period packets are taken and not measured.
    assign pp_in_valid[p] = pkt_valid[p] && meas_en;
    assign pkt_ready[p]   = meas_en ? pp_in_ready[p] : 1'b1;

    cs_port_parsers #(.M(M), .UNIT_BYTES(UNIT_BYTES)) u_pp (
      .clk, .rst_n,
      .port_id  (port_idx_t'(p)),
      .in_valid (pp_in_valid[p]),
      .in_ready (pp_in_ready[p]),
      .in_hdr   (pkt_hdr[p]),
      .out_valid(v),
      .out_ready(r),
      .out_rec  (rec),
      .busy     (pp_busy[p])
    );

    for (genvar i = 0; i < M; i++) begin : g_par
      assign par_valid[p*M + i] = v[i];
      assign r[i]               = par_ready[p*M + i];
      assign par_data[p*M + i]  = rec[i];
    end
  end

  // ---------------- merge into the hash ----------------
  logic            arb_valid;
  logic [RECW-1:0] arb_data;

  cs_rr_arbiter #(.N(NREQ), .W(RECW)) u_arb (
    .clk, .rst_n,
    .req_valid(par_valid), .req_ready(par_ready), .req_data(par_data),
    .out_valid(arb_valid), .out_ready(1'b1), .out_data(arb_data)
  );

  // ---------------- dynamic hash ----------------
  logic [SEED_W-1:0] cur_seed;
  logic              h_valid, h_busy;
  logic [ADDR_W-1:0] h_addr;
  port_idx_t         h_port;
  inc_t              h_inc;

  cs_hash_mod #(.SEED_W(SEED_W), .ADDR_W(ADDR_W), .STAGES(HASH_STAGES), .BASE(BASE)) u_hash (
    .clk, .rst_n,
    .seed     (cur_seed),
    .in_valid (arb_valid),
    .in_rec   (flow_rec_t'(arb_data)),
    .out_valid(h_valid),
    .out_addr (h_addr),
    .out_port (h_port),
    .out_inc  (h_inc),
    .busy     (h_busy)
  );

  // ---------------- counter update ----------------
  logic              u_rd_en, u_wr_en, u_busy;
  logic [ADDR_W-1:0] u_rd_addr, u_wr_addr;
  counter_t          u_wr_data, mem_rdata;

  cs_counter_update #(.ADDR_W(ADDR_W)) u_upd (
    .clk, .rst_n,
    .in_valid(h_valid), .in_addr(h_addr), .in_port(h_port), .in_inc(h_inc),
    .rd_en(u_rd_en), .rd_addr(u_rd_addr), .rd_data(mem_rdata),
    .wr_en(u_wr_en), .wr_addr(u_wr_addr), .wr_data(u_wr_data),
    .busy(u_busy), .ev_bypass, .ev_sat
  );

  // ---------------- measurement controller ----------------
  logic              c_re, c_we;
  logic [ADDR_W-1:0] c_raddr, c_waddr;
  counter_t          c_wdata;
  logic              pipe_busy;

  assign pipe_busy = (|pp_busy) || arb_valid || h_busy || u_busy;

  cs_meas_ctrl #(.DEPTH(MEM_DEPTH), .ADDR_W(ADDR_W), .SEED_W(SEED_W), .BASE(BASE)) u_ctrl (
    .clk, .rst_n,
    .seed_valid, .seed, .period_end, .pipe_busy,
    .meas_en, .cur_seed, .seed_err, .state,
    .mem_re(c_re), .mem_raddr(c_raddr), .mem_rdata(mem_rdata),
    .mem_we(c_we), .mem_waddr(c_waddr), .mem_wdata(c_wdata),
    .tx_valid, .tx_ready, .tx_index, .tx_data, .tx_last, .tx_retx
  );

  // ---------------- counter memory ----------------
  // The update pipeline and the controller never use the memory in the same
  // cycle (the controller waits for the pipeline to drain).
  logic              m_re, m_we;
  logic [ADDR_W-1:0] m_raddr, m_waddr;
  counter_t          m_wdata;

  always_comb begin
    m_re    = u_rd_en | c_re;
    m_raddr = c_re ? c_raddr : u_rd_addr;
    m_we    = u_wr_en | c_we;
    m_waddr = c_we ? c_waddr : u_wr_addr;
    m_wdata = c_we ? c_wdata : u_wr_data;
  end

  cs_counter_mem #(.DEPTH(MEM_DEPTH), .W(CNT_W), .ADDR_W(ADDR_W)) u_mem (
    .clk,
    .re(m_re), .raddr(m_raddr), .rdata(mem_rdata),
    .we(m_we), .waddr(m_waddr), .wdata(m_wdata)
  );

  // ---------------- packets seen outside a period ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      unmeasured <= '0;
    end else if (!meas_en) begin
      unmeasured <= unmeasured + 32'($countones(pkt_valid));
    end
  end

  a_mem_excl: assert property (@(posedge clk) disable iff (!rst_n)
                               !(u_rd_en && c_re) && !(u_wr_en && c_we));

endmodule
