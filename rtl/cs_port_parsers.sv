// cs_port_parsers - the parser group of one output port.
//
// A round-robin dispatcher (cs_rr_dispatch) feeds M parsers (cs_parser); each
// parser offers its flow record {t, port} on its own valid/ready output, and
// the records of all ports are merged downstream by cs_rr_arbiter. With the
// two-cycle parser and M = 2 a port takes one packet per cycle. M is not
// fixed by the published design; 2 is this design's default. UNIT_BYTES
// selects the count unit of the parsers (0: packets, 64: 64-byte units).
//
// Interface: one valid/ready header stream in, M valid/ready record streams
// out. busy is high while any parser holds a packet.
module cs_port_parsers
  import cs_pkg::*;
#(
  parameter int unsigned M = 2,
  parameter int unsigned UNIT_BYTES = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  port_idx_t       port_id,
  input  logic            in_valid,
  output logic            in_ready,
  input  hdr_t            in_hdr,
  output logic [M-1:0]    out_valid,
  input  logic [M-1:0]    out_ready,
  output flow_rec_t       out_rec [M],
  output logic            busy
);
  logic [M-1:0] d_valid, d_ready, p_busy;
  hdr_t         d_hdr;

  cs_rr_dispatch #(.M(M), .HDR_W(HDR_W)) u_disp (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_hdr,
    .out_valid(d_valid), .out_ready(d_ready), .out_hdr(d_hdr)
  );

  for (genvar i = 0; i < M; i++) begin : g_parser
    cs_parser #(.UNIT_BYTES(UNIT_BYTES)) u_parser (
      .clk, .rst_n,
      .in_valid (d_valid[i]),
      .in_ready (d_ready[i]),
      .in_hdr   (d_hdr),
      .port_id,
      .out_valid(out_valid[i]),
      .out_ready(out_ready[i]),
      .out_rec  (out_rec[i]),
      .busy     (p_busy[i])
    );
  end

  assign busy = |p_busy;

endmodule
