// cs_parser - extracts a packet's flow and computes its Cantor identifier.
//
// The parser pulls the source and destination satellite ids out of the
// header word with two AND masks and maps the pair to one integer with the
// Cantor pairing function t = (src+dst)(src+dst+1)/2 + dst, which is
// injective, so every (src, dst) flow gets its own t. The operations are
// those the published design lists (two ANDs, an addition, a multiplication,
// a one-bit right shift, an addition); their split over two clock cycles is
// this design's choice:
//   cycle 1: src, dst extracted, w = src + dst registered;
//   cycle 2: t = (w*(w+1) >> 1) + dst registered, result offered.
// A parser holds one packet at a time, so it accepts a new packet every two
// cycles at best; a port therefore needs M >= 2 parsers to take a packet
// every cycle. The result is tagged with the port number (p-1) of the port
// that owns the parser.
//
// The record also carries the packet's increment. With UNIT_BYTES = 0 (the
// default) every packet counts one, as in the published on-board
// description. With UNIT_BYTES = 64 a packet counts ceil(length / 64), the
// flow-size unit of the published evaluation (a 120-byte packet counts 2).
// The length is taken from the header word with a third AND mask; a length
// of 0 still counts one. Making this a parameter is this design's choice.
// With the default the increment bits of out_rec are the constant 1 and the
// length field is not read.
//
// Interface: valid/ready in and out. in_ready is high when the parser is
// idle, or when its finished result is being taken in the same cycle.
// Timing: the packet is taken on edge k (cycle 1 work), t is registered on
// edge k+1 and offered from then on (out_valid); the next packet can be
// taken on the edge the result leaves, so one packet per two cycles.
module cs_parser
  import cs_pkg::*;
#(
  parameter int unsigned SRC_BIT = cs_pkg::SRC_LSB,
  parameter int unsigned DST_BIT = cs_pkg::DST_LSB,
  parameter int unsigned LEN_BIT = cs_pkg::LEN_LSB,
  parameter int unsigned UNIT_BYTES = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  hdr_t      in_hdr,
  input  port_idx_t port_id,
  output logic      out_valid,
  input  logic      out_ready,
  output flow_rec_t out_rec,
  output logic      busy
);
  localparam hdr_t NODE_MASK = hdr_t'((1 << NODE_W) - 1);
  localparam hdr_t LEN_MASK  = hdr_t'((1 << LEN_W) - 1);
  localparam int unsigned DIV = (UNIT_BYTES == 0) ? 1 : UNIT_BYTES;

  typedef enum logic [1:0] {P_IDLE, P_CALC, P_DONE} pstate_t;
  pstate_t         st;
  node_t           dst_q;
  logic [NODE_W:0] w_q;
  flow_id_t        t_q;
  port_idx_t       port_q;
  inc_t            inc_q;

  // Increment of the packet being accepted.
  logic [LEN_W-1:0] len;
  logic [LEN_W:0]   units;
  inc_t             inc_d;
  always_comb begin
    len   = LEN_W'((in_hdr >> LEN_BIT) & LEN_MASK);
    units = ({1'b0, len} + (LEN_W+1)'(DIV - 1)) / (LEN_W+1)'(DIV);
    if (UNIT_BYTES == 0 || units == '0) inc_d = inc_t'(1);
    else if (units > (LEN_W+1)'({SUB_W{1'b1}})) inc_d = '1;
    else inc_d = inc_t'(units);
  end

  logic [T_W:0] prod;
  assign prod = T_W'(w_q) * (T_W'(w_q) + 1'b1);

  assign in_ready  = (st == P_IDLE) || (st == P_DONE && out_ready);
  assign out_valid = (st == P_DONE);
  assign out_rec   = '{inc: inc_q, t: t_q, port: port_q};
  assign busy      = (st != P_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= P_IDLE;
      dst_q  <= '0;
      w_q    <= '0;
      t_q    <= '0;
      port_q <= '0;
      inc_q  <= '0;
    end else begin
      if (in_valid && in_ready) begin
        // Two AND extractions and the addition src + dst.
        dst_q  <= node_t'((in_hdr >> DST_BIT) & NODE_MASK);
        w_q    <= {1'b0, node_t'((in_hdr >> SRC_BIT) & NODE_MASK)}
                + {1'b0, node_t'((in_hdr >> DST_BIT) & NODE_MASK)};
        port_q <= port_id;
        inc_q  <= inc_d;
        st     <= P_CALC;
      end else if (st == P_CALC) begin
        // Multiplication, right shift by one, addition of dst.
        t_q <= flow_id_t'((prod >> 1) + T_W'(dst_q));
        st  <= P_DONE;
      end else if (st == P_DONE && out_ready) begin
        st <= P_IDLE;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_rec));

endmodule
