// cs_pkg - constants and types shared by the CountingStars on-board
// measurement engine.
//
// The engine keeps one 64-bit counter per flow. The counter is cut into
// NPORT subfields of SUB_W bits, one per output port, so a single memory word
// holds the per-port packet counts of a flow (port p, counted from 1, owns
// bits [16*(p-1) +: 16]). Four ports, 64-bit counters and 16-bit subfields
// are the published configuration. A flow is a (source, destination)
// satellite pair; its identifier t is the Cantor pairing of the two ids.
// The 11-bit id width (enough for a 1584-satellite constellation) and the
// 48-bit header layout (packet length, source, destination) are choices of
// this design.
//
// A packet normally counts one. The published evaluation instead measures
// flow size in 64-byte units (a 120-byte packet counts two); the parser
// supports that as an option, so each flow record carries its increment.
package cs_pkg;

  localparam int unsigned NPORT   = 4;             // output ports per satellite
  localparam int unsigned SUB_W   = 16;            // bits per port subfield
  localparam int unsigned CNT_W   = NPORT * SUB_W; // 64-bit aggregated counter
  localparam int unsigned PORT_W  = $clog2(NPORT);

  localparam int unsigned NODE_W  = 11;            // satellite id width
  localparam int unsigned T_W     = 2 * NODE_W + 1;// Cantor value < 2^(2*NODE_W+1)

  // Header word seen by a parser: packet length in bytes in [47:32], src in
  // [31:16], dst in [15:0].
  localparam int unsigned HDR_W   = 48;
  localparam int unsigned LEN_LSB = 32;
  localparam int unsigned LEN_W   = 16;
  localparam int unsigned SRC_LSB = 16;
  localparam int unsigned DST_LSB = 0;

  // Default counter memory: 65536 x 64 bit.
  localparam int unsigned DEF_DEPTH = 65536;

  typedef logic [NODE_W-1:0] node_t;
  typedef logic [T_W-1:0]    flow_id_t;
  typedef logic [PORT_W-1:0] port_idx_t;  // port number p-1
  typedef logic [HDR_W-1:0]  hdr_t;
  typedef logic [CNT_W-1:0]  counter_t;
  typedef logic [SUB_W-1:0]  inc_t;       // amount one packet adds

  // Result of a parser: flow identifier, the port the packet left on and
  // the amount the packet adds to that port's subfield.
  typedef struct packed {
    inc_t      inc;
    flow_id_t  t;
    port_idx_t port;
  } flow_rec_t;

  // Measurement controller states (Fig. "Measurement Preparation" order:
  // update seed, return historical data, clear memory, start measurement).
  typedef enum logic [2:0] {
    S_IDLE    = 3'd0,  // after reset: no seed yet, no data
    S_UPDATE  = 3'd1,  // latch the new seed
    S_RESEND  = 3'd2,  // retransmit previous period's counters
    S_CLEAR   = 3'd3,  // zero the counters the new seed addresses
    S_MEASURE = 3'd4,  // count packets
    S_DRAIN   = 3'd5,  // period ended: let in-flight packets finish
    S_SEND    = 3'd6,  // end-of-period transmission
    S_HOLD    = 3'd7   // keep the data until the next seed arrives
  } meas_state_t;

  // Cantor pairing function pi(s, d) = (s+d)(s+d+1)/2 + d, as a reference
  // for testbenches (the parser computes it in two cycles).
  function automatic flow_id_t cantor(input node_t s, input node_t d);
    logic [NODE_W:0] w;
    logic [T_W:0]    p;
    w = {1'b0, s} + {1'b0, d};
    p = T_W'(w) * (T_W'(w) + 1'b1);
    return flow_id_t'((p >> 1) + T_W'(d));
  endfunction

endpackage
