// cs_rr_dispatch - hands one port's packets to its M parsers in turn.
//
// Packets entering a port are assigned to the port's parsers strictly in
// round-robin order (parser 0, 1, ..., M-1, 0, ...), as the published design
// prescribes. The header is broadcast to all parsers; only the parser whose
// turn it is sees out_valid. A turn passes only when that parser accepts, so
// if it is still busy the port stalls (in_ready low) rather than skipping it:
// that keeps the assignment a fixed sequence. The pointer is the only state.
//
// Interface: valid/ready on both sides; a transfer happens on a clock edge
// where valid and ready are both high. Zero latency (combinational path).
// Reset (synchronous, active low) returns the turn to parser 0.
module cs_rr_dispatch #(
  parameter int unsigned M     = 2,
  parameter int unsigned HDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [HDR_W-1:0]  in_hdr,
  output logic [M-1:0]      out_valid,
  input  logic [M-1:0]      out_ready,
  output logic [HDR_W-1:0]  out_hdr
);
  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;

  logic [PW-1:0] turn;

  always_comb begin
    out_valid = '0;
    out_valid[turn] = in_valid;
  end

  assign in_ready = out_ready[turn];
  assign out_hdr  = in_hdr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      turn <= '0;
    end else if (in_valid && in_ready) begin
      turn <= (turn == PW'(M - 1)) ? '0 : turn + 1'b1;
    end
  end

  // At most one parser is offered a packet at a time.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid));

endmodule
