// cs_rr_arbiter - merges the parser outputs of all ports into the single
// hash pipeline.
//
// Every parser of every port (N = NPORT*M requesters) competes for the one
// hash function, which takes one record per cycle. The arbiter grants one
// requester per cycle, searching from the requester after the last one
// granted (round-robin), so no parser can be starved. The granted record is
// captured in an output register. How the parser streams are merged is not
// specified by the published design; this arbiter is this design's choice.
// When more than one record per cycle is offered the losers wait, which in
// turn makes their parsers, dispatchers and ports stall.
//
// Interface: N valid/ready requests (req_ready is the one-hot grant), one
// registered valid/ready output. Latency one cycle; a record is taken every
// cycle while out_ready is high.
module cs_rr_arbiter #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 25
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req_valid,
  output logic [N-1:0] req_ready,
  input  logic [W-1:0] req_data [N],
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;      // last requester granted
  logic [IW-1:0] pick;
  logic          found;
  logic          take;      // output register can load this cycle

  assign take = !out_valid || out_ready;

  always_comb begin
    logic [IW-1:0] idx;
    found = 1'b0;
    pick  = '0;
    idx   = last;
    for (int unsigned k = 0; k < N; k++) begin
      idx = (idx == IW'(N - 1)) ? '0 : idx + 1'b1;
      if (!found && req_valid[idx]) begin
        found = 1'b1;
        pick  = idx;
      end
    end
    req_ready = '0;
    if (found && take) req_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last      <= IW'(N - 1);
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (take) begin
      out_valid <= found;
      if (found) begin
        out_data <= req_data[pick];
        last     <= pick;
      end
    end
  end

  a_grant: assert property (@(posedge clk) disable iff (!rst_n)
                            $onehot0(req_ready) && ((req_ready & ~req_valid) == '0));

endmodule
