// cs_counter_mem - the shared counter memory ("public memory pool").
//
// DEPTH words of W bits, one word per flow, each word holding the per-port
// subfield counters of that flow. One synchronous read port and one write
// port (simple dual port), written as an inferred array so that synthesis
// maps it to block RAM. A read returns the word one cycle after re is
// sampled; a read and a write of the same address on the same edge return
// the old word (read-first), which cs_counter_update compensates for with
// its bypass. Contents are not reset: the measurement controller clears
// every counter it uses before a period starts. The 65536-word default is
// this design's choice (the largest power of two that fits the block RAM of
// an XC7A100T); the published design gives no on-board memory size.
module cs_counter_mem #(
  parameter int unsigned DEPTH  = 65536,
  parameter int unsigned W      = 64,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [W-1:0]      rdata,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [W-1:0]      wdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
