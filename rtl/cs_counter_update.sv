// cs_counter_update - jump-based update of the aggregated flow counter.
//
// Each flow owns one 64-bit counter made of four 16-bit subfields, one per
// output port. A packet that left on port p (port index p-1) adds
// 2^(16*(p-1)) to its flow's counter, i.e. increments subfield p-1 only: a
// "jump" to the port's bit position instead of a separate counter array per
// port. The amount added is the packet's increment in_inc: 1 when packets
// are counted, ceil(length/64) when 64-byte units are counted (the unit is
// chosen in the parsers). This is a read-modify-write over two cycles:
//   cycle 0: in_addr is sent to the memory read port and registered;
//   cycle 1: the word comes back, in_inc is added to the port's subfield and
//            the result is written to the memory write port.
// Because the memory is read-first, a packet that reads a counter on the
// same edge as the previous packet writes it would see the old word. The
// block keeps the last write (address and data) for one cycle and uses it
// instead of the memory word when the addresses match (bypass), so
// back-to-back packets of one flow are all counted. One packet per cycle is
// sustained.
//
// Where the published design is silent, this block chooses to saturate a
// subfield at 2^16-1 rather than let it carry into the next port's subfield.
//
// Interface: in_valid/in_addr/in_port/in_inc, no backpressure. busy is high
// while an update is in flight. ev_bypass pulses when the bypass is used,
// ev_sat when the sum would pass 2^16-1 and is clipped.
module cs_counter_update
  import cs_pkg::*;
#(
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [ADDR_W-1:0] in_addr,
  input  port_idx_t         in_port,
  input  inc_t              in_inc,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  counter_t          rd_data,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output counter_t          wr_data,
  output logic              busy,
  output logic              ev_bypass,
  output logic              ev_sat
);
  // Stage 1: request waiting for its memory word.
  logic              s1_valid;
  logic [ADDR_W-1:0] s1_addr;
  port_idx_t         s1_port;
  inc_t              s1_inc;
  // Last write, kept for one cycle for the bypass.
  logic              lw_valid;
  logic [ADDR_W-1:0] lw_addr;
  counter_t          lw_data;

  counter_t old_word, new_word;
  logic     sat;
  logic [SUB_W:0] sum;

  assign rd_en   = in_valid;
  assign rd_addr = in_addr;

  always_comb begin
    ev_bypass = s1_valid && lw_valid && (lw_addr == s1_addr);
    old_word  = ev_bypass ? lw_data : rd_data;
    new_word  = old_word;
    sum       = {1'b0, old_word[s1_port*SUB_W +: SUB_W]} + {1'b0, s1_inc};
    sat       = sum[SUB_W];
    new_word[s1_port*SUB_W +: SUB_W] = sat ? '1 : sum[SUB_W-1:0];
  end

  assign wr_en   = s1_valid;
  assign wr_addr = s1_addr;
  assign wr_data = new_word;
  assign ev_sat  = s1_valid && sat;
  assign busy    = s1_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_addr  <= '0;
      s1_port  <= '0;
      s1_inc   <= '0;
      lw_valid <= 1'b0;
      lw_addr  <= '0;
      lw_data  <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_addr  <= in_addr;
      s1_port  <= in_port;
      s1_inc   <= in_inc;
      lw_valid <= s1_valid;
      lw_addr  <= s1_addr;
      lw_data  <= new_word;
    end
  end

endmodule
