// cs_meas_ctrl - measurement-period controller of the on-board engine.
//
// The ground controller predicts which flows each satellite will carry in
// the next period and uplinks a hash seed h for it. This block runs the
// satellite side of that loop. When a seed arrives it performs, in the order
// the published design draws them: update the hash seed, return the
// historical data (retransmit the previous period's counters), clear the
// counter memory, start measuring. When the period ends it stops taking
// packets, waits for the packets still in the pipeline, and transmits every
// counter of the period. It then keeps the counters untouched until the next
// seed arrives, so a report lost on the link can be sent again.
//
// States: IDLE (after reset, no data) -> UPDATE -> [RESEND] -> CLEAR ->
// MEASURE -> DRAIN -> SEND -> HOLD -> UPDATE -> RESEND -> ... RESEND is
// skipped when no period has been measured yet.
//
// Choices of this design, where the published one is silent:
//  * only the h counters BASE..BASE+h-1 that seed h can address are
//    transmitted and cleared;
//  * a seed of 0, or one larger than DEPTH-BASE, is refused (seed_err pulse);
//  * a seed that arrives during a period is held and applied after that
//    period's transmission;
//  * the end of a period is an input pulse (period_end);
//  * readout takes three cycles per counter with tx_ready high: a memory
//    read, a cycle to capture the word, then the word is offered on the tx
//    stream until tx_ready.
//
// Interface: the tx stream carries {tx_index = m, tx_data = counter},
// tx_last marks the final counter, tx_retx marks a retransmission. The
// memory ports are used only outside MEASURE and DRAIN, when the counter
// update pipeline is empty.
module cs_meas_ctrl
  import cs_pkg::*;
#(
  parameter int unsigned DEPTH  = cs_pkg::DEF_DEPTH,
  parameter int unsigned ADDR_W = $clog2(DEPTH),
  parameter int unsigned SEED_W = ADDR_W + 1,
  parameter int unsigned BASE   = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  // seed uplink and period timing
  input  logic              seed_valid,
  input  logic [SEED_W-1:0] seed,
  input  logic              period_end,
  input  logic              pipe_busy,
  output logic              meas_en,
  output logic [SEED_W-1:0] cur_seed,
  output logic              seed_err,
  output meas_state_t       state,
  // counter memory
  output logic              mem_re,
  output logic [ADDR_W-1:0] mem_raddr,
  input  counter_t          mem_rdata,
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_waddr,
  output counter_t          mem_wdata,
  // counter report stream
  output logic              tx_valid,
  input  logic              tx_ready,
  output logic [ADDR_W-1:0] tx_index,
  output counter_t          tx_data,
  output logic              tx_last,
  output logic              tx_retx
);
  localparam logic [SEED_W:0] MAX_SEED = (SEED_W+1)'(DEPTH - BASE);

  logic              pend_valid;
  logic [SEED_W-1:0] pend_seed;
  logic [SEED_W-1:0] tx_h;      // number of counters to report
  logic [SEED_W-1:0] idx;       // counter index m being read or cleared
  logic              rd_wait;
  logic              have_data;
  logic              seed_ok;
  logic              sending;

  assign seed_ok  = (seed != '0) && ({1'b0, seed} <= MAX_SEED);
  assign meas_en  = (state == S_MEASURE);
  assign sending  = (state == S_SEND) || (state == S_RESEND);

  // Memory requests.
  always_comb begin
    mem_re    = sending && !tx_valid && !rd_wait && (idx < tx_h);
    mem_raddr = ADDR_W'(BASE) + ADDR_W'(idx);
    mem_we    = (state == S_CLEAR);
    mem_waddr = ADDR_W'(BASE) + ADDR_W'(idx);
    mem_wdata = '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pend_valid <= 1'b0;
      pend_seed  <= '0;
      cur_seed   <= SEED_W'(1);
      tx_h       <= SEED_W'(1);
      idx        <= '0;
      rd_wait    <= 1'b0;
      have_data  <= 1'b0;
      seed_err   <= 1'b0;
      tx_valid   <= 1'b0;
      tx_index   <= '0;
      tx_data    <= '0;
      tx_last    <= 1'b0;
      tx_retx    <= 1'b0;
    end else begin
      seed_err <= seed_valid && !seed_ok;

      unique case (state)
        S_IDLE, S_HOLD: begin
          if (pend_valid) state <= S_UPDATE;
        end

        S_UPDATE: begin
          tx_h       <= cur_seed;       // the previous period's size
          cur_seed   <= pend_seed;
          pend_valid <= 1'b0;
          idx        <= '0;
          tx_retx    <= 1'b1;
          state      <= have_data ? S_RESEND : S_CLEAR;
        end

        S_CLEAR: begin
          if (idx == cur_seed - 1'b1) begin
            idx       <= '0;
            have_data <= 1'b1;
            state     <= S_MEASURE;
          end else begin
            idx <= idx + 1'b1;
          end
        end

        S_MEASURE: begin
          if (period_end) state <= S_DRAIN;
        end

        S_DRAIN: begin
          if (!pipe_busy) begin
            tx_h    <= cur_seed;
            idx     <= '0;
            tx_retx <= 1'b0;
            state   <= S_SEND;
          end
        end

        S_SEND, S_RESEND: begin
          if (mem_re) rd_wait <= 1'b1;
          if (rd_wait) begin
            rd_wait  <= 1'b0;
            tx_valid <= 1'b1;
            tx_data  <= mem_rdata;
            tx_index <= ADDR_W'(idx);
            tx_last  <= (idx == tx_h - 1'b1);
          end
          if (tx_valid && tx_ready) begin
            tx_valid <= 1'b0;
            if (tx_last) begin
              idx   <= '0;
              state <= (state == S_SEND) ? S_HOLD : S_CLEAR;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end

        default: state <= S_IDLE;
      endcase

      // A new seed is held until the controller is ready for it; it is
      // written after the UPDATE state's consumption so a seed arriving in
      // that very cycle is not lost.
      if (seed_valid && seed_ok) begin
        pend_valid <= 1'b1;
        pend_seed  <= seed;
      end
    end
  end

  a_tx_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              tx_valid && !tx_ready |=> tx_valid && $stable(tx_data) && $stable(tx_index));
  a_mem_idle: assert property (@(posedge clk) disable iff (!rst_n)
                               (state == S_MEASURE) |-> !mem_re && !mem_we);

endmodule
