// drain_ctrl: multi-step drain controller of one spillway queue.
//
// A spillway cannot see the destination port, so it reads its state from
// arrivals: a packet that is sent too early is deflected back to the same
// spillway and arrives again. This controller decides when its queue may
// transmit, following the paper's graduated drain:
//   QUIET      wait until no packet has arrived for tau_gap plus a random
//              jitter epsilon (QUIET_CYCLES + jitter);
//   PROBE      send the head-of-line packet alone as a probe;
//   PROBE_WAIT wait another quiet interval for the probe to bounce back;
//   HALF       send a burst of HALF_PKTS packets at half rate;
//   HALF_WAIT  wait another quiet interval for bounce-backs;
//   FULL       send at full rate until the queue is empty.
// Any arrival to the queue (a bounced packet or a new deflection) while
// waiting or sending returns the controller to QUIET with a fresh interval.
// An empty queue returns it to IDLE. A deadline timer guarantees progress:
// if the queue has held packets for DEADLINE_CYCLES without sending any, a
// probe is sent even though arrivals have not paused.
//
// From the paper: the sequence quiet interval / probe / half burst / full
// burst, the reset on a returned probe, the jitter, the per-queue timers,
// tau_gap = 30 us and the existence of a deadline timer. This design's own
// choices: the clock is taken as 1 GHz so tau_gap is 30000 cycles; the
// jitter is 0..2^JITTER_W-1 cycles from a 16-bit LFSR; the waits after the
// probe and after the half burst last one quiet interval; a half burst is 16
// packets at one packet every other clock; the deadline is ten quiet
// intervals; "full rate" is one packet per clock when granted.
//
// Interface: arrival pulses for every packet enqueued to this queue;
// q_empty is the queue's ring state. tx_req asks the transmit arbiter for
// a slot, tx_grant says the head packet left in this clock. The event
// outputs pulse once per probe, half burst started, full burst started and
// deadline expiry, for statistics.
module drain_ctrl
  import spillway_pkg::*;
#(
  parameter int unsigned QUIET_CYCLES    = 30000,
  parameter int unsigned JITTER_W        = 10,
  parameter int unsigned HALF_PKTS       = 16,
  parameter int unsigned DEADLINE_CYCLES = 300000,
  parameter logic [15:0] LFSR_SEED       = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         arrival,
  input  logic         q_empty,
  output logic         tx_req,
  input  logic         tx_grant,
  output drain_state_t state,
  output logic         ev_probe,
  output logic         ev_half,
  output logic         ev_full,
  output logic         ev_deadline
);
  localparam int unsigned TW = 32;

  logic [TW-1:0] timer;         // cycles since the current wait started
  logic [TW-1:0] quiet_target;  // tau_gap + epsilon of the current wait
  logic [TW-1:0] hold_cnt;      // cycles the queue has held packets without sending
  logic [15:0]   lfsr;
  logic [$clog2(HALF_PKTS+1)-1:0] half_cnt;
  logic          pace;          // set for the clock after a half-rate send

  drain_state_t  state_nx;
  logic          restart_wait;  // start a new quiet interval
  logic          deadline_hit;
  logic [TW-1:0] jitter;

  assign jitter       = TW'(lfsr & 16'((1 << JITTER_W) - 1));
  assign deadline_hit = (hold_cnt >= TW'(DEADLINE_CYCLES));

  always_comb begin
    case (state)
      DR_PROBE: tx_req = !q_empty;
      DR_HALF:  tx_req = !q_empty && !pace;
      DR_FULL:  tx_req = !q_empty;
      default:  tx_req = 1'b0;
    endcase
  end

  always_comb begin
    state_nx     = state;
    restart_wait = 1'b0;
    case (state)
      DR_IDLE: begin
        if (arrival) begin
          state_nx     = DR_QUIET;
          restart_wait = 1'b1;
        end
      end
      DR_QUIET: begin
        if (deadline_hit) begin
          state_nx = DR_PROBE;
        end else if (arrival) begin
          restart_wait = 1'b1;
        end else if (timer >= quiet_target) begin
          state_nx = DR_PROBE;
        end
      end
      DR_PROBE: begin
        if (tx_grant) begin
          state_nx     = DR_PROBE_WAIT;
          restart_wait = 1'b1;
        end
      end
      DR_PROBE_WAIT: begin
        if (arrival) begin
          state_nx     = DR_QUIET;
          restart_wait = 1'b1;
        end else if (timer >= quiet_target) begin
          state_nx = DR_HALF;
        end
      end
      DR_HALF: begin
        if (arrival) begin
          state_nx     = DR_QUIET;
          restart_wait = 1'b1;
        end else if (tx_grant && (half_cnt == ($bits(half_cnt))'(HALF_PKTS - 1))) begin
          state_nx     = DR_HALF_WAIT;
          restart_wait = 1'b1;
        end
      end
      DR_HALF_WAIT: begin
        if (arrival) begin
          state_nx     = DR_QUIET;
          restart_wait = 1'b1;
        end else if (timer >= quiet_target) begin
          state_nx = DR_FULL;
        end
      end
      DR_FULL: begin
        if (arrival) begin
          state_nx     = DR_QUIET;
          restart_wait = 1'b1;
        end
      end
      default: state_nx = DR_IDLE;
    endcase
    // An empty queue with nothing arriving has nothing to drain.
    if (q_empty && !arrival) state_nx = DR_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= DR_IDLE;
      timer        <= '0;
      quiet_target <= TW'(QUIET_CYCLES);
      hold_cnt     <= '0;
      lfsr         <= LFSR_SEED;
      half_cnt     <= '0;
      pace         <= 1'b0;
      ev_probe     <= 1'b0;
      ev_half      <= 1'b0;
      ev_full      <= 1'b0;
      ev_deadline  <= 1'b0;
    end else begin
      // 16-bit maximal-length Fibonacci LFSR, taps 16,14,13,11.
      lfsr  <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      state <= state_nx;

      if (restart_wait) begin
        timer        <= '0;
        quiet_target <= TW'(QUIET_CYCLES) + jitter;
      end else if (timer != '1) begin
        timer <= timer + 1'b1;
      end

      if (tx_grant || q_empty) hold_cnt <= '0;
      else if (hold_cnt != '1) hold_cnt <= hold_cnt + 1'b1;

      if (state_nx == DR_HALF && state != DR_HALF) half_cnt <= '0;
      else if (state == DR_HALF && tx_grant)        half_cnt <= half_cnt + 1'b1;

      pace <= (state == DR_HALF) && tx_grant;

      ev_probe    <= (state == DR_PROBE) && tx_grant;
      ev_half     <= (state_nx == DR_HALF) && (state != DR_HALF);
      ev_full     <= (state_nx == DR_FULL) && (state != DR_FULL);
      ev_deadline <= (state == DR_QUIET) && deadline_hit;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) tx_grant |-> tx_req)
    else $error("drain_ctrl: grant without request");

endmodule
