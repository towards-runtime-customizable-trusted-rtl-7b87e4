`timescale 1ns / 1ps
// ro_puf_core - challenge/response logic of the ring-oscillator PUF.
//
// A ring-oscillator PUF compares the frequencies of two nominally identical
// oscillators.  The challenge is the pair of select values of two N-input
// multiplexers; each multiplexer passes one of the N oscillator outputs to a
// counter.  Both counters count for the same fixed interval, and a
// comparator sets the response bit to 1 when the oscillator picked by sel_a
// made more oscillations than the one picked by sel_b.  That structure (N
// ROs, two counters, one comparator, two N-input multiplexers, challenge as
// the select signals) is the one the TEE scheme uses; the controller, the
// interval length and the widths are this design's choices.
//
// Only the two selected oscillators are enabled, and only during the count
// window; a glitch-free multiplexer change is therefore guaranteed because the
// select lines are latched at `start` and never change while the ROs run.
//
// Timing, in `clk` cycles after the cycle in which `start` is sampled high
// while idle: CLEAR_CYCLES cycles of counter clear, WINDOW_CYCLES cycles of
// counting, SETTLE_CYCLES cycles with the ROs stopped (lets the last RO edge
// land in the counters), one compare cycle.  `done` pulses for one cycle
// together with the new `response`,
// exactly CLEAR_CYCLES + WINDOW_CYCLES + SETTLE_CYCLES + 1 rising clock edges
// after the edge that sampled `start` (CLEAR_CYCLES = 2).
// `start` while busy is ignored.
module ro_puf_core #(
  parameter int unsigned NUM_RO        = 16,
  parameter int unsigned COUNT_W       = 16,
  parameter int unsigned WINDOW_CYCLES = 1024,
  parameter int unsigned SETTLE_CYCLES = 4,
  parameter int unsigned SEL_W         = (NUM_RO > 1) ? $clog2(NUM_RO) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  logic [2*SEL_W-1:0]   challenge,   // {sel_b, sel_a}
  output logic                 busy,
  output logic                 done,
  output logic                 response,
  output logic [COUNT_W-1:0]   count_a,
  output logic [COUNT_W-1:0]   count_b,
  // ring-oscillator array
  output logic [NUM_RO-1:0]    ro_en,
  input  logic [NUM_RO-1:0]    ro_osc
);

  localparam int unsigned CLEAR_CYCLES = 2;
  localparam int unsigned TIMER_W = $clog2(WINDOW_CYCLES + SETTLE_CYCLES + CLEAR_CYCLES + 1) + 1;

  typedef enum logic [2:0] {
    S_IDLE,
    S_CLEAR,
    S_COUNT,
    S_SETTLE,
    S_COMPARE
  } state_e;

  state_e             state;
  logic [TIMER_W-1:0] timer;
  logic [SEL_W-1:0]   sel_a, sel_b;
  logic               clr_n;
  logic               mux_a, mux_b;

  // The two N-input multiplexers.
  assign mux_a = ro_osc[sel_a];
  assign mux_b = ro_osc[sel_b];

  // The two oscillation counters.
  ro_counter #(.WIDTH(COUNT_W)) u_cnt_a (.ro_clk(mux_a), .clr_n(clr_n), .count(count_a));
  ro_counter #(.WIDTH(COUNT_W)) u_cnt_b (.ro_clk(mux_b), .clr_n(clr_n), .count(count_b));

  always_comb begin
    ro_en = '0;
    if (state == S_COUNT) begin
      ro_en[sel_a] = 1'b1;
      ro_en[sel_b] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      timer    <= '0;
      sel_a    <= '0;
      sel_b    <= '0;
      clr_n    <= 1'b0;
      done     <= 1'b0;
      response <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          clr_n <= 1'b1;
          if (start) begin
            sel_a <= challenge[SEL_W-1:0];
            sel_b <= challenge[2*SEL_W-1:SEL_W];
            clr_n <= 1'b0;
            timer <= TIMER_W'(CLEAR_CYCLES - 1);
            state <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          if (timer == '0) begin
            clr_n <= 1'b1;
            timer <= TIMER_W'(WINDOW_CYCLES - 1);
            state <= S_COUNT;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        S_COUNT: begin
          if (timer == '0) begin
            timer <= TIMER_W'(SETTLE_CYCLES - 1);
            state <= S_SETTLE;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        S_SETTLE: begin
          if (timer == '0) state <= S_COMPARE;
          else             timer <= timer - 1'b1;
        end
        S_COMPARE: begin
          // The comparator: 1 when the RO picked by sel_a is faster.
          response <= (count_a > count_b);
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  initial begin
    assert (WINDOW_CYCLES >= 1 && SETTLE_CYCLES >= 1 && NUM_RO >= 2)
      else $error("ro_puf_core: WINDOW_CYCLES, SETTLE_CYCLES must be >= 1 and NUM_RO >= 2");
  end

endmodule
