// post_pulse_gen: the two single-shot pulse generators of a postsynaptic
// (column) neuron.
//
// When the neuron fires, two short pulses of width c are sent, timed from the
// firing tick t = 0:
//
//   STDP_BL  high for a <= t < a+c   (programming bit line, level VSBL)
//   BLIF_WL  high for b <= t < b+c   (backward read spike to the rows)
//
// The STDP_BL pulse is what programs the cells of this column: it meets the
// set/reset word-line windows of rows that fired shortly before. In
// inference and idle the STDP_BL pulse is suppressed, as the paper disables
// the programming lines there; BLIF_WL is always sent. Delays a and b and
// width c are the paper's pulse table entries; which delay belongs to which
// line is read from its timing diagram (the text says the bit-line spike
// comes first; with the largest table values, b < a, BLIF_WL comes first).
//
// Single-shot, not retriggerable: a fire during a pattern is ignored and
// flagged on `dropped` (this design's choice). Outputs are decoded from
// registers; `timing` and `phase` are sampled when the pattern starts.
module post_pulse_gen
  import raven_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          fire,
  input  phase_e        phase,
  input  pulse_timing_t timing,
  output col_lines_t    lines,
  output logic          busy,
  output logic          dropped
);

  tick_t         t;
  logic          learn_q;
  pulse_timing_t tm_q;
  tick_t         t_end;

  always_comb begin
    t_end = (tm_q.a > tm_q.b) ? tick_t'(tm_q.a + tm_q.c) : tick_t'(tm_q.b + tm_q.c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      t       <= '0;
      learn_q <= 1'b0;
      tm_q    <= '0;
      dropped <= 1'b0;
    end else begin
      dropped <= fire && busy;
      if (!busy) begin
        if (fire) begin
          busy    <= 1'b1;
          t       <= '0;
          learn_q <= (phase == PHASE_DATA) || (phase == PHASE_MODEL);
          tm_q    <= timing;
        end
      end else if (t + 1'b1 >= t_end) begin
        busy <= 1'b0;
      end else begin
        t <= t + 1'b1;
      end
    end
  end

  always_comb begin
    lines.stdp_bl = busy && learn_q && (t >= tm_q.a) && (t < tm_q.a + tm_q.c);
    lines.blif_wl = busy && (t >= tm_q.b) && (t < tm_q.b + tm_q.c);
  end

endmodule
