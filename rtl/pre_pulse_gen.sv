// pre_pulse_gen: the three single-shot pulse generators of a presynaptic
// (row) neuron.
//
// When the neuron fires, this block plays out a fixed pulse pattern on the
// row's three word lines, timed from the firing tick t = 0:
//
//   learning phases (data / model)
//     "set" line    level VWLL for  a+b <= t < 2a+2b   (long, low pulse)
//     "reset" line  level VWLH for  a+b <= t < a+2b    (short, high pulse)
//   LIF_WL          high        for  d   <= t < d+c     (read spike)
//
// In the data phase the set pulse goes on STDP_WL_Rp and the reset pulse on
// STDP_WL_Rn, so a coincident postsynaptic STDP_BL pulse lowers Rp, raises Rn
// and so raises the weight. In the model phase the two patterns swap lines
// and the weight falls. In inference (and idle) both programming lines stay
// at ground and only the read spike on LIF_WL is sent. The pattern and the
// intervals a, b, c, d follow the paper's timing diagrams and pulse table;
// the interval boundaries are read off the dotted markers of the diagram.
//
// The generator is single-shot and not retriggerable: a fire that arrives
// while a pattern is still playing is ignored and counted on `dropped`
// (this design's choice; the neuron's 4 ms refractory time is shorter than
// the 4.25 ms pattern at the largest timing).
//
// Interface: `fire` is a one-tick strobe. `timing` and `phase` are sampled
// when the pattern starts and held for its length. Outputs are decoded from
// registers, so the first pulse edge comes one tick after `fire`.
module pre_pulse_gen
  import raven_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          fire,
  input  phase_e        phase,
  input  pulse_timing_t timing,
  output row_lines_t    lines,
  output logic          busy,
  output logic          dropped
);

  tick_t         t;
  phase_e        ph_q;
  pulse_timing_t tm_q;
  tick_t         t_end;

  // Pattern length: the later of the STDP window end and the read spike end.
  always_comb begin
    t_end = (2*tm_q.a + 2*tm_q.b > tm_q.d + tm_q.c) ? tick_t'(2*tm_q.a + 2*tm_q.b)
                                                     : tick_t'(tm_q.d + tm_q.c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      t       <= '0;
      ph_q    <= PHASE_IDLE;
      tm_q    <= '0;
      dropped <= 1'b0;
    end else begin
      dropped <= fire && busy;
      if (!busy) begin
        if (fire) begin
          busy <= 1'b1;
          t    <= '0;
          ph_q <= phase;
          tm_q <= timing;
        end
      end else if (t + 1'b1 >= t_end) begin
        busy <= 1'b0;
      end else begin
        t <= t + 1'b1;
      end
    end
  end

  // t is 0 in the first tick after the fire strobe; pulses are decoded from t.
  logic set_win, reset_win;
  always_comb begin
    set_win   = busy && (t >= tm_q.a + tm_q.b) && (t < 2*tm_q.a + 2*tm_q.b);
    reset_win = busy && (t >= tm_q.a + tm_q.b) && (t < tm_q.a + 2*tm_q.b);
    lines.lif_wl     = busy && (t >= tm_q.d) && (t < tm_q.d + tm_q.c);
    lines.stdp_wl_rp = WL_GND;
    lines.stdp_wl_rn = WL_GND;
    unique case (ph_q)
      PHASE_DATA: begin
        if (reset_win)    lines.stdp_wl_rn = WL_VWLH;
        if (set_win)      lines.stdp_wl_rp = WL_VWLL;
      end
      PHASE_MODEL: begin
        if (reset_win)    lines.stdp_wl_rp = WL_VWLH;
        if (set_win)      lines.stdp_wl_rn = WL_VWLL;
      end
      default: ;
    endcase
  end

endmodule
