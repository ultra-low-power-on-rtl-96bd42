// lif_neuron: behavioural model of the capacitor-based leaky
// integrate-and-fire neuron core (current mirror, membrane capacitor,
// comparator, leak, refractory and reset circuits).
//
// Kind: behavioural model. In silicon this is an analog circuit: a current
// mirror charges or discharges a capacitor by the difference of the currents
// drawn through the Rp and Rn cells, and a comparator fires when the
// capacitor voltage passes the threshold. Here the capacitor voltage is a
// signed fixed-point number (Q8.16, 1.0 = threshold) updated once per tick.
//
// Per tick, when not refractory:
//   * if `cur_valid`, the potential moves by alpha * cur_diff / 256, where
//     cur_diff is the summed conductance difference (Gp - Gn, in PCM levels
//     of 0..255) of every cell that a read spike reached this tick. So a
//     full-scale weight moves the potential by alpha = 0.06 of threshold;
//   * every TAU/16 ticks the potential loses 1/16 of itself (a stepwise
//     approximation of an exponential leak to rest 0 with time constant TAU);
//   * if the potential reaches 1.0, or an external spike arrives on
//     `ext_spike` (the neuron's spike input pin), the neuron fires: `fire`
//     pulses for one tick, the potential resets to 0 and inputs are ignored
//     for REFR ticks.
// Rest/reset 0, threshold 1, alpha 0.06, leak 1 ms and refractory 4 ms are
// the paper's network parameters. The fixed-point format, the stepwise leak,
// saturation at about +-128 (the Q8.16 range) and forcing a fire on an external spike are this
// design's choices. `en` low holds the neuron at rest (unused array lines).
module lif_neuron
  import raven_pkg::*;
#(
  parameter int ALPHA      = ALPHA_Q16,
  parameter int THRESH     = V_ONE,
  parameter int LEAK_TICKS = TAU_TICKS / 16,
  parameter int LEAK_SHIFT = 4,
  parameter int REFR       = REFR_TICKS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    cur_valid,
  input  logic signed [CUR_W-1:0] cur_diff,
  input  logic                    ext_spike,
  output logic                    fire,
  output logic signed [VW-1:0]    vmem,
  output logic                    refractory
);

  localparam logic signed [VW+15:0] VMAX = (VW+16)'((1 <<< (VW-1)) - 1);
  localparam logic signed [VW+15:0] VMIN = -VMAX;

  tick_t                 refr_cnt;
  logic [$clog2(LEAK_TICKS+1)-1:0] leak_cnt;
  logic                  leak_tick;
  logic signed [VW+15:0] v_in, v_next;

  assign refractory = (refr_cnt != '0);
  assign leak_tick  = (leak_cnt == '0);

  always_comb begin
    v_in = (VW+16)'(vmem);
    if (cur_valid)
      v_in = v_in + (((VW+16)'(cur_diff) * (VW+16)'(ALPHA)) >>> G_BITS);
    if (leak_tick)
      v_in = v_in - (v_in >>> LEAK_SHIFT);
    if (v_in > VMAX)      v_next = VMAX;
    else if (v_in < VMIN) v_next = VMIN;
    else                  v_next = v_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem     <= '0;
      refr_cnt <= '0;
      leak_cnt <= '0;
      fire     <= 1'b0;
    end else begin
      fire     <= 1'b0;
      leak_cnt <= leak_tick ? ($bits(leak_cnt))'(LEAK_TICKS - 1) : leak_cnt - 1'b1;
      if (!en) begin
        vmem     <= '0;
        refr_cnt <= '0;
      end else if (refractory) begin
        refr_cnt <= refr_cnt - 1'b1;
        vmem     <= '0;
      end else if (ext_spike || v_next >= (VW+16)'(THRESH)) begin
        fire     <= 1'b1;
        vmem     <= '0;
        refr_cnt <= tick_t'(REFR);
      end else begin
        vmem     <= VW'(v_next);
      end
    end
  end

endmodule
