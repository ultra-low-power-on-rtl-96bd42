// post_neuron: one postsynaptic (column, hidden-layer) neuron circuit.
//
// The neuron core (lif_neuron) integrates the current its column sees when
// rows send forward read spikes on LIF_WL, and fires at threshold or on a
// spike at its input pin. A fire starts the column's pulse generators
// (post_pulse_gen): the STDP_BL programming pulse and the BLIF_WL backward
// read spike. The fire strobe is also the spike output pin. This composition
// is the paper's postsynaptic neuron circuit; see the submodules for timing.
module post_neuron
  import raven_pkg::*;
#(
  parameter int LEAK_TICKS = TAU_TICKS / 16,
  parameter int REFR       = REFR_TICKS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  phase_e                  phase,
  input  pulse_timing_t           timing,
  input  logic                    cur_valid,
  input  logic signed [CUR_W-1:0] cur_diff,
  input  logic                    spike_in,
  output logic                    spike_out,
  output col_lines_t              lines,
  output logic                    dropped
);

  logic              busy;
  logic signed [VW-1:0] vmem;
  logic              refractory;

  lif_neuron #(.LEAK_TICKS(LEAK_TICKS), .REFR(REFR)) u_core (
    .clk, .rst_n, .en, .cur_valid, .cur_diff,
    .ext_spike (spike_in),
    .fire      (spike_out),
    .vmem, .refractory
  );

  post_pulse_gen u_pulse (
    .clk, .rst_n,
    .fire (spike_out),
    .phase, .timing, .lines, .busy, .dropped
  );

endmodule
