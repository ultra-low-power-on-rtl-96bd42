// pre_neuron: one presynaptic (row, visible-layer) neuron circuit.
//
// The neuron core (lif_neuron) integrates the current its row sees when
// columns send backward read spikes on BLIF_WL, and fires when its potential
// reaches threshold or when a spike arrives on its spike input pin. A fire
// starts the row's pulse generators (pre_pulse_gen): first the two STDP
// programming word lines, then the LIF_WL read spike to the columns. The
// fire strobe is also the neuron's spike output pin. This composition is the
// paper's presynaptic neuron circuit; see the two submodules for timing.
module pre_neuron
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
  output row_lines_t              lines,
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

  pre_pulse_gen u_pulse (
    .clk, .rst_n,
    .fire (spike_out),
    .phase, .timing, .lines, .busy, .dropped
  );

endmodule
