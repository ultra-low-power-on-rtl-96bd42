// raven_top: PCM crossbar spiking-RBM accelerator with on-chip learning.
//
// A NPRE x NPOST crossbar of 6T2R PCM synapses (pcm_synapse_array) has a
// presynaptic neuron circuit on every row (pre_neuron) and a postsynaptic
// neuron circuit on every column (post_neuron). A restricted Boltzmann
// machine is mapped onto it: rows are the visible layer, columns the hidden
// layer, and each cell holds the symmetric weight between one visible and
// one hidden unit. Spikes travel both ways through the same cells: a row
// spike on LIF_WL reads its cells into the column neurons, a column spike on
// BLIF_WL reads them back into the row neurons, and coincident row
// (STDP_WL_Rp/Rn) and column (STDP_BL) programming pulses change them, which
// implements spike-timing-dependent plasticity in place.
//
// Row map (visible layer): [0, N_IMAGE) image neurons, then N_LABEL label
// neurons, then N_VBIAS bias neurons; the remaining rows are held at rest.
// Column map (hidden layer): [0, N_HIDDEN) hidden neurons, then N_HBIAS bias
// neurons; the remaining columns are held at rest. The defaults are the
// paper's: an 832 x 832 array and a 412 x 508 RBM (384 image, 20 label,
// 8 + 8 bias, 500 hidden neurons).
//
// phase_controller runs a training sample (data phase, then model phase) or
// an inference, and enables the Poisson input trains (poisson_spike_gen) of
// the neuron groups the current phase drives. Image neurons spike at a rate
// proportional to their pixel; the label neurons of class `label_class`
// and all bias neurons spike at full rate. During inference the label
// neurons' spikes are counted (label_spike_counter) and the most active
// class is the result. Every neuron's spike input and output pins are also
// brought out (ext_*_spike, *_spike_out), ORed with the internal trains.
//
// Run-time configuration: pulse timing (a, b, c, d in ticks), phase lengths
// in ticks, Poisson rate scale, number of classes and the training label.
// All are sampled continuously; change them only while `busy` is low.
module raven_top
  import raven_pkg::*;
#(
  parameter int NPRE     = 832,
  parameter int NPOST    = 832,
  parameter int N_IMAGE  = 384,
  parameter int N_LABEL  = 20,
  parameter int N_VBIAS  = 8,
  parameter int N_HIDDEN = 500,
  parameter int N_HBIAS  = 8,
  parameter int LEAK_TICKS = TAU_TICKS / 16,   // leak step period (tau = 1 ms)
  parameter int REFR       = REFR_TICKS,       // refractory period (4 ms)
  localparam int CW      = $clog2(N_LABEL + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  pulse_timing_t            timing,
  input  logic [31:0]              data_ticks,
  input  logic [31:0]              model_ticks,
  input  logic [31:0]              infer_ticks,
  input  logic [31:0]              poisson_thr,
  input  logic [CW-1:0]            num_classes,
  input  logic [CW-1:0]            label_class,
  // sample and commands
  input  logic [7:0]               image [N_IMAGE],
  input  logic                     start_train,
  input  logic                     start_infer,
  // spike I/O pins of every neuron
  input  logic [NPRE-1:0]          ext_pre_spike,
  input  logic [NPOST-1:0]         ext_post_spike,
  output logic [NPRE-1:0]          pre_spike_out,
  output logic [NPOST-1:0]         post_spike_out,
  // status and result
  output phase_e                   phase,
  output logic                     busy,
  output logic                     train_done,
  output logic                     infer_done,
  output logic [$clog2(N_LABEL)-1:0] result_class,
  output logic                     result_valid,
  output logic [15:0]              label_count [N_LABEL],
  output logic [15:0]              set_events,
  output logic [15:0]              reset_events,
  output logic [NPRE-1:0]          pre_dropped,
  output logic [NPOST-1:0]         post_dropped,
  // cell observation port
  input  logic [$clog2(NPRE)-1:0]  dbg_row,
  input  logic [$clog2(NPOST)-1:0] dbg_col,
  output logic [G_BITS-1:0]        dbg_gp,
  output logic [G_BITS-1:0]        dbg_gn
);

  localparam int NVIS = N_IMAGE + N_LABEL + N_VBIAS;
  localparam int NHID = N_HIDDEN + N_HBIAS;

  // ------------------------------------------------------------ sequencing
  logic slot, img_en, label_en, vbias_en, hbias_en, cnt_clear, cnt_en;

  phase_controller u_ctrl (
    .clk, .rst_n, .start_train, .start_infer,
    .data_ticks, .model_ticks, .infer_ticks,
    .phase, .busy, .slot, .img_en, .label_en, .vbias_en, .hbias_en,
    .cnt_clear, .cnt_en, .train_done, .infer_done
  );

  // ------------------------------------------------------ Poisson inputs
  logic [NPRE-1:0]  pre_poisson;
  logic [NPOST-1:0] post_poisson;
  int               nc;

  assign nc = (num_classes == '0 || int'(num_classes) > N_LABEL) ? N_LABEL : int'(num_classes);

  for (genvar i = 0; i < NPRE; i++) begin : g_vin
    if (i < N_IMAGE) begin : g_img
      poisson_spike_gen #(.SEED(32'h2545F491 + 32'(i) * 32'h9E37)) u_pg (
        .clk, .rst_n, .en(img_en), .slot, .intensity(image[i]),
        .thr(poisson_thr), .spike(pre_poisson[i]));
    end else if (i < N_IMAGE + N_LABEL) begin : g_lab
      logic [7:0] inten;
      assign inten = ((i - N_IMAGE) % nc == int'(label_class)) ? 8'd255 : 8'd0;
      poisson_spike_gen #(.SEED(32'h2545F491 + 32'(i) * 32'h9E37)) u_pg (
        .clk, .rst_n, .en(label_en), .slot, .intensity(inten),
        .thr(poisson_thr), .spike(pre_poisson[i]));
    end else if (i < NVIS) begin : g_bias
      poisson_spike_gen #(.SEED(32'h2545F491 + 32'(i) * 32'h9E37)) u_pg (
        .clk, .rst_n, .en(vbias_en), .slot, .intensity(8'd255),
        .thr(poisson_thr), .spike(pre_poisson[i]));
    end else begin : g_none
      assign pre_poisson[i] = 1'b0;
    end
  end

  for (genvar j = 0; j < NPOST; j++) begin : g_hin
    if (j >= N_HIDDEN && j < NHID) begin : g_bias
      poisson_spike_gen #(.SEED(32'h6C8E9CF5 + 32'(j) * 32'h7F4A)) u_pg (
        .clk, .rst_n, .en(hbias_en), .slot, .intensity(8'd255),
        .thr(poisson_thr), .spike(post_poisson[j]));
    end else begin : g_none
      assign post_poisson[j] = 1'b0;
    end
  end

  // ------------------------------------------------ neurons and crossbar
  row_lines_t              rows [NPRE];
  col_lines_t              cols [NPOST];
  logic                    lif_bl_valid, blif_bl_valid;
  logic signed [CUR_W-1:0] lif_bl_diff  [NPOST];
  logic signed [CUR_W-1:0] blif_bl_diff [NPRE];

  for (genvar i = 0; i < NPRE; i++) begin : g_pre
    pre_neuron #(.LEAK_TICKS(LEAK_TICKS), .REFR(REFR)) u_n (
      .clk, .rst_n,
      .en        (i < NVIS),
      .phase, .timing,
      .cur_valid (blif_bl_valid),
      .cur_diff  (blif_bl_diff[i]),
      .spike_in  (pre_poisson[i] | ext_pre_spike[i]),
      .spike_out (pre_spike_out[i]),
      .lines     (rows[i]),
      .dropped   (pre_dropped[i])
    );
  end

  for (genvar j = 0; j < NPOST; j++) begin : g_post
    post_neuron #(.LEAK_TICKS(LEAK_TICKS), .REFR(REFR)) u_n (
      .clk, .rst_n,
      .en        (j < NHID),
      .phase, .timing,
      .cur_valid (lif_bl_valid),
      .cur_diff  (lif_bl_diff[j]),
      .spike_in  (post_poisson[j] | ext_post_spike[j]),
      .spike_out (post_spike_out[j]),
      .lines     (cols[j]),
      .dropped   (post_dropped[j])
    );
  end

  pcm_synapse_array #(.NPRE(NPRE), .NPOST(NPOST)) u_array (
    .clk, .rst_n, .rows, .cols,
    .lif_bl_valid, .lif_bl_diff, .blif_bl_valid, .blif_bl_diff,
    .set_events, .reset_events,
    .dbg_row, .dbg_col, .dbg_gp, .dbg_gn
  );

  // ------------------------------------------------------- classification
  logic [CW+15:0]            class_cnt [N_LABEL];
  logic [$clog2(N_LABEL)-1:0] winner;

  label_spike_counter #(.NLABEL(N_LABEL), .CNT_W(16)) u_count (
    .clk, .rst_n,
    .clear       (cnt_clear),
    .en          (cnt_en),
    .spikes      (pre_spike_out[N_IMAGE +: N_LABEL]),
    .num_classes,
    .latch       (infer_done),
    .neuron_cnt  (label_count),
    .class_cnt, .winner,
    .result      (result_class),
    .result_valid
  );

endmodule
