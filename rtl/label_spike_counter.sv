// label_spike_counter: the external counters that read out a classification.
//
// During inference every spike of every label neuron is counted. Label
// neuron k belongs to class k mod num_classes (with the paper's 20 label
// neurons and 4 classes, five neurons per class). The class whose neurons
// together fired most is the result; ties go to the lowest class number.
// Counting spikes of the label neurons and taking the most active class is
// the paper's; the class-to-neuron interleaving, the counter width
// (saturating) and the tie rule are this design's choices.
//
// Interface: `clear` zeroes the counters (one tick), `en` enables counting,
// `spikes` are one-tick strobes, `latch` copies the winning class into
// `result` and raises `result_valid` in the next tick. `class_cnt` and
// `winner` are combinational from the counters.
module label_spike_counter #(
  parameter int NLABEL = 20,
  parameter int CNT_W  = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      en,
  input  logic [NLABEL-1:0]         spikes,
  input  logic [$clog2(NLABEL+1)-1:0] num_classes,
  input  logic                      latch,
  output logic [CNT_W-1:0]          neuron_cnt [NLABEL],
  output logic [CNT_W+$clog2(NLABEL+1)-1:0] class_cnt [NLABEL],
  output logic [$clog2(NLABEL)-1:0] winner,
  output logic [$clog2(NLABEL)-1:0] result,
  output logic                      result_valid
);

  localparam int SW = CNT_W + $clog2(NLABEL + 1);

  int nc;
  always_comb begin
    nc = (num_classes == '0 || int'(num_classes) > NLABEL) ? NLABEL : int'(num_classes);
    for (int c = 0; c < NLABEL; c++) class_cnt[c] = '0;
    for (int k = 0; k < NLABEL; k++)
      class_cnt[k % nc] = class_cnt[k % nc] + SW'(neuron_cnt[k]);
    winner = '0;
    for (int c = 1; c < NLABEL; c++)
      if (c < nc && class_cnt[c] > class_cnt[winner]) winner = ($bits(winner))'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NLABEL; k++) neuron_cnt[k] <= '0;
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      if (clear) begin
        for (int k = 0; k < NLABEL; k++) neuron_cnt[k] <= '0;
        result_valid <= 1'b0;
      end else if (en) begin
        for (int k = 0; k < NLABEL; k++)
          if (spikes[k] && neuron_cnt[k] != '1) neuron_cnt[k] <= neuron_cnt[k] + 1'b1;
      end
      if (latch) begin
        result       <= winner;
        result_valid <= 1'b1;
      end
    end
  end

endmodule
