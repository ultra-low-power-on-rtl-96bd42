// poisson_spike_gen: external input spike source for one neuron.
//
// Produces a Poisson-like spike train whose rate is proportional to an 8-bit
// intensity (a pixel value, or full scale for a bias or active label
// neuron). Time is split into sampling slots (a strobe `slot`, one per
// SLOT_TICKS ticks); in each slot the neuron spikes with probability
// intensity * thr / 2^32, drawn from a 32-bit xorshift generator. With the
// default thr of raven_pkg this is 20 Hz at intensity 255, the paper's
// spiking rate; thr is a run-time input so the rate scale can be changed.
// This is a Bernoulli approximation to a Poisson process, exact in the limit
// of short slots.
//
// The paper feeds Poisson trains into the array from outside; the sampling
// scheme, the generator and the seed per instance are this design's choices.
// `spike` is a one-tick strobe in the slot tick; `en` gates it.
module poisson_spike_gen #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        slot,
  input  logic [7:0]  intensity,
  input  logic [31:0] thr,
  output logic        spike
);

  logic [31:0] x, x1, x2, x3;
  logic [39:0] p;

  always_comb begin
    x1 = x  ^ (x  << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
    p  = 40'(intensity) * 40'(thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x     <= (SEED == 32'd0) ? 32'h1 : SEED;
      spike <= 1'b0;
    end else begin
      spike <= 1'b0;
      if (slot) begin
        x     <= x3;
        spike <= en && (40'(x3) < p);
      end
    end
  end

endmodule
