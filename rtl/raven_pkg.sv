// raven_pkg: types and constants shared by the PCM crossbar spiking-RBM
// accelerator.
//
// All timing in the design is counted in ticks of the system clock. One tick
// is TICK_NS nanoseconds (10 ns, this design's choice), fine enough to
// resolve the shortest programming pulse (20 ns) and coarse enough that the
// longest interval (4.25 ms) fits a 20-bit counter.
//
// The word-line and bit-line bundles of one crossbar row and one crossbar
// column are packed structs, so a row driver, the array and the top pass
// them around as one value. A word line that drives a PCM programming
// transistor carries one of three levels: ground, the low "set" level VWLL
// (long, gentle pulse that crystallises the cell and lowers its resistance)
// or the high "reset" level VWLH (short, strong pulse that amorphises the
// cell and raises its resistance).
package raven_pkg;

  // ---------------------------------------------------------------- time base
  localparam int TICK_NS = 10;          // one clock tick in ns (assumed)
  localparam int TW      = 20;          // width of the pulse / refractory timers

  // Pulse timing of the neuron pulse generators, in ticks. The defaults are
  // the largest values of the hardware table (a, b, c, d); the smallest are
  // given as *_MIN for reference. d equals 2a+2b at both ends of the range.
  localparam int A_TICKS     = 204000;  // a = 2040 us
  localparam int B_TICKS     = 8580;    // b = 85.8 us
  localparam int C_TICKS     = 8;       // c = 79 ns, rounded up to whole ticks
  localparam int D_TICKS     = 425160;  // d = 4251.6 us
  localparam int A_TICKS_MIN = 910;     // a = 9.1 us
  localparam int B_TICKS_MIN = 440;     // b = 4.4 us
  localparam int C_TICKS_MIN = 2;       // c = 20 ns
  localparam int D_TICKS_MIN = 2700;    // d = 27 us

  // ------------------------------------------------------ neuron constants
  localparam int G_BITS     = 8;        // PCM conductance level width (256 states)
  localparam int CUR_W      = 20;       // signed width of a summed line current
  localparam int VW         = 24;       // membrane potential width, Q8.16 signed
  localparam int V_ONE      = 1 << 16;  // potential 1.0 = threshold
  localparam int ALPHA_Q16  = 3932;     // alpha = 0.06 in Q0.16
  localparam int TAU_TICKS  = 100000;   // leak time constant 1 ms
  localparam int REFR_TICKS = 400000;   // refractory period 4 ms

  // --------------------------------------------------------- input spikes
  localparam int SLOT_TICKS   = 100;    // Poisson sampling slot, 1 us
  // Probability per slot, per unit of pixel intensity, in units of 2^-32,
  // that gives 20 Hz at full intensity 255: 2^32 * 20 Hz * 1 us / 255.
  localparam int POISSON_THR  = 337;

  typedef logic [TW-1:0] tick_t;

  typedef enum logic [1:0] {
    PHASE_IDLE  = 2'd0,
    PHASE_DATA  = 2'd1,   // positive (Hebbian) weight update
    PHASE_MODEL = 2'd2,   // negative (anti-Hebbian) weight update
    PHASE_INFER = 2'd3    // programming lines disabled
  } phase_e;

  typedef enum logic [1:0] {
    WL_GND  = 2'd0,
    WL_VWLL = 2'd1,       // set level: conductance up
    WL_VWLH = 2'd2        // reset level: conductance down
  } wl_level_e;

  // Lines a presynaptic (row) neuron drives across the array.
  typedef struct packed {
    wl_level_e stdp_wl_rp;
    wl_level_e stdp_wl_rn;
    logic      lif_wl;
  } row_lines_t;

  // Lines a postsynaptic (column) neuron drives across the array.
  typedef struct packed {
    logic stdp_bl;
    logic blif_wl;
  } col_lines_t;

  // Programmable pulse timing, in ticks.
  typedef struct packed {
    tick_t a;
    tick_t b;
    tick_t c;
    tick_t d;
  } pulse_timing_t;

  localparam pulse_timing_t TIMING_DEFAULT =
    '{a: tick_t'(A_TICKS), b: tick_t'(B_TICKS), c: tick_t'(C_TICKS), d: tick_t'(D_TICKS)};

  // Power-up conductance of a PCM cell: a fixed scatter of +-16 levels around
  // mid-scale, so that the array does not start with every weight at zero.
  function automatic logic [G_BITS-1:0] g_power_up(input int row, input int col, input bit neg);
    logic [31:0] h;
    h = 32'(row) * 32'h9E3779B1 ^ 32'(col) * 32'h85EBCA77 ^ (neg ? 32'hC2B2AE3D : 32'h27D4EB2F);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return G_BITS'(112 + h[4:0]);
  endfunction

endpackage
