// pcm_synapse_array: behavioural model of the crossbar of 6T2R PCM synapses.
//
// Kind: behavioural model. Each unit cell is two 3T1R circuits, one around
// the PCM resistor Rp and one around Rn; the signed weight is the difference
// of their conductances. The PCM cells and the currents through them are
// analog; here each conductance is an integer level 0..2^G_BITS-1 and each
// bit-line current is the integer sum of level differences.
//
// The three operations of a cell, all asynchronous to each other in the
// silicon, are evaluated per tick:
//   * forward read: a rising edge on row i's LIF_WL turns on T1/T4; the
//     column current mirrors of every column j see Gp[i][j] - Gn[i][j].
//     lif_bl_diff[j] is that difference summed over all rows whose LIF_WL rose
//     this tick, and lif_bl_valid marks the tick;
//   * backward read: a rising edge on column j's BLIF_WL turns on T2/T5; the
//     row current mirrors see the same differences, summed into
//     blif_bl_diff[i];
//   * programming: a rising edge on column j's STDP_BL (level VSBL) drives
//     current through every cell of the column whose STDP_WL transistor
//     (T3 for Rn, T6 for Rp) is on. A cell whose word line is at VWLL is set:
//     its conductance rises by SET_STEP. A cell whose word line is at VWLH is
//     reset: its conductance falls by RESET_STEP. Levels saturate at the ends.
// The cell structure, line names and the set/reset roles of VWLL/VWLH are the
// paper's. The read charge being counted once per read spike, the step sizes,
// the number of levels and the power-up levels (raven_pkg::g_power_up) are
// this design's choices; reset is the only time the array is written other
// than by programming, standing in for the cells' non-volatile state.
//
// A read port (dbg_row/dbg_col) returns the two conductances of one cell
// combinationally, for observing the learned weights.
module pcm_synapse_array
  import raven_pkg::*;
#(
  parameter int NPRE       = 832,
  parameter int NPOST      = 832,
  parameter int SET_STEP   = 1,
  parameter int RESET_STEP = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  row_lines_t              rows       [NPRE],
  input  col_lines_t              cols       [NPOST],
  output logic                    lif_bl_valid,
  output logic signed [CUR_W-1:0] lif_bl_diff  [NPOST],
  output logic                    blif_bl_valid,
  output logic signed [CUR_W-1:0] blif_bl_diff [NPRE],
  output logic [15:0]             set_events,
  output logic [15:0]             reset_events,
  input  logic [$clog2(NPRE)-1:0] dbg_row,
  input  logic [$clog2(NPOST)-1:0] dbg_col,
  output logic [G_BITS-1:0]       dbg_gp,
  output logic [G_BITS-1:0]       dbg_gn
);

  localparam int GMAX = (1 << G_BITS) - 1;

  logic [G_BITS-1:0] gp [NPRE][NPOST];
  logic [G_BITS-1:0] gn [NPRE][NPOST];

  logic [NPRE-1:0]  lif_q, lif_rise;
  logic [NPOST-1:0] blif_q, blif_rise, stdp_q, stdp_rise;

  always_comb begin
    for (int i = 0; i < NPRE; i++)  lif_rise[i]  = rows[i].lif_wl  && !lif_q[i];
    for (int j = 0; j < NPOST; j++) blif_rise[j] = cols[j].blif_wl && !blif_q[j];
    for (int j = 0; j < NPOST; j++) stdp_rise[j] = cols[j].stdp_bl && !stdp_q[j];
  end

  assign dbg_gp = gp[dbg_row][dbg_col];
  assign dbg_gn = gn[dbg_row][dbg_col];

  function automatic logic [G_BITS-1:0] program_level(input logic [G_BITS-1:0] g,
                                                      input wl_level_e wl);
    int v;
    v = int'(g);
    if (wl == WL_VWLL)      v = (v + SET_STEP   > GMAX) ? GMAX : v + SET_STEP;
    else if (wl == WL_VWLH) v = (v - RESET_STEP < 0)    ? 0    : v - RESET_STEP;
    return G_BITS'(v);
  endfunction

  // Line edge detectors and read currents.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lif_q         <= '0;
      blif_q        <= '0;
      stdp_q        <= '0;
      lif_bl_valid  <= 1'b0;
      blif_bl_valid <= 1'b0;
      for (int j = 0; j < NPOST; j++) lif_bl_diff[j]  <= '0;
      for (int i = 0; i < NPRE; i++)  blif_bl_diff[i] <= '0;
    end else begin
      for (int i = 0; i < NPRE; i++)  lif_q[i]  <= rows[i].lif_wl;
      for (int j = 0; j < NPOST; j++) blif_q[j] <= cols[j].blif_wl;
      for (int j = 0; j < NPOST; j++) stdp_q[j] <= cols[j].stdp_bl;
      lif_bl_valid  <= |lif_rise;
      blif_bl_valid <= |blif_rise;
      if (|lif_rise) begin
        for (int j = 0; j < NPOST; j++) begin
          logic signed [CUR_W-1:0] acc;
          acc = '0;
          for (int i = 0; i < NPRE; i++)
            if (lif_rise[i]) acc = acc + CUR_W'(int'(gp[i][j]) - int'(gn[i][j]));
          lif_bl_diff[j] <= acc;
        end
      end else if (lif_bl_valid) begin
        for (int j = 0; j < NPOST; j++) lif_bl_diff[j] <= '0;
      end
      if (|blif_rise) begin
        for (int i = 0; i < NPRE; i++) begin
          logic signed [CUR_W-1:0] acc;
          acc = '0;
          for (int j = 0; j < NPOST; j++)
            if (blif_rise[j]) acc = acc + CUR_W'(int'(gp[i][j]) - int'(gn[i][j]));
          blif_bl_diff[i] <= acc;
        end
      end else if (blif_bl_valid) begin
        for (int i = 0; i < NPRE; i++) blif_bl_diff[i] <= '0;
      end
    end
  end

  // Cell state: power-up levels on reset, then programming by STDP pulses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPRE; i++)
        for (int j = 0; j < NPOST; j++) begin
          gp[i][j] <= g_power_up(i, j, 1'b0);
          gn[i][j] <= g_power_up(i, j, 1'b1);
        end
      set_events   <= '0;
      reset_events <= '0;
    end else begin
      logic [15:0] ns, nr;
      ns = '0;
      nr = '0;
      if (|stdp_rise) begin
        for (int j = 0; j < NPOST; j++) begin
          if (stdp_rise[j]) begin
            for (int i = 0; i < NPRE; i++) begin
              gp[i][j] <= program_level(gp[i][j], rows[i].stdp_wl_rp);
              gn[i][j] <= program_level(gn[i][j], rows[i].stdp_wl_rn);
              ns = ns + 16'(rows[i].stdp_wl_rp == WL_VWLL) + 16'(rows[i].stdp_wl_rn == WL_VWLL);
              nr = nr + 16'(rows[i].stdp_wl_rp == WL_VWLH) + 16'(rows[i].stdp_wl_rn == WL_VWLH);
            end
          end
        end
      end
      set_events   <= ns;
      reset_events <= nr;
    end
  end

endmodule
