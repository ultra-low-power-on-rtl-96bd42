// tb_pcm_synapse_array: a 6 x 5 array against a reference copy of its cell
// levels kept here. Random forward reads (LIF_WL), backward reads (BLIF_WL)
// and programming pulses (STDP_BL with random word-line levels) are applied;
// the summed read currents, the set/reset counts and every cell (through the
// observation port) are compared with the reference, including saturation
// at both ends of the conductance range.
module tb_pcm_synapse_array;
  import raven_pkg::*;
  localparam int NR = 6, NC = 5;
  logic clk = 0, rst_n = 0;
  row_lines_t rows [NR];
  col_lines_t cols [NC];
  logic lif_bl_valid, blif_bl_valid;
  logic signed [CUR_W-1:0] lif_bl_diff [NC];
  logic signed [CUR_W-1:0] blif_bl_diff [NR];
  logic [15:0] set_events, reset_events;
  logic [2:0] dbg_row, dbg_col;
  logic [G_BITS-1:0] dbg_gp, dbg_gn;
  int checks = 0, failures = 0;
  int gp [NR][NC], gn [NR][NC];

  pcm_synapse_array #(.NPRE(NR), .NPOST(NC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic idle_lines();
    foreach (rows[i]) rows[i] = '{stdp_wl_rp: WL_GND, stdp_wl_rn: WL_GND, lif_wl: 1'b0};
    foreach (cols[j]) cols[j] = '{stdp_bl: 1'b0, blif_wl: 1'b0};
  endtask

  task automatic check_cells();
    for (int i = 0; i < NR; i++)
      for (int j = 0; j < NC; j++) begin
        dbg_row = 3'(i); dbg_col = 3'(j);
        #1;
        check(int'(dbg_gp) == gp[i][j] && int'(dbg_gn) == gn[i][j], $sformatf("cell %0d,%0d", i, j));
      end
  endtask

  function automatic int prog(input int g, input wl_level_e wl);
    if (wl == WL_VWLL) return (g == 255) ? 255 : g + 1;
    if (wl == WL_VWLH) return (g == 0) ? 0 : g - 1;
    return g;
  endfunction

  task automatic forward(input logic [NR-1:0] sel);
    int s;
    foreach (rows[i]) rows[i].lif_wl = sel[i];
    @(negedge clk);
    check(lif_bl_valid == (sel != 0), "lif valid");
    for (int j = 0; j < NC; j++) begin
      s = 0;
      for (int i = 0; i < NR; i++) if (sel[i]) s += gp[i][j] - gn[i][j];
      check(int'(lif_bl_diff[j]) == s, $sformatf("lif_bl_diff[%0d]", j));
    end
    @(negedge clk);              // line still high: no new read
    check(!lif_bl_valid && lif_bl_diff[0] == 0, "one read per spike");
    idle_lines();
    @(negedge clk);
  endtask

  task automatic backward(input logic [NC-1:0] sel);
    int s;
    foreach (cols[j]) cols[j].blif_wl = sel[j];
    @(negedge clk);
    check(blif_bl_valid == (sel != 0), "blif valid");
    for (int i = 0; i < NR; i++) begin
      s = 0;
      for (int j = 0; j < NC; j++) if (sel[j]) s += gp[i][j] - gn[i][j];
      check(int'(blif_bl_diff[i]) == s, $sformatf("blif_bl_diff[%0d]", i));
    end
    idle_lines();
    @(negedge clk);
  endtask

  task automatic prog_col(input logic [NC-1:0] sel, input bit bias_set);
    int ns = 0, nr = 0;
    foreach (rows[i]) begin
      rows[i].stdp_wl_rp = wl_level_e'(bias_set ? 1 : $urandom % 3);
      rows[i].stdp_wl_rn = wl_level_e'(bias_set ? 2 : $urandom % 3);
    end
    foreach (cols[j]) cols[j].stdp_bl = sel[j];
    for (int j = 0; j < NC; j++) if (sel[j])
      for (int i = 0; i < NR; i++) begin
        gp[i][j] = prog(gp[i][j], rows[i].stdp_wl_rp);
        gn[i][j] = prog(gn[i][j], rows[i].stdp_wl_rn);
        ns += int'(rows[i].stdp_wl_rp == WL_VWLL) + int'(rows[i].stdp_wl_rn == WL_VWLL);
        nr += int'(rows[i].stdp_wl_rp == WL_VWLH) + int'(rows[i].stdp_wl_rn == WL_VWLH);
      end
    @(negedge clk);
    check(int'(set_events) == ns && int'(reset_events) == nr, "set/reset counts");
    @(negedge clk);              // STDP_BL still high: programmed once
    idle_lines();
    @(negedge clk);
  endtask

  initial begin
    idle_lines();
    dbg_row = 0; dbg_col = 0;
    for (int i = 0; i < NR; i++)
      for (int j = 0; j < NC; j++) begin
        gp[i][j] = int'(g_power_up(i, j, 1'b0));
        gn[i][j] = int'(g_power_up(i, j, 1'b1));
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_cells();
    for (int n = 0; n < 60; n++) begin
      forward(NR'($urandom));
      backward(NC'($urandom));
      prog_col(NC'($urandom), 1'b0);
      check_cells();
    end
    // drive column 1 to saturation: Rp set to 255, Rn reset to 0
    for (int n = 0; n < 260; n++) prog_col(5'b00010, 1'b1);
    check_cells();
    check(gp[0][1] == 255 && gn[0][1] == 0, "saturated");
    forward(6'b111111);
    backward(5'b00010);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
