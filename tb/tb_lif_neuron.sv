// tb_lif_neuron: drives two neuron models (slow leak and fast leak) with
// random read-current events and external spikes and compares potential,
// fire and refractory state every tick with a reference model written here.
// Also checks the single-event step alpha * 255/256 and that threshold
// fires, external fires, refractory blocking and leak all occurred.
module tb_lif_neuron;
  import raven_pkg::*;
  localparam int REFR = 20;
  localparam int LK_A = 100000, LK_B = 4;

  logic clk = 0, rst_n = 0, en = 1, cur_valid = 0, ext_spike = 0;
  logic signed [CUR_W-1:0] cur_diff = '0;
  logic fire_a, fire_b, refr_a, refr_b;
  logic signed [VW-1:0] v_a, v_b;
  int checks = 0, failures = 0;
  int n_thr_fire = 0, n_ext_fire = 0, n_blocked = 0, n_leak = 0;

  lif_neuron #(.LEAK_TICKS(LK_A), .REFR(REFR)) u_a (.clk, .rst_n, .en, .cur_valid, .cur_diff,
    .ext_spike, .fire(fire_a), .vmem(v_a), .refractory(refr_a));
  lif_neuron #(.LEAK_TICKS(LK_B), .REFR(REFR)) u_b (.clk, .rst_n, .en, .cur_valid, .cur_diff,
    .ext_spike, .fire(fire_b), .vmem(v_b), .refractory(refr_b));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef struct { longint v; int refr; int leakc; bit fire; } ref_t;
  ref_t ra, rb;

  function automatic void ref_step(ref ref_t r, input int leak_ticks, input bit count);
    longint vin;
    bit lt;
    lt  = (r.leakc == 0);
    vin = r.v;
    if (cur_valid) vin = vin + ((longint'(cur_diff) * ALPHA_Q16) >>> 8);
    if (lt) begin
      if (leak_ticks == LK_B && vin != (vin - (vin >>> 4))) n_leak++;
      vin = vin - (vin >>> 4);
    end
    if (vin > 8388607) vin = 8388607;
    if (vin < -8388607) vin = -8388607;
    r.leakc = lt ? leak_ticks - 1 : r.leakc - 1;
    r.fire = 0;
    if (!en) begin r.v = 0; r.refr = 0; end
    else if (r.refr != 0) begin
      if (count && (ext_spike || vin >= V_ONE)) n_blocked++;
      r.refr--; r.v = 0;
    end else if (ext_spike || vin >= V_ONE) begin
      if (count) begin if (ext_spike) n_ext_fire++; else n_thr_fire++; end
      r.fire = 1; r.v = 0; r.refr = REFR;
    end else r.v = vin;
  endfunction

  always @(posedge clk) if (rst_n) begin
    ref_step(ra, LK_A, 1'b1);
    ref_step(rb, LK_B, 1'b0);
  end

  always @(negedge clk) if (rst_n) begin
    check(longint'(v_a) == ra.v && fire_a == ra.fire && refr_a == (ra.refr != 0), "neuron a");
    check(longint'(v_b) == rb.v && fire_b == rb.fire && refr_b == (rb.refr != 0), "neuron b");
  end

  initial begin
    ra = '{0, 0, 0, 0}; rb = '{0, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);            // first tick after reset is a leak tick
    // one full-scale event: step is alpha*255/256 of threshold
    cur_valid = 1; cur_diff = 255;
    @(negedge clk);
    cur_valid = 0;
    check(v_a == 3916, "single step");
    // random traffic
    for (int n = 0; n < 20000; n++) begin
      cur_valid = ($urandom % 10) < 3;
      cur_diff  = CUR_W'(int'($urandom % 5000) - 1500);
      ext_spike = ($urandom % 200) == 0;
      en        = !(n > 15000 && n < 15050);
      @(negedge clk);
    end
    cur_valid = 0; ext_spike = 0;
    @(negedge clk);
    check(n_thr_fire > 0, "threshold fires");
    check(n_ext_fire > 0, "external fires");
    check(n_blocked > 0, "refractory blocked an input");
    check(n_leak > 0, "leak steps");
    $display("fires thr=%0d ext=%0d blocked=%0d", n_thr_fire, n_ext_fire, n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
