// tb_ravens_neuron: random test of ravens_neuron against a reference model.
//
// The reference keeps the neuron's state as timestamps (the cycle of the last firing
// and of the last threshold crossing), not as down-counters as the RTL does. It derives
// the mode of each cycle from the time elapsed since the last firing. Every 40
// integration cycles the testbench draws new Neuron Settings, including leak, both
// refractory periods and resting potentials, and reloads with `clear`. In each cycle it
// drives a random charge, sometimes holds `step` low, and compares fire, mode, charge and
// the cycles-since-crossing output with the reference.
`timescale 1ns/1ps
module tb_ravens_neuron;
  import ravens_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  neuron_cfg_t             cfg;
  logic signed [ACC_W-1:0] syn_sum;
  logic                    fire, exceed, post_dt_valid;
  logic signed [ACC_W-1:0] charge;
  nmode_t                  mode;
  logic [DT_W-1:0]         post_dt;

  ravens_neuron dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fire = 0, n_abs = 0, n_rel = 0, n_leak = 0, n_clamp = 0, n_sat = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- reference model ----
  int  r_acc, r_t, r_tf, r_te;
  bit  r_pend, r_has_f, r_has_e;
  localparam int AMAX = (1 << (ACC_W - 1)) - 1;
  localparam int AMIN = -(1 << (ACC_W - 1));

  function automatic int imax(int a, int b); return a > b ? a : b; endfunction

  // mode for a cycle `el` cycles after the last firing (el = 0 is the firing cycle)
  function automatic nmode_t mode_at(bit has_f, int el);
    if (has_f && el < int'(cfg.abs_ref)) return MODE_ABS;
    if (has_f && el < int'(cfg.abs_ref) + int'(cfg.rel_ref)) return MODE_REL;
    return MODE_STD;
  endfunction

  task automatic ref_clear();
    r_acc = int'(cfg.srp); r_t = 0; r_pend = 0; r_has_f = 0; r_has_e = 0;
  endtask

  // One integration cycle; returns expected fire and mode of this cycle.
  task automatic ref_step(input int in, output bit e_fire, output nmode_t e_mode);
    int v, fl, el;
    nmode_t nm;
    e_fire = r_pend;
    if (r_pend) begin r_tf = r_t; r_has_f = 1; end
    el = r_t - r_tf;
    e_mode = mode_at(r_has_f, el);
    if (e_fire) v = (cfg.rel_ref != 0) ? int'(cfg.rrp) : int'(cfg.srp);
    else if (e_mode == MODE_ABS) v = r_acc;
    else begin
      fl = (e_mode == MODE_REL) ? int'(cfg.rrp) : int'(cfg.srp);
      if (r_acc < fl) n_clamp++;
      v = imax(r_acc, fl);
      if (v > fl && cfg.leak != 0) begin
        v = imax(v - int'(cfg.leak), fl);
        n_leak++;
      end
    end
    if (e_mode != MODE_ABS) begin
      v = v + in;
      if (v > AMAX) begin v = AMAX; n_sat++; end
      if (v < AMIN) begin v = AMIN; n_sat++; end
    end
    r_acc = v;
    nm = mode_at(r_has_f, el + 1);
    fl = (nm == MODE_REL) ? int'(cfg.rrp) : int'(cfg.srp);
    r_pend = (nm != MODE_ABS) && (imax(v, fl) > int'(cfg.threshold));
    if (r_pend) begin r_te = r_t; r_has_e = 1; end
    r_t++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit     e_fire;
    nmode_t e_mode;
    int     in, exp_dt;
    cfg = '0;
    syn_sum = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 300; round++) begin
      @(negedge clk);
      cfg.srp       = THR_W'($signed($urandom_range(0, 8)) - 6);
      cfg.rrp       = THR_W'(int'(cfg.srp) - int'($urandom_range(0, 5)));
      cfg.threshold = THR_W'(int'(cfg.srp) + int'($urandom_range(0, 10)));
      cfg.leak      = LEAK_W'($urandom_range(0, 3));
      cfg.abs_ref   = REF_W'($urandom_range(0, 3));
      cfg.rel_ref   = REF_W'($urandom_range(0, 3));
      cfg.inj_en    = 1'b0;
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      ref_clear();
      check("clear loads srp", charge == ACC_W'(cfg.srp) && !fire && !post_dt_valid);
      for (int c = 0; c < 40; c++) begin
        @(negedge clk);
        if (round == 5) in = -255;   // drive the potential into saturation
        else in = ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(0, 12)) - 4;
        syn_sum = ACC_W'(in);
        step = ($urandom_range(0, 7) != 0);
        #1;
        if (step) begin
          exp_dt = r_has_e ? ((r_t - r_te > 15) ? 15 : r_t - r_te) : 0;
          check($sformatf("r%0d c%0d dt_valid", round, c), post_dt_valid == r_has_e);
          if (r_has_e)
            check($sformatf("r%0d c%0d post_dt %0d exp %0d", round, c, post_dt, exp_dt),
                  int'(post_dt) == exp_dt);
          ref_step(in, e_fire, e_mode);
          check($sformatf("r%0d c%0d fire %0b exp %0b", round, c, fire, e_fire), fire == e_fire);
          check($sformatf("r%0d c%0d mode %s exp %s", round, c, mode.name(), e_mode.name()),
                mode == e_mode);
          check($sformatf("r%0d c%0d exceed", round, c), exceed == r_pend);
          if (e_fire) n_fire++;
          if (e_mode == MODE_ABS) n_abs++;
          if (e_mode == MODE_REL) n_rel++;
          @(posedge clk);
          #1;
          check($sformatf("r%0d c%0d charge %0d exp %0d", round, c, charge, r_acc),
                int'(charge) == r_acc);
        end else begin
          @(posedge clk);
          #1;
          check("hold keeps charge", int'(charge) == r_acc);
        end
        step = 1'b0;
      end
    end
    $display("events: fire=%0d abs=%0d rel=%0d leak=%0d clamp=%0d saturate=%0d",
             n_fire, n_abs, n_rel, n_leak, n_clamp, n_sat);
    check("all behaviours exercised",
          n_fire > 0 && n_abs > 0 && n_rel > 0 && n_leak > 0 && n_clamp > 0 && n_sat > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
