// tb_ravens_ncore: random whole-core test of ravens_ncore against a reference network.
//
// The reference model is written from the specification's rules with timestamps. For
// every synapse it keeps a queue of arrival times. For every neuron it keeps the cycle of
// the last firing and of the last threshold crossing, and it holds each weight as an
// integer. Each round draws a random network on the default five neurons: thresholds,
// resting potentials, leak, refractory periods, charge injection enables, and
// synapses with random sources (some outside the core, which never fire), weights and
// delays. It then runs 50 integration cycles with random injected values and forced
// synapse spikes, STDP on with the default table in most rounds. Checked in every cycle:
// each neuron's fire bit and charge, and every synapse weight.
`timescale 1ns/1ps
module tb_ravens_ncore;
  import ravens_pkg::*;

  localparam int N = N_NEURONS_DEF;
  localparam int S = N_PORTS;
  localparam int AMAX = (1 << (ACC_W - 1)) - 1;
  localparam int AMIN = -(1 << (ACC_W - 1));

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0, stdp_en = 1'b0;
  neuron_cfg_t                ncfg      [N];
  synapse_cfg_t               scfg      [N][S];
  logic signed [N_INJ-1:0]    inj_val   [N];
  logic [S-1:0]               ext_spike [N];
  logic [N-1:0]               fire, exceed;
  logic signed [ACC_W-1:0]    charge    [N];
  logic signed [WEIGHT_W-1:0] weight    [N][S];

  ravens_ncore dut (.*);

  always #5 clk = ~clk;

  int tab [8] = '{1, 2, 2, 3, 4, -4, -2, -1};
  int checks = 0, failures = 0;
  int n_fire = 0, n_arr = 0, n_stdp = 0, n_inj = 0, n_ext = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---- reference network ----
  int t;
  int acc [N], tf [N], te [N];
  bit pend [N], has_f [N], has_e [N];
  int w [N][S], last_arr [N][S];
  bit has_arr [N][S];
  int due [N][S][$];

  function automatic int imax(int a, int b); return a > b ? a : b; endfunction

  function automatic nmode_t mode_at(int n, int el);
    if (has_f[n] && el < int'(ncfg[n].abs_ref)) return MODE_ABS;
    if (has_f[n] && el < int'(ncfg[n].abs_ref) + int'(ncfg[n].rel_ref)) return MODE_REL;
    return MODE_STD;
  endfunction

  function automatic bit port_on(int n, int p);
    return scfg[n][p].en && !(ncfg[n].inj_en && p < int'(N_INJ));
  endfunction

  task automatic ref_clear();
    t = 0;
    for (int n = 0; n < N; n++) begin
      acc[n] = int'(ncfg[n].srp); pend[n] = 0; has_f[n] = 0; has_e[n] = 0;
      for (int p = 0; p < S; p++) begin
        w[n][p] = int'(scfg[n][p].weight); has_arr[n][p] = 0; due[n][p].delete();
      end
    end
  endtask

  task automatic ref_step(output bit f [N]);
    bit arr [N][S];
    bit ex [N];
    int sum, v, fl, el, idx, d;
    nmode_t m, nm;
    for (int n = 0; n < N; n++) f[n] = pend[n];
    for (int n = 0; n < N; n++)
      for (int p = 0; p < S; p++) begin
        if (port_on(n, p) && (ext_spike[n][p] ||
            (int'(scfg[n][p].src) < N && f[int'(scfg[n][p].src)])))
          due[n][p].push_back(t + int'(scfg[n][p].delay));
        arr[n][p] = 0;
        while (due[n][p].size() > 0 && due[n][p][0] == t) begin
          arr[n][p] = 1; void'(due[n][p].pop_front());
        end
        if (arr[n][p]) n_arr++;
      end
    for (int n = 0; n < N; n++) begin
      sum = ncfg[n].inj_en ? int'(inj_val[n]) : 0;
      for (int p = 0; p < S; p++) if (arr[n][p]) sum += w[n][p];
      if (f[n]) begin tf[n] = t; has_f[n] = 1; end
      el = t - tf[n];
      m = mode_at(n, el);
      if (f[n]) v = (ncfg[n].rel_ref != 0) ? int'(ncfg[n].rrp) : int'(ncfg[n].srp);
      else if (m == MODE_ABS) v = acc[n];
      else begin
        fl = (m == MODE_REL) ? int'(ncfg[n].rrp) : int'(ncfg[n].srp);
        v = imax(acc[n], fl);
        if (v > fl) v = imax(v - int'(ncfg[n].leak), fl);
      end
      if (m != MODE_ABS) begin
        v += sum;
        if (v > AMAX) v = AMAX;
        if (v < AMIN) v = AMIN;
      end
      acc[n] = v;
      nm = mode_at(n, el + 1);
      fl = (nm == MODE_REL) ? int'(ncfg[n].rrp) : int'(ncfg[n].srp);
      ex[n] = (nm != MODE_ABS) && (imax(v, fl) > int'(ncfg[n].threshold));
    end
    // STDP with the default table, T = 8, floor(T/2) = 4.
    for (int n = 0; n < N; n++)
      for (int p = 0; p < S; p++) begin
        idx = -1;
        if (ex[n]) begin
          if (arr[n][p]) idx = 4;
          else if (has_arr[n][p] && t - last_arr[n][p] <= 4) idx = 4 - (t - last_arr[n][p]);
        end else if (arr[n][p] && has_e[n] && 4 + (t - te[n]) < 8) begin
          idx = 4 + (t - te[n]);
        end
        if (stdp_en && idx >= 0) begin
          d = w[n][p] + tab[idx];
          w[n][p] = d > 7 ? 7 : (d < -8 ? -8 : d);
          n_stdp++;
        end
        if (arr[n][p]) begin has_arr[n][p] = 1; last_arr[n][p] = t; end
      end
    for (int n = 0; n < N; n++) begin
      pend[n] = ex[n];
      if (ex[n]) begin te[n] = t; has_e[n] = 1; end
    end
    t++;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit f [N];
    for (int n = 0; n < N; n++) begin
      ncfg[n] = '0; inj_val[n] = '0; ext_spike[n] = '0;
      for (int p = 0; p < S; p++) scfg[n][p] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 120; round++) begin
      @(negedge clk);
      stdp_en = (round % 4 != 0);
      for (int n = 0; n < N; n++) begin
        ncfg[n].srp       = THR_W'(int'($urandom_range(0, 4)) - 2);
        ncfg[n].rrp       = THR_W'(int'(ncfg[n].srp) - int'($urandom_range(0, 4)));
        ncfg[n].threshold = THR_W'(int'(ncfg[n].srp) + int'($urandom_range(0, 6)));
        ncfg[n].leak      = LEAK_W'($urandom_range(0, 2));
        ncfg[n].abs_ref   = REF_W'($urandom_range(0, 2));
        ncfg[n].rel_ref   = REF_W'($urandom_range(0, 2));
        ncfg[n].inj_en    = ($urandom_range(0, 2) == 0);
        for (int p = 0; p < S; p++) begin
          scfg[n][p].en     = ($urandom_range(0, 2) == 0);
          scfg[n][p].src    = NID_W'(($urandom_range(0, 9) == 0) ? 200 : $urandom_range(0, N - 1));
          scfg[n][p].weight = WEIGHT_W'(int'($urandom_range(0, 12)) - 5);
          scfg[n][p].delay  = DELAY_W'($urandom_range(0, DELAY_MAX));
        end
      end
      clear = 1'b1; step = 1'b0;
      for (int n = 0; n < N; n++) begin inj_val[n] = '0; ext_spike[n] = '0; end
      @(negedge clk);
      clear = 1'b0;
      ref_clear();
      for (int c = 0; c < 50; c++) begin
        @(negedge clk);
        for (int n = 0; n < N; n++) begin
          inj_val[n]   = ($urandom_range(0, 5) == 0) ? N_INJ'(int'($urandom_range(0, 20)) - 4) : '0;
          ext_spike[n] = ($urandom_range(0, 6) == 0) ? S'(1 << $urandom_range(0, S - 1)) : '0;
          if (ncfg[n].inj_en && inj_val[n] != 0) n_inj++;
          if (ext_spike[n] != 0) n_ext++;
        end
        step = 1'b1;
        #1;
        ref_step(f);
        for (int n = 0; n < N; n++) begin
          check($sformatf("r%0d t%0d fire[%0d]", round, c, n), fire[n] == f[n]);
          if (f[n]) n_fire++;
        end
        @(posedge clk);
        #1;
        for (int n = 0; n < N; n++) begin
          check($sformatf("r%0d t%0d charge[%0d] %0d exp %0d", round, c, n, charge[n], acc[n]),
                int'(charge[n]) == acc[n]);
          for (int p = 0; p < S; p++)
            check($sformatf("r%0d t%0d weight[%0d][%0d] %0d exp %0d", round, c, n, p,
                            weight[n][p], w[n][p]), int'(weight[n][p]) == w[n][p]);
        end
      end
      @(negedge clk);
      step = 1'b0;
    end
    $display("events: fire=%0d arrivals=%0d stdp=%0d inject=%0d ext=%0d",
             n_fire, n_arr, n_stdp, n_inj, n_ext);
    check("behaviours exercised", n_fire > 0 && n_arr > 0 && n_stdp > 0 && n_inj > 0 && n_ext > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
