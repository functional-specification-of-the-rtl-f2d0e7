// tb_ravens_top: end-to-end test of ravens_top at its default Hardware Constants.
//
// It loads the five-neuron example networks of the RAVENS specification one after the
// other: plain integrate-and-fire, firing every timestep, leak with a negative standard
// resting potential, clamping at the resting potential, and the absolute and relative
// refractory periods. For each timestep it applies the input (charge injection of 16)
// and checks which neurons fire and every neuron's charge at the end of the timestep,
// against the activity tables published with the specification. It then replays the
// specification's worked STDP example with the default table [1,2,2,3,4,-4,-2,-1]:
// synapses a, b and c, forced to spike with ext_spike at timesteps 7, 10 and 12,
// potentiate by 0, 2 and 4, and a later spike on a depresses it.
// Monitors count each mechanism. A mechanism that never occurs is a failure.
`timescale 1ns/1ps
module tb_ravens_top;
  import ravens_pkg::*;

  localparam int N  = N_NEURONS_DEF;
  localparam int MAXROWS = 16;
  localparam int MAIN = 0, ON = 1, OFF = 2, OUT = 3, BIAS = 4;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0, stdp_en = 1'b0;
  neuron_cfg_t             ncfg      [N];
  synapse_cfg_t            scfg      [N][N_PORTS];
  logic signed [N_INJ-1:0] inj_val   [N];
  logic [N_PORTS-1:0]      ext_spike [N];

  int checks = 0, failures = 0;

  // Expected activity of one example, rows indexed by timestep.
  int            n_rows;
  logic [N-1:0]  exp_app  [MAXROWS];
  logic [N-1:0]  exp_fire [MAXROWS];
  int            exp_ch   [MAXROWS][N];

  always #5 clk = ~clk;

  function automatic synapse_cfg_t syn(int src, int w, int d);
    synapse_cfg_t s;
    s.en     = 1'b1;
    s.src    = NID_W'(src);
    s.weight = WEIGHT_W'(w);
    s.delay  = DELAY_W'(d);
    return s;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // The five-neuron network of the examples: Main, On, Off, Out, Bias.
  // Synapses use ports 6.. because ports 0..5 carry charge injection on Main, On and Off.
  task automatic set_net(int thr, int w, int d, int w_off, int d_bias,
                         int main_self_d, int on_w, int on_d);
    for (int n = 0; n < N; n++) begin
      ncfg[n] = '0;
      ncfg[n].threshold = THR_W'(thr);
      ncfg[n].inj_en    = (n == MAIN || n == ON || n == OFF);
      inj_val[n]   = '0;
      ext_spike[n] = '0;
      for (int p = 0; p < int'(N_PORTS); p++) scfg[n][p] = '0;
    end
    scfg[MAIN][6] = syn(ON,   on_w,  on_d);
    scfg[MAIN][7] = syn(OFF,  w_off, d);
    scfg[MAIN][8] = syn(MAIN, w,     main_self_d);
    scfg[OUT][6]  = syn(MAIN, w,     d);
    scfg[BIAS][6] = syn(MAIN, w,     d_bias);
    scfg[BIAS][7] = syn(BIAS, w,     d_bias);
  endtask

  logic [N-1:0]            fire;
  logic signed [ACC_W-1:0] charge [N];
  logic signed [WEIGHT_W-1:0] weight [N][N_PORTS];
  logic [31:0]             timestep;

  ravens_top dut (
    .clk, .rst_n, .clear, .step, .stdp_en, .ncfg, .scfg, .inj_val, .ext_spike,
    .fire, .charge, .weight, .timestep
  );

  // Load the network, then run the rows: apply input, check who fires, check charges.
  task automatic run_rows(string name, int k);
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int t = 0; t < n_rows; t++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) inj_val[n] = exp_app[t][n] ? N_INJ'(16) : '0;
      step = 1'b1;
      #1;
      check($sformatf("%s t=%0d fire %b expected %b", name, t, fire, exp_fire[t]),
            fire == exp_fire[t]);
      check($sformatf("%s t=%0d timestep %0d", name, t, timestep), timestep == 32'(t));
      @(posedge clk);
      #1;
      for (int n = 0; n < N; n++)
        check($sformatf("%s t=%0d charge[%0d]=%0d expected %0d", name, t, n, charge[n],
                        exp_ch[t][n]), int'(charge[n]) == exp_ch[t][n]);
    end
    @(negedge clk);
    step = 1'b0;
    for (int n = 0; n < N; n++) inj_val[n] = '0;
  endtask

  // ---- mechanism monitors ----
  int m_fire = 0, m_leak = 0, m_clamp = 0, m_abs_ignore = 0, m_rel = 0, m_delay0 = 0,
      m_delayed = 0, m_inj = 0, m_ext = 0, m_pot = 0, m_dep = 0, m_inhib = 0;

  for (genvar n = 0; n < N; n++) begin : g_mon
    always @(posedge clk) if (rst_n && !clear && step) begin
      if (fire[n]) m_fire++;
      if (dut.u_ncore.g_neuron[n].u_neuron.mode == MODE_ABS &&
          dut.u_ncore.g_neuron[n].syn_sum != 0) m_abs_ignore++;
      if (dut.u_ncore.g_neuron[n].u_neuron.mode == MODE_REL) m_rel++;
      if (!fire[n] && dut.u_ncore.g_neuron[n].u_neuron.mode == MODE_STD &&
          ncfg[n].leak != 0 && charge[n] > ACC_W'(ncfg[n].srp)) m_leak++;
      if (!fire[n] && dut.u_ncore.g_neuron[n].u_neuron.mode == MODE_STD &&
          charge[n] < ACC_W'(ncfg[n].srp)) m_clamp++;
      if (ncfg[n].inj_en && inj_val[n] != 0) m_inj++;
      if (ext_spike[n] != 0) m_ext++;
    end
    for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_pmon
      always @(posedge clk) if (rst_n && !clear && step) begin
        if (dut.u_ncore.g_neuron[n].arrive[p]) begin
          if (scfg[n][p].delay == 0) m_delay0++; else m_delayed++;
          if (weight[n][p] < 0) m_inhib++;
        end
        if (stdp_en && dut.u_ncore.g_neuron[n].g_port[p].u_syn.apply) begin
          if (dut.u_ncore.exceed[n]) m_pot++; else m_dep++;
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_net(1, 1, 1, -1, 0, 1, 1, 1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Simple integrate and fire (thresholds, weights and delays 1).
    set_net(1, 1, 1, -1, 0, 1, 1, 1);
    // network 1
    n_rows = 15;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{0, 0, 0, 0, 1};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b00000; exp_ch[2] = '{1, 0, 0, 1, 1};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b00000; exp_ch[3] = '{1, 0, 0, 1, 1};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b00000; exp_ch[4] = '{1, 0, 0, 1, 1};
    exp_app[5] = 5'd2; exp_fire[5] = 5'b00000; exp_ch[5] = '{1, 16, 0, 1, 1};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b00010; exp_ch[6] = '{1, 0, 0, 1, 1};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b00000; exp_ch[7] = '{2, 0, 0, 1, 1};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b00001; exp_ch[8] = '{0, 0, 0, 1, 2};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10000; exp_ch[9] = '{1, 0, 0, 2, 1};
    exp_app[10] = 5'd4; exp_fire[10] = 5'b01000; exp_ch[10] = '{1, 0, 16, 0, 1};
    exp_app[11] = 5'd0; exp_fire[11] = 5'b00100; exp_ch[11] = '{1, 0, 0, 0, 1};
    exp_app[12] = 5'd0; exp_fire[12] = 5'b00000; exp_ch[12] = '{0, 0, 0, 0, 1};
    exp_app[13] = 5'd0; exp_fire[13] = 5'b00000; exp_ch[13] = '{0, 0, 0, 0, 1};
    exp_app[14] = 5'd0; exp_fire[14] = 5'b00000; exp_ch[14] = '{0, 0, 0, 0, 1};
    run_rows("net1", 0);

    // Main fires every timestep while on (weights 2, delays 0).
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    // network 2
    n_rows = 16;
    exp_app[0] = 5'd2; exp_fire[0] = 5'b00000; exp_ch[0] = '{0, 16, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00010; exp_ch[1] = '{2, 0, 0, 0, 0};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b00001; exp_ch[2] = '{2, 0, 0, 2, 2};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b11001; exp_ch[3] = '{2, 0, 0, 2, 4};
    exp_app[4] = 5'd4; exp_fire[4] = 5'b11001; exp_ch[4] = '{2, 0, 16, 2, 4};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b11101; exp_ch[5] = '{0, 0, 0, 2, 4};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b11000; exp_ch[6] = '{0, 0, 0, 0, 2};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b10000; exp_ch[7] = '{0, 0, 0, 0, 2};
    exp_app[8] = 5'd2; exp_fire[8] = 5'b10000; exp_ch[8] = '{0, 16, 0, 0, 2};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10010; exp_ch[9] = '{2, 0, 0, 0, 2};
    exp_app[10] = 5'd0; exp_fire[10] = 5'b10001; exp_ch[10] = '{2, 0, 0, 2, 4};
    exp_app[11] = 5'd0; exp_fire[11] = 5'b11001; exp_ch[11] = '{2, 0, 0, 2, 4};
    exp_app[12] = 5'd4; exp_fire[12] = 5'b11001; exp_ch[12] = '{2, 0, 16, 2, 4};
    exp_app[13] = 5'd0; exp_fire[13] = 5'b11101; exp_ch[13] = '{0, 0, 0, 2, 4};
    exp_app[14] = 5'd0; exp_fire[14] = 5'b11000; exp_ch[14] = '{0, 0, 0, 0, 2};
    exp_app[15] = 5'd0; exp_fire[15] = 5'b10000; exp_ch[15] = '{0, 0, 0, 0, 2};
    run_rows("net2", 0);

    // Leak 1 and standard resting potential -1 on Out, threshold 2.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    ncfg[OUT].threshold = 8'sd2; ncfg[OUT].leak = 4'd1; ncfg[OUT].srp = -8'sd1;
    // network 3
    n_rows = 11;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, -1, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{2, 0, 0, 1, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b10001; exp_ch[2] = '{2, 0, 0, 2, 4};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b10001; exp_ch[3] = '{2, 0, 0, 3, 4};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b11001; exp_ch[4] = '{2, 0, 0, 1, 4};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b10001; exp_ch[5] = '{2, 0, 0, 2, 4};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b10001; exp_ch[6] = '{2, 0, 0, 3, 4};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b11001; exp_ch[7] = '{2, 0, 0, 1, 4};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b10001; exp_ch[8] = '{2, 0, 0, 2, 4};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10001; exp_ch[9] = '{2, 0, 0, 3, 4};
    exp_app[10] = 5'd0; exp_fire[10] = 5'b11001; exp_ch[10] = '{2, 0, 0, 1, 4};
    run_rows("net3", 0);

    // Leak with Main's self-synapse delayed by 1; Out threshold 1.
    set_net(1, 2, 0, -2, 0, 1, 2, 0);
    ncfg[OUT].leak = 4'd1; ncfg[OUT].srp = -8'sd1;
    // network 4
    n_rows = 8;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, -1, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{0, 0, 0, 1, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b10000; exp_ch[2] = '{2, 0, 0, 0, 2};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b10001; exp_ch[3] = '{0, 0, 0, 1, 4};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b10000; exp_ch[4] = '{2, 0, 0, 0, 2};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b10001; exp_ch[5] = '{0, 0, 0, 1, 4};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b10000; exp_ch[6] = '{2, 0, 0, 0, 2};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b10001; exp_ch[7] = '{0, 0, 0, 1, 4};
    run_rows("net4", 0);

    // Same network, input to Off: Main goes to -2 and is raised back to 0.
    // network 4, input to Off
    n_rows = 3;
    exp_app[0] = 5'd4; exp_fire[0] = 5'b00000; exp_ch[0] = '{0, 0, 16, -1, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00100; exp_ch[1] = '{-2, 0, 0, -1, 0};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b00000; exp_ch[2] = '{0, 0, 0, -1, 0};
    run_rows("net4b", 0);

    // Absolute refractory period 1 on Out, threshold 3.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    ncfg[OUT].threshold = 8'sd3; ncfg[OUT].abs_ref = 4'd1;
    // network 5
    n_rows = 10;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{2, 0, 0, 2, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b10001; exp_ch[2] = '{2, 0, 0, 4, 4};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b11001; exp_ch[3] = '{2, 0, 0, 0, 4};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b10001; exp_ch[4] = '{2, 0, 0, 2, 4};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b10001; exp_ch[5] = '{2, 0, 0, 4, 4};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b11001; exp_ch[6] = '{2, 0, 0, 0, 4};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b10001; exp_ch[7] = '{2, 0, 0, 2, 4};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b10001; exp_ch[8] = '{2, 0, 0, 4, 4};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b11001; exp_ch[9] = '{2, 0, 0, 0, 4};
    run_rows("net5", 0);

    // Both refractory periods 1, refractory resting potential -3, threshold 3.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    ncfg[OUT].threshold = 8'sd3; ncfg[OUT].abs_ref = 4'd1; ncfg[OUT].rel_ref = 4'd1;
    ncfg[OUT].rrp = -8'sd3;
    // network 6
    n_rows = 12;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{2, 0, 0, 2, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b10001; exp_ch[2] = '{2, 0, 0, 4, 4};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b11001; exp_ch[3] = '{2, 0, 0, -3, 4};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b10001; exp_ch[4] = '{2, 0, 0, -1, 4};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b10001; exp_ch[5] = '{2, 0, 0, 2, 4};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b10001; exp_ch[6] = '{2, 0, 0, 4, 4};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b11001; exp_ch[7] = '{2, 0, 0, -3, 4};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b10001; exp_ch[8] = '{2, 0, 0, -1, 4};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10001; exp_ch[9] = '{2, 0, 0, 2, 4};
    exp_app[10] = 5'd0; exp_fire[10] = 5'b10001; exp_ch[10] = '{2, 0, 0, 4, 4};
    exp_app[11] = 5'd0; exp_fire[11] = 5'b11001; exp_ch[11] = '{2, 0, 0, -3, 4};
    run_rows("net6", 0);

    // Worked STDP example with the default table [1,2,2,3,4,-4,-2,-1].
    // Neuron Out has pre-synapses a (port 6), b (port 7), c (port 8), weight 1, delay 0,
    // not driven by any neuron (source index out of range) but forced by ext_spike.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    for (int p = 0; p < int'(N_PORTS); p++) scfg[OUT][p] = '0;
    scfg[OUT][6] = syn(255, 1, 0);
    scfg[OUT][7] = syn(255, 1, 0);
    scfg[OUT][8] = syn(255, 1, 0);
    ncfg[OUT].threshold = 8'sd2;
    stdp_en = 1'b1;
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int t = 0; t <= 14; t++) begin
      @(negedge clk);
      ext_spike[OUT] = '0;
      if (t == 7)  ext_spike[OUT][6] = 1'b1;
      if (t == 10) ext_spike[OUT][7] = 1'b1;
      if (t == 12) ext_spike[OUT][8] = 1'b1;
      if (t == 14) ext_spike[OUT][6] = 1'b1;
      step = 1'b1;
      #1;
      check($sformatf("stdp example t=%0d Out fire", t), fire[OUT] == (t == 13));
      @(posedge clk);
      #1;
      if (t == 12) begin
        check("stdp example: Out charge 3 at t=12", charge[OUT] == 3);
        check($sformatf("stdp example: a stays 1 (got %0d)", weight[OUT][6]), weight[OUT][6] == 1);
        check($sformatf("stdp example: b potentiates to 3 (got %0d)", weight[OUT][7]), weight[OUT][7] == 3);
        check($sformatf("stdp example: c potentiates to 5 (got %0d)", weight[OUT][8]), weight[OUT][8] == 5);
      end
      if (t == 14) begin
        check("stdp example: Out charge 1 at t=14", charge[OUT] == 1);
        check($sformatf("stdp example: a depresses to -1 (got %0d)", weight[OUT][6]), weight[OUT][6] == -1);
      end
    end
    @(negedge clk);
    step = 1'b0;
    ext_spike[OUT] = '0;
    stdp_en = 1'b0;

    // Pausing: with step low nothing changes.
    begin
      int prev_charge;
      prev_charge = int'(charge[OUT]);
      repeat (3) @(negedge clk);
      check("pause keeps state", int'(charge[OUT]) == prev_charge && timestep == 32'd15);
    end

    $display("mechanisms: fire=%0d leak=%0d clamp=%0d abs_ignore=%0d rel=%0d delay0=%0d delayed=%0d inhibit=%0d inject=%0d ext_spike=%0d potentiate=%0d depress=%0d",
             m_fire, m_leak, m_clamp, m_abs_ignore, m_rel, m_delay0, m_delayed, m_inhib,
             m_inj, m_ext, m_pot, m_dep);
    check("mechanism fire seen",        m_fire > 0);
    check("mechanism leak seen",        m_leak > 0);
    check("mechanism clamp seen",       m_clamp > 0);
    check("mechanism abs refractory seen", m_abs_ignore > 0);
    check("mechanism rel refractory seen", m_rel > 0);
    check("mechanism zero delay seen",  m_delay0 > 0);
    check("mechanism delay seen",       m_delayed > 0);
    check("mechanism inhibitory seen",  m_inhib > 0);
    check("mechanism injection seen",   m_inj > 0);
    check("mechanism ext spike seen",   m_ext > 0);
    check("mechanism potentiation seen", m_pot > 0);
    check("mechanism depression seen",  m_dep > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
