// tb_ravens_stdp_examples: the STDP examples of the RAVENS specification, end to end.
//
// STDP tables are Hardware Constants, so this testbench builds four ravens_top
// instances, whose tables are [1], [1,2], [1,2,-1] and [1,1,2,-2,-1]. All four get the
// same settings and inputs; each example checks only the instance with its table. The
// examples cover: simple potentiation up to the maximum weight 7, a two-entry table,
// depression, depression during an absolute refractory period, and potentiation of a
// synapse with spikes in flight. Each timestep's fire pattern and charges are checked
// against the specification's activity tables, and a few final weights against its
// text.
`timescale 1ns/1ps
module tb_ravens_stdp_examples;
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

  localparam int K = 4;
  localparam int unsigned TS [K] = '{1, 2, 3, 5};
  localparam stdp_table_t TABLES [K] = '{
    {4'sd1, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0},
    {4'sd1, 4'sd2, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0},
    {4'sd1, 4'sd2, -4'sd1, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0},
    {4'sd1, 4'sd1, 4'sd2, -4'sd2, -4'sd1, 4'sd0, 4'sd0, 4'sd0}
  };

  logic [N-1:0]               fire_k   [K];
  logic signed [ACC_W-1:0]    charge_k [K][N];
  logic signed [WEIGHT_W-1:0] weight_k [K][N][N_PORTS];
  logic [31:0]                ts_k     [K];

  for (genvar k = 0; k < K; k++) begin : g_dut
    ravens_top #(.STDP_T(TS[k]), .STDP_TABLE(TABLES[k])) dut (
      .clk, .rst_n, .clear, .step, .stdp_en, .ncfg, .scfg, .inj_val, .ext_spike,
      .fire(fire_k[k]), .charge(charge_k[k]), .weight(weight_k[k]), .timestep(ts_k[k])
    );
  end

  // Load the network, then run the rows: apply input, check who fires, check charges.
  task automatic run_rows(string name, int k);
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int t = 0; t < n_rows; t++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) inj_val[n] = exp_app[t][n] ? N_INJ'(16) : '0;
      step = 1'b1;
      #1;
      check($sformatf("%s t=%0d fire %b expected %b", name, t, fire_k[k], exp_fire[t]),
            fire_k[k] == exp_fire[t]);
      check($sformatf("%s t=%0d timestep %0d", name, t, ts_k[k]), ts_k[k] == 32'(t));
      @(posedge clk);
      #1;
      for (int n = 0; n < N; n++)
        check($sformatf("%s t=%0d charge[%0d]=%0d expected %0d", name, t, n, charge_k[k][n],
                        exp_ch[t][n]), int'(charge_k[k][n]) == exp_ch[t][n]);
    end
    @(negedge clk);
    step = 1'b0;
    for (int n = 0; n < N; n++) inj_val[n] = '0;
  endtask

  // ---- mechanism monitors (all instances) ----
  int m_sat = 0, m_flight = 0;
  for (genvar k = 0; k < K; k++) begin : g_mon
    for (genvar n = 0; n < N; n++) begin : g_n
      for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_p
        always @(posedge clk) if (rst_n && !clear && step && stdp_en) begin
          if (g_dut[k].dut.u_ncore.g_neuron[n].g_port[p].u_syn.apply &&
              g_dut[k].dut.u_ncore.g_neuron[n].g_port[p].u_syn.delta > 0 &&
              weight_k[k][n][p] == 7) m_sat++;
          if ($countones(g_dut[k].dut.u_ncore.g_neuron[n].g_port[p].u_syn.pipe_q) > 1)
            m_flight++;
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
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    stdp_en = 1'b1;

    // Table [1]: every synapse that fires into a neuron that then exceeds potentiates.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    // simple potentiation
    n_rows = 8;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{2, 0, 0, 2, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b11001; exp_ch[2] = '{3, 0, 0, 3, 5};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b11001; exp_ch[3] = '{4, 0, 0, 4, 7};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b11001; exp_ch[4] = '{5, 0, 0, 5, 9};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b11001; exp_ch[5] = '{6, 0, 0, 6, 11};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b11001; exp_ch[6] = '{7, 0, 0, 7, 13};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b11001; exp_ch[7] = '{7, 0, 0, 7, 14};
    run_rows("stdp [1]", 0);
    check("Main->Out saturates at 7", weight_k[0][OUT][6] == 7);

    // Table [1,2]; On->Main weight 1.
    set_net(1, 2, 0, -2, 0, 0, 1, 0);
    // two-entry table
    n_rows = 5;
    exp_app[0] = 5'd2; exp_fire[0] = 5'b00000; exp_ch[0] = '{0, 16, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00010; exp_ch[1] = '{1, 0, 0, 0, 0};
    exp_app[2] = 5'd3; exp_fire[2] = 5'b00000; exp_ch[2] = '{17, 16, 0, 0, 0};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b00011; exp_ch[3] = '{4, 0, 0, 2, 2};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b11001; exp_ch[4] = '{4, 0, 0, 4, 6};
    run_rows("stdp [1,2]", 1);
    // 4 after timestep 3 (the text), then +1 at timestep 4: it last fired into Main at
    // timestep 3 and Main exceeds again at 4, so index 1 - 1 = 0 applies.
    check($sformatf("On->Main potentiated to 5 (got %0d)", weight_k[1][MAIN][6]),
          weight_k[1][MAIN][6] == 5);

    // Table [1,2,-1]; On->Main weight 1, Main self-synapse delay 2.
    set_net(1, 2, 0, -2, 0, 2, 1, 0);
    // depression
    n_rows = 5;
    exp_app[0] = 5'd3; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 16, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00011; exp_ch[1] = '{1, 0, 0, 2, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b11000; exp_ch[2] = '{1, 0, 0, 0, 2};
    exp_app[3] = 5'd2; exp_fire[3] = 5'b10000; exp_ch[3] = '{3, 16, 0, 0, 4};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b10011; exp_ch[4] = '{0, 0, 0, 4, 11};
    run_rows("stdp [1,2,-1]", 2);
    check($sformatf("On->Main depressed to -1 (got %0d)", weight_k[2][MAIN][6]),
          weight_k[2][MAIN][6] == -1);

    // Table [1,1,2,-2,-1]; Out absolute refractory period 2.
    set_net(1, 2, 0, -2, 0, 0, 2, 0);
    ncfg[OUT].abs_ref = 4'd2;
    // depression while refractory
    n_rows = 11;
    exp_app[0] = 5'd1; exp_fire[0] = 5'b00000; exp_ch[0] = '{16, 0, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00001; exp_ch[1] = '{2, 0, 0, 2, 2};
    exp_app[2] = 5'd0; exp_fire[2] = 5'b11001; exp_ch[2] = '{4, 0, 0, 0, 6};
    exp_app[3] = 5'd0; exp_fire[3] = 5'b10001; exp_ch[3] = '{6, 0, 0, 0, 10};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b10001; exp_ch[4] = '{7, 0, 0, 1, 13};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b10001; exp_ch[5] = '{7, 0, 0, 2, 14};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b11001; exp_ch[6] = '{7, 0, 0, 0, 14};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b10001; exp_ch[7] = '{7, 0, 0, 0, 14};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b10001; exp_ch[8] = '{7, 0, 0, 0, 14};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10001; exp_ch[9] = '{7, 0, 0, 0, 14};
    exp_app[10] = 5'd0; exp_fire[10] = 5'b10001; exp_ch[10] = '{7, 0, 0, 0, 14};
    run_rows("stdp [1,1,2,-2,-1]", 3);
    check($sformatf("Main->Out depressed to 0 (got %0d)", weight_k[3][OUT][6]),
          weight_k[3][OUT][6] == 0);

    // Table [1]; On->Main and Main's self-synapse delayed by 5: spikes in flight.
    set_net(1, 2, 0, -2, 0, 5, 2, 5);
    // spikes in flight
    n_rows = 10;
    exp_app[0] = 5'd2; exp_fire[0] = 5'b00000; exp_ch[0] = '{0, 16, 0, 0, 0};
    exp_app[1] = 5'd0; exp_fire[1] = 5'b00010; exp_ch[1] = '{0, 0, 0, 0, 0};
    exp_app[2] = 5'd2; exp_fire[2] = 5'b00000; exp_ch[2] = '{0, 16, 0, 0, 0};
    exp_app[3] = 5'd2; exp_fire[3] = 5'b00010; exp_ch[3] = '{0, 16, 0, 0, 0};
    exp_app[4] = 5'd0; exp_fire[4] = 5'b00010; exp_ch[4] = '{0, 0, 0, 0, 0};
    exp_app[5] = 5'd0; exp_fire[5] = 5'b00000; exp_ch[5] = '{0, 0, 0, 0, 0};
    exp_app[6] = 5'd0; exp_fire[6] = 5'b00000; exp_ch[6] = '{2, 0, 0, 0, 0};
    exp_app[7] = 5'd0; exp_fire[7] = 5'b00001; exp_ch[7] = '{0, 0, 0, 2, 2};
    exp_app[8] = 5'd0; exp_fire[8] = 5'b11000; exp_ch[8] = '{3, 0, 0, 0, 2};
    exp_app[9] = 5'd0; exp_fire[9] = 5'b10001; exp_ch[9] = '{4, 0, 0, 3, 6};
    run_rows("stdp in flight", 0);

    $display("mechanisms: saturation=%0d in_flight=%0d", m_sat, m_flight);
    check("mechanism weight saturation seen", m_sat > 0);
    check("mechanism spikes in flight seen", m_flight > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
