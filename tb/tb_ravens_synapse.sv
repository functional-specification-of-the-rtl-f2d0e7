// tb_ravens_synapse: random test of ravens_synapse (delay line, weight register, STDP).
//
// The reference keeps a list of future arrival timestamps, not a shift register, and
// the cycle of the last arrival. Each round draws a delay (0 .. DELAY_MAX) and an initial
// weight, then fires the pre-neuron at random, often several times within one delay, so
// that spikes are in flight together. The post-neuron's exceed and elapsed-time inputs
// are random. Checked in every integration cycle: that a spike arrives exactly d cycles
// after its launch, the delivered weight, and the weight after the default-table STDP
// update with saturation at -8 .. 7. A disabled synapse never delivers.
`timescale 1ns/1ps
module tb_ravens_synapse;
  import ravens_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  synapse_cfg_t cfg;
  logic stdp_en, pre_fire, post_exceed, post_dt_valid;
  logic [DT_W-1:0] post_dt;
  logic arrive;
  logic signed [WEIGHT_W-1:0] weight;

  ravens_synapse dut (.*);

  always #5 clk = ~clk;

  int tab [8] = '{1, 2, 2, 3, 4, -4, -2, -1};
  int checks = 0, failures = 0, n_arr = 0, n_flight = 0, n_sat = 0, n_upd = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  int  due [$];          // timestamps of spikes still to arrive
  int  t, last_arr, w;
  bit  has_arr;

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, idx, dl, nw;
    bit e_arr, ap;
    cfg = '0; stdp_en = 0; pre_fire = 0; post_exceed = 0; post_dt_valid = 0; post_dt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 200; round++) begin
      @(negedge clk);
      cfg.en     = (round % 10 != 9);
      cfg.src    = '0;
      cfg.delay  = DELAY_W'($urandom_range(0, DELAY_MAX));
      cfg.weight = WEIGHT_W'(int'($urandom_range(0, 15)) - 8);
      stdp_en    = (round % 3 != 0);
      clear = 1'b1;
      step = 1'b0;
      pre_fire = 1'b0;
      @(negedge clk);
      clear = 1'b0;
      check("clear loads weight", weight == cfg.weight && !arrive);
      due.delete(); t = 0; has_arr = 0; w = int'(cfg.weight);
      for (int c = 0; c < 60; c++) begin
        @(negedge clk);
        pre_fire      = ($urandom_range(0, 2) == 0);
        post_exceed   = ($urandom_range(0, 3) == 0);
        post_dt_valid = ($urandom_range(0, 4) != 0);
        post_dt       = DT_W'($urandom_range(1, 6));
        step          = ($urandom_range(0, 9) != 0);
        #1;
        if (!step) begin
          @(posedge clk); #1;
          check("hold keeps weight", int'(weight) == w);
          continue;
        end
        if (pre_fire && cfg.en) due.push_back(t + int'(cfg.delay));
        e_arr = 0;
        while (due.size() > 0 && due[0] == t) begin e_arr = 1; void'(due.pop_front()); end
        if (due.size() > 1) n_flight++;
        check($sformatf("r%0d t%0d arrive %0b exp %0b", round, t, arrive, e_arr), arrive == e_arr);
        check($sformatf("r%0d t%0d weight", round, t), int'(weight) == w);
        if (e_arr) n_arr++;
        // expected STDP change
        ap = 0; d = 0;
        if (post_exceed) begin
          if (e_arr || has_arr) begin
            dl  = e_arr ? 0 : t - last_arr;
            idx = 4 - dl;
            if (idx >= 0) begin ap = 1; d = tab[idx]; end
          end
        end else if (e_arr && post_dt_valid) begin
          idx = 4 + int'(post_dt);
          if (idx < 8) begin ap = 1; d = tab[idx]; end
        end
        if (stdp_en && ap) begin
          nw = w + d;
          if (nw > 7)  begin nw = 7;  n_sat++; end
          if (nw < -8) begin nw = -8; n_sat++; end
          w = nw;
          n_upd++;
        end
        if (e_arr) begin has_arr = 1; last_arr = t; end
        @(posedge clk); #1;
        check($sformatf("r%0d t%0d weight after update %0d exp %0d", round, t, weight, w),
              int'(weight) == w);
        t++;
      end
    end
    $display("events: arrivals=%0d in_flight=%0d updates=%0d saturations=%0d",
             n_arr, n_flight, n_upd, n_sat);
    check("behaviours exercised", n_arr > 0 && n_flight > 0 && n_upd > 0 && n_sat > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
