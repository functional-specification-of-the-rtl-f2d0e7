// tb_ravens_stdp: exhaustive test of the STDP lookup ravens_stdp.
//
// Two instances: the default table [1,2,2,3,4,-4,-2,-1] (T = 8) and [1,2,-1] (T = 3).
// For every combination of exceed, arrival, validity flags and the two elapsed-time
// inputs, the expected change is computed from the specification's equations:
// potentiation index floor(T/2) - dt_syn when the post-neuron exceeds its threshold, and
// depression index floor(T/2) + dt_post, with dt_post >= 1, when a spike arrived but the
// threshold was not exceeded. The specification's own example is checked by name: with
// T = 8, synapses that last fired 5, 2 and 0 cycles earlier change by 0, +2 and +4.
`timescale 1ns/1ps
module tb_ravens_stdp;
  import ravens_pkg::*;

  localparam stdp_table_t TAB3 = {4'sd1, 4'sd2, -4'sd1, 4'sd0, 4'sd0, 4'sd0, 4'sd0, 4'sd0};
  int tab8 [8] = '{1, 2, 2, 3, 4, -4, -2, -1};
  int tab3 [3] = '{1, 2, -1};

  logic post_exceed, arrive, syn_dt_valid, post_dt_valid;
  logic [DT_W-1:0] syn_dt, post_dt;
  logic apply8, apply3;
  logic signed [WEIGHT_W-1:0] delta8, delta3;

  ravens_stdp dut8 (.post_exceed, .arrive, .syn_dt, .syn_dt_valid, .post_dt, .post_dt_valid,
                    .apply(apply8), .delta(delta8));
  ravens_stdp #(.STDP_T(3), .STDP_TABLE(TAB3)) dut3 (
    .post_exceed, .arrive, .syn_dt, .syn_dt_valid, .post_dt, .post_dt_valid,
    .apply(apply3), .delta(delta3));

  int checks = 0, failures = 0, n_pot = 0, n_dep = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Expected (apply, delta) for a table of size t.
  task automatic expect_delta(input int t, input int tab [], output bit ap, output int d);
    int h, idx;
    h = t / 2;
    ap = 0; d = 0;
    if (post_exceed) begin
      if (syn_dt_valid) begin
        idx = h - int'(syn_dt);
        if (idx >= 0 && idx < t) begin ap = 1; d = tab[idx]; end
      end
    end else if (arrive && post_dt_valid && post_dt >= 1) begin
      idx = h + int'(post_dt);
      if (idx < t) begin ap = 1; d = tab[idx]; end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ap; int d;
    for (int v = 0; v < (1 << (4 + 2 * DT_W)); v++) begin
      {post_exceed, arrive, syn_dt_valid, post_dt_valid, syn_dt, post_dt} = v;
      #1;
      expect_delta(8, tab8, ap, d);
      check($sformatf("T=8 v=%0h apply", v), apply8 == ap);
      check($sformatf("T=8 v=%0h delta %0d exp %0d", v, delta8, d), int'(delta8) == (ap ? d : 0));
      if (ap && post_exceed) n_pot++;
      if (ap && !post_exceed) n_dep++;
      expect_delta(3, tab3, ap, d);
      check($sformatf("T=3 v=%0h apply", v), apply3 == ap);
      check($sformatf("T=3 v=%0h delta %0d exp %0d", v, delta3, d), int'(delta3) == (ap ? d : 0));
    end
    // The specification's worked example: neuron exceeds at 12; a, b, c fired at 7, 10, 12.
    post_exceed = 1; arrive = 0; syn_dt_valid = 1; post_dt_valid = 0; post_dt = '0;
    syn_dt = DT_W'(5); #1; check("example a: no change", !apply8);
    syn_dt = DT_W'(2); #1; check("example b: +2", apply8 && delta8 == 2);
    arrive = 1; syn_dt = DT_W'(0); #1; check("example c: +4", apply8 && delta8 == 4);
    check("both directions exercised", n_pot > 0 && n_dep > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
