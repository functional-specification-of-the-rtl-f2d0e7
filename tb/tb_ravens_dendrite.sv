// tb_ravens_dendrite: random test of the port adder ravens_dendrite.
//
// Draws random arrival patterns, weights (-8 .. 7), injection enables and injected
// values (signed N_INJ bits). The expected sum is the injected value when injection is
// on, plus the weights of arriving spikes on ports N_INJ and up; with injection off, the
// weights of all arriving spikes. The all-ports-at-maximum case checks that the
// accumulator width of the specification's formula holds the largest sum.
`timescale 1ns/1ps
module tb_ravens_dendrite;
  import ravens_pkg::*;

  logic [N_PORTS-1:0]         arrive;
  logic signed [WEIGHT_W-1:0] weight [N_PORTS];
  logic                       inj_en;
  logic signed [N_INJ-1:0]    inj_val;
  logic signed [ACC_W-1:0]    sum;

  ravens_dendrite dut (.*);

  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
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
    int e;
    for (int i = 0; i < 20000; i++) begin
      arrive  = N_PORTS'($urandom);
      inj_en  = $urandom_range(0, 1);
      inj_val = N_INJ'($urandom);
      for (int p = 0; p < int'(N_PORTS); p++) weight[p] = WEIGHT_W'($urandom);
      if (i == 0) begin            // largest possible sum, injection off
        arrive = '1; inj_en = 0;
        for (int p = 0; p < int'(N_PORTS); p++) weight[p] = 4'sd7;
      end
      if (i == 1) begin            // most negative sum
        arrive = '1; inj_en = 0;
        for (int p = 0; p < int'(N_PORTS); p++) weight[p] = -4'sd8;
      end
      #1;
      e = inj_en ? int'(inj_val) : 0;
      for (int p = 0; p < int'(N_PORTS); p++)
        if (arrive[p] && (!inj_en || p >= int'(N_INJ))) e += int'(weight[p]);
      check($sformatf("i=%0d sum %0d exp %0d", i, sum, e), int'(sum) == e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
