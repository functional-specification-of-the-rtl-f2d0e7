// ravens_dendrite: input adder of one neuron over its N_PORTS synapse ports.
//
// Each neuron has a fixed number of ports (a Hardware Constant). A port takes either a
// pre-synapse or a share of charge injection. When the neuron's charge injection is
// enabled (a Neuron Setting), N_INJ of its ports together carry one N_INJ-bit signed
// input value from outside the network. This design uses ports 0 .. N_INJ-1 for that.
// The output is that value plus the weights of all spikes arriving on the remaining
// ports in this cycle. With injection off, every port that receives a spike adds its
// weight. The accumulator width ACC_W comes from the specification's minimum-width rule,
// so the sum cannot overflow.
//
// Purely combinational.
module ravens_dendrite
  import ravens_pkg::*;
(
  input  logic [N_PORTS-1:0]         arrive,
  input  logic signed [WEIGHT_W-1:0] weight [N_PORTS],
  input  logic                       inj_en,
  input  logic signed [N_INJ-1:0]    inj_val,
  output logic signed [ACC_W-1:0]    sum
);

  always_comb begin
    logic signed [ACC_W-1:0] acc;
    acc = inj_en ? ACC_W'(inj_val) : '0;
    for (int p = 0; p < int'(N_PORTS); p++) begin
      if (arrive[p] && !(inj_en && p < int'(N_INJ)))
        acc = acc + ACC_W'(weight[p]);
    end
    sum = acc;
  end

endmodule
