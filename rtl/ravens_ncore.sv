// ravens_ncore: a RAVENS neural core. It holds N_NEURONS neurons, each with N_PORTS
// synapse ports, and advances all of them by one integration cycle per clock in which
// `step` is high.
//
// Structure: every neuron has a ravens_neuron, a ravens_dendrite that sums its ports,
// and N_PORTS ravens_synapse instances. A synapse names its pre-neuron by index within
// the core. A full crossbar selects that neuron's registered fire bit, so any neuron can
// feed any port, itself included. One integration cycle is one clock:
//   fire bits (registers) -> crossbar -> delay lines -> dendrite sum -> potential,
//   threshold compare -> STDP weight update
// All of it is registered at the end of the cycle.
//
// External input takes either of the specification's two forms. `ext_spike[n][p]` makes
// the synapse on port p of neuron n spike, as if its pre-neuron had fired; its delay
// applies. `inj_val[n]` is charge injection, used when neuron n has `inj_en` set. Ports
// 0 .. N_INJ-1 of such a neuron carry the injected value, and synapses configured there
// are disabled.
//
// The specification names the nCore but does not describe its inside. The fully
// parallel organisation and the crossbar are this design's choice.
module ravens_ncore
  import ravens_pkg::*;
#(
  parameter int unsigned N_NEURONS  = N_NEURONS_DEF,
  parameter int unsigned STDP_T     = STDP_T_DEF,
  parameter stdp_table_t STDP_TABLE = STDP_TABLE_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       step,
  input  logic                       stdp_en,
  input  neuron_cfg_t                ncfg    [N_NEURONS],
  input  synapse_cfg_t               scfg    [N_NEURONS][N_PORTS],
  input  logic signed [N_INJ-1:0]    inj_val [N_NEURONS],
  input  logic [N_PORTS-1:0]         ext_spike [N_NEURONS],
  output logic [N_NEURONS-1:0]       fire,
  output logic [N_NEURONS-1:0]       exceed,
  output logic signed [ACC_W-1:0]    charge  [N_NEURONS],
  output logic signed [WEIGHT_W-1:0] weight  [N_NEURONS][N_PORTS]
);

  for (genvar n = 0; n < int'(N_NEURONS); n++) begin : g_neuron
    logic [N_PORTS-1:0]         arrive;
    logic signed [ACC_W-1:0]    syn_sum;
    logic [DT_W-1:0]            post_dt;
    logic                       post_dt_valid;
    nmode_t                     mode;

    for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_port
      synapse_cfg_t cfg_eff;
      logic         pre_fire;

      always_comb begin
        cfg_eff = scfg[n][p];
        if (ncfg[n].inj_en && p < int'(N_INJ)) cfg_eff.en = 1'b0;
      end

      assign pre_fire = ext_spike[n][p] ||
                        ((int'(scfg[n][p].src) < int'(N_NEURONS)) &&
                         fire[scfg[n][p].src[$clog2(N_NEURONS+1)-1:0]]);

      ravens_synapse #(.STDP_T(STDP_T), .STDP_TABLE(STDP_TABLE)) u_syn (
        .clk          (clk),
        .rst_n        (rst_n),
        .clear        (clear),
        .step         (step),
        .cfg          (cfg_eff),
        .stdp_en      (stdp_en),
        .pre_fire     (pre_fire),
        .post_exceed  (exceed[n]),
        .post_dt      (post_dt),
        .post_dt_valid(post_dt_valid),
        .arrive       (arrive[p]),
        .weight       (weight[n][p])
      );
    end

    ravens_dendrite u_dend (
      .arrive (arrive),
      .weight (weight[n]),
      .inj_en (ncfg[n].inj_en),
      .inj_val(inj_val[n]),
      .sum    (syn_sum)
    );

    ravens_neuron u_neuron (
      .clk          (clk),
      .rst_n        (rst_n),
      .clear        (clear),
      .step         (step),
      .cfg          (ncfg[n]),
      .syn_sum      (syn_sum),
      .fire         (fire[n]),
      .exceed       (exceed[n]),
      .charge       (charge[n]),
      .mode         (mode),
      .post_dt      (post_dt),
      .post_dt_valid(post_dt_valid)
    );
  end

endmodule
