// ravens_top: the RAVENS neuroprocessor, with a single nCore.
//
// The host loads a network by holding the Network Settings on `ncfg` (Neuron Settings),
// `scfg` (Synapse Settings) and `stdp_en` (the one Overall Setting of this design), then
// pulsing `clear` for one clock. That puts every potential at its standard resting
// potential, empties all delay lines and copies the configured weights into the weight
// registers. The settings must stay stable while the network runs, because the neuron
// logic reads them every cycle.
//
// Each clock with `step` high is one integration cycle ("timestep"). In that cycle the
// host may apply input on `inj_val` (charge injection) or `ext_spike` (forces a synapse to
// spike). The outputs describe the same cycle:
//   fire      neurons that fire at the beginning of this timestep;
//   timestep  index of this timestep, counted from 0 after `clear`.
// After the clock edge, `charge` shows each potential at the end of that timestep,
// `weight` the synapse weights after STDP, and `timestep` has advanced. These are the
// columns of the specification's activity tables.
//
// Holding `step` low pauses the network with all state frozen. The STDP table and all
// widths are Hardware Constants (ravens_pkg and the parameters below).
module ravens_top
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
  input  neuron_cfg_t                ncfg      [N_NEURONS],
  input  synapse_cfg_t               scfg      [N_NEURONS][N_PORTS],
  input  logic signed [N_INJ-1:0]    inj_val   [N_NEURONS],
  input  logic [N_PORTS-1:0]         ext_spike [N_NEURONS],
  output logic [N_NEURONS-1:0]       fire,
  output logic signed [ACC_W-1:0]    charge    [N_NEURONS],
  output logic signed [WEIGHT_W-1:0] weight    [N_NEURONS][N_PORTS],
  output logic [31:0]                timestep
);

  logic [N_NEURONS-1:0] exceed;

  ravens_ncore #(.N_NEURONS(N_NEURONS), .STDP_T(STDP_T), .STDP_TABLE(STDP_TABLE)) u_ncore (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .step     (step),
    .stdp_en  (stdp_en),
    .ncfg     (ncfg),
    .scfg     (scfg),
    .inj_val  (inj_val),
    .ext_spike(ext_spike),
    .fire     (fire),
    .exceed   (exceed),
    .charge   (charge),
    .weight   (weight)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     timestep <= '0;
    else if (clear) timestep <= '0;
    else if (step)  timestep <= timestep + 1'b1;
  end

  // A neuron that fires must have exceeded its threshold in the previous timestep.
  logic [N_NEURONS-1:0] exceed_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     exceed_q <= '0;
    else if (clear) exceed_q <= '0;
    else if (step)  exceed_q <= exceed;
  end
  a_fire_follows_exceed : assert property (@(posedge clk) disable iff (!rst_n)
    (step && !clear) |-> (fire == exceed_q))
    else $error("fire does not follow threshold crossing");

endmodule
