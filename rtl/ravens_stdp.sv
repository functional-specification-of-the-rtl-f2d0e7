// ravens_stdp: STDP weight-change lookup for one synapse (combinational).
//
// The STDP table is a Hardware Constant of T entries (parameters STDP_T, STDP_TABLE).
// Let H = floor(T/2). At the end of integration cycle y:
//  * Potentiation: if the post-neuron's potential exceeds its threshold, and this
//    synapse last fired into it at cycle x, the index is H - (y - x). A non-negative
//    index selects the change. `syn_dt` carries y - x, which is 0 when the spike
//    arrives in this very cycle.
//  * Depression: if the synapse fired into the post-neuron in this cycle, but the
//    potential does not exceed the threshold, the index is H + (y - x). Here x is the
//    cycle at whose end the post-neuron last exceeded its threshold, i.e. the cycle
//    before it last fired. `post_dt` carries y - x. An index inside the table selects
//    the change.
// The table holds signed values. Potentiation entries are positive, depression
// entries negative, and the change is added to the weight.
//
// The index equations are the specification's. Three points are this design's reading,
// each chosen to reproduce the specification's worked examples:
//  * x for depression is the cycle of the threshold crossing;
//  * depression needs y - x >= 1, so index H belongs to potentiation only;
//  * a synapse or neuron that has no such past event is skipped.
module ravens_stdp
  import ravens_pkg::*;
#(
  parameter int unsigned STDP_T     = STDP_T_DEF,
  parameter stdp_table_t STDP_TABLE = STDP_TABLE_DEF
) (
  input  logic                       post_exceed,   // post-neuron exceeds threshold now
  input  logic                       arrive,        // this synapse delivers a spike now
  input  logic [DT_W-1:0]            syn_dt,        // y - x of the last delivery
  input  logic                       syn_dt_valid,
  input  logic [DT_W-1:0]            post_dt,       // y - x of the last threshold crossing
  input  logic                       post_dt_valid,
  output logic                       apply,
  output logic signed [WEIGHT_W-1:0] delta
);

  localparam int unsigned H = STDP_T / 2;

  initial begin
    assert (STDP_T >= 1 && STDP_T <= STDP_MAX)
      else $error("STDP_T must lie in 1..%0d", STDP_MAX);
  end

  always_comb begin
    int unsigned idx;
    apply = 1'b0;
    idx   = 0;
    if (post_exceed) begin
      if (syn_dt_valid && int'(syn_dt) <= H) begin
        idx   = H - int'(syn_dt);
        apply = (idx < STDP_T);
      end
    end else if (arrive && post_dt_valid && post_dt != '0) begin
      idx   = H + int'(post_dt);
      apply = (idx < STDP_T);
    end
    delta = apply ? STDP_TABLE[idx[$clog2(STDP_MAX)-1:0]] : '0;
  end

endmodule
