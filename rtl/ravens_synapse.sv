// ravens_synapse: one synapse port of a neuron, with delay line, weight register and STDP.
//
// A spike of the pre-neuron in integration cycle t reaches the post-neuron in cycle
// t + d, where d is the synapse delay (0 .. DELAY_MAX). A delay of 0 delivers in the
// firing cycle itself, because neurons fire at the start of a cycle. Spikes in flight sit
// in a DELAY_MAX-bit shift register, bit k meaning "arrives k+1 cycles from now", so any
// number of spikes can be in flight at once. The weight that is delivered is the weight
// register's value on arrival. A weight changed by STDP while spikes are in flight thus
// applies to them, as the specification's "in flight" example requires.
//
// The weight register is loaded with the configured weight by `clear`. When `stdp_en` is
// high, the register takes the change from ravens_stdp at the end of each integration
// cycle, saturating at the weight range (-2^(W-1) .. 2^(W-1)-1; 7 for W = 4). The
// register `since` counts the cycles since the synapse last delivered a spike. It feeds
// the potentiation index.
//
// Timing: `arrive` and `weight` are combinational from registers and `pre_fire`. All
// state changes at the clock edge that ends a cycle with `step` high.
module ravens_synapse
  import ravens_pkg::*;
#(
  parameter int unsigned STDP_T     = STDP_T_DEF,
  parameter stdp_table_t STDP_TABLE = STDP_TABLE_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       step,
  input  synapse_cfg_t               cfg,
  input  logic                       stdp_en,
  input  logic                       pre_fire,      // pre-neuron (or host) fires now
  input  logic                       post_exceed,
  input  logic [DT_W-1:0]            post_dt,
  input  logic                       post_dt_valid,
  output logic                       arrive,        // spike delivered in this cycle
  output logic signed [WEIGHT_W-1:0] weight         // weight delivered with it
);

  logic [DELAY_MAX-1:0]       pipe_q;
  logic signed [WEIGHT_W-1:0] weight_q;
  logic [DT_W-1:0]            since_q;
  logic                       since_valid_q;

  logic                       launch;
  logic [DELAY_MAX-1:0]       pipe_d;
  logic [DT_W-1:0]            syn_dt;
  logic                       syn_dt_valid;
  logic                       apply;
  logic signed [WEIGHT_W-1:0] delta;
  logic signed [WEIGHT_W-1:0] weight_d;

  localparam logic signed [WEIGHT_W:0] W_MAX = (WEIGHT_W+1)'((1 << (WEIGHT_W - 1)) - 1);
  localparam logic signed [WEIGHT_W:0] W_MIN = -(WEIGHT_W+1)'(1 << (WEIGHT_W - 1));

  assign launch = cfg.en && pre_fire;
  assign arrive = (launch && cfg.delay == '0) || pipe_q[0];

  always_comb begin
    pipe_d = pipe_q >> 1;
    if (launch && cfg.delay != '0)
      pipe_d[cfg.delay - 1'b1] = 1'b1;
  end

  assign syn_dt       = arrive ? '0 : since_q;
  assign syn_dt_valid = arrive || since_valid_q;

  ravens_stdp #(.STDP_T(STDP_T), .STDP_TABLE(STDP_TABLE)) u_stdp (
    .post_exceed  (post_exceed),
    .arrive       (arrive),
    .syn_dt       (syn_dt),
    .syn_dt_valid (syn_dt_valid),
    .post_dt      (post_dt),
    .post_dt_valid(post_dt_valid),
    .apply        (apply),
    .delta        (delta)
  );

  always_comb begin
    logic signed [WEIGHT_W:0] sum;
    sum = (WEIGHT_W+1)'(weight_q) + (WEIGHT_W+1)'(delta);
    if (!(stdp_en && apply)) weight_d = weight_q;
    else if (sum > W_MAX)    weight_d = W_MAX[WEIGHT_W-1:0];
    else if (sum < W_MIN)    weight_d = W_MIN[WEIGHT_W-1:0];
    else                     weight_d = sum[WEIGHT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_q        <= '0;
      weight_q      <= '0;
      since_q       <= '0;
      since_valid_q <= 1'b0;
    end else if (clear) begin
      pipe_q        <= '0;
      weight_q      <= cfg.weight;
      since_q       <= '0;
      since_valid_q <= 1'b0;
    end else if (step) begin
      pipe_q   <= pipe_d;
      weight_q <= weight_d;
      if (arrive) begin
        since_q       <= DT_W'(1);
        since_valid_q <= 1'b1;
      end else if (since_q != '1) begin
        since_q       <= since_q + 1'b1;
      end
    end
  end

  assign weight = weight_q;

  // A delay beyond the hardware maximum cannot be represented in the delay line.
  a_delay_range : assert property (@(posedge clk) disable iff (!rst_n)
    (step && cfg.en) |-> (cfg.delay <= DELAY_W'(DELAY_MAX)))
    else $error("synapse delay %0d exceeds DELAY_MAX", cfg.delay);

endmodule
