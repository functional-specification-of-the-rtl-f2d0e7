// ravens_neuron: one RAVENS integrate-and-fire neuron, advanced one integration cycle
// per clock in which `step` is high.
//
// Behaviour (as the specification defines it):
//  * A neuron fires at the beginning of an integration cycle if its potential exceeded
//    its threshold (strictly greater) at the end of the previous cycle.
//  * On firing, the potential is reset. It goes to the refractory resting potential when
//    a relative refractory period is set, and otherwise to the standard resting potential.
//  * The absolute refractory period counts the firing cycle as its first cycle. In it,
//    incoming charge and leak are ignored. The relative refractory period follows.
//    There, charge is accepted, and the floor and the leak target are the refractory
//    resting potential. After it, standard operation resumes with the standard resting
//    potential as floor.
//  * Leak: at the start of a cycle in standard (relative) operation, a potential above
//    the standard (refractory) resting potential loses `leak`, but never goes below it.
//  * A potential below the floor is raised to the floor. This clamp is applied when the
//    next cycle begins. The `charge` output therefore shows the unclamped value at the
//    end of a cycle, as the specification's tables do (for example, -2 then 0).
//
// Timing: `fire` is a register, valid throughout the cycle in which `step` is high.
// `syn_sum` (arriving weights plus injected charge) is added in that same cycle. `exceed`
// is combinational: it says the neuron will fire in the next integration cycle, and
// drives STDP on the neuron's pre-synapses. `post_dt` is the number of cycles since
// `exceed` last rose, measured in the current cycle.
//
// Choices of this design: a neuron cannot fire while in its absolute refractory
// period; the potential saturates at the accumulator's range; `clear` loads the standard
// resting potential and ends any refractory period.
module ravens_neuron
  import ravens_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,     // load the network: potential := srp
  input  logic                    step,      // perform one integration cycle
  input  neuron_cfg_t             cfg,
  input  logic signed [ACC_W-1:0] syn_sum,   // charge arriving in this cycle
  output logic                    fire,      // fires in this cycle
  output logic                    exceed,    // potential exceeds threshold at end of cycle
  output logic signed [ACC_W-1:0] charge,    // potential at end of last cycle
  output nmode_t                  mode,      // mode of this cycle
  output logic [DT_W-1:0]         post_dt,   // cycles since threshold was last exceeded
  output logic                    post_dt_valid
);

  logic signed [ACC_W-1:0] acc_q;
  logic                    fire_q;
  logic [REF_W-1:0]        abs_left_q, rel_left_q;
  logic [DT_W-1:0]         dt_q;
  logic                    dt_valid_q;

  logic [REF_W-1:0]        abs_left_d, rel_left_d;
  logic signed [ACC_W-1:0] acc_d;
  nmode_t                  mode_c, mode_next;

  // Sign-extended settings.
  logic signed [ACC_W-1:0] thr, srp, rrp, leak;
  assign thr  = ACC_W'(cfg.threshold);
  assign srp  = ACC_W'(cfg.srp);
  assign rrp  = ACC_W'(cfg.rrp);
  assign leak = ACC_W'(signed'({1'b0, cfg.leak}));

  localparam logic signed [ACC_W:0] ACC_MAX = (ACC_W+1)'((1 << (ACC_W - 1)) - 1);
  localparam logic signed [ACC_W:0] ACC_MIN = -(ACC_W+1)'(1 << (ACC_W - 1));

  always_comb begin
    logic signed [ACC_W-1:0] base, floor_c, floor_n, clamped;
    logic signed [ACC_W:0]   wide;

    wide       = '0;
    mode_c     = MODE_STD;
    // Mode of this cycle and the refractory counters after it.
    abs_left_d = '0;
    rel_left_d = '0;
    if (fire_q) begin
      if (cfg.abs_ref != '0) begin
        mode_c     = MODE_ABS;
        abs_left_d = cfg.abs_ref - 1'b1;
        rel_left_d = cfg.rel_ref;
      end else if (cfg.rel_ref != '0) begin
        mode_c     = MODE_REL;
        rel_left_d = cfg.rel_ref - 1'b1;
      end else begin
        mode_c     = MODE_STD;
      end
    end else if (abs_left_q != '0) begin
      mode_c     = MODE_ABS;
      abs_left_d = abs_left_q - 1'b1;
      rel_left_d = rel_left_q;
    end else if (rel_left_q != '0) begin
      mode_c     = MODE_REL;
      rel_left_d = rel_left_q - 1'b1;
    end else begin
      mode_c     = MODE_STD;
    end

    floor_c = (mode_c == MODE_REL) ? rrp : srp;

    // Potential at the start of this cycle: reset, or clamp then leak.
    if (fire_q) begin
      base = (cfg.rel_ref != '0) ? rrp : srp;
    end else if (mode_c == MODE_ABS) begin
      base = acc_q;
    end else begin
      base = (acc_q < floor_c) ? floor_c : acc_q;
      if (base > floor_c) begin
        wide = (ACC_W+1)'(base) - (ACC_W+1)'(leak);
        base = (wide < (ACC_W+1)'(floor_c)) ? floor_c : ACC_W'(wide);
      end
    end

    // Integrate (ignored during the absolute refractory period), saturating.
    if (mode_c == MODE_ABS) begin
      acc_d = base;
    end else begin
      wide = (ACC_W+1)'(base) + (ACC_W+1)'(syn_sum);
      if (wide > ACC_MAX)      acc_d = ACC_MAX[ACC_W-1:0];
      else if (wide < ACC_MIN) acc_d = ACC_MIN[ACC_W-1:0];
      else                     acc_d = wide[ACC_W-1:0];
    end

    // Will the neuron fire in the next cycle?
    if (abs_left_d != '0)      mode_next = MODE_ABS;
    else if (rel_left_d != '0) mode_next = MODE_REL;
    else                       mode_next = MODE_STD;
    floor_n = (mode_next == MODE_REL) ? rrp : srp;
    clamped = (acc_d < floor_n) ? floor_n : acc_d;
    exceed  = (mode_next != MODE_ABS) && (clamped > thr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      fire_q     <= 1'b0;
      abs_left_q <= '0;
      rel_left_q <= '0;
      dt_q       <= '0;
      dt_valid_q <= 1'b0;
    end else if (clear) begin
      acc_q      <= srp;
      fire_q     <= 1'b0;
      abs_left_q <= '0;
      rel_left_q <= '0;
      dt_q       <= '0;
      dt_valid_q <= 1'b0;
    end else if (step) begin
      acc_q      <= acc_d;
      fire_q     <= exceed;
      abs_left_q <= abs_left_d;
      rel_left_q <= rel_left_d;
      if (exceed) begin
        dt_q       <= DT_W'(1);
        dt_valid_q <= 1'b1;
      end else if (dt_q != '1) begin
        dt_q       <= dt_q + 1'b1;
      end
    end
  end

  assign fire          = fire_q;
  assign charge        = acc_q;
  assign mode          = mode_c;
  assign post_dt       = dt_q;
  assign post_dt_valid = dt_valid_q;

endmodule
