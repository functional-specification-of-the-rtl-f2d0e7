// ravens_pkg: Hardware Constants and shared types of the RAVENS neuroprocessor.
//
// RAVENS fixes a set of Hardware Constants when an implementation is built (weight
// width, maximum delay, number of synapse ports per neuron, and so on). In an HDL
// implementation they live in a package like this one. Each constant below is either a
// number the specification prints or a choice of this design, as its comment says.
// The settings a network loads (Neuron Settings and Synapse Settings) are carried in the
// two structs defined here. A network drives them into the top level as arrays.
//
// The width of the accumulation register follows the specification's minimum-width
// rule (see acc_magnitude_bits), with one added sign bit.
package ravens_pkg;

  // ---- Hardware Constants ------------------------------------------------------------
  // Synapse weights are signed, WEIGHT_W bits. A maximum weight of 7 is what the
  // specification's STDP example saturates at, hence 4 bits (-8 .. 7).
  localparam int unsigned WEIGHT_W   = 4;
  // Thresholds and resting potentials: signed, THR_W bits (design choice).
  localparam int unsigned THR_W      = 8;
  // Maximum synapse delay. 5 is the largest delay in the specification's examples.
  localparam int unsigned DELAY_MAX  = 5;
  localparam int unsigned DELAY_W    = $clog2(DELAY_MAX + 1);
  // Maximum absolute / relative refractory period and maximum leak (design choice).
  localparam int unsigned REF_W      = 4;
  localparam int unsigned LEAK_W     = 4;
  // Synapse ports per neuron (S) and ports usable for charge injection (C).
  // Both are design choices. C = 6 carries the input value 16 of the examples as a
  // signed number, and S = 10 leaves four synapse ports when injection is on.
  localparam int unsigned N_PORTS    = 10;
  localparam int unsigned N_INJ      = 6;
  // Neurons in the nCore: the five-neuron network of the specification's examples.
  localparam int unsigned N_NEURONS_DEF = 5;
  localparam int unsigned NID_W      = 8;   // width of a neuron index in a synapse setting
  // STDP table: at most STDP_MAX entries of WEIGHT_W-bit signed values.
  localparam int unsigned STDP_MAX   = 8;
  // Width of the "cycles since" counters used by STDP. They saturate, and any value
  // past STDP_MAX already gives an index outside the table.
  localparam int unsigned DT_W       = $clog2(STDP_MAX) + 1;

  // Minimum accumulator width of the specification (Eq. 3):
  //   A = ceil(log2(max((2^W-1)(S-C) + 2^C-1, (2^W-1)S)))
  function automatic int unsigned acc_magnitude_bits(int unsigned w, int unsigned s,
                                                     int unsigned c);
    longint unsigned a, b, m;
    a = ((64'd1 << w) - 1) * (64'(s) - 64'(c)) + (64'd1 << c) - 1;
    b = ((64'd1 << w) - 1) * s;
    m = (a > b) ? a : b;
    return $clog2(m);
  endfunction

  localparam int unsigned ACC_A = acc_magnitude_bits(WEIGHT_W, N_PORTS, N_INJ);
  // Signed accumulator: the magnitude bits plus a sign, and never narrower than a threshold.
  localparam int unsigned ACC_W = (ACC_A + 1 > THR_W) ? ACC_A + 1 : THR_W;

  // ---- STDP table ------------------------------------------------------------------
  typedef logic signed [WEIGHT_W-1:0] stdp_entry_t;
  typedef stdp_entry_t [0:STDP_MAX-1] stdp_table_t;   // element 0 is the leftmost
  // The example table of the specification's STDP section: [1, 2, 2, 3, 4, -4, -2, -1].
  localparam int unsigned STDP_T_DEF = 8;
  localparam stdp_table_t STDP_TABLE_DEF = {4'sd1, 4'sd2, 4'sd2, 4'sd3,
                                            4'sd4, -4'sd4, -4'sd2, -4'sd1};

  // ---- Settings ----------------------------------------------------------------------
  typedef struct packed {
    logic signed [THR_W-1:0] threshold;     // fires when the potential exceeds this
    logic signed [THR_W-1:0] srp;           // standard resting potential
    logic signed [THR_W-1:0] rrp;           // refractory resting potential
    logic        [LEAK_W-1:0] leak;
    logic        [REF_W-1:0]  abs_ref;      // absolute refractory period, cycles
    logic        [REF_W-1:0]  rel_ref;      // relative refractory period, cycles
    logic                     inj_en;       // ports 0..N_INJ-1 carry charge injection
  } neuron_cfg_t;

  typedef struct packed {
    logic                       en;         // a synapse occupies this port
    logic [NID_W-1:0]           src;        // pre-neuron index within the nCore
    logic signed [WEIGHT_W-1:0] weight;     // initial weight (STDP changes a copy)
    logic [DELAY_W-1:0]         delay;      // 0 .. DELAY_MAX
  } synapse_cfg_t;

  // Operating mode of a neuron within one integration cycle.
  typedef enum logic [1:0] {MODE_STD = 2'd0, MODE_ABS = 2'd1, MODE_REL = 2'd2} nmode_t;

endpackage
