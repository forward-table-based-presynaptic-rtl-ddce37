// stdp_update: the weight update of one synapse during a forward-table sweep.
//
// The pre-synaptic row sweep hands this unit the synapse's old weight, the
// timer of its input (pre_timer, the age of the old pre-synaptic spike, zero
// when that spike's window has just ended) and the timer of its post-synaptic
// neuron (post_timer). Larger timer = more recent spike.
//
//  * Causal update (causal_en): the old pre spike and a post spike that came
//    after it form a pair when post_timer > pre_timer; they are
//    dt = post_timer - pre_timer ticks apart and the weight grows by K(dt).
//  * Acausal update (acausal_en, a new pre spike arrives now): a post spike
//    still in its window (post_timer > 0) came dt = T_STDP - post_timer ticks
//    earlier and the weight shrinks by K(dt).
//
// The causal update is applied first, then the acausal one, each saturating at
// the signed W_BITS limits. K is the anti-symmetric ramp of peak DW_MAX that
// falls to zero at T_STDP, rounded to whole weight steps:
// K(dt) = round(DW_MAX * (T_STDP - dt) / T_STDP). The pairing rules follow the
// paper's update cases; the rounding and the saturation are this design's
// choice. K is a constant table built at elaboration. Purely combinational.
module stdp_update
  import stdp_pkg::*;
#(
  parameter int unsigned W_BITS = W_BITS_DEF,
  parameter int unsigned T_STDP = T_STDP_DEF,
  parameter int unsigned DW_MAX = DW_MAX_DEF,
  localparam int unsigned TW    = $clog2(T_STDP + 1)
) (
  input  logic signed [W_BITS-1:0] w_in,
  input  logic        [TW-1:0]     pre_timer,
  input  logic        [TW-1:0]     post_timer,
  input  logic                     causal_en,
  input  logic                     acausal_en,
  output logic signed [W_BITS-1:0] w_out,
  output logic                     did_causal,
  output logic                     did_acausal,
  output logic                     saturated
);

  localparam int W_MAX = (1 <<< (W_BITS - 1)) - 1;
  localparam int W_MIN = -(1 <<< (W_BITS - 1));

  typedef logic [W_BITS:0] mag_t;
  typedef mag_t            lut_t [T_STDP + 1];

  function automatic lut_t build_lut();
    lut_t l;
    for (int unsigned d = 0; d <= T_STDP; d++) l[d] = mag_t'(ramp_mag(d, T_STDP, DW_MAX));
    return l;
  endfunction

  localparam lut_t K = build_lut();

  logic [TW-1:0]         dt_c, dt_a;
  logic signed [W_BITS+2:0] w_c, w_a, w_c_sat;
  logic                  sat_c, sat_a;

  always_comb begin
    dt_c        = post_timer - pre_timer;
    dt_a        = TW'(T_STDP) - post_timer;
    did_causal  = causal_en && (post_timer > pre_timer);
    did_acausal = acausal_en && (post_timer != '0);

    w_c   = (W_BITS+3)'(w_in);
    if (did_causal) w_c = w_c + (W_BITS+3)'(signed'({2'b00, K[dt_c]}));
    sat_c = 1'b0;
    w_c_sat = w_c;
    if (w_c > (W_BITS+3)'(W_MAX)) begin
      w_c_sat = (W_BITS+3)'(W_MAX);
      sat_c   = 1'b1;
    end

    w_a   = w_c_sat;
    if (did_acausal) w_a = w_a - (W_BITS+3)'(signed'({2'b00, K[dt_a]}));
    sat_a = 1'b0;
    if (w_a < (W_BITS+3)'(W_MIN)) begin
      w_a   = (W_BITS+3)'(W_MIN);
      sat_a = 1'b1;
    end

    w_out     = w_a[W_BITS-1:0];
    saturated = sat_c | sat_a;
  end

endmodule
