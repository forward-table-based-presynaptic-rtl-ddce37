// stdp_pkg: types and constants shared by the forward-table STDP core.
//
// A weight-table (WT) entry is a flag bit and a payload field. Flag 1 marks an
// existing synapse and the payload is its signed weight; flag 0 marks a run of
// post-synaptic neurons with no synapse and the payload is the run length. A run
// length of zero ends a row early (this design's choice; the row also ends once
// every post-synaptic neuron has been covered).
//
// The default sizes are those of the 64-input x 64-neuron core with 9-bit
// weights and 20-tick STDP windows; the remaining widths are this design's own.
package stdp_pkg;

  localparam int unsigned N_IN_DEF     = 64;   // core inputs (axons)
  localparam int unsigned N_POST_DEF   = 64;   // post-synaptic neurons
  localparam int unsigned W_BITS_DEF   = 9;    // weight width, two's complement
  localparam int unsigned T_STDP_DEF   = 20;   // STDP window in ticks
  localparam int unsigned DW_MAX_DEF   = 1;    // peak of the ramp kernel
  localparam int unsigned WT_DEPTH_DEF = N_IN_DEF * N_POST_DEF;
  localparam int unsigned DEST_W_DEF   = 16;   // routing-table destination word

  // Flag values of a WT entry.
  localparam logic WT_FLAG_RUN  = 1'b0;
  localparam logic WT_FLAG_SYN  = 1'b1;

  // Table selector of the configuration port.
  typedef enum logic [1:0] {
    CFG_PT = 2'd0,
    CFG_WT = 2'd1,
    CFG_RT = 2'd2
  } cfg_sel_e;

  // Magnitude of the ramp kernel for a pair whose spikes are dt ticks apart:
  // round(dw_max * (t - dt) / t), zero for dt >= t.
  function automatic int unsigned ramp_mag(int unsigned dt, int unsigned t,
                                           int unsigned dw_max);
    if (dt >= t) return 0;
    return (2 * dw_max * (t - dt) + t) / (2 * t);
  endfunction

endpackage
