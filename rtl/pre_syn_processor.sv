// pre_syn_processor: event-driven forward-table sweeps with presynaptic
// event-triggered STDP.
//
// Incoming pre-synaptic events are collected in a bitmap of pending inputs.
// On `step` (one system tick) the input timers are decremented, the bitmap is
// taken as this tick's new spikes and cleared, and the unit then serves, in
// index order, every input that either got a new spike or whose timer ran out
// on this tick. Serving input i means reading its row start from the pointer
// table and walking its run-length-encoded row in the weight table:
//   * a run entry skips that many post-synaptic neurons (zero ends the row);
//   * a synapse entry is read, updated by stdp_update and written back.
// The three update cases of the method map onto one sweep per input:
//   new spike, timer already zero  -> acausal updates only;
//   new spike, timer still running -> causal updates of the old spike, then
//                                     acausal updates of the new one;
//   timer ran out, no new spike    -> causal updates only (delayed).
// Only forward (input -> neuron) access to the tables is needed, which is the
// point of the method. On a new spike the old weight of each synapse is also
// sent out on syn_* for the post-synaptic neurons, and the input's timer is
// reloaded. The sweep order, bitmap and cycle timing are this design's choice.
//
// Timing: one cycle to start, two cycles per input to fetch its pointer, two
// cycles per weight-table entry (read, then write back), one cycle per input
// to finish. `busy` is high from the cycle after `step` until all rows are
// done. `step` must not be given while busy.
module pre_syn_processor
  import stdp_pkg::*;
#(
  parameter int unsigned N_IN     = N_IN_DEF,
  parameter int unsigned N_POST   = N_POST_DEF,
  parameter int unsigned W_BITS   = W_BITS_DEF,
  parameter int unsigned T_STDP   = T_STDP_DEF,
  parameter int unsigned DW_MAX   = DW_MAX_DEF,
  parameter int unsigned WT_DEPTH = WT_DEPTH_DEF,
  localparam int unsigned TW      = $clog2(T_STDP + 1),
  localparam int unsigned IW      = $clog2(N_IN),
  localparam int unsigned JW      = $clog2(N_POST),
  localparam int unsigned AW      = $clog2(WT_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // incoming pre-synaptic events
  input  logic                     in_valid,
  input  logic [IW-1:0]            in_addr,
  // tick sequencing
  input  logic                     step,
  output logic                     busy,
  // post-synaptic timers, from the post-synaptic processor
  input  logic [TW-1:0]            post_timers [N_POST],
  // pointer table read port
  output logic                     pt_rd_en,
  output logic [IW-1:0]            pt_rd_addr,
  input  logic [AW-1:0]            pt_rd_data,
  // weight table port
  output logic                     wt_en,
  output logic                     wt_we,
  output logic [AW-1:0]            wt_addr,
  output logic [W_BITS:0]          wt_wdata,
  input  logic [W_BITS:0]          wt_rdata,
  // synaptic events to the post-synaptic neurons
  output logic                     syn_valid,
  output logic [JW-1:0]            syn_post,
  output logic signed [W_BITS-1:0] syn_weight,
  // one pulse per synapse written, with what happened to it
  output logic                     upd_valid,
  output logic                     upd_causal,
  output logic                     upd_acausal,
  output logic                     upd_saturated,
  // one pulse per input served, with the case
  output logic                     row_valid,
  output logic                     row_new,
  output logic                     row_causal
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_SCAN, S_PT, S_RD, S_EX, S_WB} state_e;
  localparam int unsigned CW = JW + W_BITS + 2;   // column counter, holds N_POST + a run

  state_e              state;
  logic [N_IN-1:0]     pending, new_spk, work;
  logic                cur_new, cur_causal;
  logic [TW-1:0]       cur_pre_t;
  logic [AW-1:0]       ptr;
  logic [CW-1:0]       col;
  logic [W_BITS:0]     wb_data;

  logic [TW-1:0]       pre_timers [N_IN];
  logic [N_IN-1:0]     pre_expired;
  logic [N_IN-1:0]     pre_set;

  stdp_timer_bank #(.N(N_IN), .T_STDP(T_STDP)) u_pre_timers (
    .clk, .rst_n, .tick(step), .set_mask(pre_set),
    .timers(pre_timers), .expired(pre_expired)
  );

  // first input left to serve
  logic          have_work;
  logic [IW-1:0] first;
  always_comb begin
    have_work = 1'b0;
    first     = '0;
    for (int i = N_IN - 1; i >= 0; i--) begin
      if (work[i]) begin
        have_work = 1'b1;
        first     = IW'(i);
      end
    end
  end

  // the synapse under the sweep
  logic                     ent_syn;
  logic [W_BITS-1:0]        ent_pay;
  logic [JW-1:0]            col_j;
  logic signed [W_BITS-1:0] w_new;
  logic                     d_causal, d_acausal, d_sat;

  assign ent_syn = wt_rdata[W_BITS];
  assign ent_pay = wt_rdata[W_BITS-1:0];
  assign col_j   = col[JW-1:0];

  stdp_update #(.W_BITS(W_BITS), .T_STDP(T_STDP), .DW_MAX(DW_MAX)) u_update (
    .w_in(signed'(ent_pay)), .pre_timer(cur_pre_t), .post_timer(post_timers[col_j]),
    .causal_en(cur_causal), .acausal_en(cur_new),
    .w_out(w_new), .did_causal(d_causal), .did_acausal(d_acausal), .saturated(d_sat)
  );

  logic [CW-1:0] col_next;
  logic          row_end;
  always_comb begin
    if (ent_syn) col_next = col + 1'b1;
    else         col_next = col + CW'(ent_pay);
    row_end = (!ent_syn && ent_pay == '0) || (col_next >= CW'(N_POST));
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pending    <= '0;
      new_spk    <= '0;
      work       <= '0;
      cur_new    <= 1'b0;
      cur_causal <= 1'b0;
      cur_pre_t  <= '0;
      ptr        <= '0;
      col        <= '0;
      wb_data    <= '0;
    end else begin
      // event collection; an event arriving with `step` belongs to that tick
      if (step) begin
        pending <= '0;
        new_spk <= pending;
        if (in_valid) new_spk[in_addr] <= 1'b1;
      end else if (in_valid) begin
        pending[in_addr] <= 1'b1;
      end

      unique case (state)
        S_IDLE:  if (step) state <= S_START;
        S_START: begin
          work  <= new_spk | pre_expired;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (!have_work) begin
            state <= S_IDLE;
          end else begin
            work[first]    <= 1'b0;
            cur_new        <= new_spk[first];
            cur_causal     <= pre_expired[first] || (pre_timers[first] != '0);
            cur_pre_t      <= pre_timers[first];
            state          <= S_PT;
          end
        end
        S_PT: begin
          ptr   <= pt_rd_data;
          col   <= '0;
          state <= S_RD;
        end
        S_RD: state <= S_EX;
        S_EX: begin
          ptr     <= ptr + 1'b1;
          col     <= col_next;
          wb_data <= {1'b1, w_new};
          if (ent_syn)      state <= S_WB;
          else if (row_end) state <= S_SCAN;
          else              state <= S_RD;
        end
        S_WB: state <= (col >= CW'(N_POST)) ? S_SCAN : S_RD;
        default: state <= S_IDLE;
      endcase
    end
  end

  // table ports
  always_comb begin
    pt_rd_en   = (state == S_SCAN) && have_work;
    pt_rd_addr = first;
    wt_en      = (state == S_RD) || (state == S_WB);
    wt_we      = (state == S_WB);
    wt_addr    = (state == S_WB) ? ptr - 1'b1 : ptr;
    wt_wdata   = wb_data;
  end

  // the input's timer is reloaded when a new spike of it is taken up
  always_comb begin
    pre_set = '0;
    if (state == S_SCAN && have_work && new_spk[first]) pre_set[first] = 1'b1;
  end

  // synaptic events and update status, in the cycle the entry is examined
  always_comb begin
    syn_valid     = (state == S_EX) && ent_syn && cur_new;
    syn_post      = col_j;
    syn_weight    = signed'(ent_pay);
    upd_valid     = (state == S_EX) && ent_syn;
    upd_causal    = upd_valid && d_causal;
    upd_acausal   = upd_valid && d_acausal;
    upd_saturated = upd_valid && d_sat;
    row_valid     = (state == S_SCAN) && have_work;
    row_new       = new_spk[first];
    row_causal    = pre_expired[first] || (pre_timers[first] != '0);
  end

  // a tick must not start while the previous one is being processed
  a_step_idle: assert property (@(posedge clk) disable iff (!rst_n) step |-> !busy);
  // a synapse entry always addresses a post-synaptic neuron of the core
  a_col_range: assert property (@(posedge clk) disable iff (!rst_n)
                                (state == S_EX && ent_syn) |-> col < CW'(N_POST));

endmodule
