// post_syn_processor: post-synaptic spike handling of the core.
//
// Spikes of the post-synaptic neurons arrive as a strobe vector and are
// collected in a bitmap. On `step` (one system tick) the neuron timers are
// decremented and the bitmap is taken as this tick's spikes. On `apply`, given
// once the pre-synaptic sweeps of the tick are done, the timer of every neuron
// that spiked is reloaded with the window length in one cycle, so the sweeps
// of a tick see the neuron spikes of earlier ticks only. A neuron that spikes
// again inside its window simply restarts its timer: only the latest spike is
// kept, as in the paper's method. The spikes are then sent out one by one, in
// index order, with the destination read from the routing table. Timer
// handling follows the paper; the bitmap, the order and the valid/ready
// handshake are this design's choice.
//
// Timing: after `apply`, three cycles per spike (pick, table read, hand-over)
// plus any cycles out_ready is low. `busy` is high until the last spike is out.
module post_syn_processor
  import stdp_pkg::*;
#(
  parameter int unsigned N_POST = N_POST_DEF,
  parameter int unsigned T_STDP = T_STDP_DEF,
  parameter int unsigned DEST_W = DEST_W_DEF,
  localparam int unsigned TW    = $clog2(T_STDP + 1),
  localparam int unsigned JW    = $clog2(N_POST)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_POST-1:0] post_spike,
  input  logic              step,
  input  logic              apply,
  output logic              busy,
  output logic [TW-1:0]     post_timers [N_POST],
  // routing table read port
  output logic              rt_rd_en,
  output logic [JW-1:0]     rt_rd_addr,
  input  logic [DEST_W-1:0] rt_rd_data,
  // outgoing post-synaptic events
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DEST_W-1:0] out_dest,
  output logic [JW-1:0]     out_src
);

  typedef enum logic [1:0] {S_IDLE, S_PICK, S_READ, S_OUT} state_e;

  state_e            state;
  logic [N_POST-1:0] pending, spk, emit, timer_set;
  logic [N_POST-1:0] unused_expired;
  logic [JW-1:0]     cur;

  stdp_timer_bank #(.N(N_POST), .T_STDP(T_STDP)) u_post_timers (
    .clk, .rst_n, .tick(step), .set_mask(timer_set),
    .timers(post_timers), .expired(unused_expired)
  );

  assign timer_set = apply ? spk : '0;

  logic          have_emit;
  logic [JW-1:0] first;
  always_comb begin
    have_emit = 1'b0;
    first     = '0;
    for (int j = N_POST - 1; j >= 0; j--) begin
      if (emit[j]) begin
        have_emit = 1'b1;
        first     = JW'(j);
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pending  <= '0;
      spk      <= '0;
      emit     <= '0;
      cur      <= '0;
      out_dest <= '0;
    end else begin
      if (step) begin
        spk     <= pending | post_spike;
        pending <= '0;
      end else begin
        pending <= pending | post_spike;
      end

      unique case (state)
        S_IDLE: if (apply) begin
          emit  <= spk;
          state <= S_PICK;
        end
        S_PICK: if (have_emit) begin
          cur         <= first;
          emit[first] <= 1'b0;
          state       <= S_READ;
        end else begin
          state <= S_IDLE;
        end
        S_READ: begin
          out_dest <= rt_rd_data;
          state    <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_PICK;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rt_rd_en   = (state == S_PICK) && have_emit;
  assign rt_rd_addr = first;
  assign out_valid  = (state == S_OUT);
  assign out_src    = cur;

  // apply comes only between ticks, once per tick
  a_apply_idle: assert property (@(posedge clk) disable iff (!rst_n) apply |-> !busy);
  // an offered event stays until taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               out_valid && !out_ready |=> out_valid && $stable(out_dest));

endmodule
