// stdp_timer_bank: one STDP timer per core input or per post-synaptic neuron.
//
// A timer is loaded with the window length T_STDP when its owner spikes and is
// decremented by one on every tick until it reaches zero, so a non-zero value
// t means the last spike was T_STDP - t ticks ago. Only the latest spike is
// remembered (nearest-neighbour STDP). This follows the paper. The tick on which
// a timer goes from 1 to 0 is the end of that spike's window: the bank marks it
// in `expired`, which stays valid until the next tick (this design's choice).
//
// Interface: `tick` decrements every timer in one cycle; `set_mask` loads the
// marked timers in one cycle (a load in the same cycle as a tick wins). Timers
// and flags are cleared by the active-low reset.
module stdp_timer_bank #(
  parameter int unsigned N      = stdp_pkg::N_IN_DEF,
  parameter int unsigned T_STDP = stdp_pkg::T_STDP_DEF,
  localparam int unsigned TW    = $clog2(T_STDP + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tick,
  input  logic [N-1:0]         set_mask,
  output logic [TW-1:0]        timers  [N],
  output logic [N-1:0]         expired
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) timers[i] <= '0;
      expired <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        if (set_mask[i]) begin
          timers[i] <= TW'(T_STDP);
        end else if (tick && timers[i] != '0) begin
          timers[i] <= timers[i] - 1'b1;
        end
        if (tick) expired[i] <= (timers[i] == TW'(1));
      end
    end
  end

endmodule
