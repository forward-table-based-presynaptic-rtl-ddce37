// tb_stdp_timer_bank: self-checking test of the STDP timer bank.
// Random loads and ticks on a small bank; every cycle the timers are compared
// with a model (load to T, decrement to zero on a tick, a load beats a tick)
// and the expiry flags with the timers that went from 1 to 0 on the last tick.
module tb_stdp_timer_bank;
  localparam int unsigned N = 8, T = 5, TW = 3;
  logic clk = 0, rst_n = 0, tick = 0;
  logic [N-1:0] set_mask = '0;
  logic [TW-1:0] timers [N];
  logic [N-1:0]  expired;
  int            m_t [N];
  logic [N-1:0]  m_exp;
  int checks = 0, failures = 0, n_exp = 0;

  stdp_timer_bank #(.N(N), .T_STDP(T)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) m_t[i] = 0;
    m_exp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      tick     = ($urandom_range(2) == 0);
      set_mask = ($urandom_range(3) == 0) ? N'($urandom) & N'($urandom) : '0;
      @(negedge clk);
      // model of the edge between the two negedges
      for (int i = 0; i < N; i++) begin
        if (tick) m_exp[i] = (m_t[i] == 1);
        if (set_mask[i])            m_t[i] = T;
        else if (tick && m_t[i] > 0) m_t[i]--;
      end
      tick = 0; set_mask = '0;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(timers[i]) != m_t[i]) begin
          failures++;
          $display("timer %0d: got %0d expected %0d", i, timers[i], m_t[i]);
        end
      end
      checks++;
      if (expired !== m_exp) begin
        failures++;
        $display("expired: got %b expected %b", expired, m_exp);
      end
      n_exp += $countones(m_exp);
    end
    checks++;
    if (n_exp == 0) failures++;   // expiry must have been exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
