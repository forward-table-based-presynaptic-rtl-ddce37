// tb_post_syn_processor: self-checking test of the post-synaptic processor.
//
// Eight neurons, 6-tick window. Each tick the testbench raises random spike
// strobes (some in the cycle of `step`), gives `step`, then `apply`, and
// checks: the timers decrement on `step` and reload on `apply` for exactly the
// neurons that spiked; the outgoing events come once per spike, in index
// order, with the routing-table destination, under random back-pressure; the
// number of cycles (three per spike and one to finish) matches the timing when out_ready stays high.
module tb_post_syn_processor;
  localparam int unsigned NP = 8, T = 6, DW = 16, TW = 3;
  logic clk = 0, rst_n = 0, step = 0, apply = 0, busy;
  logic [NP-1:0] post_spike = '0;
  logic [TW-1:0] post_timers [NP];
  logic rt_rd_en, out_valid, out_ready = 1;
  logic [2:0] rt_rd_addr, out_src;
  logic [DW-1:0] rt_rd_data, out_dest;

  post_syn_processor #(.N_POST(NP), .T_STDP(T), .DEST_W(DW)) dut (.*);

  always #5 clk = ~clk;

  logic [DW-1:0] rt [NP];
  always_ff @(posedge clk) if (rt_rd_en) rt_rd_data <= rt[rt_rd_addr];

  int m_t [NP];
  int checks = 0, failures = 0, n_bp = 0, n_out = 0;
  int exp_q [$];
  logic [NP-1:0] spk;
  bit bp_on;

  always @(negedge clk) out_ready = bp_on ? ($urandom_range(2) == 0) : 1'b1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int e;
    checks++;
    n_out++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected event from %0d", out_src);
    end else begin
      e = exp_q.pop_front();
      if (int'(out_src) != e || out_dest != rt[e]) begin
        failures++;
        $display("event src %0d dest %0h, expected %0d dest %0h", out_src, out_dest, e, rt[e]);
      end
    end
  end
  always @(posedge clk) if (rst_n && out_valid && !out_ready) n_bp++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NP; j++) begin rt[j] = DW'($urandom); m_t[j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    spk = '0;
    for (int k = 0; k < 300; k++) begin
      int cyc, nspk;
      bp_on = (k % 2 == 1);
      repeat ($urandom_range(3)) begin
        post_spike = NP'($urandom) & NP'($urandom) & NP'($urandom);
        spk |= post_spike;
        @(negedge clk);
      end
      post_spike = ($urandom_range(3) == 0) ? NP'(1 << $urandom_range(NP - 1)) : '0;
      spk |= post_spike;
      step = 1;
      @(negedge clk);
      step = 0; post_spike = '0;
      for (int j = 0; j < NP; j++) begin
        if (m_t[j] > 0) m_t[j]--;
        checks++;
        if (int'(post_timers[j]) != m_t[j]) begin
          failures++;
          $display("tick %0d: timer %0d = %0d after step, expected %0d", k, j, post_timers[j], m_t[j]);
        end
      end
      // a spike between step and apply belongs to the next tick
      post_spike = NP'($urandom) & NP'($urandom) & NP'($urandom) & NP'($urandom);
      apply = 1;
      @(negedge clk);
      apply = 0;
      nspk = 0;
      for (int j = 0; j < NP; j++) if (spk[j]) begin
        m_t[j] = T; exp_q.push_back(j); nspk++;
      end
      spk = post_spike;
      post_spike = '0;
      for (int j = 0; j < NP; j++) begin
        checks++;
        if (int'(post_timers[j]) != m_t[j]) begin
          failures++;
          $display("tick %0d: timer %0d = %0d after apply, expected %0d", k, j, post_timers[j], m_t[j]);
        end
      end
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      if (!bp_on) begin
        checks++;
        if (cyc != 3 * nspk + 2) begin
          failures++;
          $display("tick %0d: %0d spikes took %0d cycles, expected %0d", k, nspk, cyc, 3 * nspk + 2);
        end
      end
      checks++;
      if (exp_q.size() != 0) begin
        failures++;
        $display("tick %0d: %0d events missing", k, exp_q.size());
        exp_q.delete();
      end
    end
    checks++;
    if (n_bp == 0 || n_out == 0) failures++;
    $display("events %0d, back-pressure cycles %0d", n_out, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
