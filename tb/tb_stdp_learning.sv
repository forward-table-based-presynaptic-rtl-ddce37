// tb_stdp_learning: the learning experiment the method was validated with, run
// on the core at its default size.
//
// A fully connected 64 x 64 core (4096 synapses, all starting at weight 0)
// receives independent Poisson spike trains of 10 Hz on every input and every
// neuron, each train with a refractory period T_REF, for SECONDS seconds of
// 1-ms ticks. This is repeated for T_REF = 5, 10, 15 and 20 ticks. Alongside
// the core the testbench runs two models:
//   * the forward-table rule itself, which every weight must match exactly;
//   * classic nearest-neighbour STDP with immediate causal updates (every
//     neuron spike pairs with the latest input spike before it, every input
//     spike with the latest neuron spike before it), the reference the method
//     approximates.
// It reports the mean and spread of (forward-table weight - classic weight).
// Two properties of the method are checked: with T_REF equal to the 20-tick
// window the two rules agree exactly, and with T_REF = 5 the forward-table
// weights are on average lower, never higher, because causal pairs of
// neurons that fire twice inside one input window are dropped.
module tb_stdp_learning;
  import stdp_pkg::*;
  localparam int unsigned NI = 64, NP = 64, T = 20, DW = 16;
  localparam int SECONDS = 60;
  localparam int RATE_PPM = 10000;             // 10 Hz at 1-ms ticks: 1 % per tick

  logic clk = 0, rst_n = 0, tick = 0, busy, overrun;
  logic in_valid = 0;
  logic [5:0] in_addr = '0;
  logic syn_valid;
  logic [5:0] syn_post;
  logic signed [8:0] syn_weight;
  logic [NP-1:0] post_spike = '0;
  logic out_valid, out_ready = 1;
  logic [DW-1:0] out_dest;
  logic [5:0] out_src;
  logic cfg_req = 0, cfg_we = 0, cfg_ack;
  cfg_sel_e cfg_sel = CFG_PT;
  logic [15:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic upd_valid, upd_causal, upd_acausal, upd_saturated, row_valid, row_new, row_causal;

  stdp_core dut (.*);

  always #5 clk = ~clk;

  int n_in, n_post, n_ticks;
  int checks = 0, failures = 0;
  int wp [NI][NP];       // forward-table rule
  int wo [NI][NP];       // classic nearest-neighbour STDP
  int pre_t [NI], post_t [NP];
  int last_pre [NI], last_post [NP], ref_pre [NI], ref_post [NP];

  function automatic int kmag(int dt);
    if (dt <= 0 || dt >= T) return 0;
    return (2 * (T - dt) + T) / (2 * T);
  endfunction
  function automatic int sat(int v);
    return (v > 255) ? 255 : (v < -256) ? -256 : v;
  endfunction

  task automatic cfg(input cfg_sel_e sel, input bit we, input int addr, input int data,
                     output int rdata);
    @(negedge clk);
    cfg_req = 1; cfg_we = we; cfg_sel = sel; cfg_addr = 16'(addr); cfg_wdata = 32'(data);
    do @(negedge clk); while (!cfg_ack);
    rdata = int'(cfg_rdata);
    cfg_req = 0;
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, t_ref;
    n_in = NI; n_post = NP; n_ticks = SECONDS * 1000;
    for (int run = 0; run < 4; run++) begin
      real sum_d, sum_d2;
      int n_neg, n_zero, n_pos, d_min, d_max;
      t_ref = 5 + 5 * run;
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      // fully connected: row i holds 64 synapse entries starting at 64*i
      for (int i = 0; i < n_in; i++) cfg(CFG_PT, 1, i, i * NP, r);
      for (int a = 0; a < n_in * n_post; a++) cfg(CFG_WT, 1, a, 1 << 9, r);
      for (int j = 0; j < n_post; j++) cfg(CFG_RT, 1, j, j, r);
      for (int i = 0; i < n_in; i++) begin
        pre_t[i] = 0; last_pre[i] = -1000; ref_pre[i] = -1000;
        for (int j = 0; j < n_post; j++) begin wp[i][j] = 0; wo[i][j] = 0; end
      end
      for (int j = 0; j < n_post; j++) begin post_t[j] = 0; last_post[j] = -1000; ref_post[j] = -1000; end

      for (int k = 0; k < n_ticks; k++) begin
        bit new_in [NI];
        bit expd [NI];
        logic [NP-1:0] spk;
        // Poisson trains with refractory period
        spk = '0;
        for (int i = 0; i < n_in; i++) begin
          new_in[i] = (k - last_pre[i] >= t_ref) && ($urandom_range(999999) < RATE_PPM);
          if (new_in[i]) begin
            last_pre[i] = k;
            @(negedge clk);
            in_valid = 1; in_addr = 6'(i);
          end
        end
        for (int j = 0; j < n_post; j++)
          if ((k - last_post[j] >= t_ref) && ($urandom_range(999999) < RATE_PPM)) begin
            spk[j] = 1'b1;
            last_post[j] = k;
          end
        @(negedge clk);
        in_valid = 0; post_spike = spk;
        @(negedge clk);
        post_spike = '0;
        tick = 1;
        @(negedge clk);
        tick = 0;
        // forward-table model of step k
        for (int i = 0; i < n_in; i++) begin
          expd[i] = (pre_t[i] == 1);
          if (pre_t[i] > 0) pre_t[i]--;
        end
        for (int j = 0; j < n_post; j++) if (post_t[j] > 0) post_t[j]--;
        for (int i = 0; i < n_in; i++) begin
          bit c_en;
          if (!(new_in[i] || expd[i])) continue;
          c_en = expd[i] || pre_t[i] > 0;
          for (int j = 0; j < n_post; j++) begin
            if (c_en && post_t[j] > pre_t[i]) wp[i][j] = sat(wp[i][j] + kmag(post_t[j] - pre_t[i]));
            if (new_in[i] && post_t[j] > 0) wp[i][j] = sat(wp[i][j] - kmag(T - post_t[j]));
          end
          if (new_in[i]) pre_t[i] = T;
        end
        for (int j = 0; j < n_post; j++) if (spk[j]) post_t[j] = T;
        // classic nearest-neighbour model of step k
        for (int i = 0; i < n_in; i++) if (new_in[i])
          for (int j = 0; j < n_post; j++) wo[i][j] -= kmag(k - ref_post[j]);
        for (int j = 0; j < n_post; j++) if (spk[j])
          for (int i = 0; i < n_in; i++) wo[i][j] += kmag(k - ref_pre[i]);
        for (int i = 0; i < n_in; i++) if (new_in[i]) ref_pre[i] = k;
        for (int j = 0; j < n_post; j++) if (spk[j]) ref_post[j] = k;
        while (busy || out_valid) @(negedge clk);
      end
      // let every open window close so that the deferred causal updates are done
      for (int k = 0; k < T; k++) begin
        @(negedge clk);
        tick = 1;
        @(negedge clk);
        tick = 0;
        for (int j = 0; j < n_post; j++) if (post_t[j] > 0) post_t[j]--;
        for (int i = 0; i < n_in; i++) begin
          bit e;
          e = (pre_t[i] == 1);
          if (pre_t[i] > 0) pre_t[i]--;
          if (e) for (int j = 0; j < n_post; j++)
            if (post_t[j] > 0) wp[i][j] = sat(wp[i][j] + kmag(post_t[j]));
        end
        while (busy || out_valid) @(negedge clk);
      end
      // read back and compare
      sum_d = 0; sum_d2 = 0; n_neg = 0; n_zero = 0; n_pos = 0; d_min = 1000; d_max = -1000;
      for (int i = 0; i < n_in; i++)
        for (int j = 0; j < n_post; j++) begin
          int d;
          logic signed [8:0] rw;
          cfg(CFG_WT, 0, i * NP + j, 0, r);
          rw = r[8:0];
          checks++;
          if (int'(rw) != wp[i][j]) begin
            failures++;
            if (failures < 10) $display("T_REF %0d: w[%0d][%0d] = %0d, expected %0d", t_ref, i, j,
                                        rw, wp[i][j]);
          end
          d = wp[i][j] - wo[i][j];
          sum_d += d; sum_d2 += d * d;
          if (d < 0) n_neg++; else if (d == 0) n_zero++; else n_pos++;
          if (d < d_min) d_min = d;
          if (d > d_max) d_max = d;
        end
      $display("T_REF %0d ms: w_p - w_o mean %0.3f, rms %0.3f, min %0d, max %0d; below/equal/above %0d/%0d/%0d",
               t_ref, sum_d / 4096.0, $sqrt(sum_d2 / 4096.0), d_min, d_max, n_neg, n_zero, n_pos);
      checks++;
      if (t_ref >= T && (d_min != 0 || d_max != 0)) begin
        failures++;
        $display("T_REF %0d: the rules should agree exactly", t_ref);
      end
      if (t_ref == 5 && (n_pos != 0 || sum_d >= 0)) begin
        failures++;
        $display("T_REF 5: the forward-table weights should not exceed the classic ones");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
