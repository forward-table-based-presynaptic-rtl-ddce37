// tb_stdp_core: end-to-end self-checking test of the whole core at its default
// size (64 inputs x 64 neurons, 9-bit weights, 20-tick window).
//
// The testbench builds a random connectivity with rows of every kind (full,
// empty, sparse with long runs, rows closed early by a zero run), encodes it
// into the run-length weight table, and loads pointer, weight and routing
// tables through the configuration port. Some weights start next to the
// saturation limits. It then runs ticks with random input events and neuron
// spikes while a model of the forward-table STDP rule runs alongside, and
// checks: every synaptic event (order, target, weight), every outgoing event
// (source, routed destination) under random back-pressure, and all weights,
// read back through the configuration port, every 100 ticks and at the end.
// Some ticks are given twice in a row to provoke a tick overrun. Each
// mechanism (the three update cases, saturation, run skip, zero-run row end,
// overrun, back-pressure, configuration read) must occur at least once.
module tb_stdp_core;
  import stdp_pkg::*;
  localparam int unsigned NI = 64, NP = 64, T = 20, DEPTH = 4096, DW = 16;
  localparam int NTICKS = 600;

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

  // ------------------------------------------------------------------ model
  bit conn [NI][NP];
  int wadr [NI][NP];
  int w    [NI][NP];
  int ptr  [NI];
  int wt_img [DEPTH];
  int n_wt;
  bit has_zero_run [NI], has_long_run [NI];
  logic [DW-1:0] rt [NP];
  int pre_t [NI], post_t [NP];

  int checks = 0, failures = 0;
  int n_in, n_post, n_ticks;           // loop bounds of the timed loops, set at run time
  int syn_list [$];            // {input, post} of every synapse, for read-back
  int c_acausal = 0, c_both = 0, c_expiry = 0, c_sat = 0, c_run = 0, c_zero = 0;
  int c_overrun = 0, c_bp = 0, c_cfgrd = 0, c_syn = 0, c_out = 0;

  function automatic int kmag(int dt);
    if (dt >= T) return 0;
    return (2 * (T - dt) + T) / (2 * T);
  endfunction
  function automatic int sat(int v, ref int c);
    if (v > 255) begin c++; return 255; end
    if (v < -256) begin c++; return -256; end
    return v;
  endfunction

  // ------------------------------------------------------------------ monitors
  int syn_q [$];        // packed {post, weight} of each synaptic event seen
  int out_q [$];        // expected out_src, in order
  always @(posedge clk) if (rst_n) begin
    if (syn_valid) syn_q.push_back({int'(syn_post), 16'(int'(syn_weight))});
    if (overrun) c_overrun++;
    if (out_valid && !out_ready) c_bp++;
    if (row_valid) begin
      if (row_new && row_causal) c_both++;
      else if (row_new) c_acausal++;
      else c_expiry++;
    end
    if (out_valid && out_ready) begin
      int e;
      c_out++;
      checks++;
      if (out_q.size() == 0) begin
        failures++;
        $display("unexpected outgoing event from %0d", out_src);
      end else begin
        e = out_q.pop_front();
        if (int'(out_src) != e || out_dest != rt[e]) begin
          failures++;
          $display("outgoing event %0d/%0h, expected %0d/%0h", out_src, out_dest, e, rt[e]);
        end
      end
    end
  end
  bit bp_on;
  always @(negedge clk) out_ready = bp_on ? ($urandom_range(3) == 0) : 1'b1;

  // ------------------------------------------------------------------ config
  task automatic cfg(input cfg_sel_e sel, input bit we, input int addr, input int data,
                     output int rdata);
    @(negedge clk);
    cfg_req = 1; cfg_we = we; cfg_sel = sel; cfg_addr = 16'(addr); cfg_wdata = 32'(data);
    do @(negedge clk); while (!cfg_ack);
    rdata = int'(cfg_rdata);
    cfg_req = 0;
    if (!we) c_cfgrd++;
  endtask

  task automatic check_weights(input int k);
    int r, i, j;
    for (int s = 0; s < syn_list.size(); s++) begin
          i = syn_list[s] / NP;
          j = syn_list[s] % NP;
          cfg(CFG_WT, 0, wadr[i][j], 0, r);
          checks++;
          if (r[9] != 1'b1 || int'(signed'(r[8:0])) != w[i][j]) begin
            failures++;
            if (failures < 20) $display("tick %0d: w[%0d][%0d] = %0d, expected %0d", k, i, j,
                                        signed'(r[8:0]), w[i][j]);
          end
    end
  endtask

  // one step of the model; new_in / spk are this step's events
  task automatic model_step(input bit new_in [NI], input logic [NP-1:0] spk, input int k);
    bit expd [NI];
    for (int i = 0; i < n_in; i++) begin
      expd[i] = (pre_t[i] == 1);
      if (pre_t[i] > 0) pre_t[i]--;
    end
    for (int j = 0; j < n_post; j++) if (post_t[j] > 0) post_t[j]--;
    for (int i = 0; i < n_in; i++) begin
      bit c_en;
      int p;
      if (!(new_in[i] || expd[i])) continue;
      c_en = expd[i] || pre_t[i] > 0;
      p = pre_t[i];
      if (has_long_run[i]) c_run++;
      if (has_zero_run[i]) c_zero++;
      for (int j = 0; j < n_post; j++) begin
        int q;
        if (!conn[i][j]) continue;
        if (new_in[i]) begin
          int ev;
          checks++;
          c_syn++;
          if (syn_q.size() == 0) begin
            failures++;
            $display("tick %0d: synaptic event %0d->%0d missing", k, i, j);
          end else begin
            ev = syn_q.pop_front();
            if (ev != {j, 16'(w[i][j])}) begin
              failures++;
              if (failures < 20) $display("tick %0d: synaptic event %0h, expected %0d->%0d w %0d",
                                          k, ev, i, j, w[i][j]);
            end
          end
        end
        q = post_t[j];
        if (c_en && q > p) w[i][j] = sat(w[i][j] + kmag(q - p), c_sat);
        if (new_in[i] && q > 0) w[i][j] = sat(w[i][j] - kmag(T - q), c_sat);
      end
      if (new_in[i]) pre_t[i] = T;
    end
    checks++;
    if (syn_q.size() != 0) begin
      failures++;
      $display("tick %0d: %0d extra synaptic events", k, syn_q.size());
      syn_q.delete();
    end
    for (int j = 0; j < n_post; j++) if (spk[j]) post_t[j] = T;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r;
    n_in = NI; n_post = NP; n_ticks = NTICKS;
    // connectivity: input 0 full, 1 empty, others random density
    n_wt = 0;
    for (int i = 0; i < n_in; i++) begin
      int dens, j;
      dens = (i == 0) ? 100 : (i == 1) ? 0 : $urandom_range(100);
      for (int jj = 0; jj < n_post; jj++) conn[i][jj] = ($urandom_range(99) < dens);
      ptr[i] = n_wt;
      has_zero_run[i] = 0; has_long_run[i] = 0;
      j = 0;
      while (j < NP) begin
        if (conn[i][j]) begin
          int v;
          v = int'($urandom_range(20)) - 10;
          if (i % 5 == 2) v = 254;
          if (i % 5 == 3) v = -255;
          w[i][j] = v;
          wadr[i][j] = n_wt;
          syn_list.push_back(i * NP + j);
          wt_img[n_wt++] = (1 << 9) | (v & 9'h1ff);
          j++;
        end else begin
          int run;
          run = 0;
          while (j < NP && !conn[i][j]) begin run++; j++; end
          if (run > 1) has_long_run[i] = 1;
          if (j == NP && i % 2 == 1) begin
            wt_img[n_wt++] = 0;          // end the row with a zero run
            has_zero_run[i] = 1;
          end else begin
            wt_img[n_wt++] = run;
          end
        end
      end
    end
    for (int j = 0; j < n_post; j++) rt[j] = DW'($urandom);
    for (int i = 0; i < n_in; i++) pre_t[i] = 0;
    for (int j = 0; j < n_post; j++) post_t[j] = 0;

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < n_in; i++) cfg(CFG_PT, 1, i, ptr[i], r);
    for (int a = 0; a < n_wt; a++) cfg(CFG_WT, 1, a, wt_img[a], r);
    for (int j = 0; j < n_post; j++) cfg(CFG_RT, 1, j, int'(rt[j]), r);
    for (int i = 0; i < n_in; i += 7) begin
      cfg(CFG_PT, 0, i, 0, r);
      checks++;
      if (r != ptr[i]) begin failures++; $display("PT[%0d] = %0d, expected %0d", i, r, ptr[i]); end
    end
    for (int j = 0; j < n_post; j += 5) begin
      cfg(CFG_RT, 0, j, 0, r);
      checks++;
      if (r != int'(rt[j])) begin failures++; $display("RT[%0d] read back wrong", j); end
    end
    check_weights(-1);

    for (int k = 0; k < n_ticks; k++) begin
      bit new_in [NI];
      logic [NP-1:0] spk;
      for (int i = 0; i < n_in; i++) new_in[i] = 0;
      spk = '0;
      bp_on = (k % 3 == 0);
      // events of this step
      repeat ($urandom_range(3)) begin
        int i;
        i = $urandom_range(NI - 1);
        @(negedge clk);
        in_valid = 1; in_addr = 6'(i); new_in[i] = 1;
        if ($urandom_range(2) == 0) begin
          post_spike = NP'(64'(1) << $urandom_range(NP - 1));
          spk |= post_spike;
        end
      end
      @(negedge clk);
      in_valid = 0; post_spike = '0;
      tick = 1;
      for (int j = 0; j < n_post; j++) if (spk[j]) out_q.push_back(j);
      @(negedge clk);
      tick = 0;
      if (k % 10 == 5) begin
        // a second tick while the first is processed: queued and flagged
        @(negedge clk);
        tick = 1;
        @(negedge clk);
        tick = 0;
      end
      while (busy || out_valid) @(negedge clk);
      model_step(new_in, spk, k);
      if (k % 10 == 5) begin
        for (int i = 0; i < n_in; i++) new_in[i] = 0;
        model_step(new_in, '0, k);
      end
      checks++;
      if (out_q.size() != 0) begin
        failures++;
        $display("tick %0d: %0d outgoing events missing", k, out_q.size());
        out_q.delete();
      end
      if (k % 100 == 99) check_weights(k);
    end
    $display("rows: acausal only %0d, causal+acausal %0d, expiry %0d; saturations %0d", c_acausal,
             c_both, c_expiry, c_sat);
    $display("rows with runs %0d, closed by zero run %0d; overruns %0d; back-pressure %0d",
             c_run, c_zero, c_overrun, c_bp);
    $display("config reads %0d, synaptic events %0d, outgoing events %0d", c_cfgrd, c_syn, c_out);
    checks += 10;
    if (c_acausal == 0) failures++;
    if (c_both == 0) failures++;
    if (c_expiry == 0) failures++;
    if (c_sat == 0) failures++;
    if (c_run == 0) failures++;
    if (c_zero == 0) failures++;
    if (c_overrun == 0) failures++;
    if (c_bp == 0) failures++;
    if (c_cfgrd == 0) failures++;
    if (c_out == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
