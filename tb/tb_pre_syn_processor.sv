// tb_pre_syn_processor: self-checking test of the forward-table sweeps.
//
// A small core (8 inputs x 8 neurons, 8-tick window, ramp peak 4) with random
// connectivity, encoded by the testbench into run-length rows (runs longer
// than one, rows closed by a zero run, rows that end on the last neuron, empty
// rows). The tables are plain arrays here. Each tick the testbench draws new
// input events and drives the neuron timers itself; after the step it checks
// every weight against its own model of the three update cases, the synaptic
// events against the connections of the spiking inputs, and the number of
// busy cycles against the documented timing.
module tb_pre_syn_processor;
  localparam int unsigned NI = 8, NP = 8, WB = 9, T = 8, DW = 4, DEPTH = 64, TW = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, step = 0, busy;
  logic [2:0] in_addr = '0;
  logic [TW-1:0] post_timers [NP];
  logic pt_rd_en, wt_en, wt_we;
  logic [2:0] pt_rd_addr;
  logic [5:0] pt_rd_data, wt_addr;
  logic [WB:0] wt_wdata, wt_rdata;
  logic syn_valid;
  logic [2:0] syn_post;
  logic signed [WB-1:0] syn_weight;
  logic upd_valid, upd_causal, upd_acausal, upd_saturated, row_valid, row_new, row_causal;

  pre_syn_processor #(.N_IN(NI), .N_POST(NP), .W_BITS(WB), .T_STDP(T), .DW_MAX(DW),
                      .WT_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  // behavioural tables
  logic [5:0]  pt [NI];
  logic [WB:0] wt [DEPTH];
  always_ff @(posedge clk) begin
    if (pt_rd_en) pt_rd_data <= pt[pt_rd_addr];
    if (wt_en) begin
      if (wt_we) wt[wt_addr] <= wt_wdata;
      else       wt_rdata    <= wt[wt_addr];
    end
  end

  // model state
  bit  conn [NI][NP];
  int  wadr [NI][NP];      // WT address of each synapse
  int  w    [NI][NP];
  int  pre_t [NI];
  int  post_t [NP];
  int  n_entries [NI], n_syn [NI];
  int  checks = 0, failures = 0;
  int  n_case_acausal = 0, n_case_both = 0, n_case_expiry = 0, n_syn_ev = 0, n_exp_syn = 0;

  function automatic int kmag(int dt);
    if (dt >= T) return 0;
    return (2 * DW * (T - dt) + T) / (2 * T);
  endfunction

  function automatic int sat(int v);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  // syn event monitor
  int syn_seen [NI][NP];
  int cur_in;
  always @(posedge clk) if (rst_n && syn_valid) begin
    n_syn_ev++;
    checks++;
    if (int'(syn_weight) != w[cur_in][syn_post] || !conn[cur_in][syn_post]) begin
      failures++;
      $display("syn event: input %0d post %0d weight %0d, expected %0d", cur_in, syn_post,
               syn_weight, w[cur_in][syn_post]);
    end
  end
  always @(posedge clk) if (rst_n && row_valid) cur_in = int'(dut.first);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    // connectivity and encoding
    a = 0;
    for (int i = 0; i < NI; i++) begin
      int j, run;
      pt[i] = 6'(a);
      n_entries[i] = 0; n_syn[i] = 0;
      for (int jj = 0; jj < NP; jj++) conn[i][jj] = (i == 0) ? 1'b1 : (i == 1) ? 1'b0 : ($urandom_range(2) != 0);
      j = 0;
      while (j < NP) begin
        if (conn[i][j]) begin
          w[i][j] = (i == 2) ? 253 : (i == 3) ? -254 : int'($urandom_range(40)) - 20;
          wadr[i][j] = a;
          wt[a] = {1'b1, WB'(w[i][j])};
          a++; j++; n_entries[i]++; n_syn[i]++;
        end else begin
          run = 0;
          while (j < NP && !conn[i][j]) begin run++; j++; end
          if (j == NP && i % 2 == 1) begin
            wt[a] = '0;                 // close the row with a zero run
          end else begin
            wt[a] = {1'b0, WB'(run)};
          end
          a++; n_entries[i]++;
        end
      end
    end
    for (int i = 0; i < NI; i++) pre_t[i] = 0;
    for (int j = 0; j < NP; j++) begin post_t[j] = 0; post_timers[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      bit  newspk [NI];
      bit  expd [NI];
      int  exp_cycles, cyc, p;
      for (int i = 0; i < NI; i++) newspk[i] = 0;
      // input events of this tick, some given twice, the last together with step
      repeat (($urandom_range(3) == 0) ? $urandom_range(2, 1) : 0) begin
        int i;
        i = $urandom_range(NI - 1);
        newspk[i] = 1;
        in_valid = 1; in_addr = 3'(i);
        @(negedge clk);
      end
      in_valid = 0;
      if ($urandom_range(7) == 0) begin
        int i;
        i = $urandom_range(NI - 1);
        newspk[i] = 1;
        in_valid = 1; in_addr = 3'(i);
      end
      // tick: decrement model timers
      for (int i = 0; i < NI; i++) begin
        expd[i] = (pre_t[i] == 1);
        if (pre_t[i] > 0) pre_t[i]--;
      end
      for (int j = 0; j < NP; j++) if (post_t[j] > 0) post_t[j]--;
      for (int j = 0; j < NP; j++) post_timers[j] = TW'(post_t[j]);
      step = 1;
      @(negedge clk);
      step = 0; in_valid = 0;
      cyc = 0;
      while (busy) begin
        @(negedge clk);
        cyc++;
      end
      // model of the sweeps
      exp_cycles = 2;
      for (int i = 0; i < NI; i++) begin
        bit c_en;
        if (!(newspk[i] || expd[i])) continue;
        c_en = expd[i] || pre_t[i] > 0;
        p = pre_t[i];
        if (newspk[i] && c_en) n_case_both++;
        else if (newspk[i]) n_case_acausal++;
        else n_case_expiry++;
        exp_cycles += 2 + 2 * n_entries[i] + n_syn[i];
        for (int j = 0; j < NP; j++) begin
          int q;
          if (!conn[i][j]) continue;
          q = post_t[j];
          if (c_en && q > p) w[i][j] = sat(w[i][j] + kmag(q - p));
          if (newspk[i] && q > 0) w[i][j] = sat(w[i][j] - kmag(T - q));
          if (newspk[i]) n_exp_syn++;
        end
        if (newspk[i]) pre_t[i] = T;
      end
      checks++;
      if (cyc != exp_cycles) begin
        failures++;
        $display("tick %0d: busy for %0d cycles, expected %0d", k, cyc, exp_cycles);
      end
      for (int i = 0; i < NI; i++)
        for (int j = 0; j < NP; j++)
          if (conn[i][j]) begin
            checks++;
            if (int'(signed'(wt[wadr[i][j]][WB-1:0])) != w[i][j] || wt[wadr[i][j]][WB] != 1'b1) begin
              failures++;
              if (failures < 10) $display("tick %0d: w[%0d][%0d] = %0d, expected %0d", k, i, j,
                                          signed'(wt[wadr[i][j]][WB-1:0]), w[i][j]);
            end
          end
      // neuron spikes of this tick load their timers after the sweeps
      for (int j = 0; j < NP; j++) if ($urandom_range(5) == 0) post_t[j] = T;
    end
    checks++;
    if (n_syn_ev != n_exp_syn) begin
      failures++;
      $display("%0d synaptic events, expected %0d", n_syn_ev, n_exp_syn);
    end
    $display("rows: acausal only %0d, causal+acausal %0d, expiry %0d", n_case_acausal, n_case_both, n_case_expiry);
    checks += 3;
    if (n_case_acausal == 0) failures++;
    if (n_case_both == 0) failures++;
    if (n_case_expiry == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
