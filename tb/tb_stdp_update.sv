// tb_stdp_update: exhaustive self-checking test of the synapse update.
// For every pair of timer values, both enables and a spread of old weights
// (including the two saturation limits) the output is compared with a model
// that evaluates the ramp kernel in real arithmetic:
// |dw| = floor(DW_MAX * (T - dt) / T + 0.5).
module tb_stdp_update;
  localparam int unsigned W_BITS = 9, T = 20, DW_MAX = 1, TW = 5;
  logic signed [W_BITS-1:0] w_in, w_out;
  logic [TW-1:0] pre_timer, post_timer;
  logic causal_en, acausal_en, did_causal, did_acausal, saturated;
  int checks = 0, failures = 0;

  stdp_update #(.W_BITS(W_BITS), .T_STDP(T), .DW_MAX(DW_MAX)) dut (.*);

  function automatic int kmag(int dt);
    real r;
    if (dt >= T) return 0;
    r = real'(DW_MAX) * real'(T - dt) / real'(T) + 0.5;
    return int'($floor(r));
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ws [8] = '{0, 5, -7, 255, 254, -256, -255, 100};
    for (int wi = 0; wi < 8; wi++)
      for (int p = 0; p <= T; p++)
        for (int q = 0; q <= T; q++)
          for (int en = 0; en < 4; en++) begin
            int w, e_w;
            bit e_c, e_a, e_s;
            w = ws[wi];
            w_in = W_BITS'(w); pre_timer = TW'(p); post_timer = TW'(q);
            causal_en = en[0]; acausal_en = en[1];
            #1;
            e_c = en[0] && q > p;
            e_a = en[1] && q > 0;
            e_s = 0;
            e_w = w;
            if (e_c) e_w += kmag(q - p);
            if (e_w > 255) begin e_w = 255; e_s = 1; end
            if (e_a) e_w -= kmag(T - q);
            if (e_w < -256) begin e_w = -256; e_s = 1; end
            checks++;
            if (int'(w_out) != e_w || did_causal != e_c || did_acausal != e_a || saturated != e_s) begin
              failures++;
              if (failures < 10)
                $display("w=%0d p=%0d q=%0d en=%0d: got %0d/%b%b%b expected %0d/%b%b%b",
                         w, p, q, en, w_out, did_causal, did_acausal, saturated, e_w, e_c, e_a, e_s);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
