// tb_weight_table: self-checking test of the weight table.
// Writes random entries to random addresses, reads them back (one-cycle read
// latency) and checks that a write leaves the read register alone, as the
// read-then-write-back sweep of the pre-synaptic processor relies on.
module tb_weight_table;
  localparam int unsigned DEPTH = 4096, W_BITS = 9;
  logic clk = 0, a_en = 0, a_we = 0;
  logic [11:0] a_addr = '0;
  logic [W_BITS:0] a_wdata = '0, a_rdata;
  logic [W_BITS:0] ref_mem [DEPTH];
  bit              known [DEPTH];
  int checks = 0, failures = 0;

  weight_table #(.DEPTH(DEPTH), .W_BITS(W_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3000; k++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 12'(a); a_wdata = 10'($urandom);
      ref_mem[a] = a_wdata; known[a] = 1;
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int k = 0; k < 3000; k++) begin
      int a;
      do a = $urandom_range(DEPTH - 1); while (!known[a]);
      a_en = 1; a_we = 0; a_addr = 12'(a);
      @(negedge clk);
      checks++;
      if (a_rdata !== ref_mem[a]) begin
        failures++;
        $display("addr %0d: got %0h expected %0h", a, a_rdata, ref_mem[a]);
      end
      // write back a new value: the read register must keep the old entry
      begin
        logic [W_BITS:0] old;
        old = ref_mem[a];
        a_we = 1; a_wdata = ~old; ref_mem[a] = a_wdata;
        @(negedge clk);
        checks++;
        if (a_rdata !== old) failures++;
      end
      a_en = 0; a_we = 0;
    end
    // read every written entry once more
    for (int a = 0; a < DEPTH; a++) begin
      if (!known[a]) continue;
      a_en = 1; a_we = 0; a_addr = 12'(a);
      @(negedge clk);
      checks++;
      if (a_rdata !== ref_mem[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
