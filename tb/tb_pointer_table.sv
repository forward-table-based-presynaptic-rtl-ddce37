// tb_pointer_table: self-checking test of the pointer table.
// Fills every entry with a random pointer through the write port, then reads
// them all back in random order and checks the one-cycle read latency and the
// data against a copy kept by the testbench.
module tb_pointer_table;
  localparam int unsigned N_IN = 64, PTR_W = 12;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [5:0] rd_addr = '0, wr_addr = '0;
  logic [PTR_W-1:0] rd_data, wr_data = '0;
  logic [PTR_W-1:0] ref_mem [N_IN];
  int checks = 0, failures = 0;

  pointer_table #(.N_IN(N_IN), .PTR_W(PTR_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_data = PTR_W'($urandom); ref_mem[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(N_IN - 1);
      rd_en = 1; rd_addr = 6'(a);
      // a write to another entry in the same cycle must not disturb the read
      wr_en = 1; wr_addr = 6'((a + 1) % N_IN); wr_data = PTR_W'($urandom);
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[a]) begin
        failures++;
        $display("entry %0d: got %0h expected %0h", a, rd_data, ref_mem[a]);
      end
      ref_mem[(a + 1) % N_IN] = wr_data;
      rd_en = 0; wr_en = 0;
      @(negedge clk);
      checks++;
      if (rd_data !== ref_mem[a]) begin   // output holds without rd_en
        failures++;
        $display("entry %0d: output not held", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
