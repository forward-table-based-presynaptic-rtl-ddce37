// pointer_table: the pointer table (PT) of the index-based core.
//
// One entry per core input holds the address of the first weight-table entry of
// that input's row, so rows of different lengths can be packed back to back in
// the weight table. The table itself follows the paper; widths and timing are
// this design's choice.
//
// Interface: one synchronous read port (data valid the cycle after rd_en) used
// by the pre-synaptic processor, and one write port used for configuration.
// The array has no reset; it is loaded before use.
module pointer_table #(
  parameter int unsigned N_IN  = stdp_pkg::N_IN_DEF,
  parameter int unsigned PTR_W = $clog2(stdp_pkg::WT_DEPTH_DEF)
) (
  input  logic                    clk,
  input  logic                    rd_en,
  input  logic [$clog2(N_IN)-1:0] rd_addr,
  output logic [PTR_W-1:0]        rd_data,
  input  logic                    wr_en,
  input  logic [$clog2(N_IN)-1:0] wr_addr,
  input  logic [PTR_W-1:0]        wr_data
);

  logic [PTR_W-1:0] mem [N_IN];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
