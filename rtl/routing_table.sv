// routing_table: the routing table (RT) of the core.
//
// One entry per post-synaptic neuron holds the destination word (for example a
// core address and an input index there) that each spike of the neuron is sent
// to. The paper gives the table's role; a single destination per neuron and the
// width of the word are this design's choice.
//
// Interface: one synchronous read port (data valid the cycle after rd_en) used
// by the post-synaptic processor, one write port for configuration. No reset.
module routing_table #(
  parameter int unsigned N_POST = stdp_pkg::N_POST_DEF,
  parameter int unsigned DEST_W = stdp_pkg::DEST_W_DEF
) (
  input  logic                      clk,
  input  logic                      rd_en,
  input  logic [$clog2(N_POST)-1:0] rd_addr,
  output logic [DEST_W-1:0]         rd_data,
  input  logic                      wr_en,
  input  logic [$clog2(N_POST)-1:0] wr_addr,
  input  logic [DEST_W-1:0]         wr_data
);

  logic [DEST_W-1:0] mem [N_POST];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
