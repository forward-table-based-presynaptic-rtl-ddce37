// weight_table: the run-length-encoded weight table (WT) of the core.
//
// Each entry is {flag, payload}. Flag 1: a synapse exists and the payload is its
// signed W_BITS-wide weight. Flag 0: the payload is the number of consecutive
// post-synaptic neurons the input is not connected to. This encoding is the
// paper's; the sharing of one payload field between weight and run length and
// the end-of-row meaning of a zero run are this design's choice.
//
// Interface: a single read/write port. A read (en=1, we=0) returns the entry the
// cycle after; a write (en=1, we=1) stores wdata. The pre-synaptic processor
// reads an entry and writes the updated weight back two cycles later, and the
// configuration port shares the same port when the core is idle. No reset.
module weight_table #(
  parameter int unsigned DEPTH  = stdp_pkg::WT_DEPTH_DEF,
  parameter int unsigned W_BITS = stdp_pkg::W_BITS_DEF
) (
  input  logic                     clk,
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [W_BITS:0]          a_wdata,
  output logic [W_BITS:0]          a_rdata
);

  logic [W_BITS:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
  end

endmodule
