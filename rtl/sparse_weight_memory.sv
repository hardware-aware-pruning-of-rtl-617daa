// sparse_weight_memory -- the non-zero weights S of a pruned layer, and nothing else.
//
// Only the M*N*(1-sp) weights that survive pruning are stored, packed in the
// order in which the two LFSRs visit their (row, column) positions: entry k
// belongs to step k of the index generator. No index vector and no column
// pointer vector exist, which is the memory saving of the method.
// One host write port; one synchronous read port addressed by the weight
// counter: `rdata` is S[raddr] one clock after `raddr`.
//
// The content and its ordering follow the paper; the depth (4096 entries,
// the largest listed bank, 4KB of 8-bit weights) and the ports are this
// design's choice. Contents are not reset.
module sparse_weight_memory #(
  parameter int unsigned DEPTH  = lfsr_prune_pkg::MEM_DEPTH,
  parameter int unsigned DATA_W = lfsr_prune_pkg::DATA_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  logic [DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
