// output_buffer -- one partial sum per output neuron.
//
// Because the column index of consecutive weights is pseudo-random, every
// weight needs one read of its output neuron's partial sum and one write of
// the updated sum (the extra output-buffer traffic the method pays for not
// storing indices). A DEPTH x ACC_W array with one write port and one
// synchronous read port: `rdata` is mem[raddr] one clock after `raddr`. A read
// and a write of the same entry in the same cycle return the old value; the
// MAC unit forwards the newer value itself.
//
// The read-modify-write use follows the paper; depth, width (32 bits, enough
// for 4096 products of two 8-bit numbers) and ports are this design's choice.
// Contents are not reset: the engine clears the entries a layer uses.
module output_buffer #(
  parameter int unsigned DEPTH = lfsr_prune_pkg::MEM_DEPTH,
  parameter int unsigned ACC_W = lfsr_prune_pkg::ACC_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ACC_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [ACC_W-1:0] rdata
);

  logic [ACC_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
