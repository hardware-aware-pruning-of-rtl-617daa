// input_buffer -- the layer's input activation vector x.
//
// A DEPTH x DATA_W array with one write port, used by the host to load the
// input vector, and one synchronous read port addressed by the row index from
// the LFSR index generator: `rdata` is x[raddr] one clock after `raddr`.
// A write and a read of the same entry in the same cycle return the old value.
//
// The paper names the input buffer and the 8-bit datapath; the depth (4096,
// the largest listed memory bank) and the port arrangement are this design's
// choice. In silicon this array would be an SRAM macro; contents are not reset.
module input_buffer #(
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
