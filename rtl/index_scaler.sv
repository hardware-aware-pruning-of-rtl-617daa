// index_scaler -- maps an LFSR value onto the range of a neuron index.
//
// An LFSR yields values 1..2^W-1, but a layer has only LEN neurons. Instead
// of discarding out-of-range values (which would cost idle cycles) the value
// is multiplied by LEN and the bits above the W low bits are kept:
//   index = floor(value * len / 2^W),  always in 0..len-1.
// The paper describes exactly this multiply-and-take-the-MSBs step; the
// rounding (truncation) and the port widths are this design's choice.
//
// The low W bits of the product are dropped by design.
//
// Interface: purely combinational. `len` may be 1..2^IDX_W.
module index_scaler #(
  parameter int unsigned W     = lfsr_prune_pkg::LFSR_W,
  parameter int unsigned IDX_W = $clog2(lfsr_prune_pkg::MEM_DEPTH)
) (
  input  logic [W-1:0]     value,
  input  logic [IDX_W:0]   len,
  output logic [IDX_W-1:0] index
);

  logic [W+IDX_W:0] product;

  always_comb begin
    product = (W+IDX_W+1)'(value) * (W+IDX_W+1)'(len);
    index   = product[W +: IDX_W];
  end

endmodule
