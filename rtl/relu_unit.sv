// relu_unit -- activation on the neuron-output path.
//
// a = max(0, z) for a signed ACC_W-bit partial sum z when `enable` is high;
// with `enable` low the raw sum passes (for a final layer read as logits).
// Combinational. The ReLU is the paper's activation; placing it on the
// read-out path of the output buffer and the bypass enable are this design's
// choices.
module relu_unit #(
  parameter int unsigned ACC_W = lfsr_prune_pkg::ACC_W
) (
  input  logic             enable,
  input  logic [ACC_W-1:0] z,
  output logic [ACC_W-1:0] a
);

  always_comb begin
    if (enable && z[ACC_W-1]) a = '0;
    else                      a = z;
  end

endmodule
