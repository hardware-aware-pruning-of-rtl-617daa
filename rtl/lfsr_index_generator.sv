// lfsr_index_generator -- row and column indices of the stored weights.
//
// Two LFSRs of the same polynomial but different seeds step in lockstep, one
// step per stored weight. The row LFSR, scaled to the number of input neurons
// n_in, addresses the input buffer; the column LFSR, scaled to the number of
// output neurons m_out, addresses the output buffer. Step k of the pair is the
// position (row, column) of the k-th stored non-zero weight, so no index or
// pointer memory is needed. The same seeds used when the network was pruned
// reproduce the same positions at inference time.
//
// Interface and timing: `load` (re)seeds both LFSRs; `step` advances both.
// `row_idx`/`col_idx` are combinational from the current LFSR states, i.e.
// they are the indices of the weight that is issued in the cycle `step` is
// high. ROW_W/COL_W are the address widths of the input and output
// buffers; n_in and m_out may be 1..2^ROW_W and 1..2^COL_W. After `load` the first pair of indices is the pair of scaled seeds.
//
// Follows the paper: two LFSRs, separate row/column sequences, different seeds,
// multiply-by-length and MSB selection. Own choice: equal polynomials.
module lfsr_index_generator #(
  parameter int unsigned  W     = lfsr_prune_pkg::LFSR_W,
  parameter logic [W-1:0] TAPS  = W'(lfsr_prune_pkg::LFSR24_TAPS),
  parameter int unsigned  ROW_W = $clog2(lfsr_prune_pkg::MEM_DEPTH),
  parameter int unsigned  COL_W = $clog2(lfsr_prune_pkg::MEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [W-1:0]     row_seed,
  input  logic [W-1:0]     col_seed,
  input  logic             step,
  input  logic [ROW_W:0]   n_in,
  input  logic [COL_W:0]   m_out,
  output logic [ROW_W-1:0] row_idx,
  output logic [COL_W-1:0] col_idx
);

  logic [W-1:0] row_state, col_state;

  lfsr #(.W(W), .TAPS(TAPS), .SEED(W'(1))) u_row_lfsr (
    .clk, .rst_n, .load, .seed(row_seed), .step, .state(row_state)
  );

  lfsr #(.W(W), .TAPS(TAPS), .SEED(W'(2))) u_col_lfsr (
    .clk, .rst_n, .load, .seed(col_seed), .step, .state(col_state)
  );

  index_scaler #(.W(W), .IDX_W(ROW_W)) u_row_scale (
    .value(row_state), .len(n_in), .index(row_idx)
  );

  index_scaler #(.W(W), .IDX_W(COL_W)) u_col_scale (
    .value(col_state), .len(m_out), .index(col_idx)
  );

endmodule
