// mac_unit -- multiply x_i by S_ij and accumulate into the output neuron.
//
// One multiply-accumulate per cycle. In the cycle `valid` is high the unit
// receives the input activation x, the weight w and the partial sum acc_in
// that the output buffer returned for column `col`; it drives the write-back
//   wr_data = acc + x*w  to  wr_addr = col   (wr_en = valid)
// in the same cycle. x and w are signed two's complement; the 2*DATA_W-bit
// product is sign-extended to ACC_W bits.
//
// Forwarding: the output buffer is read one cycle before the operands arrive,
// and a write becomes visible to reads issued after it. When two consecutive
// weights belong to the same output neuron, the partial sum read for the
// second one misses the first one's write. The unit keeps its last write
// (column and value) and uses it instead of acc_in in that case; `bypass`
// shows that this happened. Older writes are always visible, so one register
// is enough.
//
// wr_en and wr_addr are `valid` and `col` passed on, so that the output
// buffer's write port is driven from one place.
//
// The multiplier and adder come from the paper's datapath; the number format
// and the forwarding register are this design's choices.
module mac_unit #(
  parameter int unsigned DATA_W = lfsr_prune_pkg::DATA_W,
  parameter int unsigned ACC_W  = lfsr_prune_pkg::ACC_W,
  parameter int unsigned IDX_W  = $clog2(lfsr_prune_pkg::MEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  input  logic [DATA_W-1:0] x,
  input  logic [DATA_W-1:0] w,
  input  logic [ACC_W-1:0]  acc_in,
  input  logic [IDX_W-1:0]  col,
  output logic              wr_en,
  output logic [IDX_W-1:0]  wr_addr,
  output logic [ACC_W-1:0]  wr_data,
  output logic              bypass
);

  logic                    last_valid;
  logic [IDX_W-1:0]        last_col;
  logic [ACC_W-1:0]        last_sum;
  logic signed [2*DATA_W-1:0] product;
  logic [ACC_W-1:0]        base;

  always_comb begin
    product = $signed(x) * $signed(w);
    bypass  = valid && last_valid && (last_col == col);
    base    = bypass ? last_sum : acc_in;
    wr_data = base + ACC_W'(product);
    wr_en   = valid;
    wr_addr = col;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_valid <= 1'b0;
      last_col   <= '0;
      last_sum   <= '0;
    end else begin
      last_valid <= valid;
      last_col   <= col;
      last_sum   <= wr_data;
    end
  end

endmodule
