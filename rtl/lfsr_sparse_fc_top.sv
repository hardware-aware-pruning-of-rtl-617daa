// lfsr_sparse_fc_top -- sparse fully connected layer engine with LFSR-generated indices.
//
// Computes z_c = sum over stored weights k of S_k * x_{r(k)} into output neuron
// c(k), where (r(k), c(k)) is step k of two LFSRs, scaled to n_in and m_out.
// Only the weight values live in memory; their positions are regenerated from
// the LFSR seeds that were used when the network was pruned. The neuron outputs
// are read through a ReLU.
//
// Datapath (one weight per cycle, two stages):
//   issue cycle : index generator gives row/col; input buffer is read at row,
//                 weight memory at k, output buffer at col (all synchronous)
//   next cycle  : MAC computes partial + x*w (forwarding its own previous
//                 write if the column repeats) and writes the output buffer
//
// Host interface (plain signals):
//   in_we/in_waddr/in_wdata    load the input vector
//   w_we/w_waddr/w_wdata       load the stored weights, in LFSR order
//   n_in, m_out, k_count       layer sizes and weights in this pass
//   row_seed, col_seed         LFSR seeds (loaded on start when reseed=1)
//   clear                      zero output neurons 0..m_out-1 first
//   start / busy / done        pass control, see sparse_fc_controller
//   relu_en, out_raddr -> out_rdata   neuron output, one cycle after the
//                              address, valid while the engine is idle
//   bypass_count               how many MACs used the forwarded sum (statistics)
//   phase                      controller state: 0 idle, 1 clear, 2 run, 3 drain
// The memories must not be written by the host while busy.
//
// Blocks and their connections follow the proposed architecture of the paper
// (LFSR indexing generator, input buffer, sparse weight memory, multiplier,
// accumulator, output buffer). Memory depths, widths beyond the 8-bit
// datapath, the host ports and the sequencing are this design's choices.
module lfsr_sparse_fc_top
  import lfsr_prune_pkg::*;
#(
  parameter int unsigned  IN_DEPTH  = MEM_DEPTH,
  parameter int unsigned  OUT_DEPTH = MEM_DEPTH,
  parameter int unsigned  W_DEPTH   = MEM_DEPTH,
  parameter int unsigned  DW        = DATA_W,
  parameter int unsigned  AW        = ACC_W,
  parameter int unsigned  LW        = LFSR_W,
  parameter logic [LW-1:0] TAPS     = LW'(LFSR24_TAPS),
  localparam int unsigned ROW_W     = $clog2(IN_DEPTH),
  localparam int unsigned COL_W     = $clog2(OUT_DEPTH),
  localparam int unsigned WA_W      = $clog2(W_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer configuration
  input  logic [ROW_W:0]   n_in,
  input  logic [COL_W:0]   m_out,
  input  logic [WA_W:0]    k_count,
  input  logic [LW-1:0]    row_seed,
  input  logic [LW-1:0]    col_seed,
  input  logic             clear,
  input  logic             reseed,
  input  logic             relu_en,
  // pass control
  input  logic             start,
  output logic             busy,
  output logic             done,
  // input vector load
  input  logic             in_we,
  input  logic [ROW_W-1:0] in_waddr,
  input  logic [DW-1:0]    in_wdata,
  // weight load
  input  logic             w_we,
  input  logic [WA_W-1:0]  w_waddr,
  input  logic [DW-1:0]    w_wdata,
  // neuron output
  input  logic [COL_W-1:0] out_raddr,
  output logic [AW-1:0]    out_rdata,
  output logic [31:0]      bypass_count,
  output logic [1:0]       phase
);

  // ---- controller ----
  logic              lfsr_load, step, issue, clr_we;
  logic [WA_W-1:0]   w_raddr;
  logic [COL_W-1:0]  clr_addr;
  ctrl_state_e       ctrl_phase;

  sparse_fc_controller #(.COL_W(COL_W), .WADDR_W(WA_W)) u_ctrl (
    .clk, .rst_n, .start, .clear, .reseed, .m_out, .k_count,
    .lfsr_load, .step, .issue, .w_raddr, .clr_we, .clr_addr,
    .busy, .done, .phase(ctrl_phase)
  );

  assign phase = ctrl_phase;

  // ---- LFSR indexing generator ----
  logic [ROW_W-1:0] row_idx;
  logic [COL_W-1:0] col_idx;

  lfsr_index_generator #(.W(LW), .TAPS(TAPS), .ROW_W(ROW_W), .COL_W(COL_W)) u_idx (
    .clk, .rst_n, .load(lfsr_load), .row_seed, .col_seed, .step,
    .n_in, .m_out, .row_idx, .col_idx
  );

  // ---- memories ----
  logic [DW-1:0] x_data, w_data;
  logic [AW-1:0] acc_rdata;
  logic          ob_we;
  logic [COL_W-1:0] ob_waddr, ob_raddr;
  logic [AW-1:0] ob_wdata;

  input_buffer #(.DEPTH(IN_DEPTH), .DATA_W(DW)) u_in (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(row_idx), .rdata(x_data)
  );

  sparse_weight_memory #(.DEPTH(W_DEPTH), .DATA_W(DW)) u_w (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .raddr(w_raddr), .rdata(w_data)
  );

  assign ob_raddr = busy ? col_idx : out_raddr;

  output_buffer #(.DEPTH(OUT_DEPTH), .ACC_W(AW)) u_out (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .raddr(ob_raddr), .rdata(acc_rdata)
  );

  // ---- issue -> execute pipeline register ----
  logic             exe_valid;
  logic [COL_W-1:0] exe_col;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      exe_valid <= 1'b0;
      exe_col   <= '0;
    end else begin
      exe_valid <= issue;
      exe_col   <= col_idx;
    end
  end

  // ---- multiply-accumulate ----
  logic             mac_we, mac_bypass;
  logic [COL_W-1:0] mac_waddr;
  logic [AW-1:0]    mac_wdata;

  mac_unit #(.DATA_W(DW), .ACC_W(AW), .IDX_W(COL_W)) u_mac (
    .clk, .rst_n, .valid(exe_valid), .x(x_data), .w(w_data), .acc_in(acc_rdata),
    .col(exe_col), .wr_en(mac_we), .wr_addr(mac_waddr), .wr_data(mac_wdata),
    .bypass(mac_bypass)
  );

  // output-buffer write port: clearing zeros or MAC write-back (never both)
  always_comb begin
    if (clr_we) begin
      ob_we    = 1'b1;
      ob_waddr = clr_addr;
      ob_wdata = '0;
    end else begin
      ob_we    = mac_we;
      ob_waddr = mac_waddr;
      ob_wdata = mac_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)          bypass_count <= '0;
    else if (mac_bypass) bypass_count <= bypass_count + 1'b1;
  end

  // ---- neuron output ----
  relu_unit #(.ACC_W(AW)) u_relu (.enable(relu_en), .z(acc_rdata), .a(out_rdata));

  // ---- interface rules ----
  a_cfg_sizes: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> (n_in != '0) && (n_in <= (ROW_W+1)'(IN_DEPTH)) &&
                         (m_out != '0) && (m_out <= (COL_W+1)'(OUT_DEPTH)) &&
                         (k_count <= (WA_W+1)'(W_DEPTH)));
  a_no_clear_mac_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(clr_we && mac_we));
  a_no_host_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(in_we || w_we));

endmodule
