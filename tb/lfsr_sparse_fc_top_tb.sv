// lfsr_sparse_fc_top_tb -- end-to-end test of the layer engine at its default
// sizes (4096-entry memories, 24-bit LFSRs).
//
// The testbench keeps its own model: two 24-bit LFSRs stepped by the
// recurrence of x^24+x^23+x^22+x^17+1, indices floor(state*len/2^24), and
// the exact sums z[c] += x[r]*S[k] over the stored weights. It runs:
//   A. a 784-input, 300-output layer (the first layer of LeNet-300-100) with
//      5596 stored weights, more than the weight memory holds: pass 1 clears
//      and reseeds and uses 4096 weights, the host then reloads the weight
//      memory and pass 2 continues the LFSR sequence with 1500 more weights;
//   B. a 100-input, 10-output layer (the last layer of LeNet-300-100) at 70%
//      sparsity, 300 weights, reseeded and cleared over the results of A;
// and compares every neuron output, read with and without ReLU, with the
// model. It checks the pass latency (k_count + 2 cycles, + m_out when
// clearing) and counts each mechanism: output-buffer clearing, reseeding,
// a continued pass, the forwarding bypass, and the ReLU clamping a negative
// sum. A mechanism that never happens counts as a failure.
module lfsr_sparse_fc_top_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  logic [12:0] n_in, m_out, k_count;
  logic [23:0] row_seed, col_seed;
  logic clear, reseed, relu_en, start, busy, done;
  logic in_we, w_we;
  logic [11:0] in_waddr, w_waddr, out_raddr;
  logic [7:0] in_wdata, w_wdata;
  logic [31:0] out_rdata, bypass_count;
  logic [1:0] phase;

  lfsr_sparse_fc_top dut (
    .clk, .rst_n, .n_in, .m_out, .k_count, .row_seed, .col_seed, .clear, .reseed, .relu_en,
    .start, .busy, .done, .in_we, .in_waddr, .in_wdata, .w_we, .w_waddr, .w_wdata,
    .out_raddr, .out_rdata, .bypass_count, .phase);

  // ---- reference model ----
  logic [23:0] m_row, m_col;
  logic signed [7:0] x_mem [4096];
  longint ref_z [4096];
  int n_clear = 0, n_reseed = 0, n_continue = 0, n_relu_clamp = 0;

  function automatic logic [23:0] lfsr_next(input logic [23:0] s);
    return {s[0] ^ s[17] ^ s[22] ^ s[23], s[23:1]};
  endfunction

  function automatic int scale(input logic [23:0] s, input int len);
    return int'((longint'(s) * longint'(len)) >>> 24);
  endfunction

  task automatic expect_true(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_inputs(input int n);
    for (int i = 0; i < n; i++) begin
      x_mem[i] = 8'($urandom);
      in_we = 1; in_waddr = 12'(i); in_wdata = x_mem[i];
      @(posedge clk); #1;
    end
    in_we = 0;
  endtask

  // Loads k weights, runs one pass and updates the model.
  task automatic run_pass(input int n, input int m, input int k, input bit clr, input bit rs,
                          input logic [23:0] rseed, input logic [23:0] cseed);
    logic signed [7:0] wv [4096];
    int cyc;
    for (int i = 0; i < k; i++) begin
      wv[i] = 8'($urandom);
      w_we = 1; w_waddr = 12'(i); w_wdata = wv[i];
      @(posedge clk); #1;
    end
    w_we = 0;
    // model
    if (clr) for (int c = 0; c < m; c++) ref_z[c] = 0;
    if (rs) begin m_row = (rseed == 0) ? 24'd1 : rseed; m_col = (cseed == 0) ? 24'd1 : cseed; end
    for (int i = 0; i < k; i++) begin
      int r, c;
      r = scale(m_row, n); c = scale(m_col, m);
      ref_z[c] += longint'(x_mem[r]) * longint'(wv[i]);
      m_row = lfsr_next(m_row); m_col = lfsr_next(m_col);
    end
    // run
    n_in = 13'(n); m_out = 13'(m); k_count = 13'(k); clear = clr; reseed = rs;
    row_seed = rseed; col_seed = cseed;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin
      if (phase == 2'd1 && clr) n_clear++;
      @(posedge clk); #1; cyc++;
    end
    expect_true(cyc == k + 2 + (clr ? m : 0),
      $sformatf("pass latency %0d cycles, expected %0d", cyc, k + 2 + (clr ? m : 0)));
    if (rs) n_reseed++;
    if (!rs && !clr) n_continue++;
  endtask

  task automatic check_outputs(input int m, input string what);
    int bad_raw = 0, bad_relu = 0;
    for (int c = 0; c < m; c++) begin
      longint z;
      z = ref_z[c];
      relu_en = 0; out_raddr = 12'(c); @(posedge clk); #1;
      if ($signed(out_rdata) != 32'(z)) begin
        bad_raw++;
        if (bad_raw < 5) $display("  neuron %0d raw %0d expected %0d", c, $signed(out_rdata), z);
      end
      relu_en = 1; #1;
      if ($signed(out_rdata) != ((z < 0) ? 0 : 32'(z))) bad_relu++;
      if (z < 0 && out_rdata == 0) n_relu_clamp++;
    end
    expect_true(bad_raw == 0, $sformatf("%s: %0d raw sums differ", what, bad_raw));
    expect_true(bad_relu == 0, $sformatf("%s: %0d ReLU outputs differ", what, bad_relu));
  endtask

  initial begin
    rst_n = 0; n_in = 1; m_out = 1; k_count = 0; row_seed = 0; col_seed = 0;
    clear = 0; reseed = 0; relu_en = 0; start = 0; in_we = 0; w_we = 0;
    in_waddr = 0; w_waddr = 0; in_wdata = 0; w_wdata = 0; out_raddr = 0;
    repeat (2) @(posedge clk); #1; rst_n = 1;

    // A: 784 -> 300, two passes
    load_inputs(784);
    run_pass(784, 300, 4096, 1'b1, 1'b1, 24'hACE15B, 24'h1D0F37);
    check_outputs(300, "A after pass 1");
    run_pass(784, 300, 1500, 1'b0, 1'b0, 24'h0000, 24'h0000);
    check_outputs(300, "A after pass 2");

    // B: 100 -> 10 at 70% sparsity
    load_inputs(100);
    run_pass(100, 10, 300, 1'b1, 1'b1, 24'h5A5A, 24'h0F0F);
    check_outputs(10, "B");

    $display("mechanisms: clear_cycles=%0d reseeds=%0d continued_passes=%0d bypasses=%0d relu_clamps=%0d",
             n_clear, n_reseed, n_continue, bypass_count, n_relu_clamp);
    expect_true(n_clear > 0, "output-buffer clear happened");
    expect_true(n_reseed > 0, "reseed happened");
    expect_true(n_continue > 0, "continued pass happened");
    expect_true(bypass_count > 0, "forwarding bypass happened");
    expect_true(n_relu_clamp > 0, "ReLU clamped a negative sum");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
