// fc_workloads_tb -- runs the pruned fully connected layers of the evaluated
// networks through the engine at its default sizes and checks every neuron
// output against an exact model.
//
//   LeNet-300-100  784 -> 300 -> 100 -> 10   at 70% sparsity
//   LeNet-5 (FC)   400 -> 120 -> 84 -> 10    at 40% sparsity
//   VGG-16 (FC)    2048 -> 2048 -> 1000      at 95% sparsity
//
// Weights and the first input vector are random (trained weights are not
// available); what matters here is that layer sizes, weight counts and pass
// structure are those of the workloads. A layer with more stored weights
// than the 4096-entry weight memory runs as several passes: the first clears
// and reseeds, the rest continue the LFSR sequence. Between layers the
// testbench plays the host: it reads the ReLU outputs and requantises them to
// 8 bits (a >> 6, saturated at 127) as the next layer's input. Every pass's
// latency (k + 2 cycles, + m_out when clearing) is checked too.
module fc_workloads_tb;
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

  logic signed [7:0] x_vec [4096];
  longint ref_z [4096];
  logic [23:0] m_row, m_col;
  int total_passes = 0;

  function automatic logic [23:0] lfsr_next(input logic [23:0] s);
    return {s[0] ^ s[17] ^ s[22] ^ s[23], s[23:1]};
  endfunction

  function automatic int scale(input logic [23:0] s, input int len);
    return int'((longint'(s) * longint'(len)) >>> 24);
  endfunction

  function automatic logic signed [7:0] requant(input longint a);
    longint q;
    q = (a < 0) ? 0 : (a >>> 6);
    return (q > 127) ? 8'sd127 : 8'(q);
  endfunction

  task automatic expect_true(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_input(input int n);
    for (int i = 0; i < n; i++) begin
      in_we = 1; in_waddr = 12'(i); in_wdata = x_vec[i];
      @(posedge clk); #1;
    end
    in_we = 0;
  endtask

  // One layer: n inputs already in x_vec, m outputs, density = 1 - sparsity.
  task automatic run_layer(input string name, input int n, input int m, input real density,
                           input logic [23:0] rseed, input logic [23:0] cseed);
    int k_total, done_k, bad, lat_bad;
    k_total = int'(real'(n) * real'(m) * density);
    load_input(n);
    for (int c = 0; c < m; c++) ref_z[c] = 0;
    m_row = rseed; m_col = cseed;
    done_k = 0; lat_bad = 0;
    while (done_k < k_total) begin
      int k, cyc;
      bit first;
      logic signed [7:0] w;
      first = (done_k == 0);
      k = (k_total - done_k > 4096) ? 4096 : k_total - done_k;
      for (int i = 0; i < k; i++) begin
        int r, c;
        w = 8'($urandom);
        w_we = 1; w_waddr = 12'(i); w_wdata = w;
        r = scale(m_row, n); c = scale(m_col, m);
        ref_z[c] += longint'(x_vec[r]) * longint'(w);
        m_row = lfsr_next(m_row); m_col = lfsr_next(m_col);
        @(posedge clk); #1;
      end
      w_we = 0;
      n_in = 13'(n); m_out = 13'(m); k_count = 13'(k);
      clear = first; reseed = first; row_seed = rseed; col_seed = cseed;
      start = 1; @(posedge clk); #1; start = 0;
      cyc = 1;
      while (!done && cyc < 20000) begin @(posedge clk); #1; cyc++; end
      if (cyc != k + 2 + (first ? m : 0)) lat_bad++;
      done_k += k; total_passes++;
    end
    // read out: raw sums against the model, then ReLU outputs as next input
    bad = 0;
    for (int c = 0; c < m; c++) begin
      relu_en = 1'b1; out_raddr = 12'(c); @(posedge clk); #1;
      if ($signed(out_rdata) != ((ref_z[c] < 0) ? 0 : 32'(ref_z[c]))) bad++;
      relu_en = 1'b0; #1;
      if ($signed(out_rdata) != 32'(ref_z[c])) bad++;
      x_vec[c] = requant(ref_z[c]);
    end
    expect_true(bad == 0, $sformatf("%s: %0d output mismatches", name, bad));
    expect_true(lat_bad == 0, $sformatf("%s: %0d passes with wrong latency", name, lat_bad));
    $display("%s: %0dx%0d, %0d stored weights, %0d passes", name, n, m, k_total, (k_total + 4095) / 4096);
  endtask

  task automatic random_input(input int n);
    for (int i = 0; i < n; i++) x_vec[i] = 8'($urandom_range(0, 127));
  endtask

  initial begin
    rst_n = 0; n_in = 1; m_out = 1; k_count = 0; row_seed = 1; col_seed = 1;
    clear = 0; reseed = 0; relu_en = 0; start = 0; in_we = 0; w_we = 0;
    in_waddr = 0; w_waddr = 0; in_wdata = 0; w_wdata = 0; out_raddr = 0;
    repeat (2) @(posedge clk); #1; rst_n = 1;

    random_input(784);
    run_layer("LeNet-300-100 fc1", 784, 300, 0.30, 24'hACE15B, 24'h1D0F37);
    run_layer("LeNet-300-100 fc2", 300, 100, 0.30, 24'h3A7C, 24'h9E21);
    run_layer("LeNet-300-100 fc3", 100,  10, 0.30, 24'h0F51, 24'h6B2D);

    random_input(400);
    run_layer("LeNet-5 fc1", 400, 120, 0.60, 24'h1111, 24'h7777);
    run_layer("LeNet-5 fc2", 120,  84, 0.60, 24'h2222, 24'h8888);
    run_layer("LeNet-5 fc3",  84,  10, 0.60, 24'h3333, 24'h9999);

    random_input(2048);
    run_layer("VGG-16 fc2", 2048, 2048, 0.05, 24'h4444, 24'hAAAA);
    run_layer("VGG-16 fc3", 2048, 1000, 0.05, 24'h5555, 24'hBBBB);

    $display("passes=%0d bypasses=%0d", total_passes, bypass_count);
    expect_true(bypass_count > 0, "forwarding bypass happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
