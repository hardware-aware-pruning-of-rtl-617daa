// lfsr_index_generator_tb -- compares the row and column index streams with a
// model: two 24-bit registers stepped by the recurrence of
// x^24+x^23+x^22+x^17+1 (new top bit = s0^s17^s22^s23) and scaled by
// floor(s*len/2^24). Also checks that reseeding restarts both streams and that
// the indices hold while `step` is low.
module lfsr_index_generator_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, load, step;
  logic [23:0] row_seed, col_seed;
  logic [12:0] n_in, m_out;
  logic [11:0] row_idx, col_idx;

  lfsr_index_generator dut (.clk, .rst_n, .load, .row_seed, .col_seed, .step,
                            .n_in, .m_out, .row_idx, .col_idx);

  function automatic logic [23:0] model_next(input logic [23:0] s);
    logic b;
    b = s[0] ^ s[17] ^ s[22] ^ s[23];
    return {b, s[23:1]};
  endfunction

  function automatic int scale(input logic [23:0] s, input int len);
    return int'((longint'(s) * longint'(len)) >>> 24);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_stream(input logic [23:0] rs, input logic [23:0] cs, input int n, input int m, input int steps);
    logic [23:0] r, c;
    int bad = 0;
    n_in = 13'(n); m_out = 13'(m);
    load = 1; row_seed = rs; col_seed = cs; @(posedge clk); #1; load = 0;
    r = rs; c = cs;
    step = 1;
    for (int k = 0; k < steps; k++) begin
      if (row_idx != 12'(scale(r, n)) || col_idx != 12'(scale(c, m))) bad++;
      if (int'(row_idx) >= n || int'(col_idx) >= m) bad++;
      @(posedge clk); #1;
      r = model_next(r); c = model_next(c);
    end
    step = 0;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL: %0d mismatches seeds %h/%h", bad, rs, cs); end
    // hold
    begin
      logic [11:0] rh, ch;
      rh = row_idx; ch = col_idx;
      repeat (3) @(posedge clk); #1;
      checks++;
      if (row_idx != rh || col_idx != ch) begin failures++; $display("FAIL: indices moved without step"); end
    end
  endtask

  initial begin
    rst_n = 0; load = 0; step = 0; row_seed = 0; col_seed = 0; n_in = 13'd1; m_out = 13'd1;
    @(posedge clk); #1; rst_n = 1;
    run_stream(24'hACE15B, 24'h1D0F37, 784, 300, 3000);
    run_stream(24'h0001, 24'hFFFFFF, 100, 10, 1000);
    run_stream(24'hBEEF, 24'h0F0F, 4096, 4096, 2000);
    run_stream(24'hACE15B, 24'h1D0F37, 784, 300, 500);   // reseed reproduces the stream
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
