// mac_unit_tb -- runs the MAC against a model of the output buffer (a
// synchronous array whose read, issued one cycle ahead, misses a write made in
// the same cycle). Streams of random signed operands hit few columns, so the
// same column often repeats back to back; the final sums must equal the sums
// of x*w computed directly, and the forwarding path must have been used.
// Bubbles (valid low) between operations are also exercised.
module mac_unit_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int COLS = 8;
  logic rst_n, valid; logic [7:0] x, w; logic [31:0] acc_in; logic [11:0] col;
  logic wr_en, bypass; logic [11:0] wr_addr; logic [31:0] wr_data;

  mac_unit dut (.clk, .rst_n, .valid, .x, .w, .acc_in, .col, .wr_en, .wr_addr, .wr_data, .bypass);

  logic [31:0] mem [COLS];
  longint      ref_sum [COLS];
  int          bypasses = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int next_col;
    rst_n = 0; valid = 0; x = 0; w = 0; col = 0; acc_in = 0;
    foreach (mem[i]) begin mem[i] = 0; ref_sum[i] = 0; end
    @(posedge clk); #1; rst_n = 1;
    next_col = $urandom_range(0, COLS-1);
    for (int i = 0; i < 5000; i++) begin
      int c;
      logic v;
      c = next_col;
      v = ($urandom_range(0, 9) != 0);
      // operands of this cycle; acc_in is what the buffer read one cycle ago
      // returned: the array before the write of the previous cycle.
      valid = v; col = 12'(c);
      x = 8'($urandom); w = 8'($urandom);
      if (v) ref_sum[c] += longint'($signed(x)) * longint'($signed(w));
      #1;
      if (bypass) bypasses++;
      checks++;
      if (wr_en != v || (v && wr_addr != 12'(c))) begin
        failures++; $display("FAIL: write enable/address at op %0d", i);
      end
      @(posedge clk);
      // the array read for the next op was taken at this edge, before the write
      next_col = $urandom_range(0, COLS-1);
      acc_in = mem[next_col];
      if (wr_en) mem[wr_addr[2:0]] = wr_data;
      #1;
    end
    valid = 0;
    @(posedge clk); #1;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (mem[c] != 32'(ref_sum[c])) begin
        failures++; $display("FAIL: column %0d sum %0d expected %0d", c, $signed(mem[c]), ref_sum[c]);
      end
    end
    checks++;
    if (bypasses == 0) begin failures++; $display("FAIL: forwarding never used"); end
    $display("bypasses=%0d", bypasses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
