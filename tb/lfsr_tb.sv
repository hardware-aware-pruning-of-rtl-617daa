// lfsr_tb -- self-checking test of the Fibonacci LFSR.
//
// Checks, for an 8-bit register (x^8+x^6+x^5+x^4+1) and the default 24-bit
// one (x^24+x^23+x^22+x^17+1): the state returns to the seed after exactly 2^W-1 steps and visits
// every non-zero value once (maximal length); the bit stream leaving bit 0
// obeys the linear recurrence of the characteristic polynomial; `load`
// overrides `step`, a zero seed becomes 1, and the state holds without `step`.
module lfsr_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- 8-bit instance ----
  logic rst_n, load8, step8; logic [7:0] seed8, st8;
  lfsr #(.W(8), .TAPS(8'h71), .SEED(8'h01)) dut8 (
    .clk, .rst_n, .load(load8), .seed(seed8), .step(step8), .state(st8));

  // ---- 24-bit default instance ----
  logic load24, step24; logic [23:0] seed24, st24;
  lfsr dut24 (.clk, .rst_n, .load(load24), .seed(seed24), .step(step24), .state(st24));

  bit seen8 [256];
  bit seen24 [16777216];
  bit bits8 [600];

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : run
    int n, distinct;
    rst_n = 0; load8 = 0; step8 = 0; seed8 = 0; load24 = 0; step24 = 0; seed24 = 0;
    @(posedge clk); #1; rst_n = 1;
    check(st8 == 8'h01, "reset loads SEED");

    // load a seed, then hold
    load8 = 1; seed8 = 8'hA5; @(posedge clk); #1; load8 = 0;
    check(st8 == 8'hA5, "load");
    @(posedge clk); #1;
    check(st8 == 8'hA5, "hold without step");

    // zero seed guard
    load8 = 1; seed8 = 8'h00; @(posedge clk); #1; load8 = 0;
    check(st8 == 8'h01, "zero seed replaced by 1");

    // load wins over step
    load8 = 1; step8 = 1; seed8 = 8'h3C; @(posedge clk); #1; load8 = 0; step8 = 0;
    check(st8 == 8'h3C, "load has priority over step");

    // full period of the 8-bit register; record output bits
    n = 0; distinct = 0;
    foreach (seen8[i]) seen8[i] = 0;
    step8 = 1;
    do begin
      if (!seen8[st8]) distinct++;
      seen8[st8] = 1;
      if (n < 600) bits8[n] = st8[0];
      @(posedge clk); #1; n++;
    end while (st8 != 8'h3C && n < 1000);
    step8 = 0;
    check(n == 255, $sformatf("8-bit period %0d, expected 255", n));
    check(distinct == 255, "8-bit visits all non-zero states");
    check(!seen8[0], "8-bit never reaches zero");
    // recurrence a[k+8] = a[k+6] ^ a[k+5] ^ a[k+4] ^ a[k]
    begin
      int bad = 0;
      for (int k = 0; k + 8 < 255; k++)
        if (bits8[k+8] != (bits8[k+6] ^ bits8[k+5] ^ bits8[k+4] ^ bits8[k])) bad++;
      check(bad == 0, "8-bit output obeys x^8+x^6+x^5+x^4+1");
    end

    // full period of the 24-bit default register
    load24 = 1; seed24 = 24'h5ACE1D; @(posedge clk); #1; load24 = 0;
    n = 0; distinct = 0;
    step24 = 1;
    do begin
      if (!seen24[st24]) distinct++;
      seen24[st24] = 1;
      @(posedge clk); #1; n++;
    end while (st24 != 24'h5ACE1D && n < 17000000);
    step24 = 0;
    check(n == 16777215, $sformatf("24-bit period %0d, expected 16777215", n));
    check(distinct == 16777215, "24-bit visits all non-zero states");
    check(!seen24[0], "24-bit never reaches zero");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
