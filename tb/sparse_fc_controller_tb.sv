// sparse_fc_controller_tb -- drives passes with and without clearing and
// reseeding and checks: clear addresses run 0..m_out-1 one per cycle; the
// weight addresses run 0..k_count-1 one per cycle with `step` = `issue`;
// `lfsr_load` appears only on a reseeding start; `done` is a single pulse
// exactly k_count+2 cycles after start (+m_out when clearing); busy covers
// the pass; a pass with k_count = 0 still completes.
module sparse_fc_controller_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, clear, reseed;
  logic [12:0] m_out, k_count;
  logic lfsr_load, step, issue, clr_we, busy, done;
  logic [11:0] w_raddr, clr_addr;
  lfsr_prune_pkg::ctrl_state_e phase;

  sparse_fc_controller dut (.clk, .rst_n, .start, .clear, .reseed, .m_out, .k_count,
    .lfsr_load, .step, .issue, .w_raddr, .clr_we, .clr_addr, .busy, .done, .phase);

  task automatic expect_true(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic pass(input int m, input int k, input bit clr, input bit rs);
    int cyc, n_clr, n_iss, n_done, n_load, bad_order, done_at;
    m_out = 13'(m); k_count = 13'(k); clear = clr; reseed = rs;
    start = 1; #1;
    n_load = lfsr_load ? 1 : 0;
    @(posedge clk); #1; start = 0;
    m_out = 13'd7; k_count = 13'd5;   // must have been latched
    cyc = 1; n_clr = 0; n_iss = 0; n_done = 0; bad_order = 0; done_at = -1;
    while (cyc < k + m + 20) begin
      if (clr_we)  begin if (int'(clr_addr) != n_clr) bad_order++; n_clr++; end
      if (issue)   begin if (int'(w_raddr) != n_iss || !step) bad_order++; n_iss++; end
      if (!issue && step) bad_order++;
      if (lfsr_load) n_load++;
      if (done) begin n_done++; done_at = cyc; if (busy) bad_order++; end
      @(posedge clk); #1; cyc++;
    end
    expect_true(n_clr == (clr ? m : 0), $sformatf("clear writes %0d", n_clr));
    expect_true(n_iss == k, $sformatf("issued %0d of %0d", n_iss, k));
    expect_true(bad_order == 0, "address order / step / busy");
    expect_true(n_done == 1, "one done pulse");
    expect_true(n_load == (rs ? 1 : 0), "lfsr_load only on reseed");
    expect_true(done_at == k + 2 + (clr ? m : 0),
      $sformatf("done after %0d cycles, expected %0d", done_at, k + 2 + (clr ? m : 0)));
  endtask

  initial begin
    rst_n = 0; start = 0; clear = 0; reseed = 0; m_out = 0; k_count = 0;
    repeat (2) @(posedge clk); #1; rst_n = 1;
    expect_true(!busy && !done, "idle after reset");
    pass(10, 300, 1, 1);
    pass(300, 4096, 1, 1);
    pass(300, 1500, 0, 0);
    pass(4096, 17, 1, 0);
    pass(5, 0, 1, 1);
    pass(5, 1, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
