// sparse_weight_memory_tb -- fills every entry with a known pattern, reads it back and
// checks the one-cycle read latency, that reads in the same cycle as a write
// to the same entry return the old value, and random write/read traffic
// against a model array.
module sparse_weight_memory_tb;
  localparam int DEPTH = 4096;
  localparam int DW = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we; logic [11:0] waddr, raddr; logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] model [DEPTH];

  sparse_weight_memory dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  function automatic logic [DW-1:0] pattern(input int a);
    return DW'(a * 32'h9E37_79B1 + 32'h1234_5677);
  endfunction

  task automatic expect_eq(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL: %s got %h expected %h", what, got, exp); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 12'(a); wdata = pattern(a); model[a] = pattern(a);
      @(posedge clk); #1;
    end
    we = 0;
    // read back, checking the value appears one cycle after the address
    for (int a = 0; a < DEPTH; a += 7) begin
      raddr = 12'(a); @(posedge clk); #1;
      expect_eq(rdata, model[a], $sformatf("read %0d", a));
      raddr = 12'((a + 1) % DEPTH); #1;
      expect_eq(rdata, model[a], "data holds until the next clock");
    end
    // read-before-write on the same entry
    raddr = 12'd100; we = 1; waddr = 12'd100; wdata = ~pattern(100);
    @(posedge clk); #1; we = 0;
    expect_eq(rdata, model[100], "same-cycle read returns old value");
    model[100] = ~pattern(100);
    @(posedge clk); #1;
    expect_eq(rdata, model[100], "new value visible next cycle");
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      int ra, wa;
      logic [DW-1:0] exp;
      ra = $urandom_range(0, DEPTH-1); wa = ($urandom_range(0, 3) == 0) ? ra : $urandom_range(0, DEPTH-1);
      raddr = 12'(ra); we = ($urandom_range(0, 1) == 1); waddr = 12'(wa); wdata = DW'($urandom);
      exp = model[ra];
      @(posedge clk); #1;
      if (we) model[wa] = wdata;
      we = 0;
      expect_eq(rdata, exp, "random read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
