// relu_unit_tb -- checks a = max(0, z) with the ReLU enabled and a = z with it
// disabled, for corner values and random signed 32-bit sums.
module relu_unit_tb;
  int checks = 0, failures = 0;
  logic enable; logic [31:0] z, a;

  relu_unit dut (.enable, .z, .a);

  task automatic try(input logic en, input int signed v);
    int signed expected;
    enable = en; z = 32'(v); #1;
    expected = (en && v < 0) ? 0 : v;
    checks++;
    if (a != 32'(expected)) begin
      failures++; $display("FAIL: en=%0d z=%0d a=%0d expected %0d", en, v, $signed(a), expected);
    end
  endtask

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    try(1, 0); try(1, -1); try(1, 1); try(1, 32'sh7FFF_FFFF); try(1, -32'sh7FFF_FFFF - 1);
    try(0, -1); try(0, -1000); try(0, 5);
    for (int i = 0; i < 1000; i++) try(1'($urandom), int'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
