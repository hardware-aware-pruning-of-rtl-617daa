// index_scaler_tb -- checks index = floor(value*len/2^24) against integer
// arithmetic for corner values and random values, and that every index is
// below len.
module index_scaler_tb;
  int checks = 0, failures = 0;
  logic [23:0] value; logic [12:0] len; logic [11:0] index;

  index_scaler dut (.value, .len, .index);

  task automatic try(input logic [23:0] v, input logic [12:0] l);
    longint unsigned expected;
    value = v; len = l; #1;
    expected = (longint'(v) * longint'(l)) >> 24;
    checks++;
    if (index != expected[11:0] || index >= l) begin
      failures++;
      $display("FAIL: value=%0d len=%0d index=%0d expected %0d", v, l, index, expected);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(24'd1, 13'd784);
    try(24'hFFFFFF, 13'd784);
    try(24'hFFFFFF, 13'd4096);
    try(24'h8000, 13'd300);
    try(24'hFFFFFF, 13'd1);
    try(24'h1234, 13'd10);
    for (int i = 0; i < 2000; i++)
      try(24'($urandom_range(1, 24'hFFFFFF)), 13'($urandom_range(1, 4096)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
