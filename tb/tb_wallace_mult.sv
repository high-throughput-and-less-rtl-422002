// tb_wallace_mult: checks the 16 x 16 signed Wallace-tree multiplier against the
// integer product for the corner operands (0, +-1, most positive, most negative) in
// all combinations and for 20000 random operand pairs.
`timescale 1ns / 1ps
module tb_wallace_mult;
  logic signed [15:0] a, b;
  logic signed [31:0] p;
  int checks = 0, failures = 0;

  wallace_mult dut (.a, .b, .p);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input int x, input int y);
    longint e;
    a = 16'(x);
    b = 16'(y);
    #1;
    e = longint'(a) * longint'(b);
    checks++;
    if (longint'(p) != e) begin
      failures++;
      if (failures < 10) $display("FAIL: %0d * %0d = %0d, got %0d", a, b, e, p);
    end
  endtask

  initial begin
    int corner[7] = '{0, 1, -1, 32767, -32768, 12345, -23456};
    foreach (corner[i]) foreach (corner[j]) try(corner[i], corner[j]);
    repeat (20000) try(int'($urandom), int'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
