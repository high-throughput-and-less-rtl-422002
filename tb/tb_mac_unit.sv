// tb_mac_unit: drives random dot products of random lengths through the MAC unit,
// including idle cycles (en low) inside a product, and compares the accumulator with
// the sum computed in the testbench. Checks that 'first' restarts the sum and that
// the accumulator holds while en is low.
`timescale 1ns / 1ps
module tb_mac_unit;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, first = 1'b0;
  logic signed [15:0] a = '0, b = '0;
  logic signed [41:0] acc;
  int checks = 0, failures = 0;

  mac_unit dut (.clk, .rst_n, .en, .first, .a, .b, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input longint e, input string what);
    checks++;
    if (longint'(acc) != e) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", what, acc, e);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    check(0, "after reset");
    for (int t = 0; t < 200; t++) begin
      automatic longint sum = 0;
      automatic int len = 1 + ($urandom % 600);
      for (int i = 0; i < len; i++) begin
        if (($urandom % 8) == 0) begin
          en <= 1'b0;
          a  <= 16'($urandom);
          @(posedge clk);
        end
        a     <= 16'($urandom);
        b     <= 16'($urandom);
        en    <= 1'b1;
        first <= (i == 0);
        #1;
        sum += longint'(a) * longint'(b);
        @(posedge clk);
      end
      en <= 1'b0;
      @(posedge clk);
      #1 check(sum, "dot product");
      @(posedge clk);
      #1 check(sum, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
