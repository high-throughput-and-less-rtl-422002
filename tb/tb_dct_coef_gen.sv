// tb_dct_coef_gen: walks every row and every column of the M = 32 DCT matrix with the
// coefficient generator and compares each entry with
// round(32767 cos(pi (2m+1) k / 2M)) (round(32767 / sqrt 2) for k = 0), computed in
// the testbench directly from m and k; also checks that coef holds when step is low.
`timescale 1ns / 1ps
module tb_dct_coef_gen;
  import amp_pkg::*;
  localparam int M = 32;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, col_mode = 1'b0, step = 1'b0;
  logic [4:0] idx = '0;
  coef_t coef;
  int checks = 0, failures = 0;

  dct_coef_gen #(.M(M)) dut (.clk, .rst_n, .start, .col_mode, .idx, .step, .coef);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_c(input int m, input int k);
    if (k == 0) return $rtoi($floor(32767.0 / $sqrt(2.0) + 0.5));
    return $rtoi($floor(32767.0 * $cos(3.14159265358979323846 * (2*m + 1) * k / (2.0 * M)) + 0.5));
  endfunction

  task automatic check(input int m, input int k);
    checks++;
    if (int'(coef) != expect_c(m, k)) begin
      failures++;
      if (failures < 10) $display("FAIL m=%0d k=%0d got %0d exp %0d", m, k, coef, expect_c(m, k));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int mode = 0; mode < 2; mode++) begin
      for (int f = 0; f < M; f++) begin
        start <= 1'b1; col_mode <= 1'(mode); idx <= 5'(f);
        @(posedge clk);
        start <= 1'b0;
        for (int e = 0; e < M; e++) begin
          step <= 1'b0;
          if (e == 5) begin
            @(posedge clk);          // one idle clock: coef must hold
          end
          #1;
          if (mode == 0) check(f, e); else check(e, f);
          step <= 1'b1;
          @(posedge clk);
        end
        step <= 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
