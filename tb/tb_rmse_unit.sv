// tb_rmse_unit: streams residual vectors of length M = 32 into the RMSE unit and
// checks rmse = floor(sqrt(floor(sum r^2 / M))), tau = sat(lambda * rmse / 16) and
// the early-termination flag (rmse <= et) against values computed in the testbench,
// for zero, full-scale and random vectors, with et just below, at and above the
// result. Checks the 17-clock latency from calc to done and that clr restarts the sum.
`timescale 1ns / 1ps
module tb_rmse_unit;
  import amp_pkg::*;
  localparam int M = 32;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, acc_en = 1'b0, calc = 1'b0;
  data_t r_in = '0, tau;
  lambda_t lambda = '0;
  logic [15:0] et = '0, rmse;
  logic busy, done, et_hit;
  int checks = 0, failures = 0;

  rmse_unit #(.M(M)) dut (.clk, .rst_n, .clr, .acc_en, .r_in, .calc, .lambda, .et,
                          .busy, .done, .rmse, .tau, .et_hit);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string w);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", w);
    end
  endtask

  // kind: 0 random, 1 zero, 2 full scale negative, 3 small
  task automatic run(input int kind, input int lam, input int et_off);
    longint sum = 0, root, mean;
    int e_tau, lat = 0;
    int vals[M];
    for (int i = 0; i < M; i++) begin
      case (kind)
        1: vals[i] = 0;
        2: vals[i] = -32768;
        3: vals[i] = int'($signed(16'($urandom))) % 50;
        default: vals[i] = int'($signed(16'($urandom)));
      endcase
      sum += longint'(vals[i]) * vals[i];
    end
    mean = sum / M;
    root = 0;
    while ((root + 1) * (root + 1) <= mean) root++;
    e_tau = int'((root * lam) / 16);
    if (e_tau > 32767) e_tau = 32767;
    // garbage first, then clear, then the real vector
    acc_en <= 1'b1; r_in <= 16'h7fff; @(posedge clk);
    acc_en <= 1'b0; clr <= 1'b1; @(posedge clk);
    clr <= 1'b0;
    for (int i = 0; i < M; i++) begin
      acc_en <= 1'b1; r_in <= 16'(vals[i]); @(posedge clk);
    end
    acc_en <= 1'b0;
    lambda <= 8'(lam);
    et <= 16'(longint'(root) + et_off);
    calc <= 1'b1; @(posedge clk); calc <= 1'b0;
    do begin @(posedge clk); #1; lat++; end while (!done);
    check(lat == 17, $sformatf("latency %0d", lat));
    check(longint'(rmse) == root, $sformatf("rmse got %0d exp %0d", rmse, root));
    check(int'(tau) == e_tau, $sformatf("tau got %0d exp %0d", tau, e_tau));
    check(et_hit == (et_off >= 0), $sformatf("et_hit %0d off %0d", et_hit, et_off));
    check(!busy, "busy low after done");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run(1, 16, 0);
    run(2, 255, -1);
    run(3, 32, 1);
    repeat (300) run(0, $urandom % 256, int'($urandom % 3) - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
