// tb_amp_m_full: one complete block restoration with amp_m at its default size
// (M = 512 samples, up to IMAX = 28 iterations, both dictionary products through
// the FFT-RAM fast DCT and inverse DCT). A block of DCT-sparse audio with clicks is restored with ET = 0; every restored sample, the iteration count and the
// final RMSE are compared with the bit-accurate reference model (amp_ref_pkg), the
// block latency with the schedule in amp_m's header, and the restored block must be
// closer to the clean audio than the corrupted input.
`timescale 1ns / 1ps
module tb_amp_m_full;
  import amp_pkg::*;
  import amp_ref_pkg::*;

  localparam int M        = 512;
  localparam int IMAX     = 28;
  localparam int LAMBDA   = 32;   // 2.0 in Q4.4
  localparam int RMSE_CYC = 19;
  localparam int FFT_CYC  = (M/4) * $clog2(M/2);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  lambda_t lambda;
  logic [15:0] et;
  logic in_valid;
  data_t in_data;
  logic in_ready, out_valid, out_last, busy, block_done, early_stop;
  data_t out_data;
  logic [4:0] iter_count;
  logic [15:0] rmse;

  int checks = 0, failures = 0;

  amp_m dut (
    .clk, .rst_n, .lambda, .et, .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_last, .busy, .block_done,
    .iter_count, .rmse, .early_stop
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    ivec_t clean, z, ref_s;
    stats_t st;
    int got[$];
    longint t0, t1, expect_cyc, err_in = 0, err_out = 0;
    in_valid = 1'b0;
    in_data  = '0;
    lambda   = 8'(LAMBDA);
    et       = '0;
    make_block(M, 3, 12, clean, z);
    run_block(M, IMAX, LAMBDA, 0, 1'b1, z, ref_s, st);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int m = 0; m < M; m++) begin
      in_valid <= 1'b1;
      in_data  <= 16'(z[m]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (m == 0) t0 = longint'($time / 10);
    end
    in_valid <= 1'b0;
    forever begin
      @(posedge clk);
      if (out_valid) got.push_back(int'(out_data));
      if (block_done) break;
    end
    t1 = longint'($time / 10);
    check(got.size() == M, $sformatf("sample count %0d", got.size()));
    for (int m = 0; m < M && m < got.size(); m++)
      check(got[m] == ref_s[m], $sformatf("s[%0d] got %0d exp %0d", m, got[m], ref_s[m]));
    check(int'(iter_count) == st.iters, $sformatf("iters got %0d exp %0d", iter_count, st.iters));
    check(int'(rmse) == st.rmse, $sformatf("rmse got %0d exp %0d", rmse, st.rmse));
    expect_cyc = M + 2*M + RMSE_CYC + (M+1) + (M/2 + FFT_CYC + 2) + 2*M
               + longint'(st.iters) * ((M+1) + (FFT_CYC + 2) + 6*M + (M+1) + (M/2 + FFT_CYC + 2)
                                       + 3*M + RMSE_CYC);
    check(t1 - t0 == expect_cyc, $sformatf("latency got %0d exp %0d", t1 - t0, expect_cyc));
    for (int m = 0; m < M; m++) begin
      err_in  += longint'(z[m] - clean[m]) ** 2;
      err_out += longint'(ref_s[m] - clean[m]) ** 2;
    end
    check(err_out < err_in, "restoration reduces error");
    $display("iters=%0d rmse=%0d err_in=%0d err_out=%0d cycles=%0d",
             st.iters, st.rmse, err_in, err_out, t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
