// amp_m_bench: end-to-end test of the AMP-M engine at a reduced block length
// (M = 32, IMAX = 28), for either way of forming the dictionary products (USE_FCT = 1:
// FFT-RAM fast DCT and inverse DCT; USE_FCT = 0: the MAC walking the DCT matrix);
// tb_amp_m and tb_amp_m_mac instantiate it. Three blocks of DCT-sparse audio with
// clicks are restored back to back:
//   1. ET = 0: runs the full IMAX iterations;
//   2. ET set from block 1's RMSE trace: stops early;
//   3. ET above the initial RMSE: stops before the first iteration.
// Every restored sample, the iteration count, the final RMSE and the early-stop flag
// are compared with the bit-accurate reference model (amp_ref_pkg), the block latency
// with the schedule in amp_m's header, and the restoration is required to be closer
// to the clean audio than the corrupted input. Mechanisms counted: IMAX stop, early
// stop, elements zeroed and kept by the threshold, non-zero Onsager term.
`timescale 1ns / 1ps
module amp_m_bench #(
  parameter bit USE_FCT = 1'b1
);
  import amp_pkg::*;
  import amp_ref_pkg::*;

  localparam int M    = 32;
  localparam int IMAX = 28;
  localparam int LAMBDA = 32;   // 2.0 in Q4.4
  localparam int RMSE_CYC = 19;
  localparam int ITER_CYC_MAC = M*(M+3) + 3*M + M*(M+2) + RMSE_CYC;
  localparam int FFT_CYC = (M/4) * $clog2(M/2);
  localparam int ITER_CYC_FCT = (M+1) + (FFT_CYC + 2) + 6*M + (M+1) + (M/2 + FFT_CYC + 2) + 3*M
                              + RMSE_CYC;
  localparam int OUT_CYC_MAC = M*(M+2);
  localparam int OUT_CYC_FCT = (M+1) + (M/2 + FFT_CYC + 2) + 2*M;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  lambda_t lambda;
  logic [15:0] et;
  logic in_valid;
  data_t in_data;
  logic in_ready, out_valid, out_last, busy, block_done, early_stop;
  data_t out_data;
  logic [$clog2(IMAX+1)-1:0] iter_count;
  logic [15:0] rmse;

  int checks = 0, failures = 0;
  int n_imax_stop = 0, n_early_stop = 0, n_zeroed = 0, n_kept = 0, n_onsager = 0;

  amp_m #(.M(M), .IMAX(IMAX), .USE_FCT(USE_FCT)) dut (
    .clk, .rst_n, .lambda, .et, .in_valid, .in_data, .in_ready,
    .out_valid, .out_data, .out_last, .busy, .block_done,
    .iter_count, .rmse, .early_stop
  );

  always #5 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input ivec_t clean, input ivec_t z, input int et_val,
                     output stats_t st);
    ivec_t ref_s;
    int    got[$];
    longint t0, t1, expect_cyc;
    longint err_in = 0, err_out = 0;
    run_block(M, IMAX, LAMBDA, et_val, USE_FCT, z, ref_s, st);
    et = 16'(et_val);
    lambda = 8'(LAMBDA);
    for (int m = 0; m < M; m++) begin
      in_valid <= 1'b1;
      in_data  <= 16'(z[m]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (m == 0) t0 = $time / 10;
    end
    in_valid <= 1'b0;
    forever begin
      @(posedge clk);
      if (out_valid) got.push_back(int'(out_data));
      if (block_done) break;
    end
    t1 = $time / 10;
    check(got.size() == M, $sformatf("sample count %0d", got.size()));
    for (int m = 0; m < M && m < got.size(); m++)
      check(got[m] == ref_s[m], $sformatf("s[%0d] got %0d exp %0d", m, got[m], ref_s[m]));
    check(int'(iter_count) == st.iters, $sformatf("iters got %0d exp %0d", iter_count, st.iters));
    check(int'(rmse) == st.rmse, $sformatf("rmse got %0d exp %0d", rmse, st.rmse));
    check(early_stop == st.early, "early_stop flag");
    expect_cyc = M + 2*M + RMSE_CYC + (USE_FCT ? OUT_CYC_FCT : OUT_CYC_MAC)
               + longint'(st.iters) * (USE_FCT ? ITER_CYC_FCT : ITER_CYC_MAC);
    check(t1 - t0 == expect_cyc, $sformatf("latency got %0d exp %0d", t1 - t0, expect_cyc));
    for (int m = 0; m < M; m++) begin
      err_in  += longint'(z[m] - clean[m]) ** 2;
      err_out += longint'(ref_s[m] - clean[m]) ** 2;
    end
    foreach (st.rmse_trace[i]) $write("%0d ", st.rmse_trace[i]);
    $display("");
    $display("block: iters=%0d rmse=%0d early=%0d err_in=%0d err_out=%0d nnz_max=%0d",
             st.iters, st.rmse, st.early, err_in, err_out, st.max_nnz);
    if (st.iters > 0) check(err_out < err_in, "restoration reduces error");
    if (st.iters == IMAX && !st.early) n_imax_stop++;
    if (st.early) n_early_stop++;
    n_zeroed += st.zeroed;
    n_kept   += st.kept;
    if (st.max_nnz > 0) n_onsager++;
  endtask

  initial begin
    ivec_t clean, z;
    stats_t st;
    in_valid = 1'b0;
    in_data  = '0;
    lambda   = '0;
    et       = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    make_block(M, 1, 3, clean, z);
    run(clean, z, 0, st);
    begin
      int et_mid;
      et_mid = st.rmse_trace[3];
      make_block(M, 1, 3, clean, z);
      run(clean, z, et_mid, st);
      check(st.iters == 3, $sformatf("early stop after 3 iterations, got %0d", st.iters));
    end
    make_block(M, 5, 2, clean, z);
    run(clean, z, 30000, st);
    check(st.iters == 0, "stop before the first iteration");

    check(n_imax_stop > 0, "IMAX stop happened");
    check(n_early_stop > 0, "early stop happened");
    check(n_zeroed > 0, "threshold zeroed elements");
    check(n_kept > 0, "threshold kept elements");
    check(n_onsager > 0, "Onsager term active");
    $display("mechanisms: imax_stop=%0d early_stop=%0d zeroed=%0d kept=%0d onsager=%0d",
             n_imax_stop, n_early_stop, n_zeroed, n_kept, n_onsager);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
