// tb_amp_m_stereo: real-time check for 16-bit stereo audio at 44.1 kS/s. amp_m at its
// default size (M = 512, IMAX = 28, ET = 0) restores four blocks back to back, left
// and right channel alternating (two blocks per channel, each with different audio
// and clicks). Every restored sample and iteration count is compared with the
// bit-accurate reference model (amp_ref_pkg); a block whose residual reaches zero
// stops before IMAX. The clocks from the first sample accepted to the last block_done,
// and the worst case of IMAX iterations in every block (block latency from the
// schedule in amp_m's header), are held against the audio time the blocks carry, at a
// 408.5 MHz clock: 2 x 512 samples per channel are 23.2 ms of audio without block
// overlap, and 11.6 ms of new audio with 50 % overlap. Both budgets must be met. The
// 44.1 kS/s rate, the stereo format and 408.5 MHz are the published figures; the
// overlap, which the published text leaves open, is this testbench's assumption.
`timescale 1ns / 1ps
module tb_amp_m_stereo;
  import amp_pkg::*;
  import amp_ref_pkg::*;

  localparam int  M       = 512;
  localparam int  IMAX    = 28;
  localparam int  LAMBDA  = 32;          // 2.0 in Q4.4
  localparam int  NBLK    = 4;           // L0, R0, L1, R1
  localparam real F_CLK   = 408.5e6;
  localparam real F_AUDIO = 44100.0;

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
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Block latency for a given iteration count (schedule in amp_m's header).
  function automatic longint block_cyc(input int iters);
    localparam int FFT_CYC = (M/4) * $clog2(M/2);
    return M + 2*M + 19 + (M+1) + (M/2 + FFT_CYC + 2) + 2*M
         + longint'(iters) * ((M+1) + (FFT_CYC + 2) + 6*M + (M+1) + (M/2 + FFT_CYC + 2)
                              + 3*M + 19);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    automatic longint t_first = 0, t_last = 0, worst = 0;
    automatic real    audio_s, budget, budget_ovl;
    in_valid = 1'b0;
    in_data  = '0;
    lambda   = 8'(LAMBDA);
    et       = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int b = 0; b < NBLK; b++) begin
      automatic ivec_t  clean, z, ref_s;
      automatic stats_t st;
      automatic int     got[$];
      make_block(M, 11 + 7 * b, 6 + b, clean, z);
      run_block(M, IMAX, LAMBDA, 0, 1'b1, z, ref_s, st);
      for (int m = 0; m < M; m++) begin
        in_valid <= 1'b1;
        in_data  <= 16'(z[m]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (b == 0 && m == 0) t_first = longint'($time / 10);
      end
      in_valid <= 1'b0;
      forever begin
        @(posedge clk);
        if (out_valid) got.push_back(int'(out_data));
        if (block_done) break;
      end
      t_last = longint'($time / 10);
      check(got.size() == M, $sformatf("block %0d sample count %0d", b, got.size()));
      for (int m = 0; m < M && m < got.size(); m++)
        check(got[m] == ref_s[m], $sformatf("block %0d s[%0d] got %0d exp %0d",
                                            b, m, got[m], ref_s[m]));
      check(int'(iter_count) == st.iters, $sformatf("block %0d iters got %0d exp %0d",
                                                    b, iter_count, st.iters));
      worst += block_cyc(IMAX);
    end
    audio_s    = real'(NBLK / 2 * M) / F_AUDIO;     // samples per channel / rate
    budget     = audio_s * F_CLK;
    budget_ovl = budget / 2.0;
    // measured clocks, and the worst case of IMAX iterations in every block
    check(real'(t_last - t_first) <= budget_ovl && t_last - t_first <= worst,
          $sformatf("%0d clocks measured, worst case %0d", t_last - t_first, worst));
    check(real'(worst) <= budget,
          $sformatf("worst case %0d clocks exceed the no-overlap budget %0.0f", worst, budget));
    check(real'(worst) <= budget_ovl,
          $sformatf("worst case %0d clocks exceed the 50%% overlap budget %0.0f", worst,
                    budget_ovl));
    $display("stereo: %0d blocks in %0d clocks (worst case %0d); budget %0.0f (no overlap), %0.0f (50%% overlap); worst case %0.2f x real time",
             NBLK, t_last - t_first, worst, budget, budget_ovl, budget / real'(worst));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
