// tb_fft_ram: loads length-M blocks (M = 32) into the FFT-RAM, runs the forward
// (FCT) and the inverse (IFCT) transform, and compares every output, (A^T r)[k] or
// (A a)[m], with the orthonormal DCT computed in double precision in the testbench.
// It allows 3 LSB plus 1/4096 of the value, since the Q1.15 twiddles are scaled by
// 32767 rather than 32768. Forward blocks: a single impulse, constants, pure DCT basis
// vectors and random data; inverse blocks: impulses, a constant and random
// coefficients. Also checks the busy time of each direction.
`timescale 1ns / 1ps
module tb_fft_ram;
  import amp_pkg::*;
  localparam int M = 32;
  localparam int TOL = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic mode = 1'b0;
  logic wr_en = 1'b0, start = 1'b0, rd_en = 1'b0, busy, done;
  logic [4:0] wr_addr = '0, rd_addr = '0;
  data_t wr_data = '0, rd_data;
  int checks = 0, failures = 0, worst = 0;

  fft_ram #(.M(M)) dut (.clk, .rst_n, .mode, .wr_en, .wr_addr, .wr_data, .start, .busy, .done,
                        .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real dct_ref(input int x[M], input int k);
    real s = 0.0;
    for (int n = 0; n < M; n++) s += x[n] * $cos(3.14159265358979323846 * (2*n + 1) * k / (2.0 * M));
    return s * ((k == 0) ? $sqrt(1.0 / M) : $sqrt(2.0 / M));
  endfunction

  // (A a)[m] = sum_k s_k a[k] cos(pi (2m+1) k / 2M)
  function automatic real idct_ref(input int a[M], input int m);
    real s = 0.0;
    for (int k = 0; k < M; k++)
      s += a[k] * $cos(3.14159265358979323846 * (2*m + 1) * k / (2.0 * M))
           * ((k == 0) ? $sqrt(1.0 / M) : $sqrt(2.0 / M));
    return s;
  endfunction

  task automatic run(input int x[M], input bit inv = 1'b0);
    int cyc = 0;
    mode <= inv;
    for (int n = 0; n < M; n++) begin
      wr_en <= 1'b1; wr_addr <= 5'(n); wr_data <= 16'(x[n]);
      @(posedge clk);
    end
    wr_en <= 1'b0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    do begin @(posedge clk); #1; cyc++; end while (!done);
    checks++;
    if (cyc != (M / 4) * $clog2(M / 2) + (inv ? M / 2 : 0)) begin
      failures++;
      $display("FAIL: FFT took %0d clocks", cyc);
    end
    for (int k = 0; k < M; k++) begin
      real e;
      int ei, d;
      rd_en <= 1'b1; rd_addr <= 5'(k);
      @(posedge clk);
      #1;
      e  = inv ? idct_ref(x, k) : dct_ref(x, k);
      if (e > 32767.0) e = 32767.0;
      if (e < -32768.0) e = -32768.0;
      ei = $rtoi(e);
      d  = int'(rd_data) - ei;
      if (d < 0) d = -d;
      if (d > worst) worst = d;
      checks++;
      if (d > TOL + ((ei < 0) ? -ei : ei) / 4096) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d got %0d exp %f x0=%0d x1=%0d", k, rd_data, e, x[0], x[1]);
      end
    end
    rd_en <= 1'b0;
  endtask

  initial begin
    int x[M];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    foreach (x[i]) x[i] = 0;
    x[3] = 20000;
    run(x);
    foreach (x[i]) x[i] = 5000;
    run(x);
    foreach (x[i]) x[i] = -32768;
    run(x);
    for (int k = 0; k < M; k += 5) begin
      foreach (x[i]) x[i] = $rtoi(4000.0 * $cos(3.14159265358979323846 * (2*i + 1) * k / (2.0 * M)));
      run(x);
    end
    repeat (30) begin
      foreach (x[i]) x[i] = int'($signed(16'($urandom))) / int'(1 + ($urandom % 4));
      run(x);
    end
    // inverse transform: impulses, a constant, random coefficients
    for (int k = 0; k < M; k += 7) begin
      foreach (x[i]) x[i] = 0;
      x[k] = (k % 2) ? -20000 : 20000;
      run(x, 1'b1);
    end
    foreach (x[i]) x[i] = 3000;
    run(x, 1'b1);
    repeat (30) begin
      foreach (x[i]) x[i] = int'($signed(16'($urandom))) / int'(4 + ($urandom % 4));
      run(x, 1'b1);
    end
    $display("worst error %0d LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
