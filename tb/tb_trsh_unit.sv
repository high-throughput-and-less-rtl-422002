// tb_trsh_unit: checks the soft threshold eta(v; tau) = sign(v) max(|v| - tau, 0)
// of the TRSH unit, one element per clock, against the formula evaluated in the
// testbench: values inside, on and outside the dead zone, both signs, tau = 0, and
// results that must saturate to 16 bits; also the nz flag and the one-clock latency
// of out_valid.
`timescale 1ns / 1ps
module tb_trsh_unit;
  import amp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [23:0] v = '0;
  data_t tau = '0, x;
  logic out_valid, nz;
  int checks = 0, failures = 0;

  trsh_unit #(.IN_W(24)) dut (.clk, .rst_n, .in_valid, .v, .tau, .out_valid, .x, .nz);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input int vv, input int tt);
    int mag = (vv < 0) ? -vv : vv;
    int d = mag - tt;
    int e = (d > 0) ? ((vv < 0) ? -d : d) : 0;
    if (e > 32767) e = 32767;
    if (e < -32768) e = -32768;
    in_valid <= 1'b1;
    v   <= 24'(vv);
    tau <= 16'(tt);
    @(posedge clk);
    in_valid <= 1'b0;
    #1;
    checks++;
    if (!out_valid || int'(x) != e || nz != (d > 0)) begin
      failures++;
      if (failures < 10)
        $display("FAIL v=%0d tau=%0d: got x=%0d nz=%0d valid=%0d, exp %0d", vv, tt, x, nz, out_valid, e);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid) failures++;
    try(100, 50); try(-100, 50); try(50, 50); try(-50, 50); try(49, 50); try(-49, 50);
    try(0, 0); try(7, 0); try(-7, 0); try(100000, 10); try(-100000, 10);
    try(-8388608, 0); try(8388607, 32767);
    repeat (5000) begin
      automatic int vv = int'($signed(24'($urandom)));
      automatic int tt = $urandom % 32768;
      if ($urandom % 2) vv = vv % 40000;
      try(vv, tt);
    end
    @(posedge clk);
    #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
