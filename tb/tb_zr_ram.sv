// tb_zr_ram: fills both banks of the ZR-RAM with one 'we' per address (z and r
// different), reads them back with 're', checks the one-clock read latency, that
// outputs hold while re is low, that a write with we low changes nothing, and
// random interleaved reads and writes against a testbench copy of the memory.
`timescale 1ns / 1ps
module tb_zr_ram;
  import amp_pkg::*;
  localparam int D = 64;
  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [5:0] waddr = '0, raddr = '0;
  data_t zin = '0, rin = '0, zout, rout;
  int zm[D], rm[D];
  int checks = 0, failures = 0;

  zr_ram #(.DEPTH(D)) dut (.wclk(clk), .rclk(clk), .we, .waddr, .zin, .rin,
                           .re, .raddr, .zout, .rout);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int gz, input int gr, input int ez, input int er, input string w);
    checks++;
    if (gz != ez || gr != er) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got z=%0d r=%0d exp z=%0d r=%0d", w, gz, gr, ez, er);
    end
  endtask

  initial begin
    for (int i = 0; i < D; i++) begin
      zm[i] = int'($signed(16'($urandom)));
      rm[i] = int'($signed(16'($urandom)));
      we <= 1'b1; waddr <= 6'(i); zin <= 16'(zm[i]); rin <= 16'(rm[i]);
      @(posedge clk);
    end
    we <= 1'b0;
    // write with we low must not change the memory
    waddr <= 6'd5; zin <= 16'h1234; rin <= 16'h4321;
    @(posedge clk);
    for (int i = 0; i < D; i++) begin
      re <= 1'b1; raddr <= 6'(i);
      @(posedge clk);
      #1 check(int'(zout), int'(rout), zm[i], rm[i], "readback");
    end
    re <= 1'b0; raddr <= 6'd0;
    @(posedge clk);
    #1 check(int'(zout), int'(rout), zm[D-1], rm[D-1], "hold with re low");
    for (int t = 0; t < 2000; t++) begin
      automatic int wa = $urandom % D, ra = $urandom % D;
      automatic logic w = 1'($urandom);
      automatic int nz = int'($signed(16'($urandom))), nr = int'($signed(16'($urandom)));
      automatic int ez = zm[ra], er = rm[ra];
      we <= w; waddr <= 6'(wa); zin <= 16'(nz); rin <= 16'(nr);
      re <= 1'b1; raddr <= 6'(ra);
      @(posedge clk);
      if (w) begin zm[wa] = nz; rm[wa] = nr; end
      #1 check(int'(zout), int'(rout), ez, er, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
