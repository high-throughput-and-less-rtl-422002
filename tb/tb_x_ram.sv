// tb_x_ram: writes the single-port X-RAM, reads it back with the one-clock read
// latency, checks that a write leaves dout unchanged, that en low blocks both reads
// and writes, and random read/write traffic against a testbench copy of the memory.
`timescale 1ns / 1ps
module tb_x_ram;
  import amp_pkg::*;
  localparam int D = 128;
  logic clk = 1'b0, en = 1'b0, we = 1'b0;
  logic [6:0] addr = '0;
  data_t din = '0, dout;
  int mem[D];
  int checks = 0, failures = 0;

  x_ram #(.DEPTH(D)) dut (.clk, .en, .we, .addr, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int g, input int e, input string w);
    checks++;
    if (g != e) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d", w, g, e);
    end
  endtask

  initial begin
    for (int i = 0; i < D; i++) begin
      mem[i] = int'($signed(16'($urandom)));
      en <= 1'b1; we <= 1'b1; addr <= 7'(i); din <= 16'(mem[i]);
      @(posedge clk);
    end
    for (int i = 0; i < D; i++) begin
      en <= 1'b1; we <= 1'b0; addr <= 7'(i);
      @(posedge clk);
      #1 check(int'(dout), mem[i], "readback");
    end
    // write: dout keeps the last read word
    en <= 1'b1; we <= 1'b1; addr <= 7'd3; din <= 16'h0bad; mem[3] = 16'h0bad;
    @(posedge clk);
    #1 check(int'(dout), mem[D-1], "dout unchanged by write");
    // en low: no write, no read
    en <= 1'b0; we <= 1'b1; addr <= 7'd4; din <= 16'h7777;
    @(posedge clk);
    #1 check(int'(dout), mem[D-1], "dout unchanged with en low");
    for (int t = 0; t < 3000; t++) begin
      automatic int a = $urandom % D;
      automatic logic w = 1'($urandom);
      automatic int v = int'($signed(16'($urandom)));
      en <= 1'b1; we <= w; addr <= 7'(a); din <= 16'(v);
      @(posedge clk);
      if (w) mem[a] = v;
      else   #1 check(int'(dout), mem[a], "random read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
