// tb_amp_m_mac: end-to-end test of amp_m with both dictionary products formed by the MAC
// unit walking the DCT matrix (USE_FCT = 0) at M = 32, IMAX = 28; see amp_m_bench for
// what is checked. The bench reports TB_RESULT and ends the simulation; the backstop
// below only fires if the bench itself never finishes (its own watchdog is at 20 ms).
`timescale 1ns / 1ps
module tb_amp_m_mac;
  amp_m_bench #(.USE_FCT(1'b0)) bench ();

  initial begin
    #30ms;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
