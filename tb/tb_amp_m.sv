// tb_amp_m: end-to-end test of amp_m in its default configuration (D^T r and D x through
// the FFT-RAM fast DCT and inverse DCT) at M = 32, IMAX = 28; see amp_m_bench for what
// is checked.
`timescale 1ns / 1ps
module tb_amp_m;
  amp_m_bench #(.USE_FCT(1'b1)) bench ();
endmodule
