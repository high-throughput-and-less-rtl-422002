// dct_coef_gen: coefficient source for the DCT part of the AMP dictionary.
//
// The dictionary is D = [A I], with A the M x M orthonormal DCT-II synthesis matrix
//   A[m][k] = s_k * cos(pi * (2m+1) * k / (2M)),  s_0 = sqrt(1/M), s_k = sqrt(2/M),
// and I the identity (the DCT-identity pair of the paper, M = 512). This block hands
// the MAC unit C[m][k] = round(32767 * cos(pi*(2m+1)*k/(2M))) as Q1.15, with
// 32767/sqrt(2) used for k = 0; the common factor sqrt(2/M) is a power of two when
// log2(M) is odd and is applied by the caller as a right shift.
// The angle index j = (2m+1)k mod 4M walks through a 4M-entry cosine table that is
// computed at elaboration, so no multiplier is needed:
//   start with col_mode = 0 (row walk):    m = idx fixed, k = 0,1,2,..  j += 2m+1
//   start with col_mode = 1 (column walk): k = idx fixed, m = 0,1,2,..  j += 2k
// Timing: coef is valid the clock after start for the first element and advances by
// one element on each clock with step high. Using a table walk instead of a stored
// matrix is this design's choice; the paper computes the transform in its FFT-RAM.
module dct_coef_gen
  import amp_pkg::*;
#(
  parameter int unsigned M = 512,
  localparam int unsigned AW = $clog2(M),
  localparam int unsigned JW = $clog2(4 * M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          col_mode,
  input  logic [AW-1:0] idx,
  input  logic          step,
  output coef_t         coef
);

  typedef coef_t tab_t [4*M];

  function automatic tab_t gen_tab();
    tab_t t;
    for (int j = 0; j < 4 * M; j++)
      t[j] = coef_t'($rtoi($floor(32767.0 * $cos(3.14159265358979323846 * j / (2.0 * M)) + 0.5)));
    return t;
  endfunction

  localparam tab_t  COS_TAB = gen_tab();
  localparam coef_t K0_COEF = coef_t'(23170);  // round(32767 / sqrt(2))

  logic [JW-1:0] j;
  logic [JW-1:0] inc;
  logic          k0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j   <= '0;
      inc <= '0;
      k0  <= 1'b0;
    end else if (start) begin
      j   <= col_mode ? JW'(idx) : '0;
      inc <= col_mode ? JW'({idx, 1'b0}) : JW'({idx, 1'b1});
      k0  <= col_mode ? (idx == '0) : 1'b1;
    end else if (step) begin
      j   <= j + inc;                 // modulo 4M by wrap-around
      k0  <= col_mode ? k0 : 1'b0;
    end
  end

  // col_mode is expected to stay stable through a walk.
  assign coef = k0 ? K0_COEF : COS_TAB[j];

endmodule
