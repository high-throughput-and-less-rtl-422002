// trsh_unit: TRSH unit, the soft-thresholding function eta(v; tau) of AMP applied to
// one element per clock (serial, element-wise).
//
//   eta(v; tau) = sign(v) * max(|v| - tau, 0)
//
// It is built as a subtract-compare-select unit, as in the paper: subtract tau from
// |v|, compare the difference with zero, select either zero or the difference with
// the sign of v restored. The result is saturated to 16 bits. The 'nz' flag (result
// non-zero) feeds the support count of the Onsager term; it, the input width and the
// one-cycle register stage are this design's choices.
// Timing: in_valid/v/tau sampled at a rising edge give out_valid/x/nz one clock later.
module trsh_unit
  import amp_pkg::*;
#(
  parameter int unsigned IN_W = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] v,
  input  data_t                  tau,
  output logic                   out_valid,
  output data_t                  x,
  output logic                   nz
);

  logic [IN_W-1:0]        mag;
  logic signed [IN_W:0]   diff;
  logic signed [IN_W:0]   sel;
  logic                   keep;

  always_comb begin
    mag  = v[IN_W-1] ? IN_W'(-v) : IN_W'(v);                         // |v|
    diff = signed'({1'b0, mag}) - (IN_W+1)'(signed'(tau));           // subtract
    keep = (diff > 0);                                                // compare
    if (!keep)         sel = '0;                                      // select
    else if (v[IN_W-1]) sel = -diff;
    else               sel = diff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x         <= '0;
      nz        <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        x  <= sat_data(48'(sel));
        nz <= keep;
      end
    end
  end

endmodule
