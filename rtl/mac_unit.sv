// mac_unit: multiply-accumulate unit of the AMP-M datapath.
//
// One 16 x 16 signed product per clock from a Wallace-tree multiplier (wallace_mult)
// is added to a wide accumulator register. The three parts - multiplier, adder and
// accumulator - are the ones the paper lists for its MAC unit; the accumulator width,
// the "first" control and the reset behaviour are this design's choices.
// Interface: when en is high, acc <= (first ? 0 : acc) + a * b at the rising clock
// edge; first starts a new dot product without a separate clear cycle. acc is the
// registered sum, valid the cycle after the last enabled term. Synchronous use of an
// active-low asynchronous reset clears the accumulator.
module mac_unit #(
  parameter int unsigned W     = 16,
  parameter int unsigned ACC_W = 42
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  logic signed [W-1:0]     a,
  input  logic signed [W-1:0]     b,
  output logic signed [ACC_W-1:0] acc
);

  logic signed [2*W-1:0] prod;

  wallace_mult #(.W(W)) u_mult (.a(a), .b(b), .p(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (first ? ACC_W'(0) : acc) + ACC_W'(prod);
  end

endmodule
