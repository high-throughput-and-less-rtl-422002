// x_ram: X-RAM, the single-port memory holding the current signal estimate
// x = [a; b] (DCT coefficients of the audio, then the sparse corruption samples),
// DEPTH = 2M words of 16 bits.
//
// Single-port, as the paper specifies: one address serves either a read or a write in
// a clock cycle. A read (en high, we low) returns the word one clock later on dout;
// a write (en and we high) stores din and leaves dout unchanged. Contents are not
// reset; the controller clears the estimate before each block.
module x_ram
  import amp_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  data_t         din,
  output data_t         dout
);

  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= din;
      else    dout      <= mem[addr];
    end
  end

endmodule
