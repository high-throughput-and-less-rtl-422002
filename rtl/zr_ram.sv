// zr_ram: ZR-RAM, the two-bank memory that holds the corrupted input block z (bank
// mem1) and the residual r (bank mem2), DEPTH words of 16 bits each.
//
// As in the paper's simulation, one write enable 'we' stores zin into mem1 and rin
// into mem2 at the same address on the write clock wclk, and 're' reads both banks at
// once, giving zout and rout, on the read clock rclk. The separate read and write
// addresses (a simple dual-port organisation) are this design's choice, so that the
// controller can read one residual while it writes another.
// Timing: a write takes effect at the wclk edge with we high; a read returns the
// stored words one rclk edge after re is sampled high; the outputs hold otherwise.
// Memory contents are not reset.
module zr_ram
  import amp_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          wclk,
  input  logic          rclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         zin,
  input  data_t         rin,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output data_t         zout,
  output data_t         rout
);

  data_t mem1 [DEPTH];  // z: corrupted observation
  data_t mem2 [DEPTH];  // r: residual

  always_ff @(posedge wclk) begin
    if (we) begin
      mem1[waddr] <= zin;
      mem2[waddr] <= rin;
    end
  end

  always_ff @(posedge rclk) begin
    if (re) begin
      zout <= mem1[raddr];
      rout <= mem2[raddr];
    end
  end

endmodule
