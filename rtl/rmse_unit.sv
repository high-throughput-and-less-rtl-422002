// rmse_unit: RMSE unit. It measures the root mean square of the residual, from which
// the AMP threshold is set and early termination is decided.
//
// While acc_en is high, each residual sample r_in is squared (Wallace-tree multiplier)
// and added to a sum of squares; clr starts a new sum. A pulse on calc divides the sum
// by M (a shift, M a power of two), takes the integer square root with a restoring
// algorithm that settles one result bit per clock (16 clocks), and then presents
//   rmse   = floor(sqrt(floor(sum / M)))
//   tau    = lambda * rmse  (lambda unsigned Q4.4, result saturated to 16 bits)
//   et_hit = (rmse <= et)   (early-termination compare against the ET parameter)
// with a one-clock done pulse, 17 clocks after calc. busy is high meanwhile.
// The paper states what the RMSE and ET compare do; the threshold rule tau = lambda *
// RMSE, the square-root algorithm and all widths are this design's choices.
module rmse_unit
  import amp_pkg::*;
#(
  parameter int unsigned M = 512,
  localparam int unsigned LOG2M = $clog2(M),
  localparam int unsigned SUM_W = 2 * DATA_W + LOG2M
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              acc_en,
  input  data_t             r_in,
  input  logic              calc,
  input  lambda_t           lambda,
  input  logic [DATA_W-1:0] et,
  output logic              busy,
  output logic              done,
  output logic [DATA_W-1:0] rmse,
  output data_t             tau,
  output logic              et_hit
);

  logic signed [2*DATA_W-1:0] sq;
  logic [SUM_W-1:0]           sum;
  logic [2*DATA_W-1:0]        rad;    // radicand, shifted two bits per step
  logic [DATA_W+1:0]          rem;
  logic [DATA_W-1:0]          root;
  logic [$clog2(DATA_W+1)-1:0] step;

  wallace_mult #(.W(DATA_W)) u_sq (.a(r_in), .b(r_in), .p(sq));

  // Sum of squares.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sum <= '0;
    else if (clr)    sum <= '0;
    else if (acc_en) sum <= sum + SUM_W'(unsigned'(sq));
  end

  // Restoring square root, one bit per clock.
  logic [DATA_W+3:0] rem_sh;
  logic [DATA_W+3:0] trial;
  always_comb begin
    rem_sh = {rem, rad[2*DATA_W-1 -: 2]};
    trial  = (DATA_W+4)'({root, 2'b01});
  end

  logic [DATA_W+LAMBDA_W-1:0] scaled;
  assign scaled = root * lambda;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      rad    <= '0;
      rem    <= '0;
      root   <= '0;
      step   <= '0;
      rmse   <= '0;
      tau    <= '0;
      et_hit <= 1'b0;
    end else begin
      done <= 1'b0;
      if (calc && !busy) begin
        busy <= 1'b1;
        rad  <= (2*DATA_W)'(sum >> LOG2M);
        rem  <= '0;
        root <= '0;
        step <= '0;
      end else if (busy) begin
        if (32'(step) < DATA_W) begin
          rad  <= rad << 2;
          step <= step + 1'b1;
          if (rem_sh >= trial) begin
            rem  <= (DATA_W+2)'(rem_sh - trial);
            root <= {root[DATA_W-2:0], 1'b1};
          end else begin
            rem  <= (DATA_W+2)'(rem_sh);
            root <= {root[DATA_W-2:0], 1'b0};
          end
        end else begin
          busy   <= 1'b0;
          done   <= 1'b1;
          rmse   <= root;
          tau    <= sat_data(48'(scaled >> LAMBDA_FRAC));
          et_hit <= (root <= et);
        end
      end
    end
  end

endmodule
