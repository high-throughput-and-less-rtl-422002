// wallace_mult: combinational W x W signed Wallace-tree multiplier (W = 16 by default).
//
// The product is formed in the three steps of a Wallace multiplier:
//   multiply - one partial-product row per bit of b, each the sign-extended a gated by
//              that bit and shifted to its weight. The row of the sign bit of b carries
//              weight -2^(W-1), so it is inverted and a +1 correction row is added
//              (two's-complement negation), giving W+1 rows of 2W bits;
//   reduce   - layers of 3:2 carry-save adders turn every three rows into two
//              (sum row and shifted carry row) until two rows remain;
//   group    - one carry-propagate adder adds the last two rows.
// All arithmetic is modulo 2^(2W), which is exact for a signed 2W-bit product.
// The 16-bit fixed width follows the paper; the signed row handling and the
// word-level organisation of the carry-save layers are this design's choices.
// Interface: a, b in; p = a * b out, purely combinational (no clock).
module wallace_mult #(
  parameter int unsigned W = 16
) (
  input  logic signed [W-1:0]   a,
  input  logic signed [W-1:0]   b,
  output logic signed [2*W-1:0] p
);

  localparam int unsigned ROWS0 = W + 1;
  localparam int unsigned PW    = 2 * W;

  // Rows left after one layer of 3:2 compression.
  function automatic int unsigned next_rows(input int unsigned n);
    return (n / 3) * 2 + (n % 3);
  endfunction

  function automatic int unsigned num_levels();
    int unsigned n = ROWS0;
    int unsigned l = 0;
    while (n > 2) begin
      n = next_rows(n);
      l++;
    end
    return l;
  endfunction

  localparam int unsigned LEVELS = num_levels();

  logic [PW-1:0] pp  [ROWS0];
  logic [PW-1:0] fin [2];

  // Multiply: partial-product rows.
  for (genvar i = 0; i < W; i++) begin : g_pp
    logic [PW-1:0] row;
    assign row = b[i] ? (PW'(signed'(a)) << i) : '0;
    if (i == W - 1) begin : g_neg
      assign pp[i] = ~row;
    end else begin : g_pos
      assign pp[i] = row;
    end
  end
  assign pp[W] = PW'(1);  // +1 completing the negation of the sign row

  // Reduce: carry-save layers, each turning groups of three rows into two.
  always_comb begin
    logic [PW-1:0] cur [ROWS0];
    logic [PW-1:0] nxt [ROWS0];
    int unsigned n, ng;
    cur = pp;
    n   = ROWS0;
    for (int unsigned lvl = 0; lvl < LEVELS; lvl++) begin
      ng = n / 3;
      for (int unsigned i = 0; i < ROWS0; i++) nxt[i] = '0;
      for (int unsigned g = 0; g < ROWS0 / 3; g++) begin
        if (g < ng) begin
          nxt[2*g]   = cur[3*g] ^ cur[3*g+1] ^ cur[3*g+2];
          nxt[2*g+1] = ((cur[3*g] & cur[3*g+1]) | (cur[3*g] & cur[3*g+2]) |
                        (cur[3*g+1] & cur[3*g+2])) << 1;
        end
      end
      for (int unsigned r = 0; r < 2; r++) begin
        if (r < n % 3) nxt[2*ng+r] = cur[3*ng+r];
      end
      cur = nxt;
      n   = next_rows(n);
    end
    fin[0] = cur[0];
    fin[1] = cur[1];
  end

  // Group: final carry-propagate addition.
  assign p = signed'(fin[0] + fin[1]);

endmodule
