// fft_ram: FFT-RAM, a fast DCT / inverse DCT of a length-M real block computed with
// an M/2-point complex FFT held in its own RAM. In both directions the scaling is the
// orthonormal one of the dictionary's DCT matrix A[m][k] = s_k cos(pi (2m+1) k / 2M)
// (s_0 = sqrt(1/M), s_k = sqrt(2/M)), in Q1.15:
//   mode 0 (FCT):  out[k] = (A^T r)[k]  - the DCT half of D^T r
//   mode 1 (IFCT): out[m] = (A a)[m]    - the DCT half of D x, the restored audio
// The forward transform uses the five steps named for this unit:
//   reorder - v[n] = r[2n], v[M-1-n] = r[2n+1];
//   reduce  - c[q] = v[2q] + j v[2q+1], a complex vector of L = M/2 entries.
//             Both steps are done by the write address: sample n lands in the real
//             or imaginary half of word q of the RAM.
//   FFT     - in-place radix-2 decimation-in-frequency FFT of c, one butterfly per
//             clock, each stage halving the data (no overflow), result in
//             bit-reversed order;
//   expand  - the M-point spectrum V of v follows from C as
//             V[k] = (C[k] + C*[L-k])/2 - j W_M^k (C[k] - C*[L-k])/2, and
//             V[M-k] = V*[k] (conjugate symmetry);
//   rotate  - X[k] = Re(e^(-j pi k / 2M) V[k]).
// Expand and rotate are evaluated for each output word as it is read.
// The inverse runs the same steps backwards: the coefficients are buffered, a
// pre-processing pass of L clocks rotates and folds them into C (stored conjugated),
// the same FFT hardware then gives the inverse FFT, and reading undoes reduce and
// reorder through the address.
// Samples enter with G = 8 guard bits in IW = 28-bit words. All twiddles come from
// one 4M-entry Q1.15 cosine table computed at elaboration. Guard bits, widths,
// rounding (arithmetic shifts), the FFT radix and the read-time post-processing are
// this design's choices.
// Interface: mode selects the direction and is held through load, run and read.
// wr_en writes wr_data (Q1.15) for index wr_addr (a sample r[n] or a coefficient
// a[k]). A start pulse runs the transform: busy is high for (M/4) log2(M/2) clocks
// (FCT) or M/2 + (M/4) log2(M/2) clocks (IFCT), then done pulses. rd_en with rd_addr
// gives rd_data, saturated to 16 bits, one clock later.
module fft_ram
  import amp_pkg::*;
#(
  parameter int unsigned M = 512,
  localparam int unsigned L   = M / 2,
  localparam int unsigned AW  = $clog2(M),
  localparam int unsigned LA  = $clog2(L),
  localparam int unsigned G   = 8,
  localparam int unsigned IW  = DATA_W + G + 4,
  localparam int unsigned JW  = $clog2(4 * M),
  localparam int unsigned S   = ($clog2(M) - 1) / 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          mode,      // 0: forward DCT (FCT), 1: inverse DCT (IFCT)
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data
);

  typedef logic signed [IW-1:0] word_t;
  typedef coef_t tab_t [4*M];

  function automatic tab_t gen_tab();
    tab_t t;
    for (int j = 0; j < 4 * M; j++)
      t[j] = coef_t'($rtoi($floor(32767.0 * $cos(3.14159265358979323846 * j / (2.0 * M)) + 0.5)));
    return t;
  endfunction

  localparam tab_t COS_TAB = gen_tab();

  // cos(pi j / 2M) and sin(pi j / 2M) = cos(pi (j - M) / 2M)
  function automatic coef_t cos_j(input logic [JW-1:0] j);
    return COS_TAB[j];
  endfunction
  function automatic coef_t sin_j(input logic [JW-1:0] j);
    return COS_TAB[JW'(j - JW'(M))];
  endfunction

  function automatic logic [LA-1:0] bitrev(input logic [LA-1:0] a);
    logic [LA-1:0] r;
    for (int i = 0; i < LA; i++) r[i] = a[LA-1-i];
    return r;
  endfunction

  word_t mem_re [L];
  word_t mem_im [L];
  data_t xbuf   [M];     // IFCT input coefficients

  // ---------------------------------------------------------------- FFT control
  logic [$clog2(LA+1)-1:0] stage;
  logic [LA-2:0]           bf;       // butterfly within a stage
  logic                    prep;     // IFCT pre-processing pass
  logic [LA-1:0]           pk;       // its index k = 0 .. L-1

  logic [LA-1:0] half, pos, grp, ia, ib;
  logic [JW-1:0] tw_j;
  word_t         ar, ai, br, bi;
  logic signed [IW:0]    dr, di;
  logic signed [IW+16:0] pr, pi_;
  word_t         sr, si, tr, ti;

  always_comb begin
    half = LA'(L >> (stage + 1'b1));
    pos  = LA'(bf) & (half - 1'b1);
    grp  = LA'(bf) & ~(half - 1'b1);
    ia   = (grp << 1) | pos;
    ib   = ia | half;
    tw_j = JW'({pos, 3'b000}) << stage;        // W_L^(pos 2^stage), angle index 8i
    ar = mem_re[ia]; ai = mem_im[ia];
    br = mem_re[ib]; bi = mem_im[ib];
    sr = word_t'((IW+1)'(ar) + (IW+1)'(br) >>> 1);
    si = word_t'((IW+1)'(ai) + (IW+1)'(bi) >>> 1);
    dr = (IW+1)'(ar) - (IW+1)'(br);
    di = (IW+1)'(ai) - (IW+1)'(bi);
    // (dr + j di)(cos - j sin)
    pr  = (IW+17)'(dr) * (IW+17)'(cos_j(tw_j)) + (IW+17)'(di) * (IW+17)'(sin_j(tw_j));
    pi_ = (IW+17)'(di) * (IW+17)'(cos_j(tw_j)) - (IW+17)'(dr) * (IW+17)'(sin_j(tw_j));
    tr = word_t'(pr >>> 16);
    ti = word_t'(pi_ >>> 16);
  end

  // IFCT pre-processing (inverse rotate and expand) for one k = pk:
  //   V[k]   = e^(j pi k / 2M)     (X[k]   - j X[M-k])
  //   V[k+L] = e^(j pi (k+L) / 2M) (X[k+L] - j X[L-k])
  //   C[k]   = (V[k] + V[k+L])/2 + j W_M^(-k) (V[k] - V[k+L])/2
  // with X[k] = a[k] 2^G (a[0] also times sqrt 2, X[M] = 0). conj(C) is stored so
  // that the forward FFT hardware computes the inverse FFT.
  function automatic logic signed [IW+1:0] xin(input logic [AW:0] i);
    logic signed [IW+1:0] w;
    if (i == (AW+1)'(M)) return '0;
    w = (IW+2)'(signed'(xbuf[AW'(i)])) <<< G;
    if (i == '0) w = (IW+2)'(((IW+18)'(w) * (IW+18)'(46341)) >>> 15);  // sqrt 2 in Q1.15
    return w;
  endfunction

  logic signed [IW+1:0]  xa, xb, xc, xd;
  logic signed [IW+19:0] v1r, v1i, v2r, v2i;
  logic signed [IW+3:0]  er, ei, dr2, di2;
  logic signed [IW+21:0] or_, oi;
  word_t                 pc_r, pc_i;
  logic [JW-1:0]         j1, j2, j3;

  always_comb begin
    xa = xin((AW+1)'(pk));                      // X[k]
    xb = xin((AW+1)'(M) - (AW+1)'(pk));         // X[M-k]
    xc = xin((AW+1)'(pk) + (AW+1)'(L));         // X[k+L]
    xd = xin((AW+1)'(L) - (AW+1)'(pk));         // X[L-k]
    j1 = JW'(pk);
    j2 = JW'(pk) + JW'(L);
    j3 = JW'({pk, 2'b00});                      // angle 2 pi k / M
    v1r = ((IW+20)'(xa) * (IW+20)'(cos_j(j1)) + (IW+20)'(xb) * (IW+20)'(sin_j(j1))) >>> 15;
    v1i = ((IW+20)'(xa) * (IW+20)'(sin_j(j1)) - (IW+20)'(xb) * (IW+20)'(cos_j(j1))) >>> 15;
    v2r = ((IW+20)'(xc) * (IW+20)'(cos_j(j2)) + (IW+20)'(xd) * (IW+20)'(sin_j(j2))) >>> 15;
    v2i = ((IW+20)'(xc) * (IW+20)'(sin_j(j2)) - (IW+20)'(xd) * (IW+20)'(cos_j(j2))) >>> 15;
    er  = (IW+4)'(v1r + v2r);
    ei  = (IW+4)'(v1i + v2i);
    dr2 = (IW+4)'(v1r - v2r);
    di2 = (IW+4)'(v1i - v2i);
    // (dr2 + j di2)(cos + j sin), angle 2 pi k / M
    or_ = ((IW+22)'(dr2) * (IW+22)'(cos_j(j3)) - (IW+22)'(di2) * (IW+22)'(sin_j(j3))) >>> 15;
    oi  = ((IW+22)'(dr2) * (IW+22)'(sin_j(j3)) + (IW+22)'(di2) * (IW+22)'(cos_j(j3))) >>> 15;
    // C = (E + j O)/2, stored conjugated
    pc_r = word_t'(((IW+22)'(er) - oi) >>> 1);
    pc_i = word_t'(-(((IW+22)'(ei) + or_) >>> 1));
  end

  // reorder + reduce by address
  logic [AW-1:0] vp;
  assign vp = wr_addr[0] ? AW'(M - 1) - AW'(wr_addr >> 1) : AW'(wr_addr >> 1);

  always_ff @(posedge clk) begin
    if (wr_en && !busy && mode) begin
      xbuf[wr_addr] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !busy && !mode) begin
      if (vp[0]) mem_im[vp[AW-1:1]] <= word_t'(wr_data) <<< G;
      else       mem_re[vp[AW-1:1]] <= word_t'(wr_data) <<< G;
    end else if (busy && prep) begin
      mem_re[pk] <= pc_r;
      mem_im[pk] <= pc_i;
    end else if (busy) begin
      mem_re[ia] <= sr;
      mem_im[ia] <= si;
      mem_re[ib] <= tr;
      mem_im[ib] <= ti;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      prep  <= 1'b0;
      pk    <= '0;
      stage <= '0;
      bf    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        prep  <= mode;
        pk    <= '0;
        stage <= '0;
        bf    <= '0;
      end else if (busy && prep) begin
        pk <= pk + 1'b1;
        if (&pk) prep <= 1'b0;
      end else if (busy) begin
        bf <= bf + 1'b1;
        if (&bf) begin
          stage <= stage + 1'b1;
          if (stage == ($clog2(LA+1))'(LA - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- expand + rotate
  logic [AW:0]   k1;
  logic          cj;
  logic [LA-1:0] ka, kb;
  word_t         car, cai, cbr, cbi;
  logic signed [IW:0]    p_r, p_i, q_r, q_i;
  logic signed [IW+17:0] wq_r, wq_i, v_r, v_i, x_k;
  logic signed [IW+34:0] rot;
  logic signed [47:0]    scaled;

  always_comb begin
    cj  = (rd_addr > AW'(L));
    k1  = cj ? (AW+1)'(M) - (AW+1)'(rd_addr) : (AW+1)'(rd_addr);
    ka  = LA'(k1);                             // k1 mod L
    kb  = LA'((AW+1)'(L) - k1);                // (L - k1) mod L
    car = mem_re[bitrev(ka)]; cai = mem_im[bitrev(ka)];
    cbr = mem_re[bitrev(kb)]; cbi = mem_im[bitrev(kb)];
    // P = (Ca + conj Cb)/2, Q = (Ca - conj Cb)/2 (the /2 is folded into the shift below)
    p_r = (IW+1)'(car) + (IW+1)'(cbr);
    p_i = (IW+1)'(cai) - (IW+1)'(cbi);
    q_r = (IW+1)'(car) - (IW+1)'(cbr);
    q_i = (IW+1)'(cai) + (IW+1)'(cbi);
    // W_M^k1 Q with W = cos(a) - j sin(a), a = 2 pi k1 / M (angle index 4 k1)
    wq_r = (IW+18)'(q_r) * (IW+18)'(cos_j(JW'(k1) << 2)) + (IW+18)'(q_i) * (IW+18)'(sin_j(JW'(k1) << 2));
    wq_i = (IW+18)'(q_i) * (IW+18)'(cos_j(JW'(k1) << 2)) - (IW+18)'(q_r) * (IW+18)'(sin_j(JW'(k1) << 2));
    // 2V = P - j WQ, kept with 15 extra fraction bits
    v_r = ((IW+18)'(p_r) <<< 15) + wq_i;
    v_i = ((IW+18)'(p_i) <<< 15) - wq_r;
    if (cj) v_i = -v_i;
    // X = Re(e^(-j pi k / 2M) V) = Vr cos + Vi sin, angle index k
    rot = (IW+35)'(v_r) * (IW+35)'(cos_j(JW'(rd_addr))) + (IW+35)'(v_i) * (IW+35)'(sin_j(JW'(rd_addr)));
    x_k = (IW+18)'(rot >>> 15);
    // undo 2V (1), guard bits (G), FFT scaling (1/L) and apply sqrt(2/M) (1/2^S),
    // plus the 15 fraction bits of the twiddle products
    scaled = 48'(x_k >>> (1 + G + S + 15 - LA));
    if (rd_addr == '0) scaled = 48'((scaled * 48'sd23170) >>> 15);
  end

  // IFCT output: undo reorder and reduce; c = conj(stored) in bit-reversed order,
  // x[2n] = v[n], x[2n+1] = v[M-1-n], v[2q] = Re c[q], v[2q+1] = Im c[q].
  logic [AW-1:0]      op;
  word_t              ov;
  logic signed [47:0] inv_out;
  always_comb begin
    op = rd_addr[0] ? AW'(M - 1) - AW'(rd_addr >> 1) : AW'(rd_addr >> 1);
    ov = op[0] ? -mem_im[bitrev(op[AW-1:1])] : mem_re[bitrev(op[AW-1:1])];
    inv_out = 48'(ov >>> (G - S));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= sat_data(mode ? inv_out : scaled);
  end

endmodule
