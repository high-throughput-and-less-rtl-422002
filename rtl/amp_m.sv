// amp_m: AMP-M, an approximate-message-passing (AMP) engine that restores one block of
// M audio samples corrupted by sparse impulsive noise (clicks, pops).
//
// The corrupted block z is modelled as z = A a + b + noise with A the M x M DCT
// (audio is sparse in the DCT domain) and b a sparse vector of corrupted samples
// (identity basis). With D = [A I] and x = [a; b] the engine runs, for t = 0,1,..:
//   tau_t   = lambda * RMSE(r_t)                          (RMSE unit)
//   stop if RMSE(r_t) <= ET or t = IMAX                   (early termination)
//   x_t+1   = eta(x_t + D^T r_t; tau_t)                   (FFT-RAM + TRSH -> X-RAM)
//   r_t+1   = z - D x_t+1 + (|supp(x_t+1)| / M) r_t       (FFT-RAM, MAC -> ZR-RAM)
// starting from x_0 = 0, r_0 = z, and finally streams out the restored audio A a.
// The step list (initialise, count iterations, residual, threshold, estimate, repeat
// until RMSE <= ET), the units (ZR-RAM, FFT-RAM with its FCT/IFCT, X-RAM, MAC with
// Wallace multiplier, TRSH, RMSE), the data flow ZR-RAM -> FFT-RAM and X-RAM ->
// ZR-RAM, 16-bit data, the DCT-identity pair, M = 512 and IMAX = 28 follow the paper.
// The schedule below, the fixed-point scaling, the threshold rule, the use of the MAC
// for the Onsager product and the streaming interface are this design's choices.
// USE_FCT = 1 (default): r is copied from ZR-RAM into the FFT-RAM, whose fast DCT
// gives the DCT half of D^T r; then a = x[0..M-1] is copied from X-RAM into the
// FFT-RAM, whose fast inverse DCT gives A a for D x and for the output. The MAC forms
// |supp(x)| r_t[m]. USE_FCT = 0: the MAC walks the DCT matrix column by column for
// D^T r and row by row for D x (dct_coef_gen supplies the entries), and a separate
// Wallace multiplier forms the Onsager product; this is about 66 times slower per
// iteration at M = 512 and kept as a plain reference datapath. The identity halves need no
// multiplication.
//
// Interface and timing (all on clk, active-low asynchronous reset rst_n):
//   in_ready is high while the engine waits for a block; every clock with in_valid and
//   in_ready stores one sample (M samples form a block). lambda (Q4.4) and et are
//   sampled whenever they are used and must be held during a block.
//   Per block: load M clocks, clear X-RAM 2M clocks, RMSE 19 clocks; with B =
//   (M/4) log2(M/2) FFT clocks, each iteration then takes (M+1) + (B+2) + 6M clocks
//   for the estimate update, (M+1) + (M/2+B+2) + 3M for the residual and 19 for the
//   RMSE; the output phase takes (M+1) + (M/2+B+2) + 2M clocks and gives one
//   out_valid sample every 2 clocks, out_last on the M-th. (M = 512, 28 iterations:
//   227,282 clocks.) With USE_FCT = 0 an iteration takes M(M+3) + 3M + M(M+2) + 19
//   and the output M(M+2) clocks, one sample every M+2. block_done pulses with
//   out_last; iter_count, rmse and early_stop then describe the finished block.
module amp_m
  import amp_pkg::*;
#(
  parameter int unsigned M    = 512,
  parameter int unsigned IMAX = 28,
  parameter bit          USE_FCT = 1'b1,   // D^T r through the FFT-RAM fast DCT
  localparam int unsigned N     = 2 * M,
  localparam int unsigned AW    = $clog2(M),
  localparam int unsigned XAW   = $clog2(N),
  localparam int unsigned LOG2M = $clog2(M),
  localparam int unsigned SH    = 15 + (LOG2M - 1) / 2,  // Q1.15 and sqrt(2/M)
  localparam int unsigned ACC_W = 2 * DATA_W + LOG2M + 1,
  localparam int unsigned COR_W = ACC_W - SH,
  localparam int unsigned V_W   = ((COR_W > DATA_W) ? COR_W : DATA_W) + 1,
  localparam int unsigned IW    = $clog2(IMAX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  lambda_t           lambda,
  input  logic [DATA_W-1:0] et,
  // corrupted samples in
  input  logic              in_valid,
  input  data_t             in_data,
  output logic              in_ready,
  // restored samples out
  output logic              out_valid,
  output data_t             out_data,
  output logic              out_last,
  // status
  output logic              busy,
  output logic              block_done,
  output logic [IW-1:0]     iter_count,
  output logic [DATA_W-1:0] rmse,
  output logic              early_stop
);

  // Square-root scaling needs sqrt(2/M) to be a power of two.
  if ((LOG2M % 2) != 1 || (1 << LOG2M) != M) begin : g_bad_m
    $error("amp_m: M must be 2^odd (e.g. 8, 32, 128, 512, 2048)");
  end

  typedef enum logic [3:0] {
    S_LOAD, S_CLEAR, S_RMSE, S_FLOAD, S_FRUN, S_XUPD, S_ILOAD, S_IRUN, S_RUPD, S_OUT
  } state_t;

  state_t            state;
  logic [XAW-1:0]    idx;        // element / row / column index
  logic [AW+1:0]     cnt;        // clock within the element
  logic [IW-1:0]     iter;
  logic              fin;        // the inverse transform feeds the output phase
  logic [XAW:0]      nnz;        // support size of the new estimate
  data_t             xk;         // x[k] read at the start of a column
  data_t             zm, rold;   // z[m] and r_t[m] read at the start of a row

  // ---------------------------------------------------------------- units
  logic                    zr_we, zr_re;
  logic [AW-1:0]           zr_waddr, zr_raddr;
  data_t                   zr_zin, zr_rin, zr_zout, zr_rout;

  logic                    x_en, x_we;
  logic [XAW-1:0]          x_addr;
  data_t                   x_din, x_dout;

  logic                    mac_en, mac_first;
  coef_t                   mac_a;
  data_t                   mac_b;
  logic signed [ACC_W-1:0] mac_acc;

  logic                    cg_start, cg_col, cg_step;
  logic [AW-1:0]           cg_idx;
  coef_t                   cg_coef;

  logic                    tr_in_valid, tr_out_valid, tr_nz;
  logic signed [V_W-1:0]   tr_v;
  data_t                   tr_x;

  logic                    rm_clr, rm_acc_en, rm_calc, rm_busy, rm_done, rm_et_hit;
  data_t                   rm_r_in, rm_tau;
  logic [DATA_W-1:0]       rm_rmse;

  logic signed [2*DATA_W-1:0] ons_prod;

  logic                    ft_mode, ft_wr_en, ft_start, ft_busy, ft_done, ft_rd_en;
  logic [AW-1:0]           ft_wr_addr, ft_rd_addr;
  data_t                   ft_wr_data, ft_rd_data;

  zr_ram #(.DEPTH(M)) u_zr_ram (
    .wclk(clk), .rclk(clk), .we(zr_we), .waddr(zr_waddr), .zin(zr_zin), .rin(zr_rin),
    .re(zr_re), .raddr(zr_raddr), .zout(zr_zout), .rout(zr_rout)
  );

  x_ram #(.DEPTH(N)) u_x_ram (
    .clk(clk), .en(x_en), .we(x_we), .addr(x_addr), .din(x_din), .dout(x_dout)
  );

  mac_unit #(.W(DATA_W), .ACC_W(ACC_W)) u_mac (
    .clk(clk), .rst_n(rst_n), .en(mac_en), .first(mac_first),
    .a(mac_a), .b(mac_b), .acc(mac_acc)
  );

  trsh_unit #(.IN_W(V_W)) u_trsh (
    .clk(clk), .rst_n(rst_n), .in_valid(tr_in_valid), .v(tr_v), .tau(rm_tau),
    .out_valid(tr_out_valid), .x(tr_x), .nz(tr_nz)
  );

  rmse_unit #(.M(M)) u_rmse (
    .clk(clk), .rst_n(rst_n), .clr(rm_clr), .acc_en(rm_acc_en), .r_in(rm_r_in),
    .calc(rm_calc), .lambda(lambda), .et(et), .busy(rm_busy), .done(rm_done),
    .rmse(rm_rmse), .tau(rm_tau), .et_hit(rm_et_hit)
  );

  if (USE_FCT) begin : g_fct
    // Both dictionary products through the FFT-RAM; the MAC forms the Onsager
    // product |supp(x)| * r_t[m].
    fft_ram #(.M(M)) u_fft_ram (
      .clk(clk), .rst_n(rst_n), .mode(ft_mode), .wr_en(ft_wr_en), .wr_addr(ft_wr_addr),
      .wr_data(ft_wr_data), .start(ft_start), .busy(ft_busy), .done(ft_done),
      .rd_en(ft_rd_en), .rd_addr(ft_rd_addr), .rd_data(ft_rd_data)
    );
    assign cg_coef  = '0;
    assign ons_prod = (2*DATA_W)'(mac_acc);
  end else begin : g_no_fct
    // Both dictionary products on the MAC, walking the DCT matrix; a separate
    // multiplier forms the Onsager product.
    dct_coef_gen #(.M(M)) u_coef (
      .clk(clk), .rst_n(rst_n), .start(cg_start), .col_mode(cg_col), .idx(cg_idx),
      .step(cg_step), .coef(cg_coef)
    );
    wallace_mult #(.W(DATA_W)) u_ons (.a(DATA_W'(nnz)), .b(rold), .p(ons_prod));
    assign ft_busy    = 1'b0;
    assign ft_done    = 1'b0;
    assign ft_rd_data = '0;
  end

  // ---------------------------------------------------------------- datapath
  logic signed [COR_W-1:0] corr;   // dictionary product scaled back to Q1.15
  logic                    dct_col;  // current x-update element is a DCT column
  logic [AW+1:0]           last_mac; // cnt of the last MAC term
  logic [AW+1:0]           row_end;  // cnt of the last clock of a row
  data_t                   r_new;

  assign corr     = USE_FCT ? COR_W'(ft_rd_data) : COR_W'(mac_acc >>> SH);
  assign row_end  = !USE_FCT ? last_mac + 1'b1 : (state == S_RUPD) ? (AW+2)'(2) : (AW+2)'(1);
  assign dct_col  = (idx < XAW'(M));
  assign last_mac = (AW+2)'(M);

  always_comb begin
    logic signed [47:0] sum;
    sum   = 48'(signed'(zm)) - 48'(corr) - 48'(signed'(x_dout))
          + 48'(ons_prod >>> LOG2M);
    r_new = sat_data(sum);
  end

  // ---------------------------------------------------------------- control (comb)
  always_comb begin
    in_ready    = (state == S_LOAD);
    zr_we       = 1'b0;
    zr_waddr    = idx[AW-1:0];
    zr_zin      = in_data;
    zr_rin      = in_data;
    zr_re       = 1'b0;
    zr_raddr    = '0;
    x_en        = 1'b0;
    x_we        = 1'b0;
    x_addr      = idx;
    x_din       = '0;
    mac_en      = 1'b0;
    mac_first   = (cnt == (AW+2)'(1));
    mac_a       = cg_coef;
    mac_b       = (state == S_XUPD) ? zr_rout : x_dout;
    cg_start    = 1'b0;
    cg_col      = (state == S_XUPD);
    cg_step     = 1'b0;
    cg_idx      = idx[AW-1:0];
    tr_in_valid = 1'b0;
    tr_v        = '0;
    rm_clr      = 1'b0;
    rm_acc_en   = 1'b0;
    rm_r_in     = in_data;
    rm_calc     = 1'b0;
    ft_mode     = (state == S_ILOAD) || (state == S_IRUN) || (state == S_RUPD) || (state == S_OUT);
    ft_wr_en    = 1'b0;
    ft_wr_addr  = AW'(cnt - 1'b1);
    ft_wr_data  = (state == S_ILOAD) ? x_dout : zr_rout;
    ft_start    = 1'b0;
    ft_rd_en    = 1'b0;
    ft_rd_addr  = idx[AW-1:0];

    unique case (state)
      S_LOAD: begin
        if (in_valid) begin
          zr_we     = 1'b1;          // z = r = sample (x_0 = 0)
          rm_acc_en = 1'b1;
        end
      end

      S_CLEAR: begin
        x_en = 1'b1;
        x_we = 1'b1;
      end

      S_RMSE: begin
        rm_calc = (cnt == '0) && !rm_busy;
      end

      S_FLOAD: begin                 // r from ZR-RAM into the FFT-RAM
        zr_re    = (cnt < last_mac);
        zr_raddr = AW'(cnt);
        ft_wr_en = (cnt != '0);
      end

      S_FRUN: begin
        ft_start = (cnt == '0) && !ft_busy;
      end

      S_XUPD: begin
        rm_clr = 1'b1;               // sum of squares restarts for r_t+1
        if (dct_col && USE_FCT) begin
          if (cnt == '0) begin
            ft_rd_en = 1'b1;
            x_en     = 1'b1;
          end else if (cnt == (AW+2)'(1)) begin
            tr_in_valid = 1'b1;
            tr_v        = V_W'(x_dout) + V_W'(ft_rd_data);
          end else begin
            x_en  = 1'b1;
            x_we  = 1'b1;
            x_din = tr_x;
          end
        end else if (dct_col) begin
          if (cnt == '0) begin
            cg_start = 1'b1;
            zr_re    = 1'b1;
            x_en     = 1'b1;
          end else if (cnt <= last_mac) begin
            mac_en = 1'b1;
            if (cnt < last_mac) begin
              cg_step  = 1'b1;
              zr_re    = 1'b1;
              zr_raddr = AW'(cnt);
            end
          end else if (cnt == last_mac + 1'b1) begin
            tr_in_valid = 1'b1;
            tr_v        = V_W'(xk) + V_W'(corr);
          end else begin
            x_en  = 1'b1;
            x_we  = 1'b1;
            x_din = tr_x;
          end
        end else begin
          zr_raddr = AW'(idx - XAW'(M));
          if (cnt == '0) begin
            zr_re = 1'b1;
            x_en  = 1'b1;
          end else if (cnt == (AW+2)'(1)) begin
            tr_in_valid = 1'b1;
            tr_v        = V_W'(x_dout) + V_W'(zr_rout);
          end else begin
            x_en  = 1'b1;
            x_we  = 1'b1;
            x_din = tr_x;
          end
        end
      end

      S_ILOAD: begin                 // a from X-RAM into the FFT-RAM
        rm_clr   = 1'b1;
        x_en     = (cnt < last_mac);
        x_addr   = XAW'(cnt);
        ft_wr_en = (cnt != '0);
      end

      S_IRUN: begin
        rm_clr   = 1'b1;
        ft_start = (cnt == '0) && !ft_busy;
      end

      S_RUPD, S_OUT: begin
        rm_clr = (state == S_OUT);   // and for the next block's load
        if (USE_FCT) begin
          if (cnt == '0) begin         // (A a)[m], z[m], r_t[m], b[m]
            ft_rd_en = 1'b1;
            x_en     = (state == S_RUPD);
            x_addr   = XAW'(M) + idx;
            zr_re    = (state == S_RUPD);
            zr_raddr = idx[AW-1:0];
          end else if (cnt == (AW+2)'(1)) begin
            mac_en = (state == S_RUPD);  // Onsager product
            mac_a  = coef_t'(nnz);
            mac_b  = zr_rout;
          end else begin
            zr_we     = 1'b1;
            zr_zin    = zm;
            zr_rin    = r_new;
            rm_acc_en = 1'b1;
            rm_r_in   = r_new;
          end
        end else if (cnt == '0) begin
          cg_start = 1'b1;
          x_en     = 1'b1;
          x_addr   = '0;
          zr_re    = (state == S_RUPD);
          zr_raddr = idx[AW-1:0];
        end else if (cnt <= last_mac) begin
          mac_en = 1'b1;
          x_en   = 1'b1;
          if (cnt < last_mac) begin
            cg_step = 1'b1;
            x_addr  = XAW'(cnt);
          end else begin
            x_addr  = XAW'(M) + idx;     // b[m] for the residual
          end
        end else if (state == S_RUPD) begin
          zr_we     = 1'b1;
          zr_zin    = zm;
          zr_rin    = r_new;
          rm_acc_en = 1'b1;
          rm_r_in   = r_new;
        end
      end

      default: ;
    endcase
  end

  // ---------------------------------------------------------------- control (seq)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      idx        <= '0;
      cnt        <= '0;
      iter       <= '0;
      fin        <= 1'b0;
      nnz        <= '0;
      xk         <= '0;
      zm         <= '0;
      rold       <= '0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
      block_done <= 1'b0;
      iter_count <= '0;
      rmse       <= '0;
      early_stop <= 1'b0;
    end else begin
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      block_done <= 1'b0;

      unique case (state)
        S_LOAD: begin
          if (in_valid) begin
            idx <= idx + 1'b1;
            if (idx == XAW'(M - 1)) begin
              idx   <= '0;
              state <= S_CLEAR;
            end
          end
        end

        S_CLEAR: begin
          idx <= idx + 1'b1;
          if (idx == XAW'(N - 1)) begin
            idx   <= '0;
            cnt   <= '0;
            iter  <= '0;
            state <= S_RMSE;
          end
        end

        S_RMSE: begin
          if (cnt == '0) cnt <= (AW+2)'(1);
          if (rm_done) begin
            cnt <= '0;
            idx <= '0;
            if (rm_et_hit || iter == IW'(IMAX)) begin
              iter_count <= iter;
              rmse       <= rm_rmse;
              early_stop <= rm_et_hit;
              fin        <= 1'b1;
              state      <= USE_FCT ? S_ILOAD : S_OUT;
            end else begin
              nnz   <= '0;
              state <= USE_FCT ? S_FLOAD : S_XUPD;
              fin   <= 1'b0;
            end
          end
        end

        S_FLOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == last_mac) begin
            cnt   <= '0;
            state <= S_FRUN;
          end
        end

        S_FRUN: begin
          if (cnt == '0) cnt <= (AW+2)'(1);
          if (ft_done) begin
            cnt   <= '0;
            idx   <= '0;
            state <= S_XUPD;
          end
        end

        S_XUPD: begin
          cnt <= cnt + 1'b1;
          if (dct_col && cnt == (AW+2)'(1)) xk <= x_dout;
          if (tr_out_valid) begin
            cnt <= '0;
            nnz <= nnz + (XAW+1)'(tr_nz);
            idx <= idx + 1'b1;
            if (idx == XAW'(N - 1)) begin
              idx   <= '0;
              state <= USE_FCT ? S_ILOAD : S_RUPD;
            end
          end
        end

        S_ILOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == last_mac) begin
            cnt   <= '0;
            state <= S_IRUN;
          end
        end

        S_IRUN: begin
          if (cnt == '0) cnt <= (AW+2)'(1);
          if (ft_done) begin
            cnt   <= '0;
            idx   <= '0;
            state <= fin ? S_OUT : S_RUPD;
          end
        end

        S_RUPD, S_OUT: begin
          cnt <= cnt + 1'b1;
          if (state == S_RUPD && cnt == (AW+2)'(1)) begin
            zm   <= zr_zout;
            rold <= zr_rout;
          end
          if (cnt == row_end) begin
            cnt <= '0;
            idx <= idx + 1'b1;
            if (state == S_OUT) begin
              out_valid <= 1'b1;
              out_data  <= sat_data(48'(corr));
            end
            if (idx == XAW'(M - 1)) begin
              idx <= '0;
              if (state == S_RUPD) begin
                iter  <= iter + 1'b1;
                state <= S_RMSE;
              end else begin
                out_last   <= 1'b1;
                block_done <= 1'b1;
                state      <= S_LOAD;
              end
            end
          end
        end

        default: state <= S_LOAD;
      endcase
    end
  end

  assign busy = (state != S_LOAD);

endmodule
