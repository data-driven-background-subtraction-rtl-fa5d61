// meu: Model Estimation Unit. Builds the initial background model of one
// pixel from a short history of its values.
//
// Used once, when the system starts. For one pixel location it receives the
// N_HIST most recent values, fits a Gaussian mixture whose number of
// components is chosen by the data, and returns it in the stored model
// format (weight, mean, variance per component). The phases are:
//   1. Pixel history: the N values are written into a local buffer while
//      their mean m0 and variance v0 are accumulated (priors: m0, beta0 =
//      b0/(a0 v0), a0 = b0 = 1e-3, lambda0 = 1).
//   2. k-means++ clustering: the first centre is a random sample; each
//      further centre is drawn with probability proportional to the squared
//      distance to the nearest centre already chosen (random numbers from a
//      32-bit LFSR), up to K_INIT centres or until every sample coincides
//      with a centre. KM_ITERS Lloyd passes then refine the partition.
//   3. Variational EM: the partition gives N_k, centroid and spread per
//      cluster, from which the M-step formulas give lambda_k, beta_k, m_k,
//      a_k, b_k. Each E-step evaluates for every sample and component
//      ln rho_nk = psi(lambda_k) - psi(sum lambda) + (psi(a_k) - ln b_k)/2
//                  - a_k/(2 b_k) (x_n - m_k)^2 - 1/(2 beta_k),
//      normalises rho over k to r_nk and accumulates N_k, sum r x, sum r x^2;
//      the M-step recomputes the hyper-parameters. EM_ITERS iterations.
//   4. Pruning and output: components with N_k/N < 1/N are dropped; the
//      K_MAX heaviest survivors are output with w = N_k/N renormalised to
//      sum 1, mu = m_k and variance b_k/a_k (the inverse of E[tau_k]).
// Interface: hist_valid/hist_ready takes the N history values one per cycle;
// out_valid/out_ready hands over the model and its component count.
// Timing (one operation per cycle): about 2N per k-means++ centre,
// KM_ITERS*(N*(K+1)+K) for Lloyd, EM_ITERS*(3NK+2K+1) for EM, with K the
// number of distinct clusters found (at most K_INIT); measured 50 000 to
// 100 000 cycles for N = 100 histories of 1 to 3 modes.
// Follows the source design: k-means++ seeding, the variational E and M
// steps and their priors, N = 100, 10 EM iterations, pruning below 1/N.
// Own choices: fixed point, K_INIT = 50 seeds, a fixed iteration count in
// place of a convergence test, the number of Lloyd passes, the LFSR, w =
// N_k/N as the output weight, and the limit of K_MAX stored components.
// Known limitation: with these priors and 10 iterations the fit often keeps
// more components than the data has modes (a mode is split over several
// neighbouring grey levels); the mixture as a whole is right, but when more
// than K_MAX survive, the truncation shifts weight between modes.
// Synthesis note: the front end reports "asynchronous load value missing"
// for the named blocks' local variables; they are blocking temporaries
// written before being read in the same cycle and hold no state.
module meu
  import bsps_pkg::*;
#(
  parameter int          N_HIST   = 100,
  parameter int          K_INIT   = 50,
  parameter int          KM_ITERS = 4,
  parameter int          EM_ITERS = 10,
  parameter logic [31:0] SEED     = 32'h1D87_2B41
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hist_valid,
  output logic        hist_ready,
  input  logic [7:0]  hist_x,
  output logic        out_valid,
  input  logic        out_ready,
  output gmm_t        out_model,
  output logic [$clog2(K_MAX+1)-1:0] out_ncomp,
  output logic        busy
);
  localparam fx_t A0   = fx_t'(64'sd4294967);  // 1e-3
  localparam fx_t B0   = fx_t'(64'sd4294967);  // 1e-3
  localparam fx_t LAM0 = FX_ONE;
  localparam fx_t N_FX = fx_t'(N_HIST) <<< FX_FRAC;
  localparam fx_t NK_EPS = fx_t'(64'sd4295);    // 1e-6, below this N_k is empty
  localparam int  NW   = $clog2(N_HIST);
  localparam int  KW   = $clog2(K_INIT);
  localparam int  JW   = $clog2(K_MAX + 1);

  typedef enum logic [4:0] {
    M_LOAD, M_PRIOR, M_SEED0, M_DIST, M_PICK0, M_PICK, M_KM, M_KA, M_KACC, M_KUPD,
    M_MSTEP, M_PSI, M_PRE, M_E1, M_E2, M_E3, M_SEL0, M_SEL, M_NORM, M_DONE
  } state_t;
  state_t state;

  logic [31:0] lfsr;

  // pixel history and k-means++ distances
  logic [7:0]  hist [N_HIST];
  logic [16:0] dsq  [N_HIST];
  logic [NW:0] n;
  logic [31:0] sum_x, sum_xx;
  logic [31:0] dsum, cum, rpick;
  logic [7:0]  cnew;

  // per component state
  fx_t  cen [K_INIT];
  logic act [K_INIT];
  fx_t  sN [K_INIT], sX [K_INIT], sXX [K_INIT];
  fx_t  lam [K_INIT], bet [K_INIT], mm [K_INIT], aa [K_INIT], bb [K_INIT];
  fx_t  ck [K_INIT], ek [K_INIT], lk [K_INIT];
  logic taken [K_INIT];
  logic [KW:0] k, kcount, bk;
  fx_t  best;

  fx_t  m0, beta0, lam_sum, psi_lam, lmax, rsum;
  int unsigned km_it, em_it;

  gmm_t out_r;
  logic [JW-1:0] j;

  assign hist_ready = (state == M_LOAD);
  assign out_valid  = (state == M_DONE);
  assign out_model  = out_r;
  assign out_ncomp  = j;
  assign busy       = (state != M_LOAD);

  function automatic fx_t fx_px(input logic [7:0] v);
    return fx_t'(v) <<< FX_FRAC;
  endfunction

  // candidate for the next output slot: heaviest surviving component
  logic [KW:0] sel_k;
  logic        sel_found;
  always_comb begin
    sel_k     = '0;
    sel_found = 1'b0;
    for (int i = 0; i < K_INIT; i++) begin
      if (act[i] && !taken[i] && sN[i] >= FX_ONE &&
          (!sel_found || sN[i] > sN[sel_k])) begin
        sel_k     = (KW+1)'(i);
        sel_found = 1'b1;
      end
    end
  end

  fx_t out_wsum;
  always_comb begin
    out_wsum = '0;
    for (int i = 0; i < K_MAX; i++)
      if (out_r[i].valid) out_wsum = out_wsum + fx_from_m(out_r[i].w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= M_LOAD;
      lfsr  <= SEED;
      n <= '0; k <= '0; kcount <= '0; bk <= '0; j <= '0;
      sum_x <= '0; sum_xx <= '0; dsum <= '0; cum <= '0; rpick <= '0; cnew <= '0;
      best <= '0; m0 <= '0; beta0 <= '0; lam_sum <= '0; psi_lam <= '0;
      lmax <= '0; rsum <= '0; km_it <= 0; em_it <= 0;
      out_r <= '0;
      for (int i = 0; i < N_HIST; i++) begin
        hist[i] <= '0; dsq[i] <= '0;
      end
      for (int i = 0; i < K_INIT; i++) begin
        cen[i] <= '0; act[i] <= 1'b0; sN[i] <= '0; sX[i] <= '0; sXX[i] <= '0;
        lam[i] <= '0; bet[i] <= FX_ONE; mm[i] <= '0; aa[i] <= A0; bb[i] <= B0;
        ck[i] <= '0; ek[i] <= '0; lk[i] <= '0; taken[i] <= 1'b0;
      end
    end else begin
      // Galois LFSR, taps 32,22,2,1
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);

      case (state)
        // ---- 1. pixel history ------------------------------------------
        M_LOAD: if (hist_valid) begin
          hist[n[NW-1:0]] <= hist_x;
          sum_x  <= sum_x + 32'(hist_x);
          sum_xx <= sum_xx + 32'(hist_x) * 32'(hist_x);
          if (n == (NW+1)'(N_HIST - 1)) begin
            n     <= '0;
            state <= M_PRIOR;
          end else begin
            n <= n + 1'b1;
          end
        end

        M_PRIOR: begin : prior
          fx_t mean, v0;
          mean = fx_div(fx_t'(sum_x) <<< FX_FRAC, N_FX);
          v0   = fx_div(fx_t'(sum_xx) <<< FX_FRAC, N_FX) - fx_mul(mean, mean);
          if (v0 < (FX_ONE >>> 2)) v0 = FX_ONE >>> 2;
          m0    <= mean;
          beta0 <= fx_div(B0, fx_mul(A0, v0));
          state <= M_SEED0;
        end

        // ---- 2. k-means++ seeding --------------------------------------
        M_SEED0: begin
          cnew   <= hist[NW'(lfsr % 32'(N_HIST))];
          cen[0] <= fx_px(hist[NW'(lfsr % 32'(N_HIST))]);
          kcount <= (KW+1)'(1);
          n      <= '0;
          dsum   <= '0;
          state  <= M_DIST;
        end
        M_DIST: begin : dist_upd
          logic signed [9:0] dd;
          logic [16:0] d2, nd;
          dd = $signed({2'b00, hist[n[NW-1:0]]}) - $signed({2'b00, cnew});
          d2 = 17'(dd * dd);
          nd = (kcount == (KW+1)'(1) || d2 < dsq[n[NW-1:0]]) ? d2 : dsq[n[NW-1:0]];
          dsq[n[NW-1:0]] <= nd;
          dsum <= dsum + 32'(nd);
          if (n == (NW+1)'(N_HIST - 1)) begin
            n     <= '0;
            state <= M_PICK0;
          end else begin
            n <= n + 1'b1;
          end
        end
        M_PICK0: begin
          if (kcount == (KW+1)'(K_INIT) || dsum == 0) begin
            km_it <= 0;
            state <= M_KM;
          end else begin
            rpick <= lfsr % dsum;
            cum   <= '0;
            n     <= '0;
            state <= M_PICK;
          end
        end
        M_PICK: begin
          if (cum + 32'(dsq[n[NW-1:0]]) > rpick) begin
            cnew        <= hist[n[NW-1:0]];
            cen[kcount[KW-1:0]] <= fx_px(hist[n[NW-1:0]]);
            kcount      <= kcount + 1'b1;
            n           <= '0;
            dsum        <= '0;
            state       <= M_DIST;
          end else begin
            cum <= cum + 32'(dsq[n[NW-1:0]]);
            n   <= n + 1'b1;
          end
        end

        // ---- Lloyd refinement -------------------------------------------
        M_KM: begin
          for (int i = 0; i < K_INIT; i++) begin
            sN[i] <= '0; sX[i] <= '0; sXX[i] <= '0;
          end
          n     <= '0;
          k     <= '0;
          best  <= FX_MAX;
          state <= M_KA;
        end
        M_KA: begin : assign_k
          fx_t d;
          d = fx_px(hist[n[NW-1:0]]) - cen[k[KW-1:0]];
          if (d < 0) d = -d;
          if (d < best) begin
            best <= d;
            bk   <= k;
          end
          if (k == kcount - 1'b1) state <= M_KACC;
          else                    k     <= k + 1'b1;
        end
        M_KACC: begin
          sN[bk[KW-1:0]]  <= sN[bk[KW-1:0]] + FX_ONE;
          sX[bk[KW-1:0]]  <= sX[bk[KW-1:0]] + fx_px(hist[n[NW-1:0]]);
          sXX[bk[KW-1:0]] <= sXX[bk[KW-1:0]] +
                             (fx_t'(32'(hist[n[NW-1:0]]) * 32'(hist[n[NW-1:0]])) <<< FX_FRAC);
          k    <= '0;
          best <= FX_MAX;
          if (n == (NW+1)'(N_HIST - 1)) begin
            n     <= '0;
            state <= M_KUPD;
          end else begin
            n     <= n + 1'b1;
            state <= M_KA;
          end
        end
        M_KUPD: begin
          if (sN[k[KW-1:0]] > 0) cen[k[KW-1:0]] <= fx_div(sX[k[KW-1:0]], sN[k[KW-1:0]]);
          if (k == kcount - 1'b1) begin
            k <= '0;
            if (km_it + 1 == KM_ITERS) begin
              em_it   <= 0;
              lam_sum <= '0;
              state   <= M_MSTEP;
            end else begin
              km_it <= km_it + 1;
              state <= M_KM;
            end
          end else begin
            k <= k + 1'b1;
          end
        end

        // ---- 3. variational EM -----------------------------------------
        M_MSTEP: begin : mstep
          fx_t nk, xb, sg, bk_new, dm;
          nk = sN[k[KW-1:0]];
          if (nk > NK_EPS) begin
            xb = fx_div(sX[k[KW-1:0]], nk);
            sg = fx_div(sXX[k[KW-1:0]], nk) - fx_mul(xb, xb);
            if (sg < 0) sg = '0;
          end else begin
            xb = m0;
            sg = '0;
          end
          bk_new = beta0 + nk;
          dm     = xb - m0;
          lam[k[KW-1:0]] <= nk + LAM0;
          bet[k[KW-1:0]] <= bk_new;
          mm[k[KW-1:0]]  <= fx_div(fx_mul(beta0, m0) + fx_mul(nk, xb), bk_new);
          aa[k[KW-1:0]]  <= A0 + (nk >>> 1);
          bb[k[KW-1:0]]  <= B0 + ((fx_mul(nk, sg) +
                                   fx_mul(fx_div(fx_mul(beta0, nk), bk_new), fx_mul(dm, dm))) >>> 1);
          if (em_it == 0) act[k[KW-1:0]] <= (nk > NK_EPS);
          if (em_it == 0 ? (nk > NK_EPS) : act[k[KW-1:0]])
            lam_sum <= lam_sum + nk + LAM0;
          if (k == kcount - 1'b1) begin
            k <= '0;
            if (em_it == EM_ITERS) state <= M_SEL0;
            else begin
              em_it <= em_it + 1;
              state <= M_PSI;
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        M_PSI: begin
          psi_lam <= fx_digamma(lam_sum);
          k       <= '0;
          state   <= M_PRE;
        end
        M_PRE: begin
          ck[k[KW-1:0]] <= fx_digamma(lam[k[KW-1:0]]) - psi_lam
                         + ((fx_digamma(aa[k[KW-1:0]]) - fx_ln(bb[k[KW-1:0]])) >>> 1)
                         - fx_div(FX_HALF, bet[k[KW-1:0]]);
          ek[k[KW-1:0]] <= fx_div(aa[k[KW-1:0]], bb[k[KW-1:0]]);
          if (k == kcount - 1'b1) begin
            for (int i = 0; i < K_INIT; i++) begin
              sN[i] <= '0; sX[i] <= '0; sXX[i] <= '0;
            end
            k     <= '0;
            n     <= '0;
            lmax  <= -FX_MAX;
            state <= M_E1;
          end else begin
            k <= k + 1'b1;
          end
        end
        M_E1: begin : estep1
          fx_t dx, l;
          dx = fx_px(hist[n[NW-1:0]]) - mm[k[KW-1:0]];
          l  = ck[k[KW-1:0]] - (fx_mul(ek[k[KW-1:0]], fx_mul(dx, dx)) >>> 1);
          lk[k[KW-1:0]] <= l;
          if (act[k[KW-1:0]] && l > lmax) lmax <= l;
          if (k == kcount - 1'b1) begin
            k     <= '0;
            rsum  <= '0;
            state <= M_E2;
          end else begin
            k <= k + 1'b1;
          end
        end
        M_E2: begin : estep2
          fx_t rho;
          rho = act[k[KW-1:0]] ? fx_exp_neg(lmax - lk[k[KW-1:0]]) : '0;
          lk[k[KW-1:0]] <= rho;
          rsum <= rsum + rho;
          if (k == kcount - 1'b1) begin
            k     <= '0;
            state <= M_E3;
          end else begin
            k <= k + 1'b1;
          end
        end
        M_E3: begin : estep3
          fx_t r, xf;
          r  = fx_div(lk[k[KW-1:0]], rsum);
          xf = fx_px(hist[n[NW-1:0]]);
          sN[k[KW-1:0]]  <= sN[k[KW-1:0]] + r;
          sX[k[KW-1:0]]  <= sX[k[KW-1:0]] + fx_mul(r, xf);
          sXX[k[KW-1:0]] <= sXX[k[KW-1:0]] + fx_mul(r, fx_t'(32'(hist[n[NW-1:0]]) * 32'(hist[n[NW-1:0]])) <<< FX_FRAC);
          if (k == kcount - 1'b1) begin
            k    <= '0;
            lmax <= -FX_MAX;
            if (n == (NW+1)'(N_HIST - 1)) begin
              n       <= '0;
              lam_sum <= '0;
              state   <= M_MSTEP;
            end else begin
              n     <= n + 1'b1;
              state <= M_E1;
            end
          end else begin
            k <= k + 1'b1;
          end
        end

        // ---- 4. pruning and output -------------------------------------
        M_SEL0: begin
          for (int i = 0; i < K_INIT; i++) taken[i] <= 1'b0;
          out_r <= '0;
          j     <= '0;
          state <= M_SEL;
        end
        M_SEL: begin
          if (sel_found && j != JW'(K_MAX)) begin
            taken[sel_k[KW-1:0]]      <= 1'b1;
            out_r[j[JW-2:0]].valid  <= 1'b1;
            out_r[j[JW-2:0]].w      <= fx_to_m(fx_div(sN[sel_k[KW-1:0]], N_FX));
            out_r[j[JW-2:0]].mu     <= fx_to_m(mm[sel_k[KW-1:0]]);
            out_r[j[JW-2:0]].sigma2 <= fx_to_m(fx_div(bb[sel_k[KW-1:0]], aa[sel_k[KW-1:0]]));
            j <= j + 1'b1;
          end else begin
            state <= M_NORM;
          end
        end
        M_NORM: begin
          for (int i = 0; i < K_MAX; i++)
            if (out_r[i].valid && out_wsum > 0)
              out_r[i].w <= fx_to_m(fx_div(fx_from_m(out_r[i].w), out_wsum));
          state <= M_DONE;
        end
        M_DONE: if (out_ready) begin
          n      <= '0;
          sum_x  <= '0;
          sum_xx <= '0;
          state  <= M_LOAD;
        end
        default: state <= M_LOAD;
      endcase
    end
  end

  // the E-step normaliser is never zero: the best component has rho = 1
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == M_E3) |-> (rsum >= FX_ONE));
endmodule
