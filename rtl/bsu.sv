// bsu: Background Subtraction Unit, one per parallel core.
//
// Takes a new pixel value x and the Gaussian mixture stored for that pixel,
// classifies the pixel as background or foreground and returns the updated
// mixture. The steps, one state each, follow the online algorithm:
//   1. For every stored component k: sigma_k = sqrt(var_k), z_k =
//      (x - mu_k)/sigma_k, the Gaussian density N(x|mu_k,var_k) and the
//      mixture density p(x|bg) = sum w_k N(x|mu_k,var_k). The component with
//      the smallest Mahalanobis distance |z_k| is the closest one, c.
//   2. Threshold-free fit test: for eps = 1, 2, ... the probability
//      p~(x;eps) = w_c (G_c(x+eps) - G_c(x-eps)) / (2 eps), with G_c the
//      cumulative Gaussian of c, is evaluated until it stops growing; the
//      last growing value is p~(x;eps*). While the CDF difference is still
//      below the fixed-point resolution the search keeps widening.
//   3. Classification: p(bg|x) = p(x|bg) P_BG / (p(x|bg) + 1/256), the
//      pixel is foreground when p(bg|x) < 1/2.
//   4. If N(x|mu_c,var_c) >= p~(x;eps*) (and is not zero after rounding)
//      the sample fits and c is updated by
//      the follow-the-leader rules (w_c += (1-w_c)/N, mu_c and var_c move
//      towards x; other weights shrink by w/N). Otherwise a new component
//      (w = 1/N, mu = x, var = ((2 eps*)^2 - 1)/12) is written into a free
//      slot, the other weights are scaled to sum to (N-1)/N, components
//      below 1/N are dropped and the weights are renormalised to 1.
// Interface: in_valid/in_ready accepts {x, model}; out_valid/out_ready
// presents {model, p_bg, fg, new_comp}. One pixel at a time.
// Timing: 2 cycles per stored component for step 1, one cycle per eps step,
// then 2 (fit) or 5 (new component) cycles, plus one input and one output
// cycle. With 3 components and eps* = 2 that is about 14 cycles.
// Follows the source design: the equations, N = 100, the 1/256 foreground
// density, the 0.5 decision threshold, integer eps steps of 1. Own choices:
// fixed point instead of floating point, at most K_MAX = 8 stored components
// (a new component replaces the lightest one when all slots are used),
// variances floored at VAR_MIN = 0.25, eps limited to EPS_MAX, the updated
// weight used in the mean/variance update, and pruning only on creation.
module bsu
  import bsps_pkg::*;
#(
  parameter int N_HIST  = 100,  // history length N of the model
  parameter int EPS_MAX = 64    // largest eps tried by the fit test
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mfx_t        cfg_p_bg,     // prior p(bg), Q16 (e.g. 0.60)
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [7:0]  in_x,
  input  gmm_t        in_model,
  output logic        out_valid,
  input  logic        out_ready,
  output bsu_result_t out_res
);
  localparam fx_t VAR_MIN = FX_ONE >>> 2;
  localparam fx_t W_MIN   = FX_ONE / fx_t'(N_HIST);      // 1/N
  localparam fx_t W_KEEP  = FX_ONE - FX_ONE / fx_t'(N_HIST);  // (N-1)/N
  localparam int  KW      = $clog2(K_MAX);

  typedef enum logic [3:0] {
    S_IDLE, S_SIG, S_PDF, S_EPS, S_DEC, S_UPD, S_NEW, S_NEW2, S_PRUNE, S_NORM, S_OUT
  } state_t;

  state_t state;

  // working copy of the model in full precision
  logic        v   [K_MAX];
  fx_t         w   [K_MAX];
  fx_t         mu  [K_MAX];
  fx_t         var2[K_MAX];

  logic [7:0]  x;
  fx_t         xf;
  logic [KW-1:0] k;
  fx_t         sig;
  fx_t         pbg_acc;     // p(x|bg)
  fx_t         best_z2;
  logic [KW-1:0] c;
  logic        have_c;
  fx_t         pdf_c, isig_c;
  int unsigned eps, eps_best;
  fx_t         q_best;
  fx_t         post;
  logic        fg;
  logic        new_comp;
  logic [KW-1:0] slot;
  fx_t         wsum;

  assign xf = fx_t'(x) <<< FX_FRAC;

  // combinational helpers for the current state
  fx_t isig_k, z_k, z2_k, pdf_k;
  fx_t zp, zm, dcdf, q_e;
  always_comb begin
    isig_k = fx_div(FX_ONE, sig);
    z_k    = fx_mul(xf - mu[k], isig_k);
    z2_k   = fx_mul(z_k, z_k);
    pdf_k  = fx_mul(fx_mul(isig_k, FX_INV_SQRT2PI), fx_exp_neg(z2_k >>> 1));
    zp     = fx_mul(xf + fx_from_int(int'(eps)) - mu[c], isig_c);
    zm     = fx_mul(xf - fx_from_int(int'(eps)) - mu[c], isig_c);
    dcdf   = fx_phi(zp) - fx_phi(zm);
    q_e    = dcdf / fx_t'(2 * eps);
  end

  // update of the closest component (Eq. following-the-leader)
  fx_t wc_new, wn, den, dxc, mu_c_new, var_c_new;
  always_comb begin
    wc_new    = w[c] + (FX_ONE - w[c]) / fx_t'(N_HIST);
    wn        = wc_new * fx_t'(N_HIST);
    den       = wn + FX_ONE;
    dxc       = xf - mu[c];
    mu_c_new  = mu[c] + fx_div(dxc, den);
    var_c_new = var2[c] + fx_div(fx_mul(wn, fx_mul(dxc, dxc)), fx_mul(den, den))
                        - fx_div(var2[c], den);
    if (var_c_new < VAR_MIN) var_c_new = VAR_MIN;
  end

  // slot for a new component: first free one, else the lightest
  logic [KW-1:0] free_slot;
  logic          free_found;
  fx_t           others_sum;
  always_comb begin
    free_slot  = '0;
    free_found = 1'b0;
    for (int i = K_MAX - 1; i >= 0; i--) begin
      if (!v[i]) begin
        free_slot  = KW'(i);
        free_found = 1'b1;
      end
    end
    if (!free_found) begin
      for (int i = 0; i < K_MAX; i++)
        if (w[i] < w[free_slot]) free_slot = KW'(i);
    end
    others_sum = '0;
    for (int i = 0; i < K_MAX; i++)
      if (v[i] && KW'(i) != free_slot) others_sum = others_sum + w[i];
  end

  // weight sum of the components that survive pruning
  fx_t keep_sum;
  always_comb begin
    keep_sum = '0;
    for (int i = 0; i < K_MAX; i++)
      if (v[i] && !(KW'(i) != slot && w[i] < W_MIN)) keep_sum = keep_sum + w[i];
  end

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  always_comb begin
    for (int i = 0; i < K_MAX; i++) begin
      out_res.model[i].valid  = v[i];
      out_res.model[i].w      = v[i] ? fx_to_m(w[i])    : '0;
      out_res.model[i].mu     = v[i] ? fx_to_m(mu[i])   : '0;
      out_res.model[i].sigma2 = v[i] ? fx_to_m(var2[i]) : '0;
    end
    out_res.p_bg     = fx_to_m(post);
    out_res.fg       = fg;
    out_res.new_comp = new_comp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      x        <= '0;
      k        <= '0;
      sig      <= FX_ONE;
      pbg_acc  <= '0;
      best_z2  <= FX_MAX;
      c        <= '0;
      have_c   <= 1'b0;
      pdf_c    <= '0;
      isig_c   <= FX_ONE;
      eps      <= 1;
      eps_best <= 1;
      q_best   <= '0;
      post     <= '0;
      fg       <= 1'b0;
      new_comp <= 1'b0;
      slot     <= '0;
      wsum     <= '0;
      for (int i = 0; i < K_MAX; i++) begin
        v[i] <= 1'b0; w[i] <= '0; mu[i] <= '0; var2[i] <= VAR_MIN;
      end
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          x <= in_x;
          for (int i = 0; i < K_MAX; i++) begin
            v[i]    <= in_model[i].valid;
            w[i]    <= fx_from_m(in_model[i].w);
            mu[i]   <= fx_from_m(in_model[i].mu);
            var2[i] <= (fx_from_m(in_model[i].sigma2) < VAR_MIN) ? VAR_MIN
                                                                  : fx_from_m(in_model[i].sigma2);
          end
          k        <= '0;
          pbg_acc  <= '0;
          best_z2  <= FX_MAX;
          have_c   <= 1'b0;
          c        <= '0;
          new_comp <= 1'b0;
          state    <= S_SIG;
        end

        // step 1: per component standard deviation, density and distance
        S_SIG: begin
          sig   <= fx_sqrt(var2[k]);
          state <= S_PDF;
        end
        S_PDF: begin
          if (v[k]) begin
            pbg_acc <= pbg_acc + fx_mul(w[k], pdf_k);
            if (!have_c || z2_k < best_z2) begin
              best_z2 <= z2_k;
              c       <= k;
              pdf_c   <= pdf_k;
              isig_c  <= isig_k;
              have_c  <= 1'b1;
            end
          end
          if (k == KW'(K_MAX - 1)) begin
            eps      <= 1;
            eps_best <= 1;
            q_best   <= '0;
            state    <= S_EPS;
          end else begin
            k     <= k + 1'b1;
            state <= S_SIG;
          end
        end

        // step 2: search eps* that maximises p~(x;eps)
        S_EPS: begin
          if (!have_c) begin
            state <= S_DEC;
          end else if (eps == 1 || q_e > q_best || q_best == 0) begin
            q_best   <= q_e;
            eps_best <= eps;
            if (eps == EPS_MAX) state <= S_DEC;
            else                eps   <= eps + 1;
          end else begin
            state <= S_DEC;
          end
        end

        // step 3 and the fit decision
        S_DEC: begin
          post <= fx_div(fx_mul(pbg_acc, fx_from_m(cfg_p_bg)), pbg_acc + FX_INV256);
          fg   <= (fx_div(fx_mul(pbg_acc, fx_from_m(cfg_p_bg)), pbg_acc + FX_INV256) < FX_HALF);
          if (have_c && pdf_c != 0 && pdf_c >= fx_mul(w[c], q_best)) state <= S_UPD;
          else                                          state <= S_NEW;
        end

        // step 4a: the sample fits the closest component
        S_UPD: begin
          for (int i = 0; i < K_MAX; i++) begin
            if (v[i]) begin
              if (KW'(i) == c) begin
                w[i]    <= wc_new;
                mu[i]   <= mu_c_new;
                var2[i] <= var_c_new;
              end else begin
                w[i] <= w[i] - w[i] / fx_t'(N_HIST);
              end
            end
          end
          state <= S_OUT;
        end

        // step 4b: create a new component
        S_NEW: begin
          slot     <= free_slot;
          new_comp <= 1'b1;
          for (int i = 0; i < K_MAX; i++)
            if (v[i] && KW'(i) != free_slot && others_sum > 0)
              w[i] <= fx_div(fx_mul(w[i], W_KEEP), others_sum);
          v[free_slot]    <= 1'b0;
          state           <= S_NEW2;
        end
        S_NEW2: begin
          v[slot]    <= 1'b1;
          w[slot]    <= W_MIN;
          mu[slot]   <= xf;
          var2[slot] <= fx_from_int((4 * int'(eps_best) * int'(eps_best)) - 1) / 12;
          state      <= S_PRUNE;
        end
        S_PRUNE: begin
          for (int i = 0; i < K_MAX; i++)
            if (v[i] && KW'(i) != slot && w[i] < W_MIN) v[i] <= 1'b0;
          wsum  <= keep_sum;
          state <= S_NORM;
        end
        S_NORM: begin
          for (int i = 0; i < K_MAX; i++)
            if (v[i]) w[i] <= fx_div(w[i], wsum);
          state <= S_OUT;
        end

        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_OUT && !out_ready) |=> (state == S_OUT));
endmodule
