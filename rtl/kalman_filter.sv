// kalman_filter -- epoch-rate Kalman filter that predicts the GPU IPC indicator.
//
// State X is a scalar (the paper's GPU-IPC state); the observation Z_k is the
// vector of the three normalised epoch metrics [GPU_Icnt_Push,
// GPU_Stall_Icnt-Shader, GPU_Stall_Dramfull], each in [-1, 1]. Every time
// z_valid pulses the filter runs the paper's equations once:
//   (1) Xp = A*X + B*U          (2) Pp = A*P*A + Q
//   (3) K  = Pp*H^T (H*Pp*H^T + R)^-1
//   (4) X  = Xp + K (Z - H*Xp)  (5) P  = (1 - K*H) Pp
// With a scalar state and a diagonal R (independent observation noise, this
// design's assumption), the 3x3 inverse of Eq. 3 reduces exactly (matrix inversion
// lemma) to K_i = g_i * Pp / (1 + s*Pp) with constants g_i = H_i / R_i and
// s = sum H_i*g_i, so one scalar division per epoch suffices; it is done by the
// sequential divider kf_fx_div. The 0/1 output follows the paper: a positive
// estimate means GPU IPC is about to decline (pred = 1), a negative one that it
// stays high (pred = 0).
//
// Arithmetic is signed fixed point (kf_noc_pkg::KF_W bits, KF_FRAC fraction bits)
// with saturation. The model constants A, B, H, Q, R and the initial X, P are not
// given in the paper; the defaults (random-walk A = 1, no control effect B = 0,
// H = 1, Q = 0.05, R = 0.25, X0 = 0, P0 = 1) are this design's choices and are
// parameters in fixed-point units (1.0 = 65536).
//
// Timing: z_valid is accepted while idle; x_est/p_est/pred update and pred_valid
// pulses KF_W + KF_FRAC + 6 cycles after the edge that samples z_valid (54 by
// default).
module kalman_filter
  import kf_noc_pkg::*;
#(
  parameter int A_FX  = 65536,
  parameter int B_FX  = 0,
  parameter int Q_FX  = 3277,
  parameter int H1_FX = 65536,
  parameter int H2_FX = 65536,
  parameter int H3_FX = 65536,
  parameter int R1_FX = 16384,
  parameter int R2_FX = 16384,
  parameter int R3_FX = 16384,
  parameter int X0_FX = 0,
  parameter int P0_FX = 65536
)(
  input  logic clk,
  input  logic rst_n,
  input  logic z_valid,
  input  fx_t  z [3],
  input  logic u,           // control input U_{k-1}: the allocation mode in force
  output logic busy,
  output logic pred_valid,
  output logic pred,        // 0/1 decision to the routers
  output fx_t  x_est,
  output fx_t  p_est,
  output fx_t  gain [3]
);
  typedef enum logic [2:0] {S_IDLE, S_PRED, S_GAIN, S_DIV, S_K, S_UPD} state_e;

  function automatic fx_t sat(input longint v);
    longint maxv, minv;
    maxv = (longint'(1) <<< (KF_W - 1)) - 1;
    minv = -(longint'(1) <<< (KF_W - 1));
    if (v > maxv) return fx_t'(maxv);
    if (v < minv) return fx_t'(minv);
    return fx_t'(v);
  endfunction

  function automatic fx_t fmul(input fx_t a, input fx_t b);
    longint prod;
    prod = longint'(a) * longint'(b);
    return sat(prod >>> KF_FRAC);
  endfunction

  // elaboration-time constants g_i = H_i / R_i and s = sum H_i g_i
  localparam longint G1 = (longint'(H1_FX) <<< KF_FRAC) / longint'(R1_FX);
  localparam longint G2 = (longint'(H2_FX) <<< KF_FRAC) / longint'(R2_FX);
  localparam longint G3 = (longint'(H3_FX) <<< KF_FRAC) / longint'(R3_FX);
  localparam longint S_C = ((longint'(H1_FX) * G1) >>> KF_FRAC) +
                           ((longint'(H2_FX) * G2) >>> KF_FRAC) +
                           ((longint'(H3_FX) * G3) >>> KF_FRAC);
  localparam fx_t G_FX [3] = '{fx_t'(G1), fx_t'(G2), fx_t'(G3)};
  localparam fx_t H_FX [3] = '{fx_t'(H1_FX), fx_t'(H2_FX), fx_t'(H3_FX)};

  state_e st;
  fx_t    zr [3];
  logic   ur;
  fx_t    xp, pp, d;
  fx_t    s_den;

  logic          div_start, div_busy, div_done;
  logic [KF_W-1:0] div_q;

  assign s_den = sat(longint'(FX_ONE) + longint'(fmul(pp, fx_t'(S_C))));

  kf_fx_div #(.W(KF_W), .FRAC(KF_FRAC)) u_div (
    .clk, .rst_n, .start(div_start),
    .num(pp), .den(s_den),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  assign div_start = (st == S_GAIN);
  assign busy      = (st != S_IDLE);

  // measurement update terms (combinational, used in S_UPD)
  fx_t    x_new, kh, p_new;
  longint x_acc, kh_acc;
  always_comb begin
    x_acc  = longint'(xp);
    kh_acc = 0;
    for (int i = 0; i < 3; i++) begin
      fx_t innov;
      innov  = sat(longint'(zr[i]) - longint'(fmul(H_FX[i], xp)));
      x_acc  = x_acc + longint'(fmul(gain[i], innov));
      kh_acc = kh_acc + longint'(fmul(gain[i], H_FX[i]));
    end
    x_new = sat(x_acc);
    kh    = sat(kh_acc);
    p_new = fmul(sat(longint'(FX_ONE) - longint'(kh)), pp);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      zr         <= '{default: '0};
      ur         <= 1'b0;
      xp         <= '0;
      pp         <= '0;
      d          <= '0;
      gain       <= '{default: '0};
      x_est      <= fx_t'(X0_FX);
      p_est      <= fx_t'(P0_FX);
      pred       <= 1'b0;
      pred_valid <= 1'b0;
    end else begin
      pred_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (z_valid) begin
          zr <= z;
          ur <= u;
          st <= S_PRED;
        end
        S_PRED: begin                               // Eqs. (1), (2)
          xp <= sat(longint'(fmul(fx_t'(A_FX), x_est)) +
                    (ur ? longint'(B_FX) : longint'(0)));
          pp <= sat(longint'(fmul(fmul(fx_t'(A_FX), p_est), fx_t'(A_FX))) + longint'(Q_FX));
          st <= S_GAIN;
        end
        S_GAIN: st <= S_DIV;                        // divider started
        S_DIV: if (div_done) begin
          d  <= fx_t'(div_q);
          st <= S_K;
        end
        S_K: begin                                  // Eq. (3)
          for (int i = 0; i < 3; i++) gain[i] <= fmul(d, G_FX[i]);
          st <= S_UPD;
        end
        S_UPD: begin                                // Eqs. (4), (5)
          x_est      <= x_new;
          p_est      <= p_new;
          pred       <= (x_new > 0);
          pred_valid <= 1'b1;
          st         <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
