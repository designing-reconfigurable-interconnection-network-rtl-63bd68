// tb_kalman_filter -- the fixed-point filter against a floating-point reference
// that evaluates the Kalman equations literally, including the 3x3 matrix
// inverse of the gain equation (Gauss-Jordan elimination). Two filters run side
// by side: the default model, and one with A = 0.95, unequal H and R, Q = 0.1
// and a control gain B = 0.1 driven by a random control input. Each epoch the state, covariance, gains and 0/1 decision are
// compared (tolerance 0.01), and the latency from z_valid to pred_valid is checked
// against KF_W + KF_FRAC + 6 cycles.
module tb_kalman_filter;
  import kf_noc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic z_valid = 0, u = 0;
  fx_t  z [3];
  logic busy [2], pv [2], pred [2];
  fx_t  x [2], p [2];
  fx_t  g0 [3], g1 [3];
  int checks = 0, failures = 0;
  localparam real ONE = 65536.0;

  always #5 clk = ~clk;

  kalman_filter dut0 (.clk, .rst_n, .z_valid, .z, .u, .busy(busy[0]), .pred_valid(pv[0]),
    .pred(pred[0]), .x_est(x[0]), .p_est(p[0]), .gain(g0));
  kalman_filter #(.B_FX(6554), .H1_FX(65536), .H2_FX(32768), .H3_FX(98304),
                  .R1_FX(8192), .R2_FX(32768), .R3_FX(65536), .Q_FX(6554), .A_FX(62259))
    dut1 (.clk, .rst_n, .z_valid, .z, .u, .busy(busy[1]), .pred_valid(pv[1]),
    .pred(pred[1]), .x_est(x[1]), .p_est(p[1]), .gain(g1));

  // reference model state
  real rx [2], rp [2];
  real A [2], B [2], Q [2];
  real H [2][3], R [2][3];

  task automatic ref_step(input int m, input real zr [3], input bit uu, output real k [3]);
    real xp, pp, S [3][6], Kv [3];
    xp = A[m] * rx[m] + B[m] * (uu ? 1.0 : 0.0);
    pp = A[m] * rp[m] * A[m] + Q[m];
    // S = H pp H^T + R, augmented with identity for Gauss-Jordan
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
      S[i][j]   = H[m][i] * pp * H[m][j] + ((i == j) ? R[m][i] : 0.0);
      S[i][j+3] = (i == j) ? 1.0 : 0.0;
    end
    for (int c = 0; c < 3; c++) begin
      real piv;
      piv = S[c][c];
      for (int j = 0; j < 6; j++) S[c][j] = S[c][j] / piv;
      for (int r = 0; r < 3; r++) if (r != c) begin
        real f;
        f = S[r][c];
        for (int j = 0; j < 6; j++) S[r][j] = S[r][j] - f * S[c][j];
      end
    end
    for (int j = 0; j < 3; j++) begin
      Kv[j] = 0.0;
      for (int i = 0; i < 3; i++) Kv[j] += pp * H[m][i] * S[i][j+3];
    end
    begin
      real xn, kh;
      xn = xp; kh = 0.0;
      for (int j = 0; j < 3; j++) begin
        xn += Kv[j] * (zr[j] - H[m][j] * xp);
        kh += Kv[j] * H[m][j];
      end
      rx[m] = xn;
      rp[m] = (1.0 - kh) * pp;
    end
    k = Kv;
  endtask

  function automatic real fx2r(input fx_t v);
    return real'(v) / ONE;
  endfunction

  task automatic cmp(input string what, input real got, input real exp);
    checks++;
    if (got - exp > 0.01 || exp - got > 0.01) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    A = '{1.0, 62259.0/ONE}; B = '{0.0, 6554.0/ONE}; Q = '{3277.0/ONE, 6554.0/ONE};
    H = '{'{1.0, 1.0, 1.0}, '{1.0, 0.5, 1.5}};
    R = '{'{0.25, 0.25, 0.25}, '{0.125, 0.5, 1.0}};
    rx = '{0.0, 0.0}; rp = '{1.0, 1.0};
    z = '{default: '0};
    #12 rst_n = 1;
    for (int ep = 0; ep < 60; ep++) begin
      real zr [3], k [3];
      int lat;
      bit ub;
      @(negedge clk);
      // phases of low and high congestion, as in the paper's traffic plots
      for (int i = 0; i < 3; i++) begin
        real base;
        base = ((ep / 15) % 2 == 1) ? 0.5 : -0.6;
        zr[i] = base + (real'($urandom_range(0, 400)) - 200.0) / 1000.0;
        z[i]  = fx_t'($rtoi(zr[i] * ONE));
        zr[i] = fx2r(z[i]);
      end
      ub = $urandom_range(0, 1);
      u = ub;
      z_valid = 1;
      @(negedge clk);
      z_valid = 0;
      lat = 1;
      while (!pv[0]) begin @(negedge clk); lat++; end
      checks++;
      if (lat != int'(KF_W + KF_FRAC + 6)) begin
        failures++; $display("FAIL latency %0d", lat);
      end
      ref_step(0, zr, ub, k);
      cmp("x0", fx2r(x[0]), rx[0]);
      cmp("p0", fx2r(p[0]), rp[0]);
      for (int i = 0; i < 3; i++) cmp("k0", fx2r(g0[i]), k[i]);
      if (rx[0] > 0.02 || rx[0] < -0.02) begin
        checks++;
        if (pred[0] != (rx[0] > 0.0)) begin failures++; $display("FAIL pred0 ep %0d", ep); end
      end
      ref_step(1, zr, ub, k);
      cmp("x1", fx2r(x[1]), rx[1]);
      cmp("p1", fx2r(p[1]), rp[1]);
      for (int i = 0; i < 3; i++) cmp("k1", fx2r(g1[i]), k[i]);
      // resynchronise the reference to the hardware state so that the fixed
      // point rounding does not accumulate over the run
      rx[0] = fx2r(x[0]); rp[0] = fx2r(p[0]);
      rx[1] = fx2r(x[1]); rp[1] = fx2r(p[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
