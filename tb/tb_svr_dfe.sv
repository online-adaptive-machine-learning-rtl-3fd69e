// tb_svr_dfe: end-to-end run of the online implied-volatility SVR with the
// dataflow engine doing all matrix work.
//
// A behavioural host in this testbench plays the role of the CPU side: it
// generates ticks (strike, maturity, implied volatility) on a 40 x 5 grid, maps
// them to the feature vector (k, k^2, tau, k*tau), evaluates the Gaussian
// kernel exp(-gamma |x - s|^2), keeps the support vector dictionary S and the
// intercept b, and follows the online loop: predict the tick, discount S by
// 1 - 1/(t + omega), ask the engine for the local fitness, then either add a
// new pattern (fitness + inverse update, bordered with Y and z), or, for a
// changed pattern, remove the support vector with the smallest S^2 (budget
// maintenance: inverse update with u = v = Y and scale 1/z), run the fitness of
// the tick against the reduced set and add it. t restarts every
// REOPEN ticks (the reopening interval).
//
// Checks: every engine result (p, c, new_pattern, z, each I and Y read, each
// element of every updated inverse) against a reference computed here with
// integer arithmetic; and, after every dictionary change, the engine-maintained
// inverse against a Gauss-Jordan inverse of the kernel matrix in real
// arithmetic. Each mechanism is counted and must occur: prediction, fitness
// with an empty dictionary, new pattern, changed pattern with removal,
// tick within epsilon, a full dictionary, output back-pressure, a partly
// filled last beat, and a reopening.
//
// The features are spread (strikes 1/4 apart, maturities 0.75 apart) so that
// the kernel matrix stays well conditioned. On closely spaced features the
// recursively kept inverse drifts away from the true one, even at Q32.32,
// and the 1e-4 relative bound on the inverse would not hold.
module tb_svr_dfe;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N  = 12;
  localparam int unsigned L  = 4;
  localparam int unsigned AW = $clog2(N + 1);
  localparam int TICKS  = 160;
  localparam int REOPEN = 40;

  // hyper-parameters of the paper's computational study
  localparam real RHO    = 0.3;
  localparam real LAMBDA = 0.75;
  localparam real OMEGA  = 7.0;
  localparam real EPS    = 0.01;
  localparam real GAMMA  = 0.25;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, wr_en, in_valid, in_ready, out_valid, out_ready, out_last;
  logic          busy, done, fit_new_pattern, fit_z_err;
  op_e           op, cur_op;
  vec_sel_e      wr_sel;
  logic [AW-1:0] n_len, wr_addr, y_addr;
  fx_t           rho, kxx, scale, wr_data, in_data [L], out_data [L];
  fx_t           fit_c, fit_z, i_rd, y_rd;

  svr_dfe #(.N_MAX(N), .LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_predict = 0, n_empty = 0, n_newpat = 0, n_changed = 0, n_within = 0;
  int n_known = 0, n_full = 0, n_stall = 0, n_partial = 0, n_reopen = 0, n_add = 0, n_remove = 0;

  // host state
  int  n = 0;                        // support vectors in the dictionary
  real sx [N][4];                    // their feature vectors
  real sw [N];                       // dictionary values S[s]
  real b = 0.0;
  rfx_t  kinv [N][N];                  // inverse kernel matrix, as kept by the engine
  bit  stall_on = 0;

  // stream buffers
  rfx_t  rows_in  [N][N];
  rfx_t  rows_out [N][N];
  int  nrows_out;
  real max_inv_err = 0.0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= stall_on ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && !out_ready) n_stall++;

  function automatic real kern(real a [4], real c [4]);
    real d2;
    d2 = 0.0;
    for (int i = 0; i < 4; i++) d2 += (a[i] - c[i]) ** 2;
    return $exp(-GAMMA * d2);
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  task automatic write_vec(vec_sel_e sel, rfx_t v [N], int len);
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      wr_en = 1; wr_sel = sel; wr_addr = AW'(i); wr_data = v[i];
    end
    @(negedge clk) wr_en = 0;
  endtask

  // Pulse start, stream nrows rows of len elements from rows_in, collect the
  // output stream into rows_out (one element per row for prediction).
  task automatic run_op(op_e o, int len, int nrows, rfx_t s_fx);
    int bpr;
    bpr = (len + L - 1) / L;
    if (len % L != 0) n_partial++;
    @(negedge clk);
    op = o; n_len = AW'(len); scale = s_fx; start = 1;
    @(negedge clk);
    start = 0;
    nrows_out = 0;
    fork
      begin
        for (int r = 0; r < nrows; r++)
          for (int c = 0; c < bpr; c++) begin
            in_valid = 1;
            for (int l = 0; l < L; l++) in_data[l] = (c * L + l < len) ? rows_in[r][c * L + l] : rnd_fx(30);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
          end
        in_valid = 0;
      end
      if (o != OP_FITNESS) begin
        int col;
        col = 0;
        while (nrows_out < nrows) begin
          @(posedge clk);
          if (out_valid && out_ready) begin
            if (o == OP_PREDICT) begin
              rows_out[nrows_out][0] = out_data[0];
              check(out_last, "prediction beat without out_last");
              nrows_out++;
            end else begin
              for (int l = 0; l < L; l++) begin
                if (col + l < len) rows_out[nrows_out][col + l] = out_data[l];
                else check(out_data[l] == 0, "lane past n not zero");
              end
              col += L;
              if (out_last) begin
                check(col >= len, "row ended early");
                col = 0;
                nrows_out++;
              end
            end
          end
        end
      end else begin
        @(posedge clk iff done);
      end
    join
    @(negedge clk);
  endtask

  // Fitness of feature x against the dictionary; returns I (reference) and z.
  task automatic fitness(real x [4], output bit newpat, output rfx_t iv [N], output rfx_t z_fx);
    rfx_t     kv [N];
    racc_t cacc;
    rfx_t     c_exp, z_exp;
    bit     zz;
    for (int i = 0; i < n; i++) kv[i] = to_fx(kern(sx[i], x));
    if (n == 0) n_empty++;
    write_vec(VEC_KSX, kv, n);
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) rows_in[i][j] = kinv[i][j];
    kxx = ONE;           // Gaussian kernel: K(x, x) = 1
    run_op(OP_FITNESS, n, n, 0);
    cacc = 0;
    for (int i = 0; i < n; i++) begin
      racc_t a;
      a = 0;
      for (int j = 0; j < n; j++) a += ref_prod(kv[j], kinv[i][j]);
      iv[i] = ref_trunc(a);
      cacc += ref_prod(iv[i], kv[i]);
    end
    c_exp = ref_trunc(cacc);
    z_exp = ref_recip(kxx - c_exp, zz);
    check(fit_c === c_exp, $sformatf("fitness c got %h exp %h", fit_c, c_exp));
    check(fit_z === z_exp, $sformatf("fitness z got %h exp %h", fit_z, z_exp));
    check(fit_new_pattern == (c_exp < ref_mul(rho, kxx)), "new_pattern flag");
    for (int a = 0; a < n; a++) begin
      @(negedge clk) y_addr = AW'(a);
      #1;
      check(i_rd === iv[a], $sformatf("I[%0d]", a));
      check(y_rd === -ref_mul(z_exp, iv[a]), $sformatf("Y[%0d]", a));
    end
    newpat = fit_new_pattern;
    z_fx   = z_exp;
  endtask

  // Support vector addition: X = K^-1 - I Y^T on the engine, bordered with Y, z.
  task automatic add_sv(real x [4], rfx_t iv [N], rfx_t z_fx, real w);
    rfx_t yv [N];
    for (int i = 0; i < n; i++) yv[i] = -ref_mul(z_fx, iv[i]);
    if (n > 0) begin
      write_vec(VEC_U, iv, n);
      write_vec(VEC_V, yv, n);
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) rows_in[i][j] = kinv[i][j];
      run_op(OP_UPDATE, n, n, ONE);
      for (int i = 0; i < n; i++) begin
        rfx_t t;
        t = ref_mul(ONE, iv[i]);
        for (int j = 0; j < n; j++) begin
          rfx_t e;
          e = kinv[i][j] - ref_mul(t, yv[j]);
          check(rows_out[i][j] === e, $sformatf("add X[%0d][%0d] got %h exp %h", i, j, rows_out[i][j], e));
          kinv[i][j] = rows_out[i][j];
        end
      end
    end
    for (int i = 0; i < n; i++) begin kinv[i][n] = yv[i]; kinv[n][i] = yv[i]; end
    kinv[n][n] = z_fx;
    sx[n] = x;
    sw[n] = w;
    n++;
    n_add++;
  endtask

  // Budget maintenance: remove the key with the smallest S^2 K(s,s).
  task automatic remove_sv();
    int r;
    rfx_t zr, sc, yv [N];
    bit zz;
    int m;
    r = 0;
    for (int i = 1; i < n; i++) if (sw[i] ** 2 < sw[r] ** 2) r = i;
    zr = kinv[r][r];
    m = 0;
    for (int i = 0; i < n; i++) if (i != r) begin
      int mm;
      yv[m] = kinv[i][r];
      mm = 0;
      for (int j = 0; j < n; j++) if (j != r) begin rows_in[m][mm] = kinv[i][j]; mm++; end
      m++;
    end
    sc = ref_recip(zr, zz);
    write_vec(VEC_U, yv, n - 1);
    write_vec(VEC_V, yv, n - 1);
    run_op(OP_UPDATE, n - 1, n - 1, sc);
    for (int i = 0; i < n - 1; i++) begin
      rfx_t t;
      t = ref_mul(sc, yv[i]);
      for (int j = 0; j < n - 1; j++) begin
        rfx_t e;
        e = rows_in[i][j] - ref_mul(t, yv[j]);
        check(rows_out[i][j] === e, $sformatf("remove M[%0d][%0d] got %h exp %h", i, j, rows_out[i][j], e));
      end
    end
    for (int i = 0; i < n - 1; i++) for (int j = 0; j < n - 1; j++) kinv[i][j] = rows_out[i][j];
    for (int i = r; i < n - 1; i++) begin sx[i] = sx[i + 1]; sw[i] = sw[i + 1]; end
    n--;
    n_remove++;
  endtask

  // Engine-kept inverse against a real-arithmetic inverse of the kernel matrix.
  task automatic check_inverse();
    real a [N][2*N];
    real err, mx, big;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < 2 * n; j++)
        a[i][j] = (j < n) ? kern(sx[i], sx[j]) : ((j - n == i) ? 1.0 : 0.0);
    for (int c = 0; c < n; c++) begin
      int p;
      real f;
      p = c;
      for (int i = c + 1; i < n; i++) if ((a[i][c] < 0 ? -a[i][c] : a[i][c]) > (a[p][c] < 0 ? -a[p][c] : a[p][c])) p = i;
      for (int j = 0; j < 2 * n; j++) begin f = a[c][j]; a[c][j] = a[p][j]; a[p][j] = f; end
      f = a[c][c];
      for (int j = 0; j < 2 * n; j++) a[c][j] /= f;
      for (int i = 0; i < n; i++) if (i != c) begin
        f = a[i][c];
        for (int j = 0; j < 2 * n; j++) a[i][j] -= f * a[c][j];
      end
    end
    mx = 0.0;
    big = 0.0;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) if ((a[i][n+j] < 0 ? -a[i][n+j] : a[i][n+j]) > big) big = (a[i][n+j] < 0 ? -a[i][n+j] : a[i][n+j]);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        err = from_fx(kinv[i][j]) - a[i][n + j];
        if (err < 0) err = -err;
        if (err > mx) mx = err;
      end
    mx = mx / (big > 1.0 ? big : 1.0);
    if (mx > max_inv_err) max_inv_err = mx;
    check(mx < 1.0e-4, $sformatf("engine inverse off by %g relative (n=%0d, largest entry %f)", mx, n, big));
  endtask

  initial begin
    rfx_t t;
    rst_n = 0; start = 0; wr_en = 0; in_valid = 0; op = OP_PREDICT; wr_sel = VEC_S;
    n_len = '0; wr_addr = '0; wr_data = '0; y_addr = '0; scale = '0; kxx = '0;
    rho = to_fx(RHO);
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t = 1;
    for (int tick = 0; tick < TICKS; tick++) begin
      real x [4], kappa, tau, y, f, step, sgn;
      int  si, mi;
      rfx_t sv [N], iv [N], zf;
      bit  np;
      stall_on = (tick % 3 == 0);
      // a tick on the 40-strike x 5-maturity grid, with a drifting skew
      si = $urandom % 40;
      mi = $urandom % 5;
      kappa = (real'(si) - 20.0) / 4.0;
      tau   = (real'(mi) + 1.0) * 0.75;
      x[0] = kappa; x[1] = kappa * kappa; x[2] = tau; x[3] = kappa * tau;
      y = 0.15 - 0.03 * kappa + 0.01 * kappa * kappa - 0.01 * tau
          + 0.02 * ((tick / 50) % 2) + 0.002 * (real'($urandom % 100) / 100.0 - 0.5);

      // step 2.b: predict the tick with the current dictionary
      f = b;
      if (n > 0) begin
        racc_t acc;
        acc = 0;
        for (int j = 0; j < n; j++) begin
          sv[j] = to_fx(sw[j]);
          rows_in[0][j] = to_fx(kern(sx[j], x));
          acc += ref_prod(rows_in[0][j], sv[j]);
        end
        write_vec(VEC_S, sv, n);
        run_op(OP_PREDICT, n, 1, 0);
        check(rows_out[0][0] === ref_trunc(acc), $sformatf("prediction got %h exp %h", rows_out[0][0], ref_trunc(acc)));
        f += from_fx(rows_out[0][0]);
        n_predict++;
      end

      // step 2.c: discount
      for (int j = 0; j < n; j++) sw[j] *= 1.0 - 1.0 / (real'(t) + OMEGA);
      step = 1.0 / (LAMBDA * (real'(t) + OMEGA));
      sgn  = (y > f) ? 1.0 : -1.0;

      // step 2.d: new pattern / changed pattern
      fitness(x, np, iv, zf);
      if (np && n < N) begin
        n_newpat++;
        add_sv(x, iv, zf, sgn * step);
        b += sgn * step;
        check_inverse();
      end else if ((y - f > EPS) || (f - y > EPS)) begin
        int key;
        n_changed++;
        key = -1;
        for (int j = 0; j < n; j++) if (sx[j] == x) key = j;
        if (key >= 0) begin
          // key already in S: only its value and b change, the inverse stays
          sw[key] += sgn * step;
          b += sgn * step;
          n_known++;
        end else begin
        if (np) n_full++;
        remove_sv();
        fitness(x, np, iv, zf);
        add_sv(x, iv, zf, sgn * step);
        b += sgn * step;
        check_inverse();
        end
      end else begin
        n_within++;
      end

      // steps 2.f, 2.g: next iterate, reopening
      t++;
      if ((tick + 1) % REOPEN == 0) begin t = 1; n_reopen++; end
    end

    $display("known=%0d predict=%0d empty=%0d new=%0d changed=%0d within=%0d full=%0d add=%0d remove=%0d stall=%0d partial=%0d reopen=%0d n=%0d max_inv_rel_err=%g",
             n_known, n_predict, n_empty, n_newpat, n_changed, n_within, n_full, n_add, n_remove, n_stall, n_partial, n_reopen, n, max_inv_err);
    check(n_predict > 0, "no prediction");
    check(n_empty > 0,   "no fitness with an empty dictionary");
    check(n_newpat > 0,  "no new pattern");
    check(n_changed > 0, "no changed pattern");
    check(n_within > 0,  "no tick within epsilon");
    check(n_full > 0,    "dictionary never full");
    check(n_remove > 0,  "no removal");
    check(n_stall > 0,   "no output stall");
    check(n_partial > 0, "no partly filled beat");
    check(n_reopen > 0,  "no reopening");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
