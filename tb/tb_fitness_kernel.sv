// tb_fitness_kernel: local fitness / z kernel with n = 10 support vectors on 4
// lanes (partly filled last beat). Trials with random symmetric inverses and
// kernel vectors, an identity inverse with a large k (fitness above rho: no
// new pattern), a tiny k (new pattern) and n = 0. Checks c = k^T K^-1 k, the
// new-pattern flag, z = 1/(k_xx - c), every I[a] and Y[a] = -z*I[a] against a
// reference, and the number of cycles from the first beat to done.
module tb_fitness_kernel;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N   = 12;
  localparam int unsigned L   = 4;
  localparam int unsigned AW  = $clog2(N + 1);
  localparam int unsigned BPR_MAX = (N + L - 1) / L;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, wr_en, in_valid, in_ready, busy, done, new_pattern, z_err;
  logic [AW-1:0] n_len, wr_addr, y_addr;
  fx_t           rho, kxx, wr_data, in_data [L], c, z, i_rd, y_rd;
  int            checks = 0, failures = 0;
  rfx_t            kv [N];
  rfx_t            kinv [N][N];
  int            n_np = 0, n_old = 0;

  fitness_kernel #(.N_MAX(N), .LANES(L)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic trial(int n, int mode);
    rfx_t     iv [N];
    racc_t cacc;
    rfx_t     c_exp, z_exp, bpr, t0, cyc;
    bit     np_exp, zz;
    bpr = (n + L - 1) / L;
    for (int i = 0; i < n; i++) begin
      kv[i] = (mode == 2) ? rnd_fx(-6) : rnd_fx(0);
      for (int j = 0; j <= i; j++) begin
        kinv[i][j] = (mode == 1) ? ((i == j) ? ONE : 0) : rnd_fx(1);
        kinv[j][i] = kinv[i][j];
      end
    end
    // reference
    cacc = 0;
    for (int i = 0; i < n; i++) begin
      racc_t a;
      a = 0;
      for (int j = 0; j < n; j++) a += ref_prod(kv[j], kinv[i][j]);
      iv[i] = ref_trunc(a);
      cacc += ref_prod(iv[i], kv[i]);
    end
    c_exp  = ref_trunc(cacc);
    np_exp = (c_exp < ref_mul(rho, kxx));
    z_exp  = ref_recip(kxx - c_exp, zz);
    // load k
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = kv[i];
    end
    @(negedge clk);
    wr_en = 0; n_len = AW'(n); start = 1;
    @(negedge clk);
    start = 0;
    t0 = $time;
    for (int i = 0; i < n; i++)
      for (int b = 0; b < bpr; b++) begin
        in_valid = 1;
        for (int l = 0; l < L; l++) in_data[l] = (b * L + l < n) ? kinv[i][b * L + l] : rnd_fx(14);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
    in_valid = 0;
    while (!done) @(negedge clk);
    cyc = ($time - t0) / 10;
    checks += 5;
    if (c !== c_exp)           begin failures++; $display("n=%0d c got %h exp %h", n, c, c_exp); end
    if (new_pattern != np_exp) begin failures++; $display("n=%0d new_pattern %b", n, new_pattern); end
    if (z !== z_exp)           begin failures++; $display("n=%0d z got %h exp %h", n, z, z_exp); end
    if (z_err != zz)           begin failures++; $display("n=%0d z_err", n); end
    // rows, one cycle to the last I, one to c, then the reciprocal
    if (cyc > n * bpr + 72)    begin failures++; $display("n=%0d took %0d cycles", n, cyc); end
    if (np_exp) n_np++; else n_old++;
    for (int a = 0; a < n; a++) begin
      y_addr = AW'(a);
      #1;
      checks += 2;
      if (i_rd !== iv[a])                begin failures++; $display("I[%0d] got %h exp %h", a, i_rd, iv[a]); end
      if (y_rd !== -ref_mul(z_exp, iv[a])) begin failures++; $display("Y[%0d] got %h", a, y_rd); end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; wr_en = 0; in_valid = 0; wr_addr = '0; wr_data = '0; y_addr = '0;
    n_len = '0;
    rho = to_fx(0.3); kxx = ONE;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    trial(10, 1);      // identity inverse, large k
    trial(10, 2);      // tiny k: new pattern
    trial(0, 0);       // empty dictionary
    for (rfx_t t = 0; t < 6; t++) trial(1 + $urandom % 12, 0);
    checks += 2;
    if (n_np == 0)  begin failures++; $display("no new pattern seen"); end
    if (n_old == 0) begin failures++; $display("no old pattern seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
