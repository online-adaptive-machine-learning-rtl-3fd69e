// tb_svr_dfe_full: the engine at its default size (20000 support vectors,
// 16 lanes, all memories 20000 deep, every vector written in full):
//   * prediction of 3 samples against a full dictionary of n = 20000
//     (1250 beats each);
//   * local fitness and a rank-1 inverse update with n = 2000 (+n=<count>
//     sets another size; n = 20000 streams 25 M beats per operation, which
//     takes this simulator several tens of minutes).
// Matrices are generated on the fly from a hash of the row and column, so
// nothing is stored; every result is compared with a reference computed here
// beat by beat. The cycle count of each streaming phase is checked against
// one beat per clock.
module tb_svr_dfe_full;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N  = 20000;
  localparam int unsigned L  = 16;
  localparam int unsigned AW = $clog2(N + 1);
  int unsigned NR = 2000;                // fitness/update size (+n=)
  int unsigned BPR = (2000 + L - 1) / L;
  localparam int unsigned BPR_FULL = (N + L - 1) / L;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, wr_en, in_valid, in_ready, out_valid, out_ready, out_last;
  logic          busy, done, fit_new_pattern, fit_z_err;
  op_e           op, cur_op;
  vec_sel_e      wr_sel;
  logic [AW-1:0] n_len, wr_addr, y_addr;
  fx_t           rho, kxx, scale, wr_data, in_data [L], out_data [L];
  fx_t           fit_c, fit_z, i_rd, y_rd;

  svr_dfe dut (.*);

  int checks = 0, failures = 0;
  rfx_t vec_a [N], vec_b [N];

  initial begin
    #2000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Symmetric matrix element from a hash of (i, j), in [-1/64, 1/64).
  function automatic rfx_t melem(int i, int j);
    int unsigned a, b, h;
    a = (i < j) ? i : j;
    b = (i < j) ? j : i;
    h = a * 32'h9e3779b1 ^ (b * 32'h85ebca77 + 32'hc2b2ae3d);
    h ^= h >> 15;
    h *= 32'h2c1b3c6d;
    h ^= h >> 13;
    return rfx_t'($signed({{32{h[31]}}, h})) >>> 6;
  endfunction

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  task automatic write_vec(vec_sel_e sel, rfx_t v [N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_sel = sel; wr_addr = AW'(i); wr_data = v[i];
    end
    @(negedge clk) wr_en = 0;
  endtask

  task automatic go(op_e o, rfx_t s);
    @(negedge clk);
    op = o; n_len = AW'(NR); scale = s; start = 1;
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    longint t0;
    rst_n = 0; start = 0; wr_en = 0; in_valid = 0; op = OP_PREDICT; wr_sel = VEC_S;
    n_len = '0; wr_addr = '0; wr_data = '0; y_addr = '0; scale = '0;
    rho = to_fx(0.3); kxx = ONE; out_ready = 1;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    if ($value$plusargs("n=%d", NR)) BPR = (NR + L - 1) / L;
    for (int i = 0; i < N; i++) begin
      vec_a[i] = rnd_fx(-8);
      vec_b[i] = rnd_fx(-8);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- prediction: S = vec_a, rows K[i,:] = melem(i + 7, j)
    write_vec(VEC_S, vec_a);
    begin
      int unsigned nr_keep, bpr_keep;
      nr_keep = NR; bpr_keep = BPR;
      NR = N; BPR = BPR_FULL;
      go(OP_PREDICT, '0);
    for (int r = 0; r < 3; r++) begin
      racc_t acc;
      acc = 0;
      for (int c = 0; c < BPR; c++) begin
        for (int l = 0; l < L; l++) begin
          in_data[l] = melem(r + 7, c * L + l);
          if (c * L + l < NR) acc += ref_prod(in_data[l], vec_a[c * L + l]);
        end
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      check(out_data[0] === ref_trunc(acc), $sformatf("prediction %0d got %h exp %h", r, out_data[0], ref_trunc(acc)));
      @(negedge clk);
    end
      NR = nr_keep; BPR = bpr_keep;
    end

    // ---- local fitness: k = vec_b, K^-1[i][j] = melem(i, j)
    write_vec(VEC_KSX, vec_b);
    go(OP_FITNESS, '0);
    t0 = $time;
    begin
      racc_t cacc;
      rfx_t  iv, c_exp, z_exp;
      bit    zz;
      cacc = 0;
      in_valid = 1;
      for (int i = 0; i < NR; i++) begin
        racc_t a;
        a = 0;
        for (int c = 0; c < BPR; c++) begin
          for (int l = 0; l < L; l++) begin
            in_data[l] = melem(i, c * L + l);
            if (c * L + l < NR) a += ref_prod(in_data[l], vec_b[c * L + l]);
          end
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          #1;
        end
        iv = ref_trunc(a);
        cacc += ref_prod(iv, vec_b[i]);
        if (i % 997 == 0 || i == NR - 1) begin
          y_addr = AW'(i);
          // I[i] lands in the buffer two cycles after its last beat
          vec_a[i] = iv;
        end
      end
      in_valid = 0;
      check(($time - t0) / 10 <= longint'(NR) * BPR + 1, $sformatf("fitness stream took %0d cycles", ($time - t0) / 10));
      while (!done) @(negedge clk);
      c_exp = ref_trunc(cacc);
      z_exp = ref_recip(kxx - c_exp, zz);
      check(fit_c === c_exp, $sformatf("c got %h exp %h", fit_c, c_exp));
      check(fit_z === z_exp, $sformatf("z got %h exp %h", fit_z, z_exp));
      check(fit_new_pattern == (c_exp < ref_mul(rho, kxx)), "new_pattern");
      for (int i = 0; i < NR; i++)
        if (i % 997 == 0 || i == NR - 1) begin
          y_addr = AW'(i);
          #1;
          check(i_rd === vec_a[i], $sformatf("I[%0d]", i));
          check(y_rd === -ref_mul(z_exp, vec_a[i]), $sformatf("Y[%0d]", i));
        end
    end

    // ---- inverse update: out = M - s * u v^T, u = vec_b, v = vec_b, s = 1/4
    write_vec(VEC_U, vec_b);
    write_vec(VEC_V, vec_b);
    go(OP_UPDATE, ONE >>> 2);
    t0 = $time;
    begin
      int beats_in, beats_out, bad;
      beats_in = 0; beats_out = 0; bad = 0;
      fork
        begin
          in_valid = 1;
          for (int i = 0; i < NR; i++)
            for (int c = 0; c < BPR; c++) begin
              for (int l = 0; l < L; l++) in_data[l] = melem(i, c * L + l);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
              #1;
            end
          in_valid = 0;
        end
        begin
          int i, c;
          rfx_t t;
          i = 0; c = 0;
          t = ref_mul(ONE >>> 2, vec_b[0]);
          while (beats_out < NR * BPR) begin
            @(posedge clk);
            if (out_valid && out_ready) begin
              for (int l = 0; l < L; l++) begin
                rfx_t e;
                e = (c * L + l < NR) ? melem(i, c * L + l) - ref_mul(t, vec_b[c * L + l]) : '0;
                if (out_data[l] !== e) bad++;
              end
              beats_out++;
              c++;
              if (c == BPR) begin
                c = 0;
                i++;
                if (i < NR) t = ref_mul(ONE >>> 2, vec_b[i]);
              end
            end
          end
        end
      join
      checks += NR;   // one check per output row
      failures += (bad != 0) ? 1 : 0;
      if (bad != 0) $display("FAIL: %0d wrong elements in the updated matrix", bad);
      check(($time - t0) / 10 <= longint'(NR) * BPR + 2, $sformatf("update stream took %0d cycles", ($time - t0) / 10));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
