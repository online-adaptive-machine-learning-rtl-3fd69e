// tb_rank1_update_kernel: inverse update M - s*u*v^T with n = 9 on 4 lanes.
// Three passes: an addition-style update (s = 1, u = I, v = -z*I), a
// removal-style update (u = v, s = 1/z) with random output back-pressure, and
// a pass without back-pressure that checks one beat per cycle. Every output
// element, the zero lanes past n, out_last and done are compared with a
// reference.
module tb_rank1_update_kernel;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N   = 12;
  localparam int unsigned L   = 4;
  localparam int unsigned AW  = $clog2(N + 1);
  localparam int unsigned NL  = 9;
  localparam int unsigned BPR = (NL + L - 1) / L;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, wr_en, wr_sel_v, in_valid, in_ready, out_valid, out_ready, out_last, busy, done;
  logic [AW-1:0] n_len, wr_addr;
  fx_t           s, wr_data, in_data [L], out_data [L];
  int            checks = 0, failures = 0;
  rfx_t            m [NL][BPR*L];
  rfx_t            uv [NL], vv [NL];
  rfx_t            sv;
  int            beats_out, dones;
  bit            stall;

  rank1_update_kernel #(.N_MAX(N), .LANES(L)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= stall ? ($urandom % 2 == 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n && done) dones++;
    if (rst_n && out_valid && out_ready) begin
      int r, b;
      rfx_t t;
      r = beats_out / BPR;
      b = beats_out % BPR;
      t = ref_mul(sv, uv[r]);
      for (int l = 0; l < L; l++) begin
        int j;
        rfx_t e;
        j = b * L + l;
        e = (j < NL) ? m[r][j] - ref_mul(t, vv[j]) : 0;
        checks++;
        if (out_data[l] !== e) begin
          failures++;
          $display("row %0d col %0d: got %h exp %h", r, j, out_data[l], e);
        end
      end
      checks++;
      if (out_last != (b == BPR - 1)) begin failures++; $display("out_last wrong at beat %0d", beats_out); end
      beats_out++;
    end
  end

  task automatic pass(int mode);
    int t0, cyc;
    rfx_t zv, iv [NL];
    bit zz;
    zv = rnd_fx(0);
    for (int i = 0; i < NL; i++) begin
      iv[i] = rnd_fx(1);
      for (int j = 0; j < BPR * L; j++) m[i][j] = rnd_fx(2);
    end
    if (mode == 0) begin           // addition: X = K^-1 - I Y^T, Y = -z I
      sv = ONE;
      for (int i = 0; i < NL; i++) begin uv[i] = iv[i]; vv[i] = -ref_mul(zv, iv[i]); end
    end else begin                 // removal: K^-1 = X - Y Y^T / z
      sv = ref_recip(zv == 0 ? 1 : zv, zz);
      for (int i = 0; i < NL; i++) begin uv[i] = iv[i]; vv[i] = iv[i]; end
    end
    for (int i = 0; i < NL; i++) begin
      @(negedge clk); wr_en = 1; wr_sel_v = 0; wr_addr = AW'(i); wr_data = uv[i];
      @(negedge clk); wr_en = 1; wr_sel_v = 1; wr_addr = AW'(i); wr_data = vv[i];
    end
    @(negedge clk);
    wr_en = 0; s = sv; n_len = AW'(NL); start = 1;
    beats_out = 0; dones = 0;
    @(negedge clk);
    start = 0;
    t0 = $time;
    for (int i = 0; i < NL; i++)
      for (int b = 0; b < BPR; b++) begin
        in_valid = 1;
        for (int l = 0; l < L; l++) in_data[l] = m[i][b * L + l];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
    in_valid = 0;
    cyc = ($time - t0) / 10;
    while (beats_out < NL * BPR) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 3;
    if (beats_out != NL * BPR) begin failures++; $display("%0d beats out", beats_out); end
    if (dones != 1)            begin failures++; $display("%0d done pulses", dones); end
    if (busy)                  begin failures++; $display("still busy"); end
    if (!stall) begin
      checks++;
      if (cyc != NL * BPR) begin failures++; $display("rate: %0d cycles for %0d beats", cyc, NL * BPR); end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; wr_en = 0; wr_sel_v = 0; in_valid = 0; wr_addr = '0; wr_data = '0;
    s = '0; n_len = '0; stall = 0;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    pass(0);
    stall = 1;
    pass(1);
    stall = 0;
    pass(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
