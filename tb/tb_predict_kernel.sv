// tb_predict_kernel: two instances of the prediction kernel.
//   * dut_fig3: three support vectors on three lanes, the configuration of
//     Fig. 3 (one multiplier per support vector, whole row in one beat);
//   * dut_fold: n = 37 support vectors folded onto 8 lanes (5 beats per row).
// Random weights S are written through the host port, random kernel rows are
// streamed, and every p[i] = sum_j S[j]*K[i,j] is compared with a reference.
// The folded instance also checks the rate (5 beats per sample).
module tb_predict_kernel;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- Fig. 3 configuration
  localparam int unsigned N3 = 3;
  logic         rst_n, start3, wr3, iv3, ir3, rv3;
  logic [1:0]   wa3;
  fx_t          wd3, id3 [3], rd3;
  logic [31:0]  rr3;
  rfx_t           s3 [3];

  predict_kernel #(.N_MAX(3), .LANES(3)) dut_fig3 (
    .clk(clk), .rst_n(rst_n), .start(start3), .n_len(2'd3),
    .wr_en(wr3), .wr_addr(wa3), .wr_data(wd3),
    .in_valid(iv3), .in_ready(ir3), .in_data(id3),
    .res_valid(rv3), .res_ready(1'b1), .res_data(rd3), .res_row(rr3));

  // ---------------- folded configuration
  localparam int unsigned NF = 40, LF = 8, NL = 37, BPR = (NL + LF - 1) / LF;
  localparam int unsigned AWF = $clog2(NF + 1);
  logic           startf, wrf, ivf, irf, rvf;
  logic [AWF-1:0] waf;
  fx_t            wdf, idf [LF], rdf;
  logic [31:0]    rrf;
  rfx_t             sf [NF];

  predict_kernel #(.N_MAX(NF), .LANES(LF)) dut_fold (
    .clk(clk), .rst_n(rst_n), .start(startf), .n_len(AWF'(NL)),
    .wr_en(wrf), .wr_addr(waf), .wr_data(wdf),
    .in_valid(ivf), .in_ready(irf), .in_data(idf),
    .res_valid(rvf), .res_ready(1'b1), .res_data(rdf), .res_row(rrf));

  localparam int M = 25;
  rfx_t exp3 [M], expf [M];
  int got3 = 0, gotf = 0;

  always @(posedge clk) begin
    if (rst_n && rv3) begin
      checks++;
      if (rd3 !== exp3[got3] || rr3 != got3) begin
        failures++;
        $display("fig3 sample %0d: got %h exp %h", got3, rd3, exp3[got3]);
      end
      got3++;
    end
    if (rst_n && rvf) begin
      checks++;
      if (rdf !== expf[gotf] || rrf != gotf) begin
        failures++;
        $display("fold sample %0d: got %h exp %h", gotf, rdf, expf[gotf]);
      end
      gotf++;
    end
  end

  initial begin
    int t0;
    rst_n = 0; start3 = 0; startf = 0; wr3 = 0; wrf = 0; iv3 = 0; ivf = 0;
    wa3 = '0; wd3 = '0; waf = '0; wdf = '0;
    for (int l = 0; l < 3; l++) id3[l] = '0;
    for (int l = 0; l < LF; l++) idf[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 3; j++) begin
      s3[j] = rnd_fx(2);
      wr3 = 1; wa3 = 2'(j); wd3 = s3[j]; @(negedge clk);
    end
    wr3 = 0;
    for (int j = 0; j < NF; j++) begin
      sf[j] = rnd_fx(2);
      wrf = 1; waf = AWF'(j); wdf = sf[j]; @(negedge clk);
    end
    wrf = 0;
    start3 = 1; startf = 1; @(negedge clk); start3 = 0; startf = 0;

    // Fig. 3: one beat per sample
    for (int i = 0; i < M; i++) begin
      racc_t acc;
      acc = 0;
      for (int l = 0; l < 3; l++) begin
        id3[l] = rnd_fx(1);
        acc += ref_prod(id3[l], s3[l]);
      end
      exp3[i] = ref_trunc(acc);
      iv3 = 1;
      @(negedge clk);
    end
    iv3 = 0;

    // folded: BPR beats per sample
    t0 = -1;
    for (int i = 0; i < M; i++) begin
      racc_t acc;
      acc = 0;
      for (int b = 0; b < BPR; b++) begin
        for (int l = 0; l < LF; l++) begin
          idf[l] = rnd_fx(1);
          if (b * LF + l < NL) acc += ref_prod(idf[l], sf[b * LF + l]);
        end
        ivf = 1;
        if (t0 < 0) t0 = $time;
        @(negedge clk);
      end
      expf[i] = ref_trunc(acc);
    end
    ivf = 0;
    wait (gotf == M);
    checks++;
    if (($time - t0) / 10 > M * BPR + 1) begin
      failures++;
      $display("rate: %0d cycles for %0d samples", ($time - t0) / 10, M);
    end
    @(negedge clk);
    checks += 2;
    if (got3 != M) begin failures++; $display("fig3 gave %0d results", got3); end
    if (gotf != M) begin failures++; $display("fold gave %0d results", gotf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
