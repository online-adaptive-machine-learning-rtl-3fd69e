// tb_row_dot_kernel: streams random rows (n = 10 over 4 lanes, so the last
// beat of each row is partly filled, with garbage in the unused lanes) against
// a random stored vector, with random back-pressure on the result port. Each
// row result and its row tag are compared with a reference dot product; a
// second phase without back-pressure checks the rate of ceil(n/LANES) beats
// per row and the one-cycle result latency.
module tb_row_dot_kernel;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N    = 20;
  localparam int unsigned L    = 4;
  localparam int unsigned AW   = $clog2(N + 1);
  localparam int unsigned NLEN = 10;
  localparam int unsigned ROWS = 30;
  localparam int unsigned BPR  = (NLEN + L - 1) / L;   // beats per row

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, in_valid, in_ready, res_valid, res_ready;
  logic [AW-1:0] n_len, vec_chunk_idx;
  fx_t           in_data [L], vec_chunk [L], res_data;
  logic [31:0]   res_row;

  rfx_t vec [N];
  rfx_t mat [ROWS][BPR*L];
  rfx_t expv [ROWS];
  int checks = 0, failures = 0;
  int got_rows = 0;
  bit stall_mode;

  row_dot_kernel #(.N_MAX(N), .LANES(L)) dut (.*);

  always_comb
    for (int l = 0; l < L; l++) begin
      int a;
      a = int'(vec_chunk_idx) * L + l;
      vec_chunk[l] = (a < N) ? vec[a] : 0;
    end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) begin
    if (rst_n && res_valid && res_ready) begin
      checks += 2;
      if (res_row != got_rows) begin
        failures++;
        $display("row tag %0d, expected %0d", res_row, got_rows);
      end
      if (res_data !== expv[got_rows]) begin
        failures++;
        $display("row %0d: got %h exp %h", got_rows, res_data, expv[got_rows]);
      end
      got_rows++;
    end
  end

  always @(negedge clk) res_ready <= stall_mode ? ($urandom % 3 != 0) : 1'b1;

  task automatic send_rows();
    for (int r = 0; r < ROWS; r++)
      for (int b = 0; b < BPR; b++) begin
        @(negedge clk);
        in_valid = 1;
        for (int l = 0; l < L; l++) in_data[l] = mat[r][b*L+l];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    rst_n = 0; start = 0; in_valid = 0; n_len = AW'(NLEN); stall_mode = 1;
    for (int l = 0; l < L; l++) in_data[l] = '0;
    for (int i = 0; i < N; i++) vec[i] = (i < NLEN) ? rnd_fx(2) : rnd_fx(14);
    for (int r = 0; r < ROWS; r++) begin
      racc_t acc;
      acc = 0;
      for (int j = 0; j < BPR*L; j++) begin
        mat[r][j] = rnd_fx(2);
        if (j < NLEN) acc += ref_prod(mat[r][j], vec[j]);
      end
      expv[r] = ref_trunc(acc);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    send_rows();
    repeat (5) @(negedge clk);
    checks++;
    if (got_rows != ROWS) begin failures++; $display("phase 1: %0d rows", got_rows); end

    // phase 2: no back-pressure, measure rate and latency
    stall_mode = 0;
    got_rows = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    fork
      send_rows();
      begin
        int t0, t1;
        @(posedge clk iff (in_valid && in_ready));
        t0 = $time;
        wait (got_rows == ROWS);
        t1 = $time;
        checks++;
        // ROWS*BPR beats, the last result one cycle after the last beat
        if ((t1 - t0) / 10 != ROWS * BPR) begin
          failures++;
          $display("rate: %0d cycles for %0d rows, expected %0d", (t1 - t0) / 10, ROWS, ROWS * BPR);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
