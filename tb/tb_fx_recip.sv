// tb_fx_recip: Q16.16 reciprocal against floor(2^64/|d|) (Q32.32) with sign, for
// directed values (1, -1, 0.7, the smallest and largest magnitudes, zero,
// values that must saturate) and random ones; checks busy/done and the
// fixed start-to-done latency of 68 cycles.
module tb_fx_recip;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done, div_zero;
  fx_t  d, q;
  int   checks = 0, failures = 0;

  fx_recip dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(rfx_t dv);
    rfx_t  expq, cycles;
    bit  expz;
    expq = ref_recip(dv, expz);
    @(negedge clk);
    d = dv; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    checks++;
    if (!busy) begin failures++; $display("busy low after start"); end
    while (!done) begin @(negedge clk); cycles++; end
    checks += 3;
    if (q !== expq)       begin failures++; $display("1/%h: got %h exp %h", dv, q, expq); end
    if (div_zero != expz) begin failures++; $display("1/%h: div_zero %b", dv, div_zero); end
    if (dv != 0 && cycles != 68) begin failures++; $display("1/%h: latency %0d", dv, cycles); end
  endtask

  initial begin
    rst_n = 0; start = 0; d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(ONE);             // 1.0
    run(-ONE);            // -1.0
    run(to_fx(0.7));
    run(to_fx(3.25));
    run(FX_MAX);
    run(-FX_MAX);
    run(1);               // saturates
    run(2);               // 2^63 raw: saturates
    run(3);
    run(-3);
    run(0);
    for (int i = 0; i < 40; i++) run(rnd_fx($urandom % 8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
