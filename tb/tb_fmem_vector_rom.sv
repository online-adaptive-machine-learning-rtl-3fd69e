// tb_fmem_vector_rom: writes a random vector through the host port and reads
// it back through the lane-chunk port (including the partly filled last chunk,
// whose lanes past N_MAX must read zero) and the single-element port.
module tb_fmem_vector_rom;
  import svr_pkg::*;
  import svr_ref_pkg::*;

  localparam int unsigned N = 10;
  localparam int unsigned L = 4;
  localparam int unsigned AW = $clog2(N + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          wr_en;
  logic [AW-1:0] wr_addr, chunk_idx, elem_addr;
  fx_t           wr_data, chunk_data [L], elem_data;
  rfx_t            model [N];
  int            checks = 0, failures = 0;

  fmem_vector_rom #(.N_MAX(N), .LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_addr = '0; wr_data = '0; chunk_idx = '0; elem_addr = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < N; i++) begin
        model[i] = rnd_fx(4);
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(i); wr_data = model[i];
      end
      @(negedge clk) wr_en = 0;
      // a write past the end must be ignored
      wr_en = 1; wr_addr = AW'(N); wr_data = 64'h1234; @(negedge clk); wr_en = 0;
      for (int c = 0; c < (N + L - 1) / L; c++) begin
        chunk_idx = AW'(c);
        #1;
        for (int l = 0; l < L; l++) begin
          rfx_t exp_v;
          exp_v = (c * L + l < N) ? model[c * L + l] : 0;
          checks++;
          if (chunk_data[l] !== exp_v) begin
            failures++;
            $display("chunk %0d lane %0d: got %h exp %h", c, l, chunk_data[l], exp_v);
          end
        end
      end
      for (int i = 0; i < N; i++) begin
        elem_addr = AW'(i);
        #1;
        checks++;
        if (elem_data !== model[i]) begin
          failures++;
          $display("elem %0d: got %h exp %h", i, elem_data, model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
