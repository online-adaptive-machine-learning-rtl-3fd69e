// fx_recip: sequential Q32.32 reciprocal, q = 1 / d.
//
// Used by the local-fitness kernel to form z = 1 / (k_xx - k^T K^-1 k) of
// eq. (10). The paper gives the formula but not how the division is done; this
// is a plain restoring divider, one quotient bit per cycle: it divides
// 2^(2*FRAC_W) by |d| and restores the sign. The quotient is saturated to the
// largest Q32.32 value when the quotient reaches 2^31 (|d| <= 2^-31), and d = 0
// raises div_zero with a saturated positive result.
//
// Interface: start (one cycle) with d captures the divisor; busy is high while
// dividing; done pulses for one cycle with q valid, and q holds until the next
// start. Latency: done is seen QW + 2 = 68 cycles after the cycle in which
// start is high (load, QW = 2*FRAC_W + 2 = 66 quotient steps, sign and
// saturation). Reset (rst_n, active low) is synchronous.
module fx_recip
  import svr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fx_t  d,
  output logic busy,
  output logic done,
  output fx_t  q,
  output logic div_zero
);

  localparam int unsigned QW = 2 * FRAC_W + 2;   // quotient bits computed
  localparam int unsigned CW = $clog2(QW + 1);
  // Largest positive Q32.32 value.
  localparam fx_t FX_MAX = {1'b0, {(DATA_W-1){1'b1}}};

  typedef logic [DATA_W:0] rem_t;                 // remainder, one bit wider than |d|

  logic [DATA_W-1:0] dmag;                        // |d|
  logic [DATA_W-1:0] rem;                         // always < |d|
  logic [QW-1:0]     quo;
  logic [QW-1:0]     dividend;                    // 2^(2*FRAC_W), shifted out MSB first
  logic [CW-1:0]     cnt;
  logic              neg;
  rem_t              rem_sh;
  logic [DATA_W-1:0] qmag;

  // One restoring step: bring in the next dividend bit, subtract if possible.
  assign rem_sh = {rem, dividend[QW-1]};

  always_comb begin
    if (quo[QW-1:DATA_W-1] != '0) qmag = FX_MAX;  // does not fit: saturate
    else                          qmag = quo[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      q        <= '0;
      div_zero <= 1'b0;
      rem      <= '0;
      quo      <= '0;
      dividend <= '0;
      cnt      <= '0;
      neg      <= 1'b0;
      dmag     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        neg      <= d[DATA_W-1];
        dmag     <= d[DATA_W-1] ? DATA_W'(-d) : DATA_W'(d);
        rem      <= '0;
        quo      <= '0;
        dividend <= QW'(1) << (2 * FRAC_W);
        cnt      <= CW'(QW);
        busy     <= 1'b1;
        div_zero <= 1'b0;
      end else if (busy) begin
        if (dmag == '0) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          div_zero <= 1'b1;
          q        <= FX_MAX;
        end else if (cnt != '0) begin
          if (rem_sh >= rem_t'(dmag)) begin
            rem <= DATA_W'(rem_sh - rem_t'(dmag));
            quo <= {quo[QW-2:0], 1'b1};
          end else begin
            rem <= rem_sh[DATA_W-1:0];
            quo <= {quo[QW-2:0], 1'b0};
          end
          dividend <= dividend << 1;
          cnt      <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= neg ? -fx_t'(qmag) : fx_t'(qmag);
        end
      end
    end
  end

endmodule
