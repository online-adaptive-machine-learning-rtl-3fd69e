// fitness_kernel: local fitness and z kernel (Algorithm 6, Fig. 4, eqs. (8), (10)).
//
// For a new sample x with kernel vector k = k_{S,x} (its kernel values against
// the n current support vectors) this kernel computes the quadratic form
// c = k^T K^-1 k in the two steps of Fig. 4:
//   left  : the rows of the kernel inverse K^-1 stream in (K^-1 is symmetric,
//           so rows and columns are the same); each row i is multiplied lane by
//           lane with k held in on-chip memory and summed, giving the
//           intermediate vector element I[i] = sum_j k[j] * K^-1[i,j];
//   right : each I[i], as it leaves the left step, is multiplied with k[i] and
//           summed: c = sum_i I[i] * k[i].
// The same c serves both uses the paper names. Local fitness (8) is
// J = c / k_xx; the kernel reports new_pattern = (J < rho), evaluated without
// a division as c < rho * k_xx. The border of the grown inverse, eq. (10), is
// z = 1 / (k_xx - c) (fx_recip) and Y = -z * I. I is kept in an on-chip
// buffer so that the host can read I[a] and Y[a] through the y_* port once done
// is seen; they feed the rank-1 update of a support vector addition.
//
// The two-step dataflow follows the paper. The J < rho comparison, the
// reciprocal and the Y read port are this design's additions: the paper says
// that I, z and then Y "immediately follow" but not where they are formed.
//
// Interface: host write port (wr_*) fills k; start (one cycle) with n_len = n,
// rho and k_xx latched from then on. Then exactly n rows of n elements on in_*,
// LANES per beat. n = 0 is allowed (no rows; c = 0, new pattern).
// Timing: n * ceil(n/LANES) beats at one per cycle, then the reciprocal
// (about 69 cycles); done pulses one cycle, results hold until the next start.
// Reset (rst_n, active low) is synchronous.
module fitness_kernel
  import svr_pkg::*;
#(
  parameter int unsigned N_MAX = 20000,
  parameter int unsigned LANES = 16,
  localparam int unsigned AW   = $clog2(N_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] n_len,
  input  fx_t           rho,        // local fitness threshold
  input  fx_t           kxx,        // k_{x,x}, kernel of x with itself
  // host write of k_{S,x}
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data,
  // kernel-inverse rows
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data [LANES],
  // results
  output logic          busy,
  output logic          done,
  output fx_t           c,
  output logic          new_pattern,
  output fx_t           z,
  output logic          z_err,      // k_xx - c was zero: z saturated
  // read-back of I and Y = -z * I
  input  logic [AW-1:0] y_addr,
  output fx_t           i_rd,
  output fx_t           y_rd
);

  typedef enum logic [1:0] {S_IDLE, S_ROWS, S_RECIP, S_DONE} state_e;
  state_e state;

  logic [AW-1:0] chunk_idx;
  fx_t           k_chunk [LANES];
  fx_t           k_elem;
  logic [AW-1:0] k_elem_addr;

  logic          dot_valid;
  fx_t           dot_data;
  logic [31:0]   dot_row;

  logic [AW-1:0] n_q;
  fx_t           rho_q, kxx_q;
  acc_t          c_acc;
  acc_t          c_next;
  fx_t           c_fx;

  fx_t           ibuf [N_MAX];

  // The accumulator takes the last product in the cycle rc_start is seen,
  // so the reciprocal is started one cycle later (rc_start_q), from the final c.
  logic          rc_start, rc_start_q, rc_done, rc_zero;
  logic          left_ready;
  fx_t           rc_d, rc_q;

  fmem_vector_rom #(.N_MAX(N_MAX), .LANES(LANES)) u_k_rom (
    .clk        (clk),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .chunk_idx  (chunk_idx),
    .chunk_data (k_chunk),
    .elem_addr  (k_elem_addr),
    .elem_data  (k_elem)
  );

  // Left step of Fig. 4: I[i] for each streamed row.
  row_dot_kernel #(.N_MAX(N_MAX), .LANES(LANES)) u_left (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .n_len         (n_len),
    .in_valid      (in_valid && (state == S_ROWS)),
    .in_ready      (left_ready),
    .in_data       (in_data),
    .vec_chunk_idx (chunk_idx),
    .vec_chunk     (k_chunk),
    .res_valid     (dot_valid),
    .res_ready     (1'b1),
    .res_data      (dot_data),
    .res_row       (dot_row)
  );

  // Right step of Fig. 4: c += I[i] * k[i], one element per left-step result.
  assign k_elem_addr = AW'(dot_row);
  assign c_next      = c_acc + acc_t'(prod_t'(dot_data) * prod_t'(k_elem));
  assign c_fx        = acc_to_fx(c_acc);

  assign rc_d     = kxx_q - c_fx;
  assign rc_start = (state == S_ROWS) && ((n_q == '0) || (dot_valid && (dot_row + 1 == 32'(n_q))));

  fx_recip u_recip (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (rc_start_q),
    .d        (rc_d),
    .busy     (),
    .done     (rc_done),
    .q        (rc_q),
    .div_zero (rc_zero)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      n_q         <= '0;
      rho_q       <= '0;
      kxx_q       <= '0;
      c_acc       <= '0;
      c           <= '0;
      new_pattern <= 1'b0;
      z           <= '0;
      z_err       <= 1'b0;
      done        <= 1'b0;
      rc_start_q  <= 1'b0;
    end else begin
      done       <= 1'b0;
      rc_start_q <= 1'b0;
      if (start) begin
        state <= S_ROWS;
        n_q   <= n_len;
        rho_q <= rho;
        kxx_q <= kxx;
        c_acc <= '0;
      end else begin
        if (dot_valid && state == S_ROWS) begin
          c_acc          <= c_next;
          ibuf[dot_row]  <= dot_data;
        end
        case (state)
          S_ROWS: if (rc_start) begin
            state      <= S_RECIP;
            rc_start_q <= 1'b1;
          end
          S_RECIP: if (rc_done) begin
            state       <= S_DONE;
            c           <= c_fx;
            new_pattern <= (c_fx < fx_mul(rho_q, kxx_q));
            z           <= rc_q;
            z_err       <= rc_zero;
            done        <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  assign busy     = (state == S_ROWS) || (state == S_RECIP);
  assign in_ready = left_ready && (state == S_ROWS);

  // Read-back of the intermediate vector and of Y = -z * I.
  always_comb begin
    i_rd = (32'(y_addr) < N_MAX) ? ibuf[y_addr] : '0;
    y_rd = -fx_mul(z, i_rd);
  end

endmodule
