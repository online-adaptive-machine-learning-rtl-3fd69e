// rank1_update_kernel: kernel-inverse update on support vector addition or removal.
//
// Both inverse updates of the algorithm reduce to one form,
//     out[i][j] = M[i][j] - s * u[i] * v[j]:
//   addition (eq. (10) rewritten as X = K_n^-1 - I^T Y^T):
//       M = K_n^-1, u = I, v = Y = -z*I, s = 1; the host then borders X with
//       Y and z to obtain K_{n+1}^-1 (eq. (9));
//   removal (eq. (11), K_n^-1 = X - Y Y^T / z):
//       M = X, the inverse with the removed vector's row and column taken out,
//       u = v = Y (that removed column), s = 1/z (z its diagonal entry).
// As in the paper, the matrix streams through while the two vectors and the
// scalar sit in on-chip memory. Per row, the kernel forms t = s * u[i] once and
// then, for each of the LANES elements of a beat, M[i][j] - t * v[j] in
// parallel, so each result is exact up to the two Q32.32 truncations.
//
// Interface: host write ports fill u and v (wr_sel_v picks v); s and n_len are
// latched at start (one cycle). Exactly n rows of n elements then stream in on
// in_*, LANES per beat; the same shape leaves on out_* (lanes at index >= n are
// zero; out_last marks the last beat of a row). done pulses for one cycle when
// the final beat of the last row has been taken.
// Timing: one beat per cycle with one cycle of latency; out_ready low stalls
// the input. The paper gives the formula and the split between streamed matrix
// and stored vectors; the folding onto LANES, the t-first order of the
// products and the handshakes are this design's choices. Reset is synchronous.
module rank1_update_kernel
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
  input  fx_t           s,
  // host writes of u and v
  input  logic          wr_en,
  input  logic          wr_sel_v,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data,
  // matrix in
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data [LANES],
  // matrix out
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_data [LANES],
  output logic          out_last,
  output logic          busy,
  output logic          done
);

  logic [AW-1:0] n_q;
  fx_t           s_q;
  logic [AW-1:0] row, chunk;
  logic          active;
  fx_t           u_elem, v_elem_unused, u_chunk_unused [LANES];
  fx_t           v_chunk [LANES];
  fx_t           t;
  logic          fire, last_chunk, last_row;
  fx_t           upd [LANES];

  fmem_vector_rom #(.N_MAX(N_MAX), .LANES(LANES)) u_u_rom (
    .clk        (clk),
    .wr_en      (wr_en && !wr_sel_v),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .chunk_idx  ('0),
    .chunk_data (u_chunk_unused),
    .elem_addr  (row),
    .elem_data  (u_elem)
  );

  fmem_vector_rom #(.N_MAX(N_MAX), .LANES(LANES)) u_v_rom (
    .clk        (clk),
    .wr_en      (wr_en && wr_sel_v),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .chunk_idx  (chunk),
    .chunk_data (v_chunk),
    .elem_addr  ('0),
    .elem_data  (v_elem_unused)
  );

  assign t          = fx_mul(s_q, u_elem);
  assign in_ready   = active && (!out_valid || out_ready);
  assign fire       = in_valid && in_ready;
  assign last_chunk = ((32'(chunk) + 1) * LANES >= 32'(n_q));
  assign last_row   = (32'(row) + 1 >= 32'(n_q));
  assign busy       = active;

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      if (32'(chunk) * LANES + l < 32'(n_q)) upd[l] = in_data[l] - fx_mul(t, v_chunk[l]);
      else                                   upd[l] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_q       <= '0;
      s_q       <= '0;
      row       <= '0;
      chunk     <= '0;
      active    <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      done      <= 1'b0;
      for (int unsigned l = 0; l < LANES; l++) out_data[l] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_q       <= n_len;
        s_q       <= s;
        row       <= '0;
        chunk     <= '0;
        active    <= (n_len != '0);
        out_valid <= 1'b0;
      end else begin
        if (out_valid && out_ready) out_valid <= 1'b0;
        if (fire) begin
          out_data  <= upd;
          out_valid <= 1'b1;
          out_last  <= last_chunk;
          if (last_chunk) begin
            chunk <= '0;
            row   <= row + 1'b1;
            if (last_row) begin
              active <= 1'b0;
              done   <= 1'b1;
            end
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
      end
    end
  end

  // Output data stays put while the consumer stalls.
  property p_hold;
    @(posedge clk) disable iff (!rst_n || start)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_last));
  endproperty
  assert property (p_hold);

endmodule
