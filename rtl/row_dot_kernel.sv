// row_dot_kernel: streamed-row times stored-vector dot product engine.
//
// This is the multiply-and-sum structure drawn in Fig. 3 (prediction) and in
// the left half of Fig. 4 (first step of the local-fitness product). A row of
// n elements arrives on the input stream, LANES elements per beat (the last
// beat of a row may be partly filled; lanes at index >= n are ignored). Each
// lane multiplies its element with the matching element of the vector held in
// on-chip memory (read through vec_chunk_idx / vec_chunk), the LANES products
// are added (the "+" node of the figures), and the partial sums of all beats
// of the row are accumulated. After the last beat of a row the dot product is
// presented on the result port, tagged with the row number.
//
// In the figures every support vector has its own multiplier (LANES = n = 3).
// Setting LANES = N_MAX reproduces that fully parallel form; the default
// folds a row of up to N_MAX = 20000 elements onto 16 multipliers, which is
// this design's choice (the paper does not give the multiplier count).
//
// Timing: one beat per cycle when res_ready is held high. A row of n
// elements takes ceil(n/LANES) beats (one beat when n = 0); its result is
// valid in the cycle after its last beat and stays until res_ready. While a
// result waits, in_ready is low (the stream stalls).
// start (one cycle) clears the row and beat counters and the accumulator.
// Products are kept at full width and the row sum is truncated to Q32.32 once.
// Reset (rst_n, active low) is synchronous.
module row_dot_kernel
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
  // row stream
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data [LANES],
  // stored vector
  output logic [AW-1:0] vec_chunk_idx,
  input  fx_t           vec_chunk [LANES],
  // one result per row
  output logic          res_valid,
  input  logic          res_ready,
  output fx_t           res_data,
  output logic [31:0]   res_row
);

  logic [AW-1:0] chunk;
  logic [31:0]   row;
  acc_t          acc;
  acc_t          lane_sum;
  logic          last_chunk;
  logic          fire;

  assign vec_chunk_idx = chunk;
  assign in_ready      = !res_valid || res_ready;
  assign fire          = in_valid && in_ready;
  // Last beat of the row: this chunk reaches element n-1 (or n is zero).
  assign last_chunk    = ((32'(chunk) + 1) * LANES >= 32'(n_len));

  always_comb begin
    lane_sum = '0;
    for (int unsigned l = 0; l < LANES; l++) begin
      if (32'(chunk) * LANES + l < 32'(n_len))
        lane_sum += acc_t'(prod_t'(in_data[l]) * prod_t'(vec_chunk[l]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      chunk     <= '0;
      row       <= '0;
      acc       <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
      res_row   <= '0;
    end else if (start) begin
      chunk     <= '0;
      row       <= '0;
      acc       <= '0;
      res_valid <= 1'b0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (fire) begin
        if (last_chunk) begin
          res_data  <= acc_to_fx(acc + lane_sum);
          res_row   <= row;
          res_valid <= 1'b1;
          row       <= row + 1;
          chunk     <= '0;
          acc       <= '0;
        end else begin
          chunk <= chunk + 1'b1;
          acc   <= acc + lane_sum;
        end
      end
    end
  end

  // A result is never overwritten before the consumer took it.
  property p_no_overwrite;
    @(posedge clk) disable iff (!rst_n || start)
      (res_valid && !res_ready) |=> (res_valid && $stable(res_data));
  endproperty
  assert property (p_no_overwrite);

endmodule
