// predict_kernel: inference kernel of the dataflow engine (Algorithm 5, Fig. 3).
//
// Holds the support vector weights S[0..n-1] in an on-chip memory and, for
// every sample i streamed in as its row of kernel values K[i,0..n-1] (the
// Gaussian kernel between the sample and each support vector, evaluated by the
// host), returns the prediction p[i] = sum_j S[j] * K[i,j]. As in Algorithm 5,
// the intercept b is not added here; f(x_i) = p[i] + b is formed by the host.
// Samples are independent, so any number of rows may follow one another after
// a single start; results come out in input order, tagged with the row index.
//
// Interface: host write port (wr_*) fills S; start clears the row counter;
// n_len is the number of support vectors n. Row stream in_* carries LANES
// kernel values per beat; res_* returns one Q32.32 prediction per row.
// Timing: ceil(n/LANES) beats per sample at one beat per cycle; the result
// follows the last beat of its row by one cycle (see row_dot_kernel).
// Structure and dataflow follow the paper; widths, lane count and handshakes
// are this design's choices.
module predict_kernel
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
  // host write of S
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data,
  // kernel rows
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data [LANES],
  // predictions
  output logic          res_valid,
  input  logic          res_ready,
  output fx_t           res_data,
  output logic [31:0]   res_row
);

  logic [AW-1:0] chunk_idx;
  fx_t           s_chunk [LANES];
  fx_t           s_elem_unused;

  fmem_vector_rom #(.N_MAX(N_MAX), .LANES(LANES)) u_s_rom (
    .clk        (clk),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_data    (wr_data),
    .chunk_idx  (chunk_idx),
    .chunk_data (s_chunk),
    .elem_addr  ('0),
    .elem_data  (s_elem_unused)
  );

  row_dot_kernel #(.N_MAX(N_MAX), .LANES(LANES)) u_dot (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (start),
    .n_len         (n_len),
    .in_valid      (in_valid),
    .in_ready      (in_ready),
    .in_data       (in_data),
    .vec_chunk_idx (chunk_idx),
    .vec_chunk     (s_chunk),
    .res_valid     (res_valid),
    .res_ready     (res_ready),
    .res_data      (res_data),
    .res_row       (res_row)
  );

endmodule
