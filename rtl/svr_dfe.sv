// svr_dfe: dataflow engine of the online kernel support vector regression.
//
// The engine accelerates the four matrix-heavy steps of the online SVR that
// models the implied volatility surface: sample prediction, local fitness
// (with the z term of the inverse update), and the kernel-inverse update on
// support vector addition and on removal. The host keeps the support vector
// dictionary, evaluates the Gaussian kernel and serialises matrices; it talks
// to the engine through
//   * a host write port that fills the on-chip vector memories (wr_sel picks
//     S, k_{S,x}, u or v),
//   * scalar settings (n_len, rho, kxx, scale) sampled when start is pulsed,
//   * one input stream of matrix rows, LANES Q32.32 values per beat, and one
//     output stream of the same width,
//   * status and the fitness results, with a read port for I and Y = -z*I.
// The manager part of this module (the "Manager" of the dataflow engine)
// routes the input stream to the kernel selected by op at start, and
// multiplexes that kernel's results onto the output stream:
//   OP_PREDICT : rows K[i,:] in, one beat per row out with p[i] in lane 0
//                (other lanes zero), out_last = 1. Runs until the next start.
//   OP_FITNESS : n rows of K^-1 in, nothing on the output stream; done pulses
//                with fit_c, fit_new_pattern, fit_z valid.
//   OP_UPDATE  : n rows of M in, n rows of M - scale*u*v^T out; done pulses
//                after the last row was accepted.
// A support vector addition is OP_FITNESS, host reads of I and Y into u and v,
// then OP_UPDATE with scale = 1; the host borders the result with Y and z.
// A removal is OP_UPDATE with u = v = Y (removed column) and scale = 1/z.
//
// The split into these kernels, the on-chip vectors and the streamed matrices
// follow the paper; the command interface, stream format and number format are
// this design's own (the paper builds on a vendor platform that provides them).
// Reset (rst_n, active low) is synchronous.
module svr_dfe
  import svr_pkg::*;
#(
  parameter int unsigned N_MAX = 20000,
  parameter int unsigned LANES = 16,
  localparam int unsigned AW   = $clog2(N_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  op_e           op,
  input  logic          start,
  input  logic [AW-1:0] n_len,
  input  fx_t           rho,
  input  fx_t           kxx,
  input  fx_t           scale,
  // host writes to on-chip vectors
  input  logic          wr_en,
  input  vec_sel_e      wr_sel,
  input  logic [AW-1:0] wr_addr,
  input  fx_t           wr_data,
  // input stream
  input  logic          in_valid,
  output logic          in_ready,
  input  fx_t           in_data [LANES],
  // output stream
  output logic          out_valid,
  input  logic          out_ready,
  output fx_t           out_data [LANES],
  output logic          out_last,
  // status and fitness results
  output op_e           cur_op,
  output logic          busy,
  output logic          done,
  output fx_t           fit_c,
  output logic          fit_new_pattern,
  output fx_t           fit_z,
  output logic          fit_z_err,
  input  logic [AW-1:0] y_addr,
  output fx_t           i_rd,
  output fx_t           y_rd
);

  op_e  op_q;
  logic pr_start, ft_start, up_start;

  always_ff @(posedge clk) begin
    if (!rst_n)     op_q <= OP_PREDICT;
    else if (start) op_q <= op;
  end
  assign cur_op = op_q;

  assign pr_start = start && (op == OP_PREDICT);
  assign ft_start = start && (op == OP_FITNESS);
  assign up_start = start && (op == OP_UPDATE);

  // ---------------- prediction kernel (Fig. 3)
  logic pr_in_ready, pr_res_valid, pr_res_ready;
  fx_t  pr_res;

  predict_kernel #(.N_MAX(N_MAX), .LANES(LANES)) u_predict (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (pr_start),
    .n_len     (n_len),
    .wr_en     (wr_en && wr_sel == VEC_S),
    .wr_addr   (wr_addr),
    .wr_data   (wr_data),
    .in_valid  (in_valid && op_q == OP_PREDICT && !start),
    .in_ready  (pr_in_ready),
    .in_data   (in_data),
    .res_valid (pr_res_valid),
    .res_ready (pr_res_ready),
    .res_data  (pr_res),
    .res_row   ()
  );

  // ---------------- local fitness kernel (Fig. 4)
  logic ft_in_ready, ft_busy, ft_done;

  fitness_kernel #(.N_MAX(N_MAX), .LANES(LANES)) u_fitness (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (ft_start),
    .n_len       (n_len),
    .rho         (rho),
    .kxx         (kxx),
    .wr_en       (wr_en && wr_sel == VEC_KSX),
    .wr_addr     (wr_addr),
    .wr_data     (wr_data),
    .in_valid    (in_valid && op_q == OP_FITNESS && !start),
    .in_ready    (ft_in_ready),
    .in_data     (in_data),
    .busy        (ft_busy),
    .done        (ft_done),
    .c           (fit_c),
    .new_pattern (fit_new_pattern),
    .z           (fit_z),
    .z_err       (fit_z_err),
    .y_addr      (y_addr),
    .i_rd        (i_rd),
    .y_rd        (y_rd)
  );

  // ---------------- inverse update kernel (SV addition / removal)
  logic up_in_ready, up_out_valid, up_out_ready, up_out_last, up_busy, up_done;
  fx_t  up_out [LANES];

  rank1_update_kernel #(.N_MAX(N_MAX), .LANES(LANES)) u_update (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (up_start),
    .n_len     (n_len),
    .s         (scale),
    .wr_en     (wr_en && (wr_sel == VEC_U || wr_sel == VEC_V)),
    .wr_sel_v  (wr_sel == VEC_V),
    .wr_addr   (wr_addr),
    .wr_data   (wr_data),
    .in_valid  (in_valid && op_q == OP_UPDATE && !start),
    .in_ready  (up_in_ready),
    .in_data   (in_data),
    .out_valid (up_out_valid),
    .out_ready (up_out_ready),
    .out_data  (up_out),
    .out_last  (up_out_last),
    .busy      (up_busy),
    .done      (up_done)
  );

  // ---------------- manager: stream routing
  always_comb begin
    pr_res_ready = 1'b0;
    up_out_ready = 1'b0;
    out_valid    = 1'b0;
    out_last     = 1'b0;
    for (int unsigned l = 0; l < LANES; l++) out_data[l] = '0;
    unique case (op_q)
      OP_PREDICT: begin
        in_ready     = pr_in_ready && !start;
        out_valid    = pr_res_valid;
        pr_res_ready = out_ready;
        out_data[0]  = pr_res;
        out_last     = 1'b1;
      end
      OP_FITNESS: in_ready = ft_in_ready && !start;
      OP_UPDATE: begin
        in_ready     = up_in_ready && !start;
        out_valid    = up_out_valid;
        up_out_ready = out_ready;
        out_data     = up_out;
        out_last     = up_out_last;
      end
      default: in_ready = 1'b0;
    endcase
  end

  assign busy = ft_busy || up_busy;
  assign done = ft_done || up_done;

  // The host may only start a new operation when the engine is idle.
  property p_start_idle;
    @(posedge clk) disable iff (!rst_n) start |-> !busy;
  endproperty
  assert property (p_start_idle);

endmodule
