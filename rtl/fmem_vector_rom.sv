// fmem_vector_rom: on-chip vector memory ("FMem" / "ROM" of the dataflow kernels).
//
// Holds one vector of up to N_MAX Q32.32 elements: the support vector weights
// S of the prediction kernel, the kernel vector k_{S,x} of the local-fitness
// kernel, or one of the two vectors of the rank-1 update kernel. The host fills
// it element by element through a synchronous write port before it streams
// data in; during the stream the kernel only reads it, which is why the paper
// calls these memories ROMs. Each box labelled SV1..SV3 in Fig. 3, or k_{S,x}^1
// .. k_{S,x}^3 in Fig. 4, is one element of such a memory.
//
// Read ports (both combinational, read during the same cycle):
//   chunk port : elements chunk_idx*LANES .. chunk_idx*LANES+LANES-1, one per
//                multiplier lane; elements at or past N_MAX read as zero.
//   elem port  : a single element, used by kernels that need one value per row.
// Write port: wr_en/wr_addr/wr_data, written at the rising clock edge.
//
// The paper gives the role of the memory only; the two read ports, the lane
// grouping and the host write port are this design's choices. The memory is
// not reset: the host writes every element it later uses.
module fmem_vector_rom
  import svr_pkg::*;
#(
  parameter int unsigned N_MAX = 20000,
  parameter int unsigned LANES = 16,
  localparam int unsigned AW   = $clog2(N_MAX + 1)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  fx_t             wr_data,
  input  logic [AW-1:0]   chunk_idx,
  output fx_t             chunk_data [LANES],
  input  logic [AW-1:0]   elem_addr,
  output fx_t             elem_data
);

  fx_t mem [N_MAX];

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < N_MAX)) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      automatic int unsigned a = int'(chunk_idx) * LANES + l;
      chunk_data[l] = (a < N_MAX) ? mem[a] : '0;
    end
    elem_data = (32'(elem_addr) < N_MAX) ? mem[elem_addr] : '0;
  end

endmodule
