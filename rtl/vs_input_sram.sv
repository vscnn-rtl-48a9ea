// vs_input_sram: local buffer of input activation vectors.
//
// Each entry is one stored input vector (7 activations of one column of one
// row tile of one channel) with its index tag {last, ch, x, ty}. In sparse
// operation the host stores only nonzero vectors, sorted by (channel, column,
// row tile); in dense operation it stores all of them. "last" marks the last
// stored vector of a channel.
//
// One synchronous write port (the load path from off-chip memory) and NRD
// combinational read ports, one per PE block, because every block walks its
// own sparse stream. A real implementation would bank or replicate the macro;
// here it is a plain array. Depth is this design's choice.
module vs_input_sram
  import vscnn_pkg::*;
#(
  parameter int unsigned DEPTH = IN_DEPTH,
  parameter int unsigned NRD   = N_BLK
) (
  input  logic                         clk,
  input  logic                         wr_en_i,
  input  logic [$clog2(DEPTH)-1:0]     wr_addr_i,
  input  in_entry_t                    wr_data_i,
  input  logic [NRD-1:0][$clog2(DEPTH)-1:0] rd_addr_i,
  output in_entry_t [NRD-1:0]          rd_data_o
);
  in_entry_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) rd_data_o[p] = mem[rd_addr_i[p]];
  end
endmodule
