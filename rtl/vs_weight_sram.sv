// vs_weight_sram: local buffer of weight vectors and the filter pointer table.
//
// Each entry is one stored weight vector: column dx (0..2) of the 3x3 kernel
// of one (filter, input channel) pair, tagged {last, ch, dx}. Entries of a
// filter are contiguous and sorted by channel; in sparse operation all-zero
// columns are left out. "last" marks the last stored vector of a (filter,
// channel) pair. The pointer table holds, for filter k, the address of its
// first entry; filter k occupies [ptr[k], ptr[k+1]).
//
// Synchronous write ports for the load path, NRD combinational read ports for
// the vectors and NRD for the pointer pairs, one per PE block. Sizes are this
// design's choice.
module vs_weight_sram
  import vscnn_pkg::*;
#(
  parameter int unsigned DEPTH = WT_DEPTH,
  parameter int unsigned NK    = MAX_K,
  parameter int unsigned NRD   = N_BLK
) (
  input  logic                              clk,
  input  logic                              wr_en_i,
  input  logic [$clog2(DEPTH)-1:0]          wr_addr_i,
  input  wt_entry_t                         wr_data_i,
  input  logic                              ptr_wr_en_i,
  input  logic [$clog2(NK+1)-1:0]           ptr_wr_addr_i,
  input  logic [$clog2(DEPTH):0]            ptr_wr_data_i,
  input  logic [NRD-1:0][$clog2(DEPTH)-1:0] rd_addr_i,
  output wt_entry_t [NRD-1:0]               rd_data_o,
  input  logic [NRD-1:0][$clog2(NK)-1:0]    ptr_k_i,
  output logic [NRD-1:0][$clog2(DEPTH):0]   ptr_lo_o,
  output logic [NRD-1:0][$clog2(DEPTH):0]   ptr_hi_o
);
  wt_entry_t                mem [DEPTH];
  logic [$clog2(DEPTH):0]   ptr [NK+1];

  always_ff @(posedge clk) begin
    if (wr_en_i)     mem[wr_addr_i] <= wr_data_i;
    if (ptr_wr_en_i) ptr[ptr_wr_addr_i] <= ptr_wr_data_i;
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      rd_data_o[p] = mem[rd_addr_i[p]];
      ptr_lo_o[p]  = ptr[{1'b0, ptr_k_i[p]}];
      ptr_hi_o[p]  = ptr[{1'b0, ptr_k_i[p]} + 1'b1];
    end
  end
endmodule
