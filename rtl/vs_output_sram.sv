// vs_output_sram: output buffer with zero-vector compression.
//
// Post-processed 7-element vectors arrive with their tag (channel = filter,
// column, row tile) in (channel, column, row tile) order. A vector is stored
// at the next free address when it is nonzero, or always when keep_zero_i is
// high (dense operation). The stored list therefore has exactly the format of
// the input buffer and can be copied back to it as the next layer's input.
// The "last vector of its channel" flag of a stored entry is set when a vector
// of another channel is stored after it, or by fin_i at the end of a layer.
//
// clr_i empties the buffer. Writes happen on the clock edge; the read port
// (toward off-chip memory) is combinational. Depth is this design's choice.
module vs_output_sram
  import vscnn_pkg::*;
#(
  parameter int unsigned DEPTH = OUT_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr_i,
  input  logic                       fin_i,
  input  logic                       wr_en_i,
  input  logic                       wr_nz_i,
  input  logic                       keep_zero_i,
  input  in_entry_t                  wr_data_i,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr_i,
  output in_entry_t                  rd_data_o,
  output logic [$clog2(DEPTH):0]     count_o,
  output logic                       full_o
);
  localparam int unsigned AW = $clog2(DEPTH);

  in_entry_t       mem  [DEPTH];
  logic            last [DEPTH];
  logic [AW:0]     cnt_q;
  logic [CH_W-1:0] prev_ch_q;

  logic store;
  assign store   = wr_en_i && (wr_nz_i || keep_zero_i) && !full_o;
  assign full_o  = (cnt_q == (AW+1)'(DEPTH));
  assign count_o = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      prev_ch_q <= '0;
    end else if (clr_i) begin
      cnt_q <= '0;
    end else begin
      if (store) begin
        cnt_q     <= cnt_q + 1'b1;
        prev_ch_q <= wr_data_i.ch;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!clr_i) begin
      if (store) begin
        mem[cnt_q[AW-1:0]]  <= wr_data_i;
        last[cnt_q[AW-1:0]] <= 1'b0;
        if (cnt_q != 0 && prev_ch_q != wr_data_i.ch)
          last[cnt_q[AW-1:0] - 1'b1] <= 1'b1;
      end else if (fin_i && cnt_q != 0) begin
        last[cnt_q[AW-1:0] - 1'b1] <= 1'b1;
      end
    end
  end

  always_comb begin
    rd_data_o      = mem[rd_addr_i];
    rd_data_o.last = last[rd_addr_i];
  end
endmodule
