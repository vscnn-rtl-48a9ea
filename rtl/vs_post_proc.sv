// vs_post_proc: post processing of one 7-element output vector.
//
// Per element: normalisation as a fixed-point multiply by scale_i followed by
// an arithmetic right shift by shift_i and saturation to 16 bits, then ReLU if
// relu_en_i. Finally zero detection: nz_o is high when any element of the
// processed vector is nonzero, which tells the output buffer whether the
// vector must be kept in sparse operation. The paper lists "activation
// functions, normalization, and zero detection"; the exact normalisation
// arithmetic is this design's choice.
//
// One register stage: a vector presented with vld_i appears on vec_o with
// vld_o one cycle later; the tag (channel, column, row tile) travels along.
module vs_post_proc
  import vscnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                vld_i,
  input  data_t [PE_ROWS-1:0] vec_i,
  input  logic [CH_W-1:0]     ch_i,
  input  logic [X_W-1:0]      x_i,
  input  logic [TY_W-1:0]     ty_i,
  input  data_t               scale_i,
  input  logic [4:0]          shift_i,
  input  logic                relu_en_i,
  output logic                vld_o,
  output data_t [PE_ROWS-1:0] vec_o,
  output logic                nz_o,
  output logic [CH_W-1:0]     ch_o,
  output logic [X_W-1:0]      x_o,
  output logic [TY_W-1:0]     ty_o
);
  data_t [PE_ROWS-1:0] v;
  logic                nz;

  always_comb begin
    nz = 1'b0;
    for (int i = 0; i < PE_ROWS; i++) begin
      logic signed [2*DATA_W-1:0] p;
      p    = vec_i[i] * scale_i;
      v[i] = sat(48'(p >>> shift_i));
      if (relu_en_i && v[i] < 0) v[i] = '0;
      nz   = nz | (v[i] != '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_o <= 1'b0;
      vec_o <= '0;
      nz_o  <= 1'b0;
      ch_o  <= '0;
      x_o   <= '0;
      ty_o  <= '0;
    end else begin
      vld_o <= vld_i;
      if (vld_i) begin
        vec_o <= v;
        nz_o  <= nz;
        ch_o  <= ch_i;
        x_o   <= x_i;
        ty_o  <= ty_i;
      end
    end
  end
endmodule
