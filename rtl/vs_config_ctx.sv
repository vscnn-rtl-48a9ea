// vs_config_ctx: configuration context, the layer setting read by the system
// controller.
//
// A host writes 16-bit registers (map in vscnn_pkg::cfg_reg_e): image width
// and height, number of filters, number of stored input vectors,
// post-processing scale, shift and flags (bit 0 ReLU, bit 1 sparse output).
// Writes take effect on the next clock edge; cfg_o is the registered setting.
// The paper names this block only; the register map is this design's choice.
// Reset values describe a 1x1 image with one filter, unit scale and no shift.
module vs_config_ctx
  import vscnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en_i,
  input  logic [2:0]  wr_addr_i,
  input  logic [15:0] wr_data_i,
  output cfg_t        cfg_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o         <= '0;
      cfg_o.w       <= (X_W+1)'(1);
      cfg_o.h       <= 7'd1;
      cfg_o.k       <= (CH_W+1)'(1);
      cfg_o.scale   <= data_t'(1 << FRAC);
      cfg_o.shift   <= 5'(FRAC);
    end else if (wr_en_i) begin
      case (cfg_reg_e'(wr_addr_i))
        REG_W:     cfg_o.w       <= wr_data_i[X_W:0];
        REG_H:     cfg_o.h       <= wr_data_i[6:0];
        REG_K:     cfg_o.k       <= wr_data_i[CH_W:0];
        REG_NIN:   cfg_o.n_in    <= wr_data_i[IA_W:0];
        REG_SCALE: cfg_o.scale   <= data_t'(wr_data_i);
        REG_SHIFT: cfg_o.shift   <= wr_data_i[4:0];
        REG_FLAGS: begin
          cfg_o.relu_en <= wr_data_i[0];
          cfg_o.sparse  <= wr_data_i[1];
        end
        default: ;
      endcase
    end
  end
endmodule
