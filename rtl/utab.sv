// utab: unit aging table (uTab).
//
// Holds the unit aging parameters of the aging model, U_r (aging of one read), U_w (aging of
// one write) and U_i (aging of one idle cycle), as 32-bit Q16.16 words in arbitrary aging
// units, for each of the three logic blocks of a bank's peripheral circuitry (pulse shaper,
// verify logic, sense amplifier). The same values serve every bank. Reset loads the defaults
// from hebe_pkg; software may overwrite any word through the write port (wr_en, wr_blk,
// wr_sel 0 = U_r, 1 = U_w, 2 = U_i, wr_data), taking effect on the next edge.
//
// The published table has three 32-bit words. Per-block aging (needed to de-stress the
// blocks separately and to take the maximum over them) requires the three parameters for
// each block, since the blocks see different voltages in a read and in a write; this table
// therefore has nine words. Only U_i is common to all blocks (all idle at 1.2 V).
module utab
  import hebe_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  blk_e              wr_blk,
  input  logic [1:0]        wr_sel,
  input  logic [UNIT_W-1:0] wr_data,
  output unit_aging_t       u [3]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u[BLK_PS] <= '{u_r: U_R_PS_DEF, u_w: U_W_PS_DEF, u_i: U_I_DEF};
      u[BLK_VR] <= '{u_r: U_R_VR_DEF, u_w: U_W_VR_DEF, u_i: U_I_DEF};
      u[BLK_SA] <= '{u_r: U_R_SA_DEF, u_w: U_W_SA_DEF, u_i: U_I_DEF};
    end else if (wr_en && wr_blk != 2'd3) begin
      case (wr_sel)
        2'd0:    u[wr_blk].u_r <= wr_data;
        2'd1:    u[wr_blk].u_w <= wr_data;
        2'd2:    u[wr_blk].u_i <= wr_data;
        default: ;
      endcase
    end
  end

endmodule
