// gather_unit: the Gather Unit of one pipeline.
// It owns one Result Buffer bank. Every routed update <dst, vector> is applied
// to row dst of the bank in the same cycle (combinational read, write at the
// clock edge), so updates to one row may arrive back to back and the unit is
// always ready. Each of the Q processing elements combines one FP32 lane:
//   G_ACC : row = row + update          (feature aggregation, weight products)
//   G_MAX : row = max(row, update)      (graph pooling)
// A row that has not been written since the bank was cleared takes the update
// as it is; so accumulation needs no zero fill, and max pooling runs only over
// the vertices that exist (pruned vertices send nothing).
// After all updates of a kernel, the controller steps fin_addr over the rows
// and the unit replaces each written row by act(row), act = ReLU or sigmoid
// (PLA). Update path and activation path never run in the same cycle.
// The reference names the PE parts (accumulator, max unit, ReLU unit, sigmoid
// unit, mux/demux); the one-cycle read-modify-write, the valid-bit rule and
// the separate activation sweep are this design's choices.
module gather_unit
  import fp32_pkg::*;
  import sgp_pkg::*;
(
  input  gop_e             gop,
  input  act_e             act,
  input  logic             upd_valid,
  input  update_t          upd,
  input  logic             fin_valid,
  input  logic [RB_AW-1:0] fin_addr,
  // bank port
  output logic [RB_AW-1:0] rd_addr,
  input  vec_t             rd_data,
  input  logic             rd_vld,
  output logic             wr_en,
  output logic [RB_AW-1:0] wr_addr,
  output vec_t             wr_data
);
  vec_t sig;

  for (genvar j = 0; j < Q; j++) begin : g_pe
    sigmoid_pla u_sig (.x(rd_data[j*DW +: DW]), .y(sig[j*DW +: DW]));
  end

  assign rd_addr = fin_valid ? fin_addr : upd.dst_addr;
  assign wr_addr = rd_addr;

  always_comb begin
    wr_en   = 1'b0;
    wr_data = rd_data;
    if (fin_valid) begin
      wr_en = rd_vld && (act != A_NONE);
      for (int j = 0; j < Q; j++) begin
        unique case (act)
          A_RELU:    wr_data[j*DW +: DW] = fp_relu(rd_data[j*DW +: DW]);
          A_SIGMOID: wr_data[j*DW +: DW] = sig[j*DW +: DW];
          default:   wr_data[j*DW +: DW] = rd_data[j*DW +: DW];
        endcase
      end
    end else if (upd_valid) begin
      wr_en = 1'b1;
      for (int j = 0; j < Q; j++) begin
        if (!rd_vld)           wr_data[j*DW +: DW] = upd.vec[j*DW +: DW];
        else if (gop == G_MAX) wr_data[j*DW +: DW] = fp_max(rd_data[j*DW +: DW], upd.vec[j*DW +: DW]);
        else                   wr_data[j*DW +: DW] = fp_add(rd_data[j*DW +: DW], upd.vec[j*DW +: DW]);
      end
    end
  end
endmodule
