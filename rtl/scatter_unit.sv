// scatter_unit: the Scatter Unit of one pipeline.
// For every edge <src,dst,weight> it receives, together with the source feature
// row read from the Input Buffer, it produces the update <dst, vector>. Its Q
// processing elements each hold one FP32 multiplier. The datapath select
// (demux/mux in the reference diagram) gives two paths per PE:
//   S_MUL    : vector[j] = weight * feature[j]  (aggregation with edge weights,
//              and one non-zero of a weight matrix applied to a feature row)
//   S_BYPASS : vector[j] = feature[j]           (graph pooling)
// An edge with its bias flag set contributes the weight itself, i.e. weight x 1.0;
// this is how the bias vectors of a layer are stored as extra non-zeros.
// Timing: one register stage. in_ready is high when the output register is
// empty or being taken this cycle, so one edge per cycle is sustained.
module scatter_unit
  import fp32_pkg::*;
  import sgp_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  smode_e  mode,
  input  logic    in_valid,
  output logic    in_ready,
  input  edge_t   in_edge,
  input  vec_t    in_feat,
  output logic    out_valid,
  input  logic    out_ready,
  output update_t out_upd
);
  vec_t prod;

  always_comb begin
    for (int j = 0; j < Q; j++) begin
      if (in_edge.bias)         prod[j*DW +: DW] = in_edge.weight;
      else if (mode == S_BYPASS) prod[j*DW +: DW] = in_feat[j*DW +: DW];
      else                      prod[j*DW +: DW] = fp_mul(in_edge.weight, in_feat[j*DW +: DW]);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_upd   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_upd.dst_bank <= in_edge.dst_bank;
        out_upd.dst_addr <= in_edge.dst_addr;
        out_upd.vec      <= prod;
      end
    end
  end

  // An offered update stays put until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_upd));
endmodule
