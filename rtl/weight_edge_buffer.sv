// weight_edge_buffer: edges of the input graph and non-zeros of the weight
// matrices, stored alike as edge_t <src, dst bank, dst row, bias flag, weight>.
// One lane per pipeline, each with its own combinational read port, so every
// Scatter Unit reads one edge per cycle. The host writes edges lane by lane.
// The whole trained model stays resident, as in the reference design; DEPTH
// (16384 edges per lane) and the edge encoding are this design's choice.
module weight_edge_buffer
  import sgp_pkg::*;
#(
  parameter int DEPTH = 16384
) (
  input  logic                     clk,
  input  logic [P-1:0][WEB_AW-1:0] rd_addr,
  output edge_t [P-1:0]            rd_edge,
  input  logic                     wr_en,
  input  logic [PB-1:0]            wr_lane,
  input  logic [WEB_AW-1:0]        wr_addr,
  input  edge_t                    wr_edge
);
  edge_t mem [P][DEPTH];

  always_comb begin
    for (int p = 0; p < P; p++) rd_edge[p] = mem[p][int'(rd_addr[p]) % DEPTH];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_lane][int'(wr_addr) % DEPTH] <= wr_edge;
  end
endmodule
