// mtu: Matrix Transformation Unit, switches between vertex-major and
// feature-major layout.
// It takes Q rows of Q FP32 values (a Q x Q tile) and returns the transposed
// tile: output row j holds element j of input rows 0..Q-1. Transposing a tile
// of Q vertices' feature chunk gives Q feature rows of those vertices, and the
// reverse, so one unit serves both directions. The reference only says that
// the MTU performs the layout transformation; the tile transpose is this
// design's realisation. Timing: Q cycles to load a tile, then Q cycles to emit
// it (valid/ready on both sides).
module mtu
  import sgp_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  vec_t in_data,
  output logic out_valid,
  input  logic out_ready,
  output vec_t out_data
);
  logic [DW-1:0] tile [Q][Q];      // tile[row][col]
  logic [$clog2(Q)-1:0] cnt;
  logic emitting;

  assign in_ready  = !emitting;
  assign out_valid = emitting;

  always_comb begin
    for (int i = 0; i < Q; i++) out_data[i*DW +: DW] = tile[i][cnt];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      emitting <= 1'b0;
    end else if (!emitting) begin
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        if (cnt == $clog2(Q)'(Q - 1)) emitting <= 1'b1;
      end
    end else if (out_ready) begin
      cnt <= cnt + 1'b1;
      if (cnt == $clog2(Q)'(Q - 1)) emitting <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!emitting && in_valid) begin
      for (int j = 0; j < Q; j++) tile[cnt][j] <= in_data[j*DW +: DW];
    end
  end
endmodule
