// input_buffer: rows of input feature data for the Scatter Units.
// A row is Q FP32 values. Depending on the kernel a row holds Q features of
// one vertex (vertex-major, aggregation kernels) or one feature of Q vertices
// (feature-major, update kernels). Every Scatter Unit has its own
// combinational read port, so all P pipelines read in the same cycle; there
// is one write port, shared by the host and the result write-back. DEPTH
// (32768 rows: a working set of several layouts of one 128x128 image) is this
// design's choice.
module input_buffer
  import sgp_pkg::*;
#(
  parameter int DEPTH = 32768
) (
  input  logic                    clk,
  input  logic [P-1:0][IB_AW-1:0] rd_addr,
  output vec_t [P-1:0]            rd_data,
  input  logic                    wr_en,
  input  logic [IB_AW-1:0]        wr_addr,
  input  vec_t                    wr_data
);
  vec_t mem [DEPTH];

  always_comb begin
    for (int p = 0; p < P; p++) rd_data[p] = mem[int'(rd_addr[p]) % DEPTH];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[int'(wr_addr) % DEPTH] <= wr_data;
  end
endmodule
