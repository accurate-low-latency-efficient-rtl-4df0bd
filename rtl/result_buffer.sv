// result_buffer: P banks of output feature rows, one bank per Gather Unit.
// Each row is Q FP32 values (512 bits) and has a valid bit. clear invalidates
// every row in one cycle at the start of a kernel; a row that has not been
// written since reads as zeros on the second port, which gives the zero
// padding of pruned vertices. Ports:
//   g_*   per bank: combinational read (data and valid bit) and a write, used
//         by that bank's Gather Unit for its one-cycle read-modify-write
//   rd2_* one combinational read of any bank, for write-back and the host.
// DEPTH rows per bank (2048 here) is this design's choice; the reference only
// states that the Result Buffer has P banks.
module result_buffer
  import sgp_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic                  clk,
  input  logic                  clear,
  input  logic [P-1:0][RB_AW-1:0] g_rd_addr,
  output vec_t [P-1:0]          g_rd_data,
  output logic [P-1:0]          g_rd_vld,
  input  logic [P-1:0]          g_wr_en,
  input  logic [P-1:0][RB_AW-1:0] g_wr_addr,
  input  vec_t [P-1:0]          g_wr_data,
  input  logic [PB-1:0]         rd2_bank,
  input  logic [RB_AW-1:0]      rd2_addr,
  output vec_t                  rd2_data
);
  vec_t mem [P][DEPTH];
  logic [DEPTH-1:0] vld [P];

  always_comb begin
    for (int b = 0; b < P; b++) begin
      g_rd_data[b] = mem[b][int'(g_rd_addr[b]) % DEPTH];
      g_rd_vld[b]  = vld[b][int'(g_rd_addr[b]) % DEPTH];
    end
    rd2_data = vld[rd2_bank][int'(rd2_addr) % DEPTH] ? mem[rd2_bank][int'(rd2_addr) % DEPTH] : '0;
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < P; b++) begin
      if (g_wr_en[b]) mem[b][int'(g_wr_addr[b]) % DEPTH] <= g_wr_data[b];
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < P; b++) begin
      if (clear) begin
        vld[b] <= '0;
      end else if (g_wr_en[b]) begin
        vld[b][int'(g_wr_addr[b]) % DEPTH] <= 1'b1;
      end
    end
  end
endmodule
