// tb_weight_edge_buffer: writes random edges into every lane and reads them
// back on all P lane ports at once; lanes must not alias.
module tb_weight_edge_buffer;
  import sgp_pkg::*;
  localparam int DEPTH = 128;
  logic clk = 0;
  logic [P-1:0][WEB_AW-1:0] rd_addr;
  edge_t [P-1:0] rd_edge;
  logic wr_en;
  logic [PB-1:0] wr_lane;
  logic [WEB_AW-1:0] wr_addr;
  edge_t wr_edge;
  int checks = 0, failures = 0;
  edge_t ref_m [P][DEPTH];
  always #5 clk = !clk;

  weight_edge_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_addr = '0; wr_en = 0; wr_lane = '0; wr_addr = '0; wr_edge = '0;
    for (int l = 0; l < P; l++) for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_lane = PB'(l); wr_addr = WEB_AW'(a);
      wr_edge = edge_t'({$urandom, $urandom});
      ref_m[l][a] = wr_edge;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      for (int p = 0; p < P; p++) rd_addr[p] = WEB_AW'($urandom % DEPTH);
      #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rd_edge[p] !== ref_m[p][rd_addr[p]]) begin failures++; $display("FAIL lane %0d row %0d", p, rd_addr[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
