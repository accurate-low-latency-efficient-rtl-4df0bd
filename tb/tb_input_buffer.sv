// tb_input_buffer: fills rows with random data and reads them back on all P
// read ports at once, each port at a different random row.
module tb_input_buffer;
  import sgp_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 0;
  logic [P-1:0][IB_AW-1:0] rd_addr;
  vec_t [P-1:0] rd_data;
  logic wr_en;
  logic [IB_AW-1:0] wr_addr;
  vec_t wr_data;
  int checks = 0, failures = 0;
  vec_t ref_m [DEPTH];
  always #5 clk = !clk;

  input_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_addr = '0; wr_en = 0; wr_addr = '0; wr_data = '0;
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = IB_AW'(a); wr_data = {16{$urandom}}; ref_m[a] = wr_data;
      @(posedge clk); #1;
    end
    // overwrite some rows
    for (int i = 0; i < 50; i++) begin
      wr_addr = IB_AW'($urandom % DEPTH); wr_data = {16{$urandom}}; ref_m[wr_addr] = wr_data;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      for (int p = 0; p < P; p++) rd_addr[p] = IB_AW'($urandom % DEPTH);
      #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rd_data[p] !== ref_m[rd_addr[p]]) begin failures++; $display("FAIL port %0d row %0d", p, rd_addr[p]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
