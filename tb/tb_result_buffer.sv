// tb_result_buffer: writes random rows into random banks through the gather
// ports (several banks in one cycle), reads them back on the gather ports and
// on the second port, checks that unwritten rows read as zero on the second
// port with valid low, and that clear invalidates everything.
module tb_result_buffer;
  import sgp_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, clear;
  logic [P-1:0][RB_AW-1:0] g_rd_addr, g_wr_addr;
  vec_t [P-1:0] g_rd_data, g_wr_data;
  logic [P-1:0] g_rd_vld, g_wr_en;
  logic [PB-1:0] rd2_bank;
  logic [RB_AW-1:0] rd2_addr;
  vec_t rd2_data;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  result_buffer #(.DEPTH(DEPTH)) dut (.*);

  vec_t ref_m [P][DEPTH];
  bit   ref_v [P][DEPTH];

  task automatic check_all();
    for (int b = 0; b < P; b++) for (int a = 0; a < DEPTH; a++) begin
      rd2_bank = PB'(b); rd2_addr = RB_AW'(a);
      g_rd_addr[b] = RB_AW'(a);
      #1;
      checks += 2;
      if (rd2_data !== (ref_v[b][a] ? ref_m[b][a] : '0)) begin failures++; $display("FAIL rd2 bank %0d row %0d", b, a); end
      if (g_rd_vld[b] != ref_v[b][a] || (ref_v[b][a] && g_rd_data[b] !== ref_m[b][a])) begin
        failures++; $display("FAIL gather port bank %0d row %0d", b, a);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    g_wr_en = '0; g_rd_addr = '0; g_wr_addr = '0; g_wr_data = '0; rd2_bank = '0; rd2_addr = '0;
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    foreach (ref_v[b, a]) ref_v[b][a] = 0;
    check_all();
    for (int i = 0; i < 200; i++) begin
      for (int b = 0; b < P; b++) begin
        g_wr_en[b] = 1'($urandom);
        g_wr_addr[b] = RB_AW'($urandom % DEPTH);
        g_wr_data[b] = {16{$urandom}};
        if (g_wr_en[b]) begin ref_m[b][g_wr_addr[b]] = g_wr_data[b]; ref_v[b][g_wr_addr[b]] = 1; end
      end
      @(posedge clk); #1;
    end
    g_wr_en = '0;
    check_all();
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    foreach (ref_v[b, a]) ref_v[b][a] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
