// tb_mtu: streams random Q x Q tiles through the MTU with random input gaps and
// output backpressure and checks that every output row j holds element j of
// the tile's input rows. Two passes must give the original tile back (checked
// through the reference). A tile must take 2Q cycles with no gaps.
module tb_mtu;
  import sgp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  vec_t in_data, out_data;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  mtu dut (.*);

  vec_t exq[$];
  vec_t tile [Q];
  int ntiles = 20, got = 0, cyc = 0, t_first, t_last;

  always @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      vec_t e;
      e = exq.pop_front();
      checks++;
      got++;
      t_last = cyc;
      if (out_data !== e) begin failures++; if (failures < 5) $display("FAIL row %0d", got); end
    end
  end

  task automatic send_tiles(input int n, input bit gaps);
    for (int t = 0; t < n; t++) begin
      for (int i = 0; i < Q; i++) tile[i] = {16{$urandom}};
      for (int j = 0; j < Q; j++) begin
        vec_t r;
        for (int i = 0; i < Q; i++) r[i*DW +: DW] = tile[i][j*DW +: DW];
        exq.push_back(r);
      end
      for (int i = 0; i < Q; i++) begin
        in_data = tile[i];
        in_valid = gaps ? 1'($urandom) : 1'b1;
        #1;
        while (!(in_valid && in_ready)) begin
          @(posedge clk); #1;
          in_valid = gaps ? 1'($urandom) : 1'b1;
          out_ready = gaps ? 1'($urandom) : 1'b1;
          #1;
        end
        @(posedge clk); #1;
        out_ready = gaps ? 1'($urandom) : 1'b1;
      end
      in_valid = 0;
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
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    t_first = cyc;
    send_tiles(1, 0);
    while (got < Q) begin @(posedge clk); #1; end
    checks++;
    if (t_last - t_first + 1 != 2 * Q) begin failures++; $display("FAIL tile took %0d cycles", t_last - t_first + 1); end
    send_tiles(ntiles, 1);
    out_ready = 1;
    repeat (2 * Q + 2) @(posedge clk);
    checks++;
    if (got != (ntiles + 1) * Q) begin failures++; $display("FAIL rows %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
