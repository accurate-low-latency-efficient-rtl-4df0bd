// tb_scatter_unit: drives random edges and feature rows into a Scatter Unit in
// multiply, bypass and bias form, with random output backpressure, and checks
// every update (destination and all Q lanes) against products computed in
// real arithmetic and rounded to FP32. Also checks one update per cycle when
// the output is always ready.
module tb_scatter_unit;
  import sgp_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  smode_e mode;
  logic in_valid, in_ready, out_valid, out_ready;
  edge_t in_edge;
  vec_t in_feat;
  update_t out_upd;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  scatter_unit dut (.*);

  update_t q[$];
  int sent, got;
  bit stress;

  function automatic update_t model(input edge_t e, input vec_t f, input smode_e m);
    update_t u;
    u.dst_bank = e.dst_bank; u.dst_addr = e.dst_addr;
    for (int j = 0; j < Q; j++) begin
      if (e.bias)            u.vec[j*DW +: DW] = e.weight;
      else if (m == S_BYPASS) u.vec[j*DW +: DW] = f[j*DW +: DW];
      else                   u.vec[j*DW +: DW] = r2f(f2r(e.weight) * f2r(f[j*DW +: DW]));
    end
    return u;
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      update_t e;
      e = q.pop_front();
      checks++;
      got++;
      if (out_upd !== e) begin
        failures++;
        if (failures < 5) $display("FAIL update %0d: got %h exp %h", got, out_upd.vec[31:0], e.vec[31:0]);
      end
    end
  end

  task automatic run(input smode_e m, input int n, input bit bp);
    int c0, cyc;
    mode = m; stress = bp;
    sent = 0;
    c0 = got;
    cyc = 0;
    while (sent < n) begin
      in_valid = 1'b1;
      in_edge.src = IB_AW'($urandom); in_edge.dst_bank = PB'($urandom); in_edge.dst_addr = RB_AW'($urandom);
      in_edge.bias = ($urandom % 8 == 0);
      in_edge.weight = rand_f(-6, 6);
      for (int j = 0; j < Q; j++) in_feat[j*DW +: DW] = rand_f(-10, 10);
      out_ready = bp ? 1'($urandom) : 1'b1;
      #1;
      if (in_ready) begin q.push_back(model(in_edge, in_feat, m)); sent++; end
      @(posedge clk); #1; cyc++;
    end
    in_valid = 1'b0;
    out_ready = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (got - c0 != n) begin failures++; $display("FAIL count %0d of %0d", got - c0, n); end
    if (!bp) begin
      checks++;
      if (cyc != n) begin failures++; $display("FAIL rate: %0d cycles for %0d edges", cyc, n); end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; mode = S_MUL; in_edge = '0; in_feat = '0;
    got = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(S_MUL, 300, 0);
    run(S_MUL, 300, 1);
    run(S_BYPASS, 200, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
