// tb_routing_network: sends updates with random destination banks from all P
// ports at once, with and without random output backpressure, and checks that
// every update leaves at the port of its bank, unchanged, in the order it was
// sent from its source (per source/destination pair), that nothing is lost,
// and that conflicts are seen. A conflict-free pattern (bank = port, and a
// rotation) must run at one update per port per cycle with log2(P) cycles of
// latency.
module tb_routing_network;
  import sgp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [P-1:0] in_valid, in_ready, out_valid, out_ready;
  update_t [P-1:0] in_upd, out_upd;
  logic busy;
  logic [31:0] conflicts;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  routing_network dut (.*);

  // expected queue per (src, dst)
  update_t exq [P][P][$];
  int sent, got, cyc;
  int pattern;   // 0 random, 1 identity, 2 rotate
  logic [P-1:0] want;
  int first_out;

  function automatic update_t mk(input int s, input int n);
    update_t u;
    u.vec = {16{$urandom}};
    u.vec[31:0] = 32'(s);                 // source in lane 0
    u.vec[63:32] = 32'(n);
    case (pattern)
      0: u.dst_bank = PB'($urandom);
      1: u.dst_bank = PB'(s);
      default: u.dst_bank = PB'(s + n);
    endcase
    u.dst_addr = RB_AW'($urandom);
    return u;
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int b = 0; b < P; b++) begin
        if (out_valid[b] && out_ready[b]) begin
          int s;
          update_t e;
          s = int'(out_upd[b].vec[31:0]);
          checks++;
          got++;
          if (first_out < 0) first_out = cyc;
          if (int'(out_upd[b].dst_bank) != b || s >= P || exq[s][b].size() == 0) begin
            failures++;
            if (failures < 5) $display("FAIL misrouted at port %0d bank %0d", b, out_upd[b].dst_bank);
          end else begin
            e = exq[s][b].pop_front();
            if (e !== out_upd[b]) begin
              failures++;
              if (failures < 5) $display("FAIL data/order at port %0d", b);
            end
          end
        end
      end
    end
  end

  task automatic run(input int pat, input int per_port, input bit bp);
    int cnt [P];
    int c0, g0, cf0;
    pattern = pat;
    foreach (cnt[i]) cnt[i] = 0;
    for (int s = 0; s < P; s++) begin in_upd[s] = mk(s, 0); end
    c0 = cyc; g0 = got; cf0 = int'(conflicts); first_out = -1;
    while (1) begin
      for (int s = 0; s < P; s++) in_valid[s] = (cnt[s] < per_port);
      out_ready = bp ? P'($urandom) : '1;
      if (in_valid == '0) break;
      #1;
      for (int s = 0; s < P; s++) begin
        if (in_valid[s] && in_ready[s]) begin
          exq[s][in_upd[s].dst_bank].push_back(in_upd[s]);
          cnt[s]++;
        end
      end
      @(posedge clk); #1;
      for (int s = 0; s < P; s++) if (in_valid[s] && in_ready[s]) in_upd[s] = mk(s, cnt[s]);
    end
    in_valid = '0;
    out_ready = '1;
    while (busy) begin @(posedge clk); #1; end
    checks++;
    if (got - g0 != P * per_port) begin failures++; $display("FAIL lost: %0d of %0d", got - g0, P * per_port); end
    if (pat != 0 && !bp) begin
      checks++;
      if (cyc - c0 != per_port + PB) begin
        failures++; $display("FAIL conflict-free pattern %0d took %0d cycles, expected %0d", pat, cyc - c0, per_port + PB);
      end
      checks++;
      if (first_out - c0 != PB) begin failures++; $display("FAIL latency %0d", first_out - c0); end
    end
    if (pat == 0) begin
      checks++;
      if (int'(conflicts) == cf0) begin failures++; $display("FAIL no conflicts under random traffic"); end
    end
    $display("pattern %0d bp %0d: %0d updates in %0d cycles, %0d conflicts", pat, bp, P * per_port, cyc - c0, int'(conflicts) - cf0);
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0; got = 0;
    in_valid = '0; out_ready = '1; in_upd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(1, 50, 0);
    run(2, 50, 0);
    run(0, 200, 0);
    run(0, 200, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
