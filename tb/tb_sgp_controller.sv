// tb_sgp_controller: the controller alone, with the Weight/Edge Buffer, the
// Scatter Units' ready signals and the Result Buffer read data modelled here
// and a real MTU. Two kernels are loaded:
//   k0: uneven edge counts per lane (one lane empty), 3 passes with source and
//       destination strides, random Scatter Unit stalls, ReLU sweep of 5 rows,
//       direct write-back of 20 rows;
//   k1: no clear, 1 pass, never stalled, write-back of 32 rows through the MTU.
// Checked: every issued edge (lane, pass offsets, order), the clear pulse,
// the sweep rows, the write-back addresses and data, done, the kernel count,
// the stall counter, and EDGES+DRAIN = longest lane x passes + 1 cycles for
// the unstalled kernel.
module tb_sgp_controller;
  import sgp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic desc_wr_en, start, busy, done;
  logic [DESC_AW-1:0] desc_wr_addr;
  desc_t desc_wr_data;
  logic [IB_AW:0] host_rd_row;
  smode_e smode; gop_e gop; act_e act; kernel_e kind;
  logic [P-1:0][WEB_AW-1:0] web_rd_addr;
  edge_t [P-1:0] web_rd_edge, sc_edge;
  logic [P-1:0][IB_AW-1:0] ib_rd_addr;
  logic [P-1:0] sc_valid, sc_ready;
  logic dp_busy, fin_valid, rb_clear;
  logic [RB_AW-1:0] fin_addr, rb_rd_addr;
  logic [PB-1:0] rb_rd_bank;
  vec_t rb_rd_data, mtu_out_data, ib_wr_data;
  logic mtu_in_valid, mtu_in_ready, mtu_out_valid, mtu_out_ready, ib_wr_en;
  logic [IB_AW-1:0] ib_wr_addr;
  logic [31:0] kernel_cycles, edge_cycles, stall_cycles, kernels_run;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  sgp_controller dut (.*);
  mtu u_mtu (.clk, .rst_n, .in_valid(mtu_in_valid), .in_ready(mtu_in_ready), .in_data(rb_rd_data),
             .out_valid(mtu_out_valid), .out_ready(mtu_out_ready), .out_data(mtu_out_data));

  edge_t web [P][64];
  always_comb for (int l = 0; l < P; l++) web_rd_edge[l] = web[l][web_rd_addr[l] % 64];
  // Result Buffer model: row content encodes bank and row
  function automatic vec_t rbrow(input int b, input int a);
    vec_t v;
    for (int j = 0; j < Q; j++) v[j*DW +: DW] = 32'(b * 100000 + a * 100 + j);
    return v;
  endfunction
  assign rb_rd_data = rbrow(int'(rb_rd_bank), int'(rb_rd_addr));
  assign dp_busy = 1'b0;

  desc_t k0, k1;
  bit    stall_on;
  int    exp_iss [P][$];       // expected {src, dst} per lane, packed
  int    n_clear = 0, n_fin = 0, n_wb = 0, n_done = 0, fin_rows [$];
  vec_t  exp_wb [$];
  int    exp_wba [$];

  always_ff @(posedge clk) if (rst_n) begin
    for (int l = 0; l < P; l++) begin
      if (sc_valid[l] && sc_ready[l]) begin
        int e;
        checks++;
        if (exp_iss[l].size() == 0) begin failures++; $display("FAIL lane %0d extra edge", l); end
        else begin
          e = exp_iss[l].pop_front();
          if (e != {int'(ib_rd_addr[l]) << 16 | int'(sc_edge[l].dst_addr)}) begin
            failures++; $display("FAIL lane %0d issued src %0d dst %0d", l, ib_rd_addr[l], sc_edge[l].dst_addr);
          end
        end
      end
    end
    if (rb_clear) n_clear++;
    if (fin_valid) begin n_fin++; fin_rows.push_back(int'(fin_addr)); end
    if (ib_wr_en) begin
      checks++;
      n_wb++;
      if (exp_wb.size() == 0 || ib_wr_data !== exp_wb[0] || int'(ib_wr_addr) != exp_wba[0]) begin
        failures++; if (failures < 10) $display("FAIL write-back %0d at row %0d", n_wb, ib_wr_addr);
      end
      if (exp_wb.size() != 0) begin void'(exp_wb.pop_front()); void'(exp_wba.pop_front()); end
    end
    if (done) n_done++;
  end

  always @(negedge clk) sc_ready <= stall_on ? P'($urandom) : '1;

  task automatic expect_kernel(input desc_t k);
    for (int l = 0; l < P; l++)
      for (int p = 0; p < int'(k.n_pass); p++)
        for (int e = 0; e < int'(k.n_edges[l]); e++) begin
          edge_t ed;
          ed = web[l][int'(k.edge_base) + e];
          exp_iss[l].push_back((int'(ed.src) + p * int'(k.src_stride)) << 16 | (int'(ed.dst_addr) + p * int'(k.dst_stride)));
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
    int mx;
    desc_wr_en = 0; desc_wr_addr = '0; desc_wr_data = '0; start = 0; host_rd_row = '0; stall_on = 1;
    for (int l = 0; l < P; l++) for (int a = 0; a < 64; a++) begin
      web[l][a] = '0;
      web[l][a].src = IB_AW'($urandom % 1000);
      web[l][a].dst_addr = RB_AW'($urandom % 500);
    end
    k0 = '0;
    k0.kind = K_VUK; k0.act = A_RELU; k0.clear = 1; k0.wb_mode = WB_DIRECT;
    k0.edge_base = 4;
    for (int l = 0; l < P; l++) k0.n_edges[l] = (WEB_AW + 1)'(l == 3 ? 0 : 1 + l);
    k0.n_pass = 3; k0.src_stride = 16; k0.dst_stride = 2; k0.n_out = 5;
    k0.wb_count = 20; k0.wb_base = 100;
    k1 = '0;
    k1.kind = K_VAK; k1.smode = S_BYPASS; k1.gop = G_MAX; k1.clear = 0; k1.last = 1; k1.wb_mode = WB_TRANSPOSE;
    k1.edge_base = 30;
    for (int l = 0; l < P; l++) k1.n_edges[l] = (WEB_AW + 1)'(2 * l + 1);
    k1.n_pass = 1; k1.wb_count = 32; k1.wb_base = 500;
    expect_kernel(k0);
    expect_kernel(k1);
    for (int r = 0; r < 20; r++) begin exp_wb.push_back(rbrow(r % P, r / P)); exp_wba.push_back(100 + r); end
    for (int t = 0; t < 2; t++) for (int j = 0; j < Q; j++) begin
      vec_t v;
      for (int i = 0; i < Q; i++) v[i*DW +: DW] = rbrow((t * Q + i) % P, (t * Q + i) / P)[j*DW +: DW];
      exp_wb.push_back(v); exp_wba.push_back(500 + t * Q + j);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    desc_wr_en = 1; desc_wr_addr = 0; desc_wr_data = k0; @(posedge clk); #1;
    desc_wr_addr = 1; desc_wr_data = k1; @(posedge clk); #1;
    desc_wr_en = 0;
    start = 1; @(posedge clk); #1; start = 0;
    // stall only the first kernel
    wait (dut.st == 3'd6 || (dut.pc == 1));
    stall_on = 0;
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++; if (n_done != 1 || busy) begin failures++; $display("FAIL done/busy"); end
    checks++; if (n_clear != 1) begin failures++; $display("FAIL clear pulses %0d", n_clear); end
    checks++; if (kernels_run != 2) begin failures++; $display("FAIL kernels_run %0d", kernels_run); end
    checks++; if (n_fin != 5) begin failures++; $display("FAIL sweep rows %0d", n_fin); end
    foreach (fin_rows[i]) begin checks++; if (fin_rows[i] != i) begin failures++; $display("FAIL sweep order"); end end
    for (int l = 0; l < P; l++) begin checks++; if (exp_iss[l].size() != 0) begin failures++; $display("FAIL lane %0d missing %0d edges", l, exp_iss[l].size()); end end
    checks++; if (exp_wb.size() != 0) begin failures++; $display("FAIL %0d write-backs missing", exp_wb.size()); end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL no stalls counted"); end
    mx = 0; for (int l = 0; l < P; l++) if (int'(k1.n_edges[l]) > mx) mx = int'(k1.n_edges[l]);
    checks++; if (edge_cycles != 32'(mx * int'(k1.n_pass) + 1)) begin failures++; $display("FAIL edge_cycles %0d expected %0d", edge_cycles, mx + 1); end
    $display("k1: edge_cycles %0d kernel_cycles %0d, stalls %0d", edge_cycles, kernel_cycles, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
