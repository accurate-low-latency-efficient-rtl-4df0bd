// gnn_e2e: end-to-end run of the accelerator at its default sizes on one SAR
// image of N x N pixels, shared by the small and the full-size testbench.
// This module plays the host: it builds the graph (4-neighbour grid, pixels
// below 0.1 pruned, remaining vertices numbered densely), prepares the edge
// lists and sparse weights, loads the buffers and kernel table through the
// host ports, runs, and compares the result with a model computed here in
// real arithmetic. The program:
//   K0 VAK  mean aggregation of GNNL-1 (c=1)       -> MTU -> Z (feature-major)
//   K1 VUK  h1 = ReLU(z Wn + bn || h0 Ws + bs), c=8 -> MTU -> H1 (vertex-major)
//   K2 VAK  2x2 max pooling (bypass + max)          -> direct -> P1 (vertex-major)
//   K3      write-back only                          -> MTU -> P1 (feature-major)
//   K4 VAK  mean aggregation on the pooled grid      -> MTU -> Z2 (feature-major)
//   K5 VUK  spatial-attention score sigmoid(z2 wn + p ws + b), result left in
//           the Result Buffer and read back by the host.
// Each mechanism is counted and must occur: both kernel kinds and the switch
// between them, multiply and bypass scatter, accumulate and max gather, ReLU
// and sigmoid, bias edges, direct and transposed write-back, multi-pass
// kernels, routing conflicts and Scatter Unit stalls, zero padding of partial
// tiles. K1's edges are placed so no two collide; its EDGES+DRAIN time must
// equal ceil(|V|/q) * ceil(nnz/p) + 1 + log2(p) cycles.
module gnn_e2e
  import sgp_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter int N    = 8,      // image side
  parameter int BLOB = 0       // 0: random pixels, 1: target blob on clutter
) ();
  logic clk = 0, rst_n = 0;
  logic host_ib_wr_en = 0, host_web_wr_en = 0, host_desc_wr_en = 0, start = 0;
  logic [IB_AW-1:0] host_ib_wr_addr = '0;
  vec_t host_ib_wr_data = '0;
  logic [PB-1:0] host_web_wr_lane = '0;
  logic [WEB_AW-1:0] host_web_wr_addr = '0;
  edge_t host_web_wr_edge = '0;
  logic [DESC_AW-1:0] host_desc_wr_addr = '0;
  desc_t host_desc_wr_data = '0;
  logic busy, done;
  logic [IB_AW:0] host_rd_row = '0;
  vec_t host_rd_data;
  kernel_e cur_kind;
  logic [31:0] kernel_cycles, edge_cycles, stall_cycles, route_conflicts, kernels_run;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  sar_gnn_accel dut (.*);

  // ---------------------------------------------------------------- graph
  real pix [N*N];
  int  vid [N*N];          // dense vertex id or -1
  int  V, Vp, N2, V2, Vp2;
  int  pid [(N/2)*(N/2)];  // dense pooled id or -1
  int  vx [$], vy [$], px [$], py [$];
  // model weights (random, some pruned to zero)
  real wn1 [4], ws1 [4], bn1 [4], bs1 [4], wn2 [8], ws2 [8], b2;
  // reference values
  real h0 [$], z1 [$], h1 [$][8], p1 [$][8], z2 [$][8], alpha [$];

  edge_t lanes [P][$];
  int    kbase, next_base;
  desc_t prog [6];
  int    R_H0V, R_H0F, R_ZF, R_H1V, R_P1V, R_P1F, R_Z2F;

  function automatic int al16(input int x); return (x + 15) / 16 * 16; endfunction

  function automatic edge_t mk_edge(input int src, input int L, input real w, input bit bias);
    edge_t e;
    e.src = IB_AW'(src);
    e.dst_bank = PB'(L % P);
    e.dst_addr = RB_AW'(L / P);
    e.bias = bias;
    e.weight = r2f(w);
    return e;
  endfunction

  function automatic real rw();
    real w;
    w = (real'($urandom % 2000) - 1000.0) / 1000.0;
    if ($urandom % 4 == 0) w = 0.0;        // weight pruning
    return w;
  endfunction

  // begin a kernel's edge lists: every lane starts at the same base
  task automatic begin_kernel();
    for (int l = 0; l < P; l++) lanes[l].delete();
    kbase = next_base;
  endtask

  task automatic end_kernel(input int k, inout desc_t d);
    int mx;
    mx = 0;
    d.edge_base = WEB_AW'(kbase);
    for (int l = 0; l < P; l++) begin
      d.n_edges[l] = (WEB_AW + 1)'(lanes[l].size());
      if (lanes[l].size() > mx) mx = lanes[l].size();
      foreach (lanes[l][i]) begin
        @(negedge clk);
        host_web_wr_en = 1; host_web_wr_lane = PB'(l); host_web_wr_addr = WEB_AW'(kbase + i); host_web_wr_edge = lanes[l][i];
      end
    end
    @(negedge clk); host_web_wr_en = 0;
    next_base = kbase + mx;
    prog[k] = d;
  endtask

  task automatic ib_write(input int row, input vec_t v);
    @(negedge clk);
    host_ib_wr_en = 1; host_ib_wr_addr = IB_AW'(row); host_ib_wr_data = v;
  endtask

  // round-robin lane assignment (the host's load balancing)
  int rr;
  task automatic add_rr(input edge_t e);
    lanes[rr % P].push_back(e);
    rr++;
  endtask

  // ------------------------------------------------------------ monitors
  int n_kind_switch = 0, n_mul = 0, n_bypass = 0, n_acc = 0, n_max = 0, n_relu = 0, n_sig = 0,
      n_wb_dir = 0, n_wb_tr = 0, n_multipass = 0, n_bias = 0, n_pad = 0;
  kernel_e last_kind;
  logic [31:0] kr_prev;
  initial kr_prev = 0;
  int kcyc [6], kedge [6];
  always @(posedge clk) begin
    if (rst_n && kernels_run != kr_prev) begin
      desc_t d;
      d = prog[kr_prev];
      kcyc[kr_prev] = int'(kernel_cycles);
      kedge[kr_prev] = int'(edge_cycles);
      if (kr_prev > 0 && d.n_edges != '0 && d.kind != last_kind) n_kind_switch++;
      if (d.n_edges != '0) last_kind = d.kind;
      if (d.n_edges != '0) begin
        if (d.smode == S_MUL) n_mul++; else n_bypass++;
        if (d.gop == G_ACC) n_acc++; else n_max++;
        if (d.n_pass > 1) n_multipass++;
      end
      if (d.act == A_RELU) n_relu++;
      if (d.act == A_SIGMOID) n_sig++;
      if (d.wb_mode == WB_DIRECT) n_wb_dir++;
      if (d.wb_mode == WB_TRANSPOSE) n_wb_tr++;
      kr_prev <= kernels_run;
    end
    for (int l = 0; l < P; l++) if (dut.sc_in_valid[l] && dut.sc_in_ready[l] && dut.sc_edge[l].bias) n_bias++;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- main
  initial begin
    desc_t d;
    int t0;
    // image and pruning
    V = 0;
    for (int y = 0; y < N; y++) for (int x = 0; x < N; x++) begin
      real v;
      if (BLOB != 0) begin
        real dx, dy;
        dx = real'(x - N / 2) / real'(N / 6); dy = real'(y - N / 2) / real'(N / 12);
        if (dx * dx + dy * dy < 1.0) v = 0.5 + real'($urandom % 7500) / 1000.0;
        else v = real'($urandom % 120) / 1000.0;
      end else begin
        v = ($urandom % 10 < 3) ? 0.05 : real'($urandom % 8000) / 1000.0;
      end
      pix[y*N+x] = f2r(r2f(v));
      if (pix[y*N+x] >= 0.1) begin vid[y*N+x] = V; V++; vx.push_back(x); vy.push_back(y); h0.push_back(pix[y*N+x]); end
      else vid[y*N+x] = -1;
    end
    Vp = al16(V);
    N2 = N / 2;
    V2 = 0;
    for (int o = 0; o < N2 * N2; o++) pid[o] = -1;
    for (int v = 0; v < V; v++) begin
      int o;
      o = (vy[v] / 2) * N2 + vx[v] / 2;
      if (pid[o] < 0) begin pid[o] = V2; V2++; px.push_back((vx[v] / 2)); py.push_back(vy[v] / 2); end
    end
    Vp2 = al16(V2);
    if (Vp != V || Vp2 != V2) n_pad++;
    R_H0V = 0; R_H0F = Vp; R_ZF = 2 * Vp; R_H1V = 3 * Vp; R_P1V = 4 * Vp; R_P1F = 4 * Vp + Vp2; R_Z2F = 4 * Vp + 2 * Vp2;
    $display("image %0dx%0d: %0d vertices after pruning, %0d pooled vertices, Input Buffer rows used %0d", N, N, V, V2, R_Z2F + Vp2);
    for (int i = 0; i < 4; i++) begin wn1[i] = rw(); ws1[i] = rw(); bn1[i] = rw(); bs1[i] = rw(); end
    for (int i = 0; i < 8; i++) begin wn2[i] = rw(); ws2[i] = rw(); end
    b2 = rw();
    foreach (wn1[i]) begin wn1[i] = f2r(r2f(wn1[i])); ws1[i] = f2r(r2f(ws1[i])); bn1[i] = f2r(r2f(bn1[i])); bs1[i] = f2r(r2f(bs1[i])); end
    foreach (wn2[i]) begin wn2[i] = f2r(r2f(wn2[i])); ws2[i] = f2r(r2f(ws2[i])); end
    b2 = f2r(r2f(b2));

    // reference model
    for (int v = 0; v < V; v++) begin
      real s; int n;
      s = h0[v]; n = 1;
      for (int k = 0; k < 4; k++) begin
        int x, y;
        x = vx[v] + (k == 0 ? 1 : k == 1 ? -1 : 0); y = vy[v] + (k == 2 ? 1 : k == 3 ? -1 : 0);
        if (x >= 0 && x < N && y >= 0 && y < N && vid[y*N+x] >= 0) begin s += h0[vid[y*N+x]]; n++; end
      end
      z1.push_back(s / real'(n));
    end
    for (int v = 0; v < V; v++) begin
      real r [8];
      for (int dd = 0; dd < 4; dd++) begin
        r[dd]     = z1[v] * wn1[dd] + bn1[dd];
        r[dd + 4] = h0[v] * ws1[dd] + bs1[dd];
      end
      foreach (r[i]) if (r[i] < 0.0) r[i] = 0.0;
      h1.push_back(r);
    end
    for (int o = 0; o < V2; o++) begin
      real r [8];
      bit first;
      first = 1;
      for (int v = 0; v < V; v++) if (pid[(vy[v] / 2) * N2 + vx[v] / 2] == o) begin
        for (int f = 0; f < 8; f++) r[f] = first ? h1[v][f] : (h1[v][f] > r[f] ? h1[v][f] : r[f]);
        first = 0;
      end
      p1.push_back(r);
    end
    for (int o = 0; o < V2; o++) begin
      real r [8]; int n; real s;
      n = 1;
      for (int f = 0; f < 8; f++) r[f] = p1[o][f];
      for (int k = 0; k < 4; k++) begin
        int x, y;
        x = px[o] + (k == 0 ? 1 : k == 1 ? -1 : 0); y = py[o] + (k == 2 ? 1 : k == 3 ? -1 : 0);
        if (x >= 0 && x < N2 && y >= 0 && y < N2 && pid[y*N2+x] >= 0) begin
          for (int f = 0; f < 8; f++) r[f] += p1[pid[y*N2+x]][f];
          n++;
        end
      end
      for (int f = 0; f < 8; f++) r[f] = r[f] / real'(n);
      z2.push_back(r);
      s = b2;
      for (int f = 0; f < 8; f++) s += r[f] * wn2[f] + p1[o][f] * ws2[f];
      alpha.push_back(sigmoid_plan(s));
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    next_base = 0;

    // input feature rows: vertex-major and feature-major copies of h0
    for (int v = 0; v < V; v++) ib_write(R_H0V + v, vec_t'(r2f(h0[v])));
    for (int t = 0; t < Vp / 16; t++) begin
      vec_t row;
      row = '0;
      for (int i = 0; i < 16; i++) if (16 * t + i < V) row[i*DW +: DW] = r2f(h0[16 * t + i]);
      ib_write(R_H0F + 16 * t, row);
    end
    @(negedge clk); host_ib_wr_en = 0;

    // K0: GNNL-1 aggregation, weight 1/(deg+1)
    begin_kernel(); rr = 0;
    for (int v = 0; v < V; v++) begin
      int nb [$];
      nb.delete();
      nb.push_back(v);
      for (int k = 0; k < 4; k++) begin
        int x, y;
        x = vx[v] + (k == 0 ? 1 : k == 1 ? -1 : 0); y = vy[v] + (k == 2 ? 1 : k == 3 ? -1 : 0);
        if (x >= 0 && x < N && y >= 0 && y < N && vid[y*N+x] >= 0) nb.push_back(vid[y*N+x]);
      end
      foreach (nb[i]) add_rr(mk_edge(R_H0V + nb[i], v, 1.0 / real'(nb.size()), 0));
    end
    d = '0; d.kind = K_VAK; d.smode = S_MUL; d.gop = G_ACC; d.act = A_NONE; d.clear = 1;
    d.n_pass = 1; d.wb_mode = WB_TRANSPOSE; d.wb_count = (IB_AW + 1)'(Vp); d.wb_base = IB_AW'(R_ZF);
    end_kernel(0, d);

    // K1: GNNL-1 update, c 1 -> 4 + 4, ReLU; lane = destination bank (no conflicts)
    begin_kernel();
    for (int dd = 0; dd < 8; dd++) begin
      real w, b;
      int src;
      w = dd < 4 ? wn1[dd] : ws1[dd - 4];
      b = dd < 4 ? bn1[dd] : bs1[dd - 4];
      src = dd < 4 ? R_ZF : R_H0F;
      if (w != 0.0) lanes[dd % P].push_back(mk_edge(src, dd, w, 0));
      if (b != 0.0) lanes[dd % P].push_back(mk_edge(0, dd, b, 1));
    end
    d = '0; d.kind = K_VUK; d.smode = S_MUL; d.gop = G_ACC; d.act = A_RELU; d.clear = 1;
    d.n_pass = (IB_AW + 1)'(Vp / 16); d.src_stride = 16; d.dst_stride = 2; d.n_out = (RB_AW + 1)'(Vp / 8);
    d.wb_mode = WB_TRANSPOSE; d.wb_count = (IB_AW + 1)'(Vp); d.wb_base = IB_AW'(R_H1V);
    end_kernel(1, d);

    // K2: 2x2 max pooling
    begin_kernel(); rr = 0;
    for (int v = 0; v < V; v++) add_rr(mk_edge(R_H1V + v, pid[(vy[v] / 2) * N2 + vx[v] / 2], 1.0, 0));
    d = '0; d.kind = K_VAK; d.smode = S_BYPASS; d.gop = G_MAX; d.act = A_NONE; d.clear = 1;
    d.n_pass = 1; d.wb_mode = WB_DIRECT; d.wb_count = (IB_AW + 1)'(Vp2); d.wb_base = IB_AW'(R_P1V);
    end_kernel(2, d);

    // K3: feature-major copy of the pooled rows
    begin_kernel();
    d = '0; d.kind = K_VAK; d.clear = 0; d.n_pass = 1;
    d.wb_mode = WB_TRANSPOSE; d.wb_count = (IB_AW + 1)'(Vp2); d.wb_base = IB_AW'(R_P1F);
    end_kernel(3, d);

    // K4: aggregation on the pooled grid
    begin_kernel(); rr = 0;
    for (int o = 0; o < V2; o++) begin
      int nb [$];
      nb.delete();
      nb.push_back(o);
      for (int k = 0; k < 4; k++) begin
        int x, y;
        x = px[o] + (k == 0 ? 1 : k == 1 ? -1 : 0); y = py[o] + (k == 2 ? 1 : k == 3 ? -1 : 0);
        if (x >= 0 && x < N2 && y >= 0 && y < N2 && pid[y*N2+x] >= 0) nb.push_back(pid[y*N2+x]);
      end
      foreach (nb[i]) add_rr(mk_edge(R_P1V + nb[i], o, 1.0 / real'(nb.size()), 0));
    end
    d = '0; d.kind = K_VAK; d.smode = S_MUL; d.gop = G_ACC; d.act = A_NONE; d.clear = 1;
    d.n_pass = 1; d.wb_mode = WB_TRANSPOSE; d.wb_count = (IB_AW + 1)'(Vp2); d.wb_base = IB_AW'(R_Z2F);
    end_kernel(4, d);

    // K5: spatial-attention score, all non-zeros to one output feature (conflicts)
    begin_kernel(); rr = 0;
    for (int f = 0; f < 8; f++) begin
      if (wn2[f] != 0.0) add_rr(mk_edge(R_Z2F + f, 0, wn2[f], 0));
      if (ws2[f] != 0.0) add_rr(mk_edge(R_P1F + f, 0, ws2[f], 0));
    end
    add_rr(mk_edge(0, 0, b2, 1));
    d = '0; d.kind = K_VUK; d.smode = S_MUL; d.gop = G_ACC; d.act = A_SIGMOID; d.clear = 1; d.last = 1;
    d.n_pass = (IB_AW + 1)'(Vp2 / 16); d.src_stride = 16; d.dst_stride = 2; d.n_out = (RB_AW + 1)'(Vp2 / 8);
    d.wb_mode = WB_NONE;
    end_kernel(5, d);

    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      host_desc_wr_en = 1; host_desc_wr_addr = DESC_AW'(k); host_desc_wr_data = prog[k];
    end
    @(negedge clk); host_desc_wr_en = 0;

    // run
    start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!done) begin @(posedge clk); t0++; end
    @(negedge clk);
    $display("run: %0d cycles (%0.1f us at 125 MHz), routing conflicts %0d, scatter stall lane-cycles %0d",
             t0, real'(t0) / 125.0, route_conflicts, stall_cycles);
    for (int k = 0; k < 6; k++) $display("  K%0d: %0d cycles, edges+drain %0d", k, kcyc[k], kedge[k]);

    // results: alpha of pooled vertex 16t+i in lane i of logical row 16t
    for (int o = 0; o < V2; o++) begin
      real got;
      host_rd_row = (IB_AW + 1)'(16 * (o / 16));
      #1;
      got = f2r(host_rd_data[(o % 16) * DW +: DW]);
      checks++;
      if (!close(got, alpha[o], 2e-3)) begin
        failures++;
        if (failures < 10) $display("FAIL alpha[%0d] = %f, expected %f", o, got, alpha[o]);
      end
    end
    // intermediate results in the Input Buffer: Z (feature-major), H1 and
    // P1 (vertex-major)
    for (int v = 0; v < V; v++) begin
      checks++;
      if (!close(f2r(dut.u_ib.mem[R_ZF + 16 * (v / 16)][(v % 16) * DW +: DW]), z1[v], 1e-4)) begin
        failures++;
        if (failures < 10) $display("FAIL z1[%0d] = %f, expected %f", v, f2r(dut.u_ib.mem[R_ZF + 16 * (v / 16)][(v % 16) * DW +: DW]), z1[v]);
      end
      for (int f = 0; f < 8; f++) begin
        checks++;
        if (!close(f2r(dut.u_ib.mem[R_H1V + v][f*DW +: DW]), h1[v][f], 1e-4)) begin
          failures++;
          if (failures < 10) $display("FAIL h1[%0d][%0d] = %f, expected %f", v, f, f2r(dut.u_ib.mem[R_H1V + v][f*DW +: DW]), h1[v][f]);
        end
      end
    end
    for (int o = 0; o < V2; o++) for (int f = 0; f < 8; f++) begin
      checks++;
      if (!close(f2r(dut.u_ib.mem[R_P1V + o][f*DW +: DW]), p1[o][f], 1e-4)) begin
        failures++;
        if (failures < 10) $display("FAIL pooled[%0d][%0d] = %f, expected %f", o, f, f2r(dut.u_ib.mem[R_P1V + o][f*DW +: DW]), p1[o][f]);
      end
    end
    // cycle model of the conflict-free update kernel
    begin
      int mx, expect_c;
      mx = 0;
      for (int l = 0; l < P; l++) if (int'(prog[1].n_edges[l]) > mx) mx = int'(prog[1].n_edges[l]);
      expect_c = (Vp / 16) * mx + 1 + PB;
      checks++;
      if (kedge[1] != expect_c) begin failures++; $display("FAIL K1 took %0d cycles, model %0d", kedge[1], expect_c); end
      mx = 0;
      for (int l = 0; l < P; l++) if (int'(prog[0].n_edges[l]) > mx) mx = int'(prog[0].n_edges[l]);
      checks++;
      if (kedge[0] < mx + 1 + PB) begin failures++; $display("FAIL K0 faster than possible"); end
    end
    // mechanisms
    begin
      int m [string];
      m["kind switch"] = n_kind_switch; m["scatter multiply"] = n_mul; m["scatter bypass"] = n_bypass;
      m["gather accumulate"] = n_acc; m["gather max"] = n_max; m["ReLU"] = n_relu; m["sigmoid"] = n_sig;
      m["direct write-back"] = n_wb_dir; m["MTU write-back"] = n_wb_tr; m["multi-pass kernel"] = n_multipass;
      m["bias edge"] = n_bias; m["routing conflict"] = int'(route_conflicts); m["scatter stall"] = int'(stall_cycles);
      m["zero-padded tile"] = n_pad;
      foreach (m[k]) begin
        checks++;
        $display("  mechanism %-18s %0d", k, m[k]);
        if (m[k] == 0) begin failures++; $display("FAIL mechanism '%s' never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
