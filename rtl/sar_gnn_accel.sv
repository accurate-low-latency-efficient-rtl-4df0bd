// sar_gnn_accel: scatter-gather GNN accelerator for SAR target recognition.
// A SAR image becomes a 4-neighbour grid graph (pixels below a threshold are
// pruned by the host), and the GNN's kernels run here one after another:
// aggregation kernels (VAK: mean aggregation, pooling) and update kernels
// (VUK: sparse weight matrix times a batch of Q vertices) both reduce to
// "for each edge <src,dst,w>: update = Scatter(row[src], w); row[dst] =
// Gather(row[dst], update)". The datapath:
//   Weight/Edge Buffer --edges--> P Scatter Units <--rows-- Input Buffer
//   P Scatter Units --updates--> butterfly routing network --> P Gather Units
//   P Gather Units <--> Result Buffer (one bank each)
//   Result Buffer --(direct | MTU tile transpose)--> Input Buffer
// and sgp_controller sequences the kernels. P = 8 pipelines of Q = 16 FP32 PEs
// follow the reference implementation; buffer depths are this design's.
// The host (processor, DMA) is outside: it loads the buffers and the kernel
// table through the host_* ports while busy is low, pulses start, waits for
// done and reads results with host_rd_row/host_rd_data.
module sar_gnn_accel
  import sgp_pkg::*;
#(
  parameter int IB_DEPTH   = 32768,
  parameter int RB_DEPTH   = 2048,
  parameter int WEB_DEPTH  = 16384,
  parameter int DESC_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // host loads
  input  logic               host_ib_wr_en,
  input  logic [IB_AW-1:0]   host_ib_wr_addr,
  input  vec_t               host_ib_wr_data,
  input  logic               host_web_wr_en,
  input  logic [PB-1:0]      host_web_wr_lane,
  input  logic [WEB_AW-1:0]  host_web_wr_addr,
  input  edge_t              host_web_wr_edge,
  input  logic               host_desc_wr_en,
  input  logic [DESC_AW-1:0] host_desc_wr_addr,
  input  desc_t              host_desc_wr_data,
  // run
  input  logic               start,
  output logic               busy,
  output logic               done,
  // results
  input  logic [IB_AW:0]     host_rd_row,
  output vec_t               host_rd_data,
  // status
  output kernel_e            cur_kind,
  output logic [31:0]        kernel_cycles,
  output logic [31:0]        edge_cycles,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        route_conflicts,
  output logic [31:0]        kernels_run
);
  smode_e smode;
  gop_e   gop;
  act_e   act;

  logic [P-1:0][WEB_AW-1:0] web_rd_addr;
  edge_t [P-1:0]            web_rd_edge;
  logic [P-1:0][IB_AW-1:0]  ib_rd_addr;
  vec_t [P-1:0]             ib_rd_data;
  logic [P-1:0]             sc_in_valid, sc_in_ready, sc_out_valid, sc_out_ready;
  edge_t [P-1:0]            sc_edge;
  update_t [P-1:0]          sc_upd, rt_upd;
  logic [P-1:0]             rt_valid;
  logic                     rt_busy;
  logic                     fin_valid;
  logic [RB_AW-1:0]         fin_addr;
  logic                     rb_clear;
  logic [PB-1:0]            rb_rd_bank;
  logic [RB_AW-1:0]         rb_rd_addr;
  vec_t                     rb_rd_data;
  logic [P-1:0][RB_AW-1:0]  g_rd_addr, g_wr_addr;
  vec_t [P-1:0]             g_rd_data, g_wr_data;
  logic [P-1:0]             g_rd_vld, g_wr_en;
  logic                     mtu_in_valid, mtu_in_ready, mtu_out_valid, mtu_out_ready;
  vec_t                     mtu_out_data;
  logic                     wb_wr_en;
  logic [IB_AW-1:0]         wb_wr_addr;
  vec_t                     wb_wr_data;

  assign host_rd_data = rb_rd_data;

  sgp_controller #(.DESC_DEPTH(DESC_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .desc_wr_en(host_desc_wr_en), .desc_wr_addr(host_desc_wr_addr), .desc_wr_data(host_desc_wr_data),
    .start, .busy, .done, .host_rd_row,
    .smode, .gop, .act, .kind(cur_kind),
    .web_rd_addr, .web_rd_edge, .ib_rd_addr,
    .sc_valid(sc_in_valid), .sc_ready(sc_in_ready), .sc_edge,
    .dp_busy((|sc_out_valid) || rt_busy),
    .fin_valid, .fin_addr,
    .rb_clear, .rb_rd_bank, .rb_rd_addr, .rb_rd_data,
    .mtu_in_valid, .mtu_in_ready, .mtu_out_valid, .mtu_out_ready, .mtu_out_data,
    .ib_wr_en(wb_wr_en), .ib_wr_addr(wb_wr_addr), .ib_wr_data(wb_wr_data),
    .kernel_cycles, .edge_cycles, .stall_cycles, .kernels_run
  );

  weight_edge_buffer #(.DEPTH(WEB_DEPTH)) u_web (
    .clk, .rd_addr(web_rd_addr), .rd_edge(web_rd_edge),
    .wr_en(host_web_wr_en), .wr_lane(host_web_wr_lane), .wr_addr(host_web_wr_addr), .wr_edge(host_web_wr_edge)
  );

  // Input Buffer write: result write-back while running, host otherwise
  input_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk, .rd_addr(ib_rd_addr), .rd_data(ib_rd_data),
    .wr_en  (busy ? wb_wr_en   : host_ib_wr_en),
    .wr_addr(busy ? wb_wr_addr : host_ib_wr_addr),
    .wr_data(busy ? wb_wr_data : host_ib_wr_data)
  );

  for (genvar l = 0; l < P; l++) begin : g_scatter
    scatter_unit u_sc (
      .clk, .rst_n, .mode(smode),
      .in_valid(sc_in_valid[l]), .in_ready(sc_in_ready[l]),
      .in_edge(sc_edge[l]), .in_feat(ib_rd_data[l]),
      .out_valid(sc_out_valid[l]), .out_ready(sc_out_ready[l]), .out_upd(sc_upd[l])
    );
  end

  routing_network u_route (
    .clk, .rst_n,
    .in_valid(sc_out_valid), .in_ready(sc_out_ready), .in_upd(sc_upd),
    .out_valid(rt_valid), .out_ready('1), .out_upd(rt_upd),
    .busy(rt_busy), .conflicts(route_conflicts)
  );

  for (genvar b = 0; b < P; b++) begin : g_gather
    gather_unit u_g (
      .gop, .act,
      .upd_valid(rt_valid[b]), .upd(rt_upd[b]),
      .fin_valid, .fin_addr,
      .rd_addr(g_rd_addr[b]), .rd_data(g_rd_data[b]), .rd_vld(g_rd_vld[b]),
      .wr_en(g_wr_en[b]), .wr_addr(g_wr_addr[b]), .wr_data(g_wr_data[b])
    );
  end

  result_buffer #(.DEPTH(RB_DEPTH)) u_rb (
    .clk, .clear(rb_clear),
    .g_rd_addr, .g_rd_data, .g_rd_vld, .g_wr_en, .g_wr_addr, .g_wr_data,
    .rd2_bank(rb_rd_bank), .rd2_addr(rb_rd_addr), .rd2_data(rb_rd_data)
  );

  mtu u_mtu (
    .clk, .rst_n,
    .in_valid(mtu_in_valid), .in_ready(mtu_in_ready), .in_data(rb_rd_data),
    .out_valid(mtu_out_valid), .out_ready(mtu_out_ready), .out_data(mtu_out_data)
  );
endmodule
