// sgp_controller: runs the kernels of a model on the scatter-gather datapath.
// The host writes a table of kernel descriptors (desc_t), then pulses start.
// For each kernel, in order:
//   CLEAR  (if desc.clear) invalidate the Result Buffer, 1 cycle
//   EDGES  every lane l streams its n_edges[l] edges from the Weight/Edge
//          Buffer into its Scatter Unit, one per cycle while the Scatter Unit
//          is ready, and repeats the list n_pass times. Pass k adds
//          k*src_stride to the source row and k*dst_stride to the destination
//          row; this gives the ceil(c/q) feature chunks of an aggregation
//          kernel and the ceil(|V|/q) vertex batches of an update kernel.
//          The source row is read from the Input Buffer in the same cycle.
//   DRAIN  wait until the Scatter Units and the routing network are empty
//   FINAL  (if desc.act != A_NONE) sweep rows 0..n_out-1 of every bank through
//          the Gather Units' activation, 1 row per cycle
//   WB     copy Result Buffer rows L = 0..wb_count-1 (bank L mod P, row L div P)
//          to Input Buffer rows wb_base+L, either directly or through the MTU
//          (tile transpose), i.e. the mux in front of the Input Buffer.
// desc.last ends the run (done pulses for one cycle). With the datapath never
// stalled, an edge kernel takes ceil(|E|/p) x passes cycles plus a few cycles
// of pipeline latency, as in the paper's performance model. The reference
// does not describe its control; descriptor format, phases and write-back
// order are this design's.
module sgp_controller
  import sgp_pkg::*;
#(
  parameter int DESC_DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host
  input  logic                     desc_wr_en,
  input  logic [DESC_AW-1:0]       desc_wr_addr,
  input  desc_t                    desc_wr_data,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  input  logic [IB_AW:0]           host_rd_row,   // logical Result Buffer row
  // current kernel mode, to the datapath
  output smode_e                   smode,
  output gop_e                     gop,
  output act_e                     act,
  output kernel_e                  kind,
  // Weight/Edge Buffer and Input Buffer read ports, Scatter Unit inputs
  output logic [P-1:0][WEB_AW-1:0] web_rd_addr,
  input  edge_t [P-1:0]            web_rd_edge,
  output logic [P-1:0][IB_AW-1:0]  ib_rd_addr,
  output logic [P-1:0]             sc_valid,
  input  logic [P-1:0]             sc_ready,
  output edge_t [P-1:0]            sc_edge,
  input  logic                     dp_busy,       // scatter outputs or network hold data
  // Gather Unit activation sweep
  output logic                     fin_valid,
  output logic [RB_AW-1:0]         fin_addr,
  // Result Buffer clear and second read port
  output logic                     rb_clear,
  output logic [PB-1:0]            rb_rd_bank,
  output logic [RB_AW-1:0]         rb_rd_addr,
  input  vec_t                     rb_rd_data,
  // MTU
  output logic                     mtu_in_valid,
  input  logic                     mtu_in_ready,
  input  logic                     mtu_out_valid,
  output logic                     mtu_out_ready,
  input  vec_t                     mtu_out_data,
  // Input Buffer write-back port
  output logic                     ib_wr_en,
  output logic [IB_AW-1:0]         ib_wr_addr,
  output vec_t                     ib_wr_data,
  // performance counters
  output logic [31:0]              kernel_cycles, // CLEAR..WB of the last kernel
  output logic [31:0]              edge_cycles,   // EDGES+DRAIN of the last kernel
  output logic [31:0]              stall_cycles,  // lane-cycles a Scatter Unit was not ready
  output logic [31:0]              kernels_run
);
  typedef enum logic [2:0] { ST_IDLE, ST_LOAD, ST_CLEAR, ST_EDGES, ST_DRAIN, ST_FINAL, ST_WB } state_e;

  desc_t desc_mem [DESC_DEPTH];
  desc_t d;
  state_e st;
  logic [DESC_AW-1:0] pc;

  logic [P-1:0][WEB_AW:0]  e_idx;
  logic [P-1:0][IB_AW:0]   pass;
  logic [P-1:0][IB_AW-1:0] src_off;
  logic [P-1:0][RB_AW-1:0] dst_off;
  logic [P-1:0]            lane_done;
  logic [IB_AW:0]          rd_cnt, wr_cnt;
  logic [RB_AW:0]          f_cnt;
  logic [31:0]             k_cyc, e_cyc;

  always_ff @(posedge clk) begin
    if (desc_wr_en) desc_mem[int'(desc_wr_addr) % DESC_DEPTH] <= desc_wr_data;
  end

  assign busy  = (st != ST_IDLE);
  assign smode = d.smode;
  assign gop   = d.gop;
  assign act   = d.act;
  assign kind  = d.kind;

  // lane issue
  always_comb begin
    for (int l = 0; l < P; l++) begin
      web_rd_addr[l] = d.edge_base + WEB_AW'(e_idx[l]);
      sc_edge[l] = web_rd_edge[l];
      sc_edge[l].dst_addr = web_rd_edge[l].dst_addr + dst_off[l];
      ib_rd_addr[l] = web_rd_edge[l].src + src_off[l];
      sc_valid[l] = (st == ST_EDGES) && !lane_done[l];
    end
  end

  assign rb_clear  = (st == ST_CLEAR);
  assign fin_valid = (st == ST_FINAL);
  assign fin_addr  = RB_AW'(f_cnt);

  // write-back read side: host reads while idle
  logic [IB_AW:0] rrow;
  assign rrow       = (st == ST_WB) ? rd_cnt : host_rd_row;
  assign rb_rd_bank = rrow[PB-1:0];
  assign rb_rd_addr = RB_AW'(rrow >> PB);

  assign mtu_in_valid  = (st == ST_WB) && (d.wb_mode == WB_TRANSPOSE) && (rd_cnt < d.wb_count);
  assign mtu_out_ready = 1'b1;

  always_comb begin
    ib_wr_en   = 1'b0;
    ib_wr_addr = d.wb_base + IB_AW'(wr_cnt);
    ib_wr_data = rb_rd_data;
    if (st == ST_WB) begin
      if (d.wb_mode == WB_DIRECT) begin
        ib_wr_en = (wr_cnt < d.wb_count);
      end else if (d.wb_mode == WB_TRANSPOSE) begin
        ib_wr_en   = mtu_out_valid;
        ib_wr_data = mtu_out_data;
      end
    end
  end

  // last write-back cycle of the kernel
  logic wb_fin;
  always_comb begin
    unique case (d.wb_mode)
      WB_DIRECT:    wb_fin = (wr_cnt + 1'b1 >= d.wb_count);
      WB_TRANSPOSE: wb_fin = mtu_out_valid && (wr_cnt + 1'b1 >= d.wb_count);
      default:      wb_fin = 1'b1;
    endcase
    if (d.wb_count == '0) wb_fin = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; pc <= '0; d <= '0; done <= 1'b0;
      e_idx <= '0; pass <= '0; src_off <= '0; dst_off <= '0; lane_done <= '0;
      rd_cnt <= '0; wr_cnt <= '0; f_cnt <= '0;
      k_cyc <= '0; e_cyc <= '0;
      kernel_cycles <= '0; edge_cycles <= '0; stall_cycles <= '0; kernels_run <= '0;
    end else begin
      done <= 1'b0;
      if (st != ST_IDLE && st != ST_LOAD) k_cyc <= k_cyc + 1;
      unique case (st)
        ST_IDLE: if (start) begin
          pc <= '0;
          st <= ST_LOAD;
        end
        ST_LOAD: begin
          d <= desc_mem[int'(pc) % DESC_DEPTH];
          e_idx <= '0; pass <= '0; src_off <= '0; dst_off <= '0;
          for (int l = 0; l < P; l++)
            lane_done[l] <= (desc_mem[int'(pc) % DESC_DEPTH].n_edges[l] == '0) ||
                            (desc_mem[int'(pc) % DESC_DEPTH].n_pass == '0);
          rd_cnt <= '0; wr_cnt <= '0; f_cnt <= '0;
          k_cyc <= '0; e_cyc <= '0;
          st <= desc_mem[int'(pc) % DESC_DEPTH].clear ? ST_CLEAR : ST_EDGES;
        end
        ST_CLEAR: st <= ST_EDGES;
        ST_EDGES, ST_DRAIN: begin
          e_cyc <= e_cyc + 1;
          stall_cycles <= stall_cycles + 32'($countones(sc_valid & ~sc_ready));
          for (int l = 0; l < P; l++) begin
            if (sc_valid[l] && sc_ready[l]) begin
              if (e_idx[l] == d.n_edges[l] - 1'b1) begin
                e_idx[l]   <= '0;
                pass[l]    <= pass[l] + 1'b1;
                src_off[l] <= src_off[l] + d.src_stride;
                dst_off[l] <= dst_off[l] + d.dst_stride;
                if (pass[l] == d.n_pass - 1'b1) lane_done[l] <= 1'b1;
              end else begin
                e_idx[l] <= e_idx[l] + 1'b1;
              end
            end
          end
          if (st == ST_EDGES && (&lane_done)) st <= ST_DRAIN;
          if (st == ST_DRAIN && !dp_busy) begin
            edge_cycles <= e_cyc;
            st <= (d.act != A_NONE && d.n_out != '0) ? ST_FINAL : ST_WB;
          end
        end
        ST_FINAL: begin
          f_cnt <= f_cnt + 1'b1;
          if (f_cnt == d.n_out - 1'b1) st <= ST_WB;
        end
        ST_WB: begin
          unique case (d.wb_mode)
            WB_DIRECT: begin
              rd_cnt <= rd_cnt + 1'b1;
              wr_cnt <= wr_cnt + 1'b1;
            end
            WB_TRANSPOSE: begin
              if (mtu_in_valid && mtu_in_ready) rd_cnt <= rd_cnt + 1'b1;
              if (mtu_out_valid) wr_cnt <= wr_cnt + 1'b1;
            end
            default: ;
          endcase
          if (wb_fin) begin
            kernel_cycles <= k_cyc + 1;
            kernels_run   <= kernels_run + 1;
            if (d.last) begin
              st <= ST_IDLE;
              done <= 1'b1;
            end else begin
              pc <= pc + 1'b1;
              st <= ST_LOAD;
            end
          end
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  // the write-back through the MTU moves whole tiles
  a_tile: assert property (@(posedge clk) disable iff (!rst_n)
    st == ST_LOAD |=> (d.wb_mode != WB_TRANSPOSE) || (int'(d.wb_count) % Q == 0));
endmodule
