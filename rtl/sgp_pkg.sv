// sgp_pkg: sizes and types shared by the scatter-gather accelerator.
// P pipelines of Q processing elements on 32-bit floating point data are the
// numbers of the reference implementation (8 pipelines, 16 PEs, 512-bit
// ports). The address widths size the Input Buffer (32768 rows), the Result
// Buffer (8 banks of 2048 rows) and the Weight/Edge Buffer (16384 edges per
// lane); those depths are this design's choice: about 4 MB in all,
// within the 4.8 MB of on-chip memory of the target FPGA.
package sgp_pkg;

  localparam int P      = 8;            // pipelines = routing ports = result banks
  localparam int Q      = 16;           // PEs per Scatter/Gather Unit
  localparam int DW     = 32;           // FP32
  localparam int VW     = Q * DW;       // 512-bit feature row
  localparam int PB     = $clog2(P);    // bank index bits
  localparam int IB_AW  = 15;           // Input Buffer row address
  localparam int RB_AW  = 11;           // Result Buffer row address within a bank
  localparam int WEB_AW = 14;           // Weight/Edge Buffer address within a lane
  localparam int DESC_AW = 6;           // kernel table address

  typedef logic [VW-1:0] vec_t;

  // One edge of the graph, or one non-zero weight of a weight matrix.
  typedef struct packed {
    logic [IB_AW-1:0] src;      // Input Buffer row of the source
    logic [PB-1:0]    dst_bank; // Gather Unit / Result Buffer bank of the destination
    logic [RB_AW-1:0] dst_addr; // row within that bank
    logic             bias;     // 1: contribute the weight itself (bias term)
    logic [DW-1:0]    weight;   // FP32 edge weight / matrix element
  } edge_t;

  // Update produced by a Scatter Unit and routed to a Gather Unit.
  typedef struct packed {
    logic [PB-1:0]    dst_bank;
    logic [RB_AW-1:0] dst_addr;
    vec_t             vec;
  } update_t;

  typedef enum logic { K_VAK = 1'b0, K_VUK = 1'b1 } kernel_e;      // aggregation / update
  typedef enum logic { S_MUL = 1'b0, S_BYPASS = 1'b1 } smode_e;    // scatter datapath
  typedef enum logic { G_ACC = 1'b0, G_MAX = 1'b1 } gop_e;         // gather combine
  typedef enum logic [1:0] { A_NONE = 2'd0, A_RELU = 2'd1, A_SIGMOID = 2'd2 } act_e;
  typedef enum logic [1:0] { WB_NONE = 2'd0, WB_DIRECT = 2'd1, WB_TRANSPOSE = 2'd2 } wb_e;

  // One kernel of the model, as executed by the controller.
  typedef struct packed {
    kernel_e                  kind;
    smode_e                   smode;
    gop_e                     gop;
    act_e                     act;
    logic                     clear;      // invalidate the Result Buffer first
    logic                     last;       // last kernel of the model
    wb_e                      wb_mode;
    logic [WEB_AW-1:0]        edge_base;  // first edge of every lane
    logic [P-1:0][WEB_AW:0]   n_edges;    // edges per lane
    logic [IB_AW:0]           n_pass;     // repetitions of the edge list
    logic [IB_AW-1:0]         src_stride; // source row offset per pass
    logic [RB_AW-1:0]         dst_stride; // destination row offset per pass
    logic [RB_AW:0]           n_out;      // rows per bank swept by the activation
    logic [IB_AW:0]           wb_count;   // rows written back
    logic [IB_AW-1:0]         wb_base;    // first Input Buffer row written
  } desc_t;

endpackage
