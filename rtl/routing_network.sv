// routing_network: P x P butterfly network between Scatter and Gather Units.
// An update entering at any port leaves at the port given by its destination
// bank. log2(P) stages of butterfly_switch: stage s pairs positions that differ
// in bit s and sets that bit of the position to bit s of the destination bank,
// so after the last stage the position equals the bank. Every switch output is
// registered, so the latency is log2(P) cycles when nothing collides; a
// collision inside a switch stalls one update for a cycle and backpressure
// propagates to the Scatter Units through in_ready. Ports are Q x 32 = 512 bits
// of data plus the destination index, as in the reference design; the choice
// of switch (one register, alternating priority) is this design's.
module routing_network
  import sgp_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [P-1:0]    in_valid,
  output logic [P-1:0]    in_ready,
  input  update_t [P-1:0] in_upd,
  output logic [P-1:0]    out_valid,
  input  logic [P-1:0]    out_ready,
  output update_t [P-1:0] out_upd,
  output logic            busy,         // an update is inside the network
  output logic [31:0]     conflicts     // switch conflicts since reset
);
  // g_pos[s]: the P positions between stage s-1 and stage s
  for (genvar s = 0; s <= PB; s++) begin : g_pos
    logic    [P-1:0] v;
    logic    [P-1:0] r;
    update_t [P-1:0] u;
  end
  logic [PB-1:0][P/2-1:0] cf;
  logic [PB:0] stage_busy;

  assign g_pos[0].v  = in_valid;
  assign g_pos[0].u  = in_upd;
  assign in_ready    = g_pos[0].r;
  assign out_valid   = g_pos[PB].v;
  assign out_upd     = g_pos[PB].u;
  assign g_pos[PB].r = out_ready;
  assign stage_busy[0] = 1'b0;

  for (genvar s = 0; s < PB; s++) begin : g_stage
    for (genvar k = 0; k < P/2; k++) begin : g_sw
      // position with bit s cleared: insert a 0 at bit s of k
      localparam int LO = ((k >> s) << (s + 1)) | (k & ((1 << s) - 1));
      localparam int HI = LO | (1 << s);
      butterfly_switch #(.BIT(s)) u_sw (
        .clk, .rst_n,
        .in_valid ({g_pos[s].v[HI], g_pos[s].v[LO]}),
        .in_ready ({g_pos[s].r[HI], g_pos[s].r[LO]}),
        .in_upd   ({g_pos[s].u[HI], g_pos[s].u[LO]}),
        .out_valid({g_pos[s+1].v[HI], g_pos[s+1].v[LO]}),
        .out_ready({g_pos[s+1].r[HI], g_pos[s+1].r[LO]}),
        .out_upd  ({g_pos[s+1].u[HI], g_pos[s+1].u[LO]}),
        .conflict (cf[s][k])
      );
    end
    assign stage_busy[s+1] = |g_pos[s+1].v;
  end

  assign busy = |stage_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) conflicts <= '0;
    else        conflicts <= conflicts + 32'($countones(cf));
  end
endmodule
