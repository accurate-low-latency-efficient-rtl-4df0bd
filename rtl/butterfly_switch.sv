// butterfly_switch: 2x2 switch of one butterfly stage.
// Each input carries an update; bit BIT of its destination bank selects output
// 0 or 1. Each output has one register with valid/ready. When both inputs want
// the same output in the same cycle, one is granted and the other waits (a
// routing stall); the priority alternates after every conflict so neither
// input starves. An input is ready only when its chosen output register is
// free or drains this cycle.
module butterfly_switch
  import sgp_pkg::*;
#(
  parameter int BIT = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [1:0]    in_valid,
  output logic [1:0]    in_ready,
  input  update_t [1:0] in_upd,
  output logic [1:0]    out_valid,
  input  logic [1:0]    out_ready,
  output update_t [1:0] out_upd,
  output logic          conflict      // both inputs want one output this cycle
);
  logic [1:0] want, can, grant;
  logic       prio;

  always_comb begin
    for (int i = 0; i < 2; i++) want[i] = in_upd[i].dst_bank[BIT];
    for (int k = 0; k < 2; k++) can[k] = !out_valid[k] || out_ready[k];
    conflict = in_valid[0] && in_valid[1] && (want[0] == want[1]);
    grant = in_valid;
    if (conflict) grant = prio ? 2'b10 : 2'b01;
    for (int i = 0; i < 2; i++) in_ready[i] = grant[i] && can[want[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      out_upd   <= '0;
      prio      <= 1'b0;
    end else begin
      if (conflict && in_ready != 2'b00) prio <= !prio;
      for (int k = 0; k < 2; k++) begin
        if (can[k]) begin
          out_valid[k] <= 1'b0;
          for (int i = 0; i < 2; i++) begin
            if (in_valid[i] && in_ready[i] && want[i] == 1'(k)) begin
              out_valid[k] <= 1'b1;
              out_upd[k]   <= in_upd[i];
            end
          end
        end
      end
    end
  end
endmodule
