// tb_gather_unit: a Gather Unit on a small bank (array with valid bits kept
// here). Random updates to a few rows, back to back and repeating rows, are
// checked against a reference that accumulates (or takes the max) in real
// arithmetic rounded to FP32 after every step; first updates must be taken
// as they are. Then the activation sweep (ReLU, then sigmoid) is checked on
// every row, and unwritten rows must stay unwritten.
module tb_gather_unit;
  import sgp_pkg::*;
  import fp_ref_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0;
  gop_e gop;
  act_e act;
  logic upd_valid, fin_valid, rd_vld, wr_en;
  update_t upd;
  logic [RB_AW-1:0] fin_addr, rd_addr, wr_addr;
  vec_t rd_data, wr_data;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  gather_unit dut (.*);

  vec_t mem [ROWS];
  logic vld [ROWS];
  real  ref_v [ROWS][Q];
  bit   ref_ok [ROWS];

  assign rd_data = mem[rd_addr % ROWS];
  assign rd_vld  = vld[rd_addr % ROWS];
  always_ff @(posedge clk) if (wr_en) begin mem[wr_addr % ROWS] <= wr_data; vld[wr_addr % ROWS] <= 1'b1; end

  task automatic clear_bank();
    for (int r = 0; r < ROWS; r++) begin vld[r] = 0; mem[r] = '0; ref_ok[r] = 0; end
  endtask

  task automatic check_rows(input string what);
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (vld[r] != ref_ok[r]) begin failures++; $display("FAIL %s row %0d valid", what, r); end
      if (ref_ok[r]) for (int j = 0; j < Q; j++) begin
        checks++;
        if (!close(f2r(mem[r][j*DW +: DW]), ref_v[r][j], 1e-6)) begin
          failures++;
          if (failures < 8) $display("FAIL %s row %0d lane %0d: %f exp %f", what, r, j, f2r(mem[r][j*DW +: DW]), ref_v[r][j]);
        end
      end
    end
  endtask

  task automatic updates(input gop_e g, input int n);
    gop = g;
    for (int i = 0; i < n; i++) begin
      int r;
      r = ($urandom % 4 == 0) ? (i == 0 ? 0 : int'(upd.dst_addr)) : int'($urandom % (ROWS - 4));
      upd.dst_addr = RB_AW'(r);
      upd.dst_bank = '0;
      for (int j = 0; j < Q; j++) upd.vec[j*DW +: DW] = rand_f(-4, 4);
      upd_valid = 1;
      for (int j = 0; j < Q; j++) begin
        real u;
        u = f2r(upd.vec[j*DW +: DW]);
        if (!ref_ok[r])    ref_v[r][j] = u;
        else if (g == G_MAX) ref_v[r][j] = (u > ref_v[r][j]) ? u : ref_v[r][j];
        else               ref_v[r][j] = f2r(r2f(ref_v[r][j] + u));
      end
      ref_ok[r] = 1;
      @(posedge clk); #1;
    end
    upd_valid = 0;
  endtask

  task automatic sweep(input act_e a);
    act = a;
    for (int r = 0; r < ROWS; r++) begin
      fin_valid = 1; fin_addr = RB_AW'(r);
      if (ref_ok[r]) for (int j = 0; j < Q; j++)
        ref_v[r][j] = (a == A_RELU) ? (ref_v[r][j] > 0.0 ? ref_v[r][j] : 0.0) : sigmoid_plan(ref_v[r][j]);
      @(posedge clk); #1;
    end
    fin_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; fin_valid = 0; fin_addr = '0; upd = '0; act = A_NONE; gop = G_ACC;
    clear_bank();
    @(posedge clk); #1;
    updates(G_ACC, 200);
    check_rows("acc");
    sweep(A_RELU);
    check_rows("relu");
    clear_bank();
    updates(G_MAX, 200);
    check_rows("max");
    clear_bank();
    updates(G_ACC, 50);
    sweep(A_SIGMOID);
    check_rows("sigmoid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
