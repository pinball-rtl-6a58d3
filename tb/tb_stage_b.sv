// tb_stage_b -- self-checking testbench of pipeline stage(s) B(1)..B(4).
//
// Drives the stage at d=5 and d=21 with directed patterns taken from the
// coordinate labels of the coverage drawings and with random syndrome
// vectors of several densities, and compares syndromes and corrections with
// the reference model in tb_ref_pkg. The stage is combinational; a time
// watchdog ends the run if it hangs.
module tb_stage_b;
  import tb_ref_pkg::*;

  localparam int DS = 5;
  localparam int DL = 21;
  localparam int NS = (DS + 1) * ((DS - 1) / 2);
  localparam int QS = DS * DS;
  localparam int NL = (DL + 1) * ((DL - 1) / 2);
  localparam int QL = DL * DL;
  localparam int NI = 4;
  localparam int KIND [NI] = '{1, 2, 3, 4};

  logic [NS-1:0] sp_s, sc_s;
  logic [QS-1:0] ci_s;
  logic [NS-1:0] po_s [NI];
  logic [NS-1:0] so_s [NI];
  logic [QS-1:0] co_s [NI];
  logic [NL-1:0] sp_l, sc_l;
  logic [QL-1:0] ci_l;
  logic [NL-1:0] po_l [NI];
  logic [NL-1:0] so_l [NI];
  logic [QL-1:0] co_l [NI];

  stage_b #(.D(DS), .GROUP(1)) u_s0 (.s_prev_i(sp_s), .s_cur_i(sc_s), .corr_i(ci_s), .s_prev_o(po_s[0]), .s_cur_o(so_s[0]), .corr_o(co_s[0]));
  stage_b #(.D(DL), .GROUP(1)) u_l0 (.s_prev_i(sp_l), .s_cur_i(sc_l), .corr_i(ci_l), .s_prev_o(po_l[0]), .s_cur_o(so_l[0]), .corr_o(co_l[0]));
  stage_b #(.D(DS), .GROUP(2)) u_s1 (.s_prev_i(sp_s), .s_cur_i(sc_s), .corr_i(ci_s), .s_prev_o(po_s[1]), .s_cur_o(so_s[1]), .corr_o(co_s[1]));
  stage_b #(.D(DL), .GROUP(2)) u_l1 (.s_prev_i(sp_l), .s_cur_i(sc_l), .corr_i(ci_l), .s_prev_o(po_l[1]), .s_cur_o(so_l[1]), .corr_o(co_l[1]));
  stage_b #(.D(DS), .GROUP(3)) u_s2 (.s_prev_i(sp_s), .s_cur_i(sc_s), .corr_i(ci_s), .s_prev_o(po_s[2]), .s_cur_o(so_s[2]), .corr_o(co_s[2]));
  stage_b #(.D(DL), .GROUP(3)) u_l2 (.s_prev_i(sp_l), .s_cur_i(sc_l), .corr_i(ci_l), .s_prev_o(po_l[2]), .s_cur_o(so_l[2]), .corr_o(co_l[2]));
  stage_b #(.D(DS), .GROUP(4)) u_s3 (.s_prev_i(sp_s), .s_cur_i(sc_s), .corr_i(ci_s), .s_prev_o(po_s[3]), .s_cur_o(so_s[3]), .corr_o(co_s[3]));
  stage_b #(.D(DL), .GROUP(4)) u_l3 (.s_prev_i(sp_l), .s_cur_i(sc_l), .corr_i(ci_l), .s_prev_o(po_l[3]), .s_cur_o(so_l[3]), .corr_o(co_l[3]));

  int checks = 0;
  int failures = 0;
  pinball_ref #(DS) rs = new();
  pinball_ref #(DL) rl = new();

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [NS-1:0] esp_s, esc_s;
    bit [QS-1:0] eco_s;
    bit [NL-1:0] esp_l, esc_l;
    bit [QL-1:0] eco_l;
    ci_s = '0; ci_l = '0; sp_l = '0; sc_l = '0;

    // d=5 pairs printed in the coverage drawings: B(1) (0,0,i)-(0,1,i),
    // B(2) (0,1,i)-(0,2,i), B(3) (0,1,i)-(1,2,i), B(4) (0,1,i)-(1,0,i)
    sp_s = '0;
    sc_s = '0; sc_s[rs.id(0,0)] = 1; sc_s[rs.id(0,1)] = 1; #1;
    chk(so_s[0] == '0 && co_s[0] == (QS'(1) << (4*5+1)), "B(1) (0,0)-(0,1) -> data (4,1)");
    sc_s = '0; sc_s[rs.id(0,1)] = 1; sc_s[rs.id(0,2)] = 1; #1;
    chk(so_s[1] == '0 && co_s[1] == (QS'(1) << (3*5+1)), "B(2) (0,2)-(0,1) -> data (3,1)");
    chk(so_s[0] == sc_s, "B(1) ignores (0,1)-(0,2)");
    sc_s = '0; sc_s[rs.id(0,1)] = 1; sc_s[rs.id(1,2)] = 1; #1;
    chk(so_s[2] == '0 && co_s[2] == (QS'(1) << (3*5+2)), "B(3) (0,1)-(1,2) -> data (3,2)");
    sc_s = '0; sc_s[rs.id(0,1)] = 1; sc_s[rs.id(1,0)] = 1; #1;
    chk(so_s[3] == '0 && co_s[3] == (QS'(1) << (4*5+2)), "B(4) (0,1)-(1,0) -> data (4,2)");

    for (int t = 0; t < 600; t++) begin
      int pct;
      pct = (t % 6) * 10 + 3;
      sp_s = rs.rand_syn(pct); sc_s = rs.rand_syn(pct);
      for (int i = 0; i < QS; i++) ci_s[i] = $urandom % 2;
      sp_l = rl.rand_syn(pct); sc_l = rl.rand_syn(pct);
      for (int i = 0; i < QL; i++) ci_l[i] = $urandom % 2;
      #1;
      for (int i = 0; i < NI; i++) begin
        esp_s = sp_s; esc_s = sc_s; eco_s = ci_s;
        rs.run_stage(KIND[i], esp_s, esc_s, eco_s);
        chk(po_s[i] == esp_s && so_s[i] == esc_s && co_s[i] == eco_s,
            $sformatf("d=5 stage kind %0d random vector %0d", KIND[i], t));
        esp_l = sp_l; esc_l = sc_l; eco_l = ci_l;
        rl.run_stage(KIND[i], esp_l, esc_l, eco_l);
        chk(po_l[i] == esp_l && so_l[i] == esc_l && co_l[i] == eco_l,
            $sformatf("d=21 stage kind %0d random vector %0d", KIND[i], t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
