// tb_vf_lut -- checks the V/F table: reset contents equal the paper's LP
// (0.48 V, VBN 0.3 V, VBP -0.3 V, 12.5 MHz) and HP (0.8 V, 0 V, 0 V,
// 100 MHz) points, supply and frequency are read from the entries chosen by
// vdd_sel and clk_sel independently, and configuration writes replace one
// entry without touching the other.
module tb_vf_lut;
  import pinball_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, we;
  pmode_t addr, vsel, csel;
  vf_point_t wdata, sp;
  logic [11:0] freq;
  int checks = 0;
  int failures = 0;

  vf_lut dut (.clk(clk), .rst_n(rst_n), .cfg_we(we), .cfg_addr(addr), .cfg_data(wdata),
              .vdd_sel(vsel), .clk_sel(csel), .supply_point(sp), .clk_freq_100khz(freq));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vf_point_t a, b;
    rst_n = 0; we = 0; addr = MODE_LP; wdata = '0; vsel = MODE_LP; csel = MODE_LP;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1 chk(sp.vdd_mv == 480 && sp.vbn_mv == 300 && sp.vbp_mv == -300 && freq == 125, "LP defaults");
    vsel = MODE_HP; csel = MODE_HP;
    #1 chk(sp.vdd_mv == 800 && sp.vbn_mv == 0 && sp.vbp_mv == 0 && freq == 1000, "HP defaults");
    vsel = MODE_HP; csel = MODE_LP;
    #1 chk(sp.vdd_mv == 800 && freq == 125, "supply and clock selected separately");
    for (int t = 0; t < 50; t++) begin
      a = vf_point_t'({$urandom, $urandom});
      b = vf_point_t'({$urandom, $urandom});
      @(negedge clk); we = 1; addr = MODE_LP; wdata = a;
      @(negedge clk); addr = MODE_HP; wdata = b;
      @(negedge clk); we = 0;
      vsel = MODE_LP; csel = MODE_HP;
      #1 chk(sp == a && freq == b.freq_100khz, "written LP supply, HP clock");
      vsel = MODE_HP; csel = MODE_LP;
      #1 chk(sp == b && freq == a.freq_100khz, "written HP supply, LP clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
