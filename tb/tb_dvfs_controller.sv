// tb_dvfs_controller -- checks the LP/HP mode sequence at d=21 over three
// blocks: LP during rounds 0..d-2; after the penultimate round the supply and
// body bias go to HP at once, the clock follows exactly SETTLE_CYCLES later;
// after the last round the clock drops first and the supply one cycle later;
// `hold` is high exactly while a switch is in progress; the fast clock never
// runs on the low supply.
module tb_dvfs_controller;
  import pinball_pkg::*;
  localparam int D = 21;
  localparam int SETTLE = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, done, hold;
  logic [4:0] idx;
  pmode_t vdd, bb, ck;
  int checks = 0;
  int failures = 0;

  dvfs_controller #(.ROUNDS(D), .SETTLE_CYCLES(SETTLE)) dut (
    .clk(clk), .rst_n(rst_n), .round_done(done), .round_idx(idx),
    .vdd_sel(vdd), .bb_sel(bb), .clk_sel(ck), .hold(hold)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (vdd=%0d bb=%0d clk=%0d hold=%0d)", what, vdd, bb, ck, hold);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (ck == MODE_HP && vdd != MODE_HP) begin
      failures++;
      $display("FAIL: fast clock on low supply");
    end
  end

  initial begin
    repeat (50_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; done = 0; idx = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(vdd == MODE_LP && bb == MODE_LP && ck == MODE_LP && !hold, "reset in LP");
    for (int b = 0; b < 3; b++) begin
      for (int r = 0; r < D; r++) begin
        repeat (8) begin
          @(posedge clk); #1;
          if (r < D - 1) chk(ck == MODE_LP && vdd == MODE_LP && !hold, $sformatf("LP during round %0d", r));
          else           chk(ck == MODE_HP && vdd == MODE_HP && bb == MODE_HP && !hold, "HP during the last round");
        end
        done = 1; idx = 5'(r);
        @(posedge clk); #1;
        done = 0;
        if (r == D - 2) begin
          for (int c = 0; c < SETTLE; c++) begin
            chk(vdd == MODE_HP && bb == MODE_HP && ck == MODE_LP && hold, $sformatf("settling cycle %0d", c));
            @(posedge clk); #1;
          end
          chk(ck == MODE_HP && !hold, "fast clock after settling");
        end else if (r == D - 1) begin
          chk(ck == MODE_LP && vdd == MODE_HP && hold, "clock lowered first");
          @(posedge clk); #1;
          chk(ck == MODE_LP && vdd == MODE_LP && bb == MODE_LP && !hold, "supply lowered next");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
