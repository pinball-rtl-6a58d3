// tb_pinball_workloads -- the predecoder at every evaluated code distance.
//
// Runs pinball_top at each odd code distance from 3 to 21 at error rate
// p = 1e-3, and at d = 11 also at p = 1e-4 and p = 5e-4. One
// pinball_workload_run instance per configuration feeds 30 blocks of
// fault-injected rounds and checks every round, block and offloaded round
// against the reference model. All instances run in parallel on one clock.
// The share of blocks resolved without a complex round is printed per
// configuration. The fault model is the flat one of pinball_workload_run, so
// these shares are not comparable with those of a full circuit-level noise
// simulation. The testbench also checks two things: that every configuration
// saw all its blocks, and that at the higher error rate some blocks needed
// offloading. A watchdog ends the run if it hangs.
module tb_pinball_workloads;
  localparam int NC = 12;
  localparam int DS  [NC] = '{3, 5, 7, 9, 11, 13, 15, 17, 19, 21, 11, 11};
  localparam int PPM [NC] = '{1000, 1000, 1000, 1000, 1000, 1000, 1000, 1000, 1000, 1000, 100, 500};
  localparam int BLOCKS = 30;

  logic clk = 0;
  always #5 clk = ~clk;

  int   c_checks [NC];
  int   c_fail   [NC];
  int   c_blocks [NC];
  int   c_clean  [NC];
  logic c_done   [NC];

  for (genvar i = 0; i < NC; i++) begin : g_cfg
    pinball_workload_run #(.D(DS[i]), .BLOCKS(BLOCKS), .PPM(PPM[i])) u_run (
      .clk(clk), .checks(c_checks[i]), .failures(c_fail[i]),
      .blocks(c_blocks[i]), .clean(c_clean[i]), .done(c_done[i])
    );
  end

  int checks = 0;
  int failures = 0;

  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    int complex_blocks;
    #1;
    do begin
      @(posedge clk);
      all_done = 1;
      foreach (c_done[i]) all_done &= c_done[i];
    end while (!all_done);
    complex_blocks = 0;
    foreach (c_done[i]) begin
      $display("d=%0d p=%0d ppm: %0d blocks, %0d resolved without offload, %0d checks, %0d failures",
               DS[i], PPM[i], c_blocks[i], c_clean[i], c_checks[i], c_fail[i]);
      checks += c_checks[i] + 1;
      failures += c_fail[i];
      if (c_blocks[i] != BLOCKS) begin
        failures++;
        $display("FAIL: d=%0d saw %0d blocks", DS[i], c_blocks[i]);
      end
      if (PPM[i] == 1000) complex_blocks += c_blocks[i] - c_clean[i];
    end
    checks++;
    if (complex_blocks == 0) begin
      failures++;
      $display("FAIL: no block needed offloading at p = 1e-3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
