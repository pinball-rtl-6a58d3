// tb_correction_buffer -- checks the d x d correction buffer at d=21: random
// per-round corrections and complex flags over several blocks of 21 rounds,
// with idle cycles between rounds; at each block end the output must be the
// XOR of the block's rounds and the OR of its complex flags, delivered one
// cycle after the last round and held afterwards.
module tb_correction_buffer;
  localparam int D = 21;
  localparam int Q = D * D;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, rv, rl, rc, bv, bc;
  logic [Q-1:0] rcorr, bcorr;
  int checks = 0;
  int failures = 0;

  correction_buffer #(.D(D)) dut (
    .clk(clk), .rst_n(rst_n), .round_valid(rv), .round_last(rl), .round_complex(rc),
    .round_corr(rcorr), .blk_valid(bv), .blk_complex(bc), .blk_corr(bcorr)
  );

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [Q-1:0] exp_c;
    bit exp_x;
    rst_n = 0; rv = 0; rl = 0; rc = 0; rcorr = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      exp_c = '0; exp_x = 0;
      for (int r = 0; r < D; r++) begin
        @(negedge clk);
        rv = 1; rl = (r == D - 1);
        rc = (b % 2 == 1) && ($urandom % 8 == 0);
        for (int i = 0; i < Q; i++) rcorr[i] = ($urandom % 16 == 0);
        exp_c ^= rcorr; exp_x |= rc;
        @(posedge clk); #1;
        rv = 0;
        if (r != D - 1) chk(bv == 0, "no block result mid-block");
        else begin
          chk(bv == 1, "block result one cycle after the last round");
          chk(bcorr == exp_c, $sformatf("block %0d corrections", b));
          chk(bc == exp_x, $sformatf("block %0d complex", b));
        end
        repeat ($urandom % 3) @(posedge clk);
      end
      @(posedge clk); #1;
      chk(bv == 0 && bcorr == exp_c, "result held, valid pulses once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
