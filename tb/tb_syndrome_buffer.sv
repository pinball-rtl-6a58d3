// tb_syndrome_buffer -- checks the raw syndrome buffer at d=5 and at d=21.
// Blocks of random rounds are written; each block's verdict arrives a few
// cycles after its last round. Complex blocks must come out on the offload
// stream unchanged and in round order, with off_last on the final round, and
// only complex blocks may come out. The offload side applies random
// back-pressure, and in one phase holds off_ready low long enough that both
// banks are occupied, so wr_ready must drop and writes wait.
module tb_syndrome_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n;
  int stalls = 0;

  // one harness per distance
  for (genvar g = 0; g < 2; g++) begin : g_d
    localparam int D = (g == 0) ? 5 : 21;
    localparam int N = (D + 1) * ((D - 1) / 2);
    localparam int RW = $clog2(D);
    logic wr_en, wr_ready, blk_done, blk_cplx, ov, ordy, olast;
    logic [N-1:0] wsyn, osyn;
    logic [RW-1:0] oround;
    bit [N-1:0] expq[$];    // rounds expected on the offload stream
    int sent = 0;
    bit hold_off = 0;
    bit done = 0;

    syndrome_buffer #(.D(D)) dut (
      .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_syn(wsyn), .wr_ready(wr_ready),
      .blk_done(blk_done), .blk_complex(blk_cplx),
      .off_valid(ov), .off_ready(ordy), .off_syn(osyn), .off_round(oround), .off_last(olast)
    );

    // offload sink
    always @(posedge clk) begin
      if (rst_n && ov && ordy) begin
        chk(expq.size() > 0, $sformatf("d=%0d unexpected offload", D));
        if (expq.size() > 0) begin
          chk(osyn == expq[0], $sformatf("d=%0d offload data", D));
          chk(oround == RW'(sent % D) && olast == ((sent % D) == D - 1), $sformatf("d=%0d offload round", D));
          void'(expq.pop_front());
          sent++;
        end
      end
    end
    always @(negedge clk) ordy <= !hold_off && ($urandom % 4 != 0);

    initial begin
      bit [N-1:0] blk [D];
      bit cplx;
      wr_en = 0; blk_done = 0; blk_cplx = 0; wsyn = '0;
      wait (rst_n);
      for (int b = 0; b < 12; b++) begin
        cplx = (b % 3 != 1);
        hold_off = (b >= 6 && b < 9);   // offload blocked: both banks fill up
        for (int r = 0; r < D; r++) begin
          for (int i = 0; i < N; i++) blk[r][i] = $urandom % 2;
          @(negedge clk);
          wr_en = 1; wsyn = blk[r];
          @(posedge clk);
          while (!wr_ready) begin
            stalls++;
            if (hold_off && stalls > 40) hold_off = 0;
            @(posedge clk);
          end
          #1 wr_en = 0;
        end
        repeat (9) @(posedge clk);      // pipeline latency before the verdict
        #1 blk_done = 1; blk_cplx = cplx;
        if (cplx) for (int r = 0; r < D; r++) expq.push_back(blk[r]);
        @(posedge clk); #1 blk_done = 0;
      end
      hold_off = 0;
      repeat (400) @(posedge clk);
      chk(expq.size() == 0, $sformatf("d=%0d all complex blocks offloaded", D));
      done = 1;
    end
  end

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (g_d[0].done && g_d[1].done);
    chk(stalls > 0, "write stall while both banks are busy happened");
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
