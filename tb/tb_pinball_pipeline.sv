// tb_pinball_pipeline -- end-to-end check of the nine-stage pipeline at d=5
// and d=7.
//
// Rounds are built from injected errors (random data-qubit flips, which
// produce the space-like and spacetime patterns, plus random single-syndrome
// flips for measurement errors) and from plain random vectors. For every
// round the corrections, the complex flag, the round index and the last flag
// are compared with the reference model, which also carries the residual
// S_{i-1} from round to round. It also checks the timing: outputs nine clock
// edges after a round is accepted, in_ready low for the eight cycles between,
// so one round per nine cycles. Every stage must fire at least once.
module tb_pinball_pipeline;
  import tb_ref_pkg::*;

  logic clk = 0;
  logic rst_n;
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
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // -------------------------------------------------------------- d = 5
  localparam int D5 = 5;
  localparam int N5 = (D5 + 1) * ((D5 - 1) / 2);
  localparam int Q5 = D5 * D5;
  logic          v5, r5, ov5, oc5, ol5;
  logic [N5-1:0] s5;
  logic [2:0]    or5;
  logic [Q5-1:0] cr5;

  pinball_pipeline #(.D(D5)) dut5 (
    .clk(clk), .rst_n(rst_n), .in_valid(v5), .in_ready(r5), .in_syn(s5),
    .out_valid(ov5), .out_complex(oc5), .out_last(ol5), .out_round(or5), .out_corr(cr5)
  );

  // -------------------------------------------------------------- d = 7
  localparam int D7 = 7;
  localparam int N7 = (D7 + 1) * ((D7 - 1) / 2);
  localparam int Q7 = D7 * D7;
  logic          v7, r7, ov7, oc7, ol7;
  logic [N7-1:0] s7;
  logic [2:0]    or7;
  logic [Q7-1:0] cr7;

  pinball_pipeline #(.D(D7)) dut7 (
    .clk(clk), .rst_n(rst_n), .in_valid(v7), .in_ready(r7), .in_syn(s7),
    .out_valid(ov7), .out_complex(oc7), .out_last(ol7), .out_round(or7), .out_corr(cr7)
  );

  pinball_ref #(D5) m5 = new();
  pinball_ref #(D7) m7 = new();

  // syndrome round with errors: `nd` data flips in this round (seen in this
  // round by the graph) and `nm` measurement flips
  function automatic bit [N5-1:0] round5(int nd, int nm);
    bit [N5-1:0] v = '0;
    for (int i = 0; i < nd; i++) v ^= m5.data_error($urandom % D5, $urandom % D5);
    for (int i = 0; i < nm; i++) v[$urandom % N5] ^= 1'b1;
    return v;
  endfunction
  function automatic bit [N7-1:0] round7(int nd, int nm);
    bit [N7-1:0] v = '0;
    for (int i = 0; i < nd; i++) v ^= m7.data_error($urandom % D7, $urandom % D7);
    for (int i = 0; i < nm; i++) v[$urandom % N7] ^= 1'b1;
    return v;
  endfunction

  task automatic run5(int rounds);
    bit [N5-1:0] sp, spn, sc;
    bit [Q5-1:0] corr;
    bit cplx, last;
    int rnd, lat;
    sp = '0; rnd = 0;
    for (int t = 0; t < rounds; t++) begin
      bit [N5-1:0] syn;
      syn = (t % 3 == 2) ? m5.rand_syn(10) : round5($urandom % 3, $urandom % 2);
      last = (rnd == D5 - 1);
      m5.step(sp, syn, last, spn, sc, corr, cplx);
      sp = last ? '0 : sc;
      @(negedge clk);
      chk(r5 == 1'b1, "d5 ready when idle");
      v5 = 1; s5 = syn;
      @(posedge clk); #1;
      v5 = 0;
      lat = 1;
      while (!ov5) begin
        chk(r5 == 1'b0, "d5 busy while a round is inside");
        @(posedge clk); #1;
        lat++;
      end
      chk(lat == 9, $sformatf("d5 latency %0d cycles, want 9", lat));
      chk(cr5 == corr, $sformatf("d5 round %0d corrections", t));
      chk(oc5 == cplx, $sformatf("d5 round %0d complex", t));
      chk(or5 == 3'(rnd) && ol5 == last, $sformatf("d5 round %0d index", t));
      rnd = last ? 0 : rnd + 1;
    end
  endtask

  task automatic run7(int rounds);
    bit [N7-1:0] sp, spn, sc;
    bit [Q7-1:0] corr;
    bit cplx, last;
    int rnd;
    sp = '0; rnd = 0;
    for (int t = 0; t < rounds; t++) begin
      bit [N7-1:0] syn;
      syn = (t % 4 == 3) ? m7.rand_syn(8) : round7($urandom % 3, $urandom % 2);
      last = (rnd == D7 - 1);
      m7.step(sp, syn, last, spn, sc, corr, cplx);
      sp = last ? '0 : sc;
      // back-to-back: keep valid high until accepted
      @(negedge clk);
      v7 = 1; s7 = syn;
      do @(posedge clk); while (!r7);
      #1 v7 = 0;
      while (!ov7) @(posedge clk);
      #1;
      chk(cr7 == corr && oc7 == cplx && or7 == 3'(rnd) && ol7 == last,
          $sformatf("d7 round %0d", t));
      rnd = last ? 0 : rnd + 1;
    end
  endtask

  // throughput: with in_valid held high, accepts are nine cycles apart
  int acc_cycle[$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (v7 && r7) acc_cycle.push_back(cyc);
  end

  initial begin
    rst_n = 0; v5 = 0; v7 = 0; s5 = '0; s7 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run5(400);
    run7(300);
    for (int i = 1; i < acc_cycle.size(); i++)
      chk(acc_cycle[i] - acc_cycle[i-1] >= 9, "d7 one round per nine cycles");
    for (int k = 0; k < 9; k++) begin
      chk(m5.fires[k] > 0, $sformatf("d5 stage %0d never fired", k));
      $display("stage %0d fired d5=%0d d7=%0d", k, m5.fires[k], m7.fires[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
