// pinball_workload_run -- drives one pinball_top with random fault-injected
// syndrome blocks and checks it against the reference model.
//
// This is a helper of tb_pinball_workloads, not a testbench of its own. For a
// code distance D it runs BLOCKS blocks of D rounds. Each round injects every
// single fault independently with probability PPM per million (the error rate
// p, e.g. 1000 for p = 1e-3) at each possible location:
//   * a Z error on any data qubit (a space-like pair, or one syndrome at the
//     left or right edge);
//   * a measurement error on any ancilla (same vertex in two rounds);
//   * single-qubit spacetime errors in both diagonal directions and hook
//     errors (a vertex in one round and its partner in the next round).
// Faults that would reach into the next block are dropped, so blocks stay
// independent. This is a flat fault model with one rate for every location,
// simpler than a full circuit-level noise model.
// Every round flag, block result and offloaded round is compared with
// pinball_ref; the offload port is ready two cycles in three.
// Outputs: checks and failures (running counts); blocks and clean, which
// count the blocks seen and those with no complex round (their ratio is the
// share of blocks the predecoder resolves on its own); done rises once all
// results have arrived.
module pinball_workload_run #(
  parameter int D      = 5,
  parameter int BLOCKS = 30,
  parameter int PPM    = 1000
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   blocks,
  output int   clean,
  output logic done
);
  import tb_ref_pkg::*;
  import pinball_pkg::vf_point_t;

  localparam int N  = (D + 1) * ((D - 1) / 2);
  localparam int Q  = D * D;
  localparam int RW = $clog2(D);
  localparam int K  = (D - 1) / 2;

  logic          rst_n;
  logic          syn_valid, syn_ready;
  logic [N-1:0]  syn_data;
  logic          round_valid, round_complex;
  logic [RW-1:0] round_idx;
  logic          blk_valid, blk_complex;
  logic [Q-1:0]  blk_corr;
  logic          off_valid, off_ready, off_last;
  logic [N-1:0]  off_syn;
  logic [RW-1:0] off_round;
  logic          vdd_sel_hp, bb_sel_hp, clk_sel_hp;
  vf_point_t     supply_point;
  logic [11:0]   clk_freq_100khz;

  pinball_top #(.D(D)) dut (
    .clk(clk), .rst_n(rst_n),
    .syn_valid(syn_valid), .syn_ready(syn_ready), .syn_data(syn_data),
    .round_valid(round_valid), .round_complex(round_complex), .round_idx(round_idx),
    .blk_valid(blk_valid), .blk_complex(blk_complex), .blk_corr(blk_corr),
    .off_valid(off_valid), .off_ready(off_ready), .off_syn(off_syn),
    .off_round(off_round), .off_last(off_last),
    .vdd_sel_hp(vdd_sel_hp), .bb_sel_hp(bb_sel_hp), .clk_sel_hp(clk_sel_hp),
    .supply_point(supply_point), .clk_freq_100khz(clk_freq_100khz),
    .cfg_we(1'b0), .cfg_addr_hp(1'b0), .cfg_data('0)
  );

  pinball_ref #(D) ref_m = new();

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: d=%0d %s", D, what);
    end
  endtask

  // --------------------------------------------------- reference tracking
  bit [N-1:0] sprev = '0;
  bit [Q-1:0] acc = '0;
  bit         acc_cplx = 0;
  int         acc_round = 0;
  bit [N-1:0] blk_raw [D];
  bit         exp_rcplx [$];
  bit [Q-1:0] exp_bcorr [$];
  bit         exp_bcplx [$];
  bit [N-1:0] exp_off [$];

  always @(posedge clk) if (rst_n) begin
    if (syn_valid && syn_ready) begin
      bit [N-1:0] spn, sc;
      bit [Q-1:0] corr;
      bit cplx, last;
      last = (acc_round == D - 1);
      ref_m.step(sprev, syn_data, last, spn, sc, corr, cplx);
      sprev = last ? '0 : sc;
      exp_rcplx.push_back(cplx);
      blk_raw[acc_round] = syn_data;
      acc ^= corr;
      acc_cplx |= cplx;
      if (last) begin
        exp_bcorr.push_back(acc);
        exp_bcplx.push_back(acc_cplx);
        if (acc_cplx) for (int r = 0; r < D; r++) exp_off.push_back(blk_raw[r]);
        acc = '0; acc_cplx = 0; acc_round = 0;
      end else acc_round++;
      chk(clk_sel_hp == last, "the last round, and only it, runs in HP mode");
    end
    if (round_valid) begin
      chk(exp_rcplx.size() > 0, "round result expected");
      if (exp_rcplx.size() > 0) begin
        chk(round_complex == exp_rcplx[0], "round complex flag");
        void'(exp_rcplx.pop_front());
      end
    end
    if (blk_valid) begin
      chk(exp_bcorr.size() > 0, "block result expected");
      if (exp_bcorr.size() > 0) begin
        chk(blk_corr == exp_bcorr[0], "block corrections");
        chk(blk_complex == exp_bcplx[0], "block complex flag");
        blocks++;
        if (!blk_complex) clean++;
        void'(exp_bcorr.pop_front());
        void'(exp_bcplx.pop_front());
      end
    end
    if (off_valid && off_ready) begin
      chk(exp_off.size() > 0, "offload expected");
      if (exp_off.size() > 0) begin
        chk(off_syn == exp_off[0], "offloaded round equals the raw syndromes");
        void'(exp_off.pop_front());
      end
    end
  end

  always @(negedge clk) off_ready <= ($urandom % 3 != 0);

  // ------------------------------------------------------------- stimulus
  bit [N-1:0] rounds [D];

  function automatic bit hit();
    return ($urandom % 1_000_000) < PPM;
  endfunction

  // one block of fault-injected rounds
  task automatic make_block();
    for (int t = 0; t < D; t++) rounds[t] = '0;
    for (int t = 0; t < D; t++) begin
      for (int r = 0; r < D; r++)
        for (int c = 0; c < D; c++)
          if (hit()) rounds[t] ^= ref_m.data_error(r, c);
      if (t == D - 1) continue;
      for (int y = 0; y <= D; y++)
        for (int x = 0; x < K; x++) begin
          int n, m;
          n = ref_m.id(x, y);
          if (hit()) begin rounds[t][n] ^= 1'b1; rounds[t + 1][n] ^= 1'b1; end
          m = ref_m.up_right(x, y);
          if (m >= 0 && hit()) begin rounds[t][m] ^= 1'b1; rounds[t + 1][n] ^= 1'b1; end
          m = ref_m.up_left(x, y);
          if (m >= 0 && hit()) begin rounds[t][m] ^= 1'b1; rounds[t + 1][n] ^= 1'b1; end
          if (y + 2 <= D) begin
            m = ref_m.id(x, y + 2);
            if (hit()) begin rounds[t][m] ^= 1'b1; rounds[t + 1][n] ^= 1'b1; end
          end
        end
    end
  endtask

  initial begin
    checks = 0; failures = 0; blocks = 0; clean = 0; done = 0;
    rst_n = 0; syn_valid = 0; syn_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int b = 0; b < BLOCKS; b++) begin
      make_block();
      for (int t = 0; t < D; t++) begin
        @(negedge clk);
        syn_valid = 1;
        syn_data = rounds[t];
        @(posedge clk);
        while (!syn_ready) @(posedge clk);
        #1 syn_valid = 0;
      end
    end
    repeat (20 * D) @(posedge clk);
    chk(exp_rcplx.size() == 0 && exp_bcorr.size() == 0 && exp_off.size() == 0,
        "all results and offloads seen");
    chk(blocks == BLOCKS, "one result per block");
    done = 1;
  end
endmodule
