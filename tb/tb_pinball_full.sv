// tb_pinball_full -- end-to-end testbench of pinball_top at its default size, d=21.
//
// Blocks of d syndrome rounds are generated from injected faults: single
// data-qubit errors (space-like pairs or boundary singles), measurement
// errors (same vertex in two consecutive rounds), single-qubit spacetime
// errors and hook errors (a vertex in one round and its ST/H partner in the
// next), and occasional dense random rounds that the predecoder cannot
// handle. The first block holds only isolated data-qubit errors, whose
// corrections must equal the injected qubits exactly; the second holds only
// measurement errors, which need no correction. Every round, every block
// result and every offloaded round is compared with the reference model in
// tb_ref_pkg. The offload port applies random back-pressure and, for a while,
// blocks completely so that the raw syndrome buffer fills and stalls input.
// The LP/HP mode sequence and the V/F table outputs are checked, and the
// table's HP entry is rewritten once. Each mechanism is counted and must
// occur at least once.
module tb_pinball_full;
  import tb_ref_pkg::*;
  import pinball_pkg::vf_point_t;

  localparam int D  = 21;
  localparam int N  = (D + 1) * ((D - 1) / 2);
  localparam int Q  = D * D;
  localparam int RW = $clog2(D);
  localparam int BLOCKS = 30;

  logic clk = 0;
  always #5 clk = ~clk;

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
  logic          cfg_we, cfg_addr_hp;
  vf_point_t     cfg_data;

  pinball_top dut (
    .clk(clk), .rst_n(rst_n),
    .syn_valid(syn_valid), .syn_ready(syn_ready), .syn_data(syn_data),
    .round_valid(round_valid), .round_complex(round_complex), .round_idx(round_idx),
    .blk_valid(blk_valid), .blk_complex(blk_complex), .blk_corr(blk_corr),
    .off_valid(off_valid), .off_ready(off_ready), .off_syn(off_syn),
    .off_round(off_round), .off_last(off_last),
    .vdd_sel_hp(vdd_sel_hp), .bb_sel_hp(bb_sel_hp), .clk_sel_hp(clk_sel_hp),
    .supply_point(supply_point), .clk_freq_100khz(clk_freq_100khz),
    .cfg_we(cfg_we), .cfg_addr_hp(cfg_addr_hp), .cfg_data(cfg_data)
  );

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pinball_ref #(D) ref_m = new();

  // expected results, filled when a round is accepted
  bit          exp_rcplx[$];
  bit [Q-1:0]  exp_bcorr[$];
  bit          exp_bcplx[$];
  bit [N-1:0]  exp_off[$];
  bit [N-1:0]  blk_raw [D];
  bit [N-1:0]  sprev = '0;
  bit [Q-1:0]  acc = '0;
  bit          acc_cplx = 0;
  int          acc_round = 0;
  int          directed_q[$];       // block 0: expected corrected qubits

  // mechanism counters
  int n_cplx_round = 0, n_cplx_blk = 0, n_clean_blk = 0, n_off_rounds = 0;
  int n_raise = 0, n_lower = 0, n_hold_stall = 0, n_buf_stall = 0, n_off_bp = 0;
  int n_cfg = 0;
  bit block_offload = 0;
  int hp_freq = 1000;

  // ----------------------------------------------------------- monitors
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
      chk(!(vdd_sel_hp ^ clk_sel_hp), "no round starts during a mode switch");
      chk(clk_sel_hp == last, "the last round, and only it, runs in HP mode");
    end
    if (syn_valid && !syn_ready && (vdd_sel_hp ^ clk_sel_hp)) n_hold_stall++;
    if (syn_valid && !syn_ready && !dut.u_raw.wr_ready) n_buf_stall++;
    if (off_valid && !off_ready) n_off_bp++;
    if (round_valid) begin
      chk(exp_rcplx.size() > 0, "round result expected");
      if (exp_rcplx.size() > 0) begin
        chk(round_complex == exp_rcplx[0], "round complex flag");
        n_cplx_round += round_complex;
        void'(exp_rcplx.pop_front());
      end
    end
    if (blk_valid) begin
      chk(exp_bcorr.size() > 0, "block result expected");
      if (exp_bcorr.size() > 0) begin
        chk(blk_corr == exp_bcorr[0], "block corrections");
        chk(blk_complex == exp_bcplx[0], "block complex flag");
        if (blk_complex) n_cplx_blk++; else n_clean_blk++;
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
      n_off_rounds++;
    end
    chk(!clk_sel_hp || vdd_sel_hp, "fast clock only on the high supply");
    chk(bb_sel_hp == vdd_sel_hp, "body bias follows the supply");
    chk(supply_point.vdd_mv == (vdd_sel_hp ? 12'd800 : 12'd480), "supply point from the table");
    chk(clk_freq_100khz == (clk_sel_hp ? 12'(hp_freq) : 12'd125), "clock frequency from the table");
  end

  logic vdd_q = 0;
  always @(posedge clk) begin
    vdd_q <= rst_n && vdd_sel_hp;
    if (rst_n && vdd_sel_hp && !vdd_q) n_raise++;
    if (rst_n && !vdd_sel_hp && vdd_q) n_lower++;
  end

  always @(negedge clk) off_ready <= !block_offload && ($urandom % 3 != 0);

  // ------------------------------------------------------ stimulus helpers
  bit [N-1:0] rounds [D];
  bit [N-1:0] carry;

  function automatic int rnd_vertex();
    return $urandom % N;
  endfunction

  // one block of fault-injected rounds; mode 0: isolated bulk data errors,
  // mode 1: measurement errors only, mode 2: everything
  task automatic make_block(int mode);
    carry = '0;
    for (int t = 0; t < D; t++) begin
      rounds[t] = carry;
      carry = '0;
    end
    for (int t = 0; t < D; t++) begin
      int kind, x, y, m, n;
      if (mode == 0) begin
        int r, c;
        if (t % 2 == 1) continue;
        r = $urandom % D; c = 1 + $urandom % (D - 2);
        rounds[t] ^= ref_m.data_error(r, c);
        directed_q.push_back(r * D + c);
        continue;
      end
      kind = (mode == 1) ? 1 : $urandom % 7;
      x = $urandom % ((D - 1) / 2);
      y = $urandom % (D - 1);
      case (kind)
        0: rounds[t] ^= ref_m.data_error($urandom % D, $urandom % D);
        1: if (t < D - 1) begin n = rnd_vertex(); rounds[t][n] ^= 1; rounds[t+1][n] ^= 1; end
        2: if (t < D - 1) begin
             m = ref_m.up_right(x, y); n = ref_m.id(x, y);
             if (m >= 0) begin rounds[t][m] ^= 1; rounds[t+1][n] ^= 1; end
           end
        3: if (t < D - 1) begin
             m = ref_m.up_left(x, y); n = ref_m.id(x, y);
             if (m >= 0) begin rounds[t][m] ^= 1; rounds[t+1][n] ^= 1; end
           end
        4: if (t < D - 1) begin
             m = ref_m.id(x, y + 2); n = ref_m.id(x, y);
             if (m >= 0) begin rounds[t][m] ^= 1; rounds[t+1][n] ^= 1; end
           end
        5: if ($urandom % 4 == 0) rounds[t] ^= ref_m.rand_syn(15);
        default: ;
      endcase
    end
  endtask

  task automatic send_block();
    for (int t = 0; t < D; t++) begin
      @(negedge clk);
      syn_valid = 1;
      syn_data = rounds[t];
      @(posedge clk);
      while (!syn_ready) @(posedge clk);
      #1 syn_valid = 0;
    end
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    bit [Q-1:0] want;
    rst_n = 0; syn_valid = 0; syn_data = '0; cfg_we = 0; cfg_addr_hp = 0; cfg_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // block 0: isolated data-qubit errors are corrected exactly
    make_block(0);
    send_block();
    wait (blk_valid); #1;
    want = '0;
    foreach (directed_q[i]) want[directed_q[i]] ^= 1'b1;
    chk(!blk_complex && blk_corr == want, "isolated data errors corrected on the injected qubits");
    @(posedge clk);

    // block 1: measurement errors only, no correction needed
    make_block(1);
    send_block();
    wait (blk_valid); #1;
    chk(!blk_complex && blk_corr == '0, "measurement errors need no correction");
    @(posedge clk);

    // rewrite the HP entry of the V/F table (new HP clock 90 MHz)
    @(negedge clk);
    cfg_we = 1; cfg_addr_hp = 1;
    cfg_data = '{vdd_mv: 12'd800, vbn_mv: 12'sd0, vbp_mv: 12'sd0, freq_100khz: 12'd900};
    @(negedge clk);
    cfg_we = 0; hp_freq = 900; n_cfg++;

    for (int b = 2; b < BLOCKS; b++) begin
      if (b == BLOCKS / 2) begin
        fork
          begin
            block_offload = 1;
            repeat (40 * D) @(posedge clk);
            block_offload = 0;
          end
        join_none
      end
      make_block(2);
      if (b % 3 == 0) rounds[D / 2] ^= ref_m.rand_syn(25);   // make sure some blocks are complex
      send_block();
    end
    repeat (40 * D) @(posedge clk);
    chk(exp_rcplx.size() == 0 && exp_bcorr.size() == 0 && exp_off.size() == 0, "all results and offloads seen");

    $display("stage firings: M=%0d B1=%0d B2=%0d B3=%0d B4=%0d ST1=%0d ST2=%0d H=%0d E=%0d",
             ref_m.fires[0], ref_m.fires[1], ref_m.fires[2], ref_m.fires[3], ref_m.fires[4],
             ref_m.fires[5], ref_m.fires[6], ref_m.fires[7], ref_m.fires[8]);
    $display("complex rounds=%0d complex blocks=%0d clean blocks=%0d offloaded rounds=%0d",
             n_cplx_round, n_cplx_blk, n_clean_blk, n_off_rounds);
    $display("LP->HP=%0d HP->LP=%0d hold stalls=%0d buffer stalls=%0d offload back-pressure=%0d table writes=%0d",
             n_raise, n_lower, n_hold_stall, n_buf_stall, n_off_bp, n_cfg);
    for (int k = 0; k < 9; k++) chk(ref_m.fires[k] > 0, $sformatf("stage %0d never fired", k));
    chk(n_cplx_round > 0, "no complex round");
    chk(n_cplx_blk > 0, "no complex block");
    chk(n_clean_blk > 0, "no clean block");
    chk(n_off_rounds == D * n_cplx_blk, "offloaded rounds = d per complex block");
    chk(n_raise == BLOCKS && n_lower == BLOCKS, "one LP->HP and one HP->LP switch per block");
    chk(n_hold_stall > 0, "no input held during a mode switch");
    chk(n_buf_stall > 0, "no input held by a full syndrome buffer");
    chk(n_off_bp > 0, "no offload back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
