// pinball_top -- one Pinball cryogenic predecoder (one logical qubit).
//
// Syndrome rounds from the readout enter on syn_valid/syn_ready. Each accepted
// round goes both into the predecoding pipeline and into the raw syndrome
// buffer. The pipeline's per-round corrections are gathered in the d x d
// correction buffer; at the end of every d-round block blk_valid pulses with
// the block's corrections and its complex flag. A complex block is not
// decoded here: its raw syndromes are streamed out on the off_* port towards
// the room-temperature decoder, and blk_corr is then to be ignored.
// The DVFS controller switches the supply, body bias and clock between LP
// mode (rounds 1..d-1) and HP mode (round d); its selects and the operating
// point read from the V/F table leave the chip on vdd_sel/bb_sel/clk_sel,
// supply_point and clk_freq_100khz, since the supply and body-bias
// multiplexers and the clock source are analog or external.
// A round is accepted only when the pipeline is empty, the raw buffer has a
// free bank and no mode switch is in progress: one round per nine cycles at
// most. Synchronous active-low reset. Default D=21, the largest distance the
// paper evaluates.
module pinball_top import pinball_pkg::*; #(
  parameter  int D  = 21,
  localparam int N  = num_nodes(D),
  localparam int Q  = num_data(D),
  localparam int RW = cnt_bits(D)
) (
  input  logic          clk,
  input  logic          rst_n,
  // syndrome rounds from readout
  input  logic          syn_valid,
  output logic          syn_ready,
  input  logic [N-1:0]  syn_data,
  // per-round status
  output logic          round_valid,
  output logic          round_complex,
  output logic [RW-1:0] round_idx,
  // per-block result
  output logic          blk_valid,
  output logic          blk_complex,
  output logic [Q-1:0]  blk_corr,
  // offload of complex blocks
  output logic          off_valid,
  input  logic          off_ready,
  output logic [N-1:0]  off_syn,
  output logic [RW-1:0] off_round,
  output logic          off_last,
  // power / clock mode control
  output logic          vdd_sel_hp,
  output logic          bb_sel_hp,
  output logic          clk_sel_hp,
  output vf_point_t     supply_point,
  output logic [11:0]   clk_freq_100khz,
  // V/F table write port
  input  logic          cfg_we,
  input  logic          cfg_addr_hp,
  input  vf_point_t     cfg_data
);

  logic         pipe_ready, buf_ready, hold, accept;
  logic         pipe_last;
  logic [Q-1:0] pipe_corr;
  pmode_t       vdd_sel, bb_sel, clk_sel;

  assign syn_ready = pipe_ready & buf_ready & ~hold;
  assign accept    = syn_valid & syn_ready;

  pinball_pipeline #(.D(D)) u_pipe (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (accept),
    .in_ready   (pipe_ready),
    .in_syn     (syn_data),
    .out_valid  (round_valid),
    .out_complex(round_complex),
    .out_last   (pipe_last),
    .out_round  (round_idx),
    .out_corr   (pipe_corr)
  );

  correction_buffer #(.D(D)) u_corr (
    .clk          (clk),
    .rst_n        (rst_n),
    .round_valid  (round_valid),
    .round_last   (pipe_last),
    .round_complex(round_complex),
    .round_corr   (pipe_corr),
    .blk_valid    (blk_valid),
    .blk_complex  (blk_complex),
    .blk_corr     (blk_corr)
  );

  syndrome_buffer #(.D(D)) u_raw (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (accept),
    .wr_syn     (syn_data),
    .wr_ready   (buf_ready),
    .blk_done   (blk_valid),
    .blk_complex(blk_complex),
    .off_valid  (off_valid),
    .off_ready  (off_ready),
    .off_syn    (off_syn),
    .off_round  (off_round),
    .off_last   (off_last)
  );

  dvfs_controller #(.ROUNDS(D)) u_dvfs (
    .clk       (clk),
    .rst_n     (rst_n),
    .round_done(round_valid),
    .round_idx (round_idx),
    .vdd_sel   (vdd_sel),
    .bb_sel    (bb_sel),
    .clk_sel   (clk_sel),
    .hold      (hold)
  );

  vf_lut u_lut (
    .clk            (clk),
    .rst_n          (rst_n),
    .cfg_we         (cfg_we),
    .cfg_addr       (pmode_t'(cfg_addr_hp)),
    .cfg_data       (cfg_data),
    .vdd_sel        (vdd_sel),
    .clk_sel        (clk_sel),
    .supply_point   (supply_point),
    .clk_freq_100khz(clk_freq_100khz)
  );

  assign vdd_sel_hp = (vdd_sel == MODE_HP);
  assign bb_sel_hp  = (bb_sel == MODE_HP);
  assign clk_sel_hp = (clk_sel == MODE_HP);

endmodule
