// vf_lut -- voltage-frequency look-up table.
//
// Holds two operating points, indexed by mode: LP (entry 0) and HP (entry 1),
// each a supply voltage, NMOS/PMOS body-bias voltages and a clock frequency
// (pinball_pkg::vf_point_t). The entries reset to the paper's operating
// points (LP: 0.48 V, VBN 0.3 V, VBP -0.3 V, 12.5 MHz; HP: 0.8 V, no body
// bias, 100 MHz) and can be rewritten through the cfg port, since the paper
// calibrates the pairs after fabrication. Outputs: the supply/bias point
// selected by vdd_sel (for the rail and bias generators) and the frequency
// selected by clk_sel (for the clock source). Reads are combinational, writes
// take effect on the next clock edge. Table size and encoding are this
// design's choices.
module vf_lut import pinball_pkg::*; (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  pmode_t      cfg_addr,
  input  vf_point_t   cfg_data,
  input  pmode_t      vdd_sel,
  input  pmode_t      clk_sel,
  output vf_point_t   supply_point,
  output logic [11:0] clk_freq_100khz
);

  vf_point_t lut_q [2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lut_q[MODE_LP] <= VF_LP_DEFAULT;
      lut_q[MODE_HP] <= VF_HP_DEFAULT;
    end else if (cfg_we) begin
      lut_q[cfg_addr] <= cfg_data;
    end
  end

  assign supply_point    = lut_q[vdd_sel];
  assign clk_freq_100khz = lut_q[clk_sel].freq_100khz;

endmodule
