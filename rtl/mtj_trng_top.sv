// mtj_trng_top: FPGA side of a magnetic-tunnel-junction random bit
// generator with on-chip debiasing feedback and XOR decorrelation.
//
// Data path: pulse_sequencer runs one reset/verify/write/measure trial per
// TRIAL_CYC clocks, closing one analog switch per pulse (sw_en) and reading
// the thresholded junction current (comp_in) into one raw bit per trial.
// The raw bits go two ways, as in the paper's block diagram: to
// debias_feedback, which counts ones per window and steps the write-pulse
// code by one DAC LSB toward the target, and to xor_decorrelator, which
// XORs bits 4096 trials apart and sends half as many bits on as it gets.
// The decorrelated stream (rnd_bit, rnd_valid) is what the host link
// (Ethernet on the paper's board, not part of this RTL) carries to the PC.
//
// Control path: dac_ctrl keeps the four pulse-channel codes on the DAC7578
// in step with their requested values through i2c_master: R and V from
// the host, M equal to V (the paper's measure pulse is identical to the
// verify pulse), W from debias_feedback. scl/sda are open drain: *_oe = 1
// pulls the line low.
//
// Configuration (static or host-written, no bus is given by the paper):
// mode selects fixed code, feedback or the calibration sweep; xor_en turns
// the XOR on; target_ones is the target number of ones per feedback window
// (500000 = 50 % of 10^6); load_w loads init_code_w into the write code.
// win_ones/win_valid report each window's count, for calibration curves
// and monitoring.
//
// Timing at the defaults and a 212 MHz clock: one raw bit per 20 clocks
// (10.6 Mb/s), 5.3 Mb/s with XOR, a feedback decision every 10^6 raw bits,
// a DAC update 152*133 clocks (about 95 us) after a step.
module mtj_trng_top
  import trng_pkg::*;
#(
  parameter int unsigned R_CYC        = 6,
  parameter int unsigned V_CYC        = 4,
  parameter int unsigned W_CYC        = 4,
  parameter int unsigned M_CYC        = 4,
  parameter int unsigned IDLE_CYC     = 2,
  parameter int unsigned WIN_W        = 24,
  parameter int unsigned FB_WINDOW    = 1_000_000,
  parameter int unsigned SWEEP_WINDOW = 10_000_000,
  parameter int unsigned TOL          = 5_000,
  parameter int unsigned XOR_SEP      = 4096,
  parameter int unsigned I2C_DIV      = 133
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic                  run,
  input  wmode_e                mode,
  input  logic                  xor_en,
  input  logic [WIN_W-1:0]      target_ones,
  input  logic [DAC_W-1:0]      code_r,
  input  logic [DAC_W-1:0]      code_v,
  input  logic [DAC_W-1:0]      init_code_w,
  input  logic                  load_w,
  // analog front end
  output logic [N_PULSE_CH-1:0] sw_en,
  input  logic                  comp_in,
  // I2C to the DACs
  output logic                  scl_oe,
  output logic                  sda_oe,
  input  logic                  scl_i,
  input  logic                  sda_i,
  // random bit stream to the host link
  output logic                  rnd_bit,
  output logic                  rnd_valid,
  // status
  output phase_e                phase,
  output logic                  raw_valid,
  output logic                  verify_fail,
  output logic                  fb_step_up,
  output logic                  fb_step_dn,
  output logic [DAC_W-1:0]      write_code,
  output logic [WIN_W-1:0]      win_ones,
  output logic                  win_valid,
  output logic                  dac_in_sync,
  output logic [15:0]           dac_nack_cnt,
  output logic                  dac_upd_done,
  output logic [1:0]            dac_upd_ch
);

  logic             raw_bit;
  logic [DAC_W-1:0] codes [N_PULSE_CH];
  logic             i2c_start, i2c_busy, i2c_done, i2c_nack;
  i2c_wr_t          i2c_wr;

  pulse_sequencer #(
    .R_CYC(R_CYC), .V_CYC(V_CYC), .W_CYC(W_CYC), .M_CYC(M_CYC), .IDLE_CYC(IDLE_CYC)
  ) u_seq (
    .clk, .rst_n, .run, .comp_in, .sw_en, .phase,
    .bit_o(raw_bit), .bit_valid(raw_valid), .verify_fail
  );

  debias_feedback #(
    .WIN_W(WIN_W), .FB_WINDOW(FB_WINDOW), .SWEEP_WINDOW(SWEEP_WINDOW), .TOL(TOL)
  ) u_fb (
    .clk, .rst_n, .mode, .load(load_w), .init_code(init_code_w), .target_ones,
    .bit_i(raw_bit), .bit_valid(raw_valid),
    .write_code, .win_ones, .win_valid, .step_up(fb_step_up), .step_dn(fb_step_dn)
  );

  xor_decorrelator #(.SEP(XOR_SEP)) u_xor (
    .clk, .rst_n, .xor_en, .bit_i(raw_bit), .bit_valid(raw_valid),
    .bit_o(rnd_bit), .bit_o_valid(rnd_valid)
  );

  always_comb begin
    codes[CH_R] = code_r;
    codes[CH_V] = code_v;
    codes[CH_W] = write_code;
    codes[CH_M] = code_v;
  end

  dac_ctrl u_dac (
    .clk, .rst_n, .code(codes),
    .i2c_start, .i2c_wr, .i2c_busy, .i2c_done, .i2c_nack,
    .in_sync(dac_in_sync), .upd_done(dac_upd_done), .upd_ch(dac_upd_ch), .nack_cnt(dac_nack_cnt)
  );

  i2c_master #(.DIV(I2C_DIV)) u_i2c (
    .clk, .rst_n, .start(i2c_start), .wr(i2c_wr),
    .busy(i2c_busy), .done(i2c_done), .nack(i2c_nack),
    .scl_oe, .sda_oe, .scl_i, .sda_i
  );

endmodule
