// tb_mtj_trng_top: end-to-end test of the generator with a behavioural
// junction/amplifier model and a behavioural DAC7578 on the I2C bus.
//
// Reduced sizes keep it short: feedback window 2000 trials with a dead
// band of 10 (0.5 %), sweep window 1000, XOR separation 64, I2C quarter
// period 2 clocks; the pulse timing is the default 20 clocks per trial.
// The write code the model sees is the one the DAC model received over
// I2C, so every feedback step goes round the whole loop of the paper:
// bits -> window count -> code step -> I2C -> DAC -> write pulse -> bits.
//
// Phases: (1) feedback from a write code 60 LSB below the 50 % point: the
// code must climb and settle, and later windows must be near 50 %; (2) a
// start 40 LSB above: steps down; (3) XOR on with feedback: the output
// must be raw[n] ^ raw[n-64] for second blocks and half the raw rate;
// (4) fixed mode: code held; (5) calibration sweep: +1 LSB per window;
// (6) a weak reset pulse: verify failures. Each mechanism is counted and a
// failure is counted for any that never happened.
module tb_mtj_trng_top;
  import trng_pkg::*;

  localparam int unsigned FBW = 2000, SWW = 1000, TOLV = 10, SEP = 64, DIV = 2;
  localparam int unsigned WIN_W = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0;
  wmode_e mode = WM_FIXED;
  logic xor_en = 1'b0;
  logic [WIN_W-1:0] target_ones = WIN_W'(FBW / 2);
  logic [DAC_W-1:0] code_r = 12'd3000, code_v = 12'd400, init_code_w = 12'd755;
  logic load_w = 1'b0;
  logic [3:0] sw_en;
  logic comp_in;
  logic scl_oe, sda_oe, scl_i, sda_i;
  logic rnd_bit, rnd_valid;
  phase_e phase;
  logic raw_valid, verify_fail, fb_step_up, fb_step_dn;
  logic [DAC_W-1:0] write_code;
  logic [WIN_W-1:0] win_ones;
  logic win_valid, dac_in_sync, dac_upd_done;
  logic [15:0] dac_nack_cnt;
  logic [1:0] dac_upd_ch;

  // bus and analog models
  logic sda_pull;
  logic [11:0] dcode [8];
  logic [7:0] last_cmd, last_msb, last_lsb;
  int n_writes, n_nacked;
  logic mtj_state;
  real vhalf;

  assign scl_i = ~scl_oe;
  assign sda_i = ~(sda_oe | sda_pull);

  mtj_trng_top #(
    .WIN_W(WIN_W), .FB_WINDOW(FBW), .SWEEP_WINDOW(SWW), .TOL(TOLV), .XOR_SEP(SEP), .I2C_DIV(DIV)
  ) dut (.*);

  dac7578_model #(.ADDR(7'h48)) u_dac (
    .scl(scl_i), .sda(sda_i), .force_nack(1'b0), .sda_pull, .code(dcode),
    .last_cmd, .last_msb, .last_lsb, .n_writes, .n_nacked
  );

  mtj_frontend_model u_mtj (
    .clk, .restart(1'b0), .sw_en, .code_r(dcode[0]), .code_w(dcode[4]), .comp(comp_in),
    .state(mtj_state), .vhalf_mv(vhalf)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---- monitors -----------------------------------------------------
  int n_raw = 0, n_rnd = 0, n_up = 0, n_dn = 0, n_sweep = 0, n_vf = 0;
  int n_win = 0, n_xor_out = 0, n_bypass = 0, n_dac_w = 0;
  int cyc = 0, last_raw = -1, n_period_bad = 0;
  logic raw_hist[$];          // raw bits since XOR was turned on
  logic rnd_exp[$];
  logic xor_q = 1'b0;
  int ones_since = 0;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (fb_step_up) n_up++;
    if (fb_step_dn) n_dn++;
    if (fb_step_up && mode == WM_SWEEP) n_sweep++;
    if (win_valid) n_win++;
    if (dac_upd_done && dac_upd_ch == 2'(CH_W)) n_dac_w++;
    if (raw_valid) begin
      n_raw++;
      if (verify_fail) n_vf++;
      if (last_raw >= 0 && cyc - last_raw != 20) n_period_bad++;
      last_raw = cyc;
      if (xor_en) begin
        int n;
        n = raw_hist.size();
        raw_hist.push_back(dut.raw_bit);
        if ((n % (2 * SEP)) >= SEP) rnd_exp.push_back(dut.raw_bit ^ raw_hist[n - SEP]);
      end else begin
        rnd_exp.push_back(dut.raw_bit);
      end
    end
    if (rnd_valid) begin
      logic e;
      n_rnd++;
      if (xor_en) n_xor_out++; else n_bypass++;
      e = (rnd_exp.size() != 0) ? rnd_exp.pop_front() : 1'b0;
      check(rnd_bit == e, "output bit differs from raw[n] ^ raw[n-SEP]");
    end
  end

  task automatic wait_windows(input int n);
    int w0 = n_win;
    while (n_win < w0 + n) @(posedge clk);
  endtask

  task automatic wait_dac();
    repeat (5) @(posedge clk);
    while (!dac_in_sync) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic load(input int c);
    init_code_w <= DAC_W'(c);
    load_w <= 1'b1;
    @(posedge clk);
    load_w <= 1'b0;
    @(posedge clk);
  endtask

  task automatic set_xor(input logic en);
    // change between trials so no raw bit falls on the switch-over
    while (phase != PH_RESET) @(posedge clk);
    xor_en <= en;
    @(posedge clk);
    raw_hist.delete();
    rnd_exp.delete();
  endtask

  localparam real LSB = 1800.0 / 4096.0;

  initial begin
    int half_code, c0, r0, o0, sum_ones, nwin;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load(755);
    wait_dac();
    check(n_writes == 4, $sformatf("%0d DAC writes after reset", n_writes));
    check(dcode[0] == 12'd3000 && dcode[1] == 12'd400 && dcode[2] == 12'd400 && dcode[4] == 12'd755,
          "DAC channels after reset");
    // (1) feedback from below
    mode = WM_FEEDBACK;
    run  = 1'b1;
    wait_windows(90);
    half_code = int'(vhalf / LSB);
    check(write_code > 12'd790 && write_code < 12'd840,
          $sformatf("feedback did not settle: code %0d, 50%% point %0d", write_code, half_code));
    sum_ones = 0; nwin = 0;
    for (int k = 0; k < 20; k++) begin
      @(posedge clk iff win_valid);
      sum_ones += int'(win_ones);
      nwin++;
    end
    check(sum_ones > nwin * (FBW / 2 - 60) && sum_ones < nwin * (FBW / 2 + 60),
          $sformatf("settled probability %0d / %0d", sum_ones, nwin * FBW));
    wait_dac();
    check(dcode[4] == write_code, "DAC W channel lags the write code");
    // (2) feedback from above
    load(855);
    wait_windows(60);
    check(write_code > 12'd790 && write_code < 12'd840, $sformatf("feedback from above: code %0d", write_code));
    // (3) XOR with feedback
    set_xor(1'b1);
    r0 = n_raw; o0 = n_rnd;
    while (n_raw < r0 + 20 * 2 * SEP) @(posedge clk);
    repeat (3) @(posedge clk);
    check(n_rnd - o0 == 20 * SEP, $sformatf("XOR rate: %0d out for %0d in", n_rnd - o0, n_raw - r0));
    set_xor(1'b0);
    r0 = n_raw; o0 = n_rnd;
    while (n_raw < r0 + 500) @(posedge clk);
    repeat (3) @(posedge clk);
    check(n_rnd - o0 == n_raw - r0, "bypass rate");
    // (4) fixed mode holds the code
    mode = WM_FIXED;
    c0 = int'(write_code);
    wait_windows(5);
    check(int'(write_code) == c0, "code moved in fixed mode");
    // (5) calibration sweep: +1 per window
    mode = WM_SWEEP;
    load(700);
    wait_windows(6);
    check(write_code == 12'd706, $sformatf("sweep code %0d expected 706", write_code));
    wait_dac();
    check(dcode[4] == 12'd706, "swept code not on the DAC");
    // (6) weak reset pulse: verify failures
    mode = WM_FIXED;
    code_r = 12'd500;
    wait_dac();
    r0 = n_vf;
    repeat (20 * 200) @(posedge clk);
    check(n_vf > r0, "no verify failure with a weak reset");
    code_r = 12'd3000;
    wait_dac();
    repeat (40) @(posedge clk);
    r0 = n_vf;
    repeat (20 * 200) @(posedge clk);
    check(n_vf == r0, "verify failures with a proper reset");
    // rates and mechanisms
    check(n_period_bad == 0, $sformatf("%0d raw bits off the 20-clock period", n_period_bad));
    check(rnd_exp.size() <= 1, "outputs missing");
    check(n_up > 0, "feedback step up never happened");
    check(n_dn > 0, "feedback step down never happened");
    check(n_sweep > 0, "sweep step never happened");
    check(n_xor_out > 0, "XOR output never happened");
    check(n_bypass > 0, "bypass output never happened");
    check(n_vf > 0, "verify failure never happened");
    check(n_dac_w > 0, "DAC write-channel update never happened");
    $display("raw=%0d rnd=%0d xor_out=%0d bypass=%0d windows=%0d up=%0d down=%0d sweep=%0d verify_fail=%0d dac_w_updates=%0d dac_writes=%0d",
             n_raw, n_rnd, n_xor_out, n_bypass, n_win, n_up, n_dn, n_sweep, n_vf, n_dac_w, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
