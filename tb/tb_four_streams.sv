// tb_four_streams: the four acquisition settings of the published
// evaluation (feedback off/on x XOR off/on), at reduced length, on a
// drifting junction model.
//
// Each run restarts the junction model, sets the write code to the
// starting 50 % point (815 = 358 mV / 0.44 mV) and collects 400 000 raw
// trials while the model's 50 % point drifts up by 8 mV and consecutive
// trials are slightly anticorrelated. The feedback window is shortened to
// 20 000 trials with the same 0.5 % dead band (100) so that the loop acts
// 20 times per run; everything else is at its default, including the
// 4096-bit XOR separation and the I2C timing. Output bits are averaged in
// bin_means of 10 000 and the variance of the bin means (in %^2) is printed
// for each run, as in the published comparison. Checked:
//   a) no feedback, no XOR: the drift shows (last quarter below 47 %);
//   b) feedback, no XOR: the last quarter stays within 2 % of 50 % (the
//      loop trails a steady drift by about the dead band plus one step);
//   c) no feedback, XOR: mean below 50 %, bias much smaller than in (a),
//      half as many output bits;
//   d) feedback and XOR: mean and last quarter within 0.5 % of 50 %, and
//      a smaller bin variance than both runs without feedback.
// The junction model has no slow correlated noise, so (b) and (d) both sit
// near the binomial variance 50*50/10^4 = 0.25 %^2 and are not compared.
module tb_four_streams;
  import trng_pkg::*;

  localparam int unsigned FBW = 20_000, TOLV = 100;
  localparam int unsigned N_RAW = 400_000, BIN = 10_000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0;
  wmode_e mode = WM_FIXED;
  logic xor_en = 1'b0;
  logic [23:0] target_ones = 24'(FBW / 2);
  logic [DAC_W-1:0] code_r = 12'd3000, code_v = 12'd400, init_code_w = 12'd815;
  logic load_w = 1'b0;
  logic [3:0] sw_en;
  logic comp_in;
  logic scl_oe, sda_oe, scl_i, sda_i;
  logic rnd_bit, rnd_valid;
  phase_e phase;
  logic raw_valid, verify_fail, fb_step_up, fb_step_dn;
  logic [DAC_W-1:0] write_code;
  logic [23:0] win_ones;
  logic win_valid, dac_in_sync, dac_upd_done;
  logic [15:0] dac_nack_cnt;
  logic [1:0] dac_upd_ch;

  logic sda_pull;
  logic [11:0] dcode [8];
  logic [7:0] last_cmd, last_msb, last_lsb;
  int n_writes, n_nacked;
  logic mtj_state, restart = 1'b0;
  real vhalf;

  assign scl_i = ~scl_oe;
  assign sda_i = ~(sda_oe | sda_pull);

  mtj_trng_top #(.FB_WINDOW(FBW), .TOL(TOLV)) dut (.*);

  dac7578_model #(.ADDR(7'h48)) u_dac (
    .scl(scl_i), .sda(sda_i), .force_nack(1'b0), .sda_pull, .code(dcode),
    .last_cmd, .last_msb, .last_lsb, .n_writes, .n_nacked
  );

  mtj_frontend_model #(.DRIFT_MV(8.0 / N_RAW), .CORR(0.01)) u_mtj (
    .clk, .restart, .sw_en, .code_r(dcode[0]), .code_w(dcode[4]), .comp(comp_in),
    .state(mtj_state), .vhalf_mv(vhalf)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // collection
  int n_raw = 0, n_out = 0, bin_ones = 0, bin_n = 0;
  int n_steps = 0;
  real bin_means[$];
  logic collecting = 1'b0;

  always @(posedge clk) if (rst_n && collecting) begin
    if (raw_valid) n_raw++;
    if (fb_step_up || fb_step_dn) n_steps++;
    if (rnd_valid) begin
      n_out++;
      bin_ones += int'(rnd_bit);
      bin_n++;
      if (bin_n == BIN) begin
        bin_means.push_back(100.0 * real'(bin_ones) / real'(BIN));
        bin_ones = 0;
        bin_n = 0;
      end
    end
  end

  function automatic int half_out(input int n);
    return (n / 8192) * 4096 + ((n % 8192) > 4096 ? (n % 8192) - 4096 : 0);
  endfunction

  real mean_all[4], mean_last[4], var_all[4];
  int  outs[4];

  task automatic one_run(input int idx, input wmode_e m, input logic x);
    real s, sl, v;
    int nl;
    rst_n = 1'b0;
    run = 1'b0;
    restart = 1'b1;
    repeat (3) @(posedge clk);
    restart = 1'b0;
    rst_n = 1'b1;
    init_code_w <= 12'd815;
    load_w <= 1'b1;
    @(posedge clk);
    load_w <= 1'b0;
    repeat (5) @(posedge clk);
    while (!dac_in_sync) @(posedge clk);
    mode = m;
    xor_en = x;
    repeat (3) @(posedge clk);
    n_raw = 0; n_out = 0; bin_ones = 0; bin_n = 0; n_steps = 0;
    bin_means.delete();
    collecting = 1'b1;
    run = 1'b1;
    while (n_raw < N_RAW) @(posedge clk);
    run = 1'b0;
    repeat (30) @(posedge clk);
    collecting = 1'b0;
    s = 0.0; sl = 0.0; nl = 0;
    foreach (bin_means[i]) begin
      s += bin_means[i];
      if (i >= bin_means.size() * 3 / 4) begin sl += bin_means[i]; nl++; end
    end
    mean_all[idx]  = s / bin_means.size();
    mean_last[idx] = sl / nl;
    v = 0.0;
    foreach (bin_means[i]) v += (bin_means[i] - mean_all[idx]) ** 2;
    var_all[idx] = v / bin_means.size();
    outs[idx] = n_out;
    $display("run %s: raw=%0d out=%0d bin_means=%0d mean=%6.3f%% last-quarter=%6.3f%% var=%7.4f %%^2 steps=%0d final code=%0d (50%% point now %0d)",
             idx == 0 ? "a (no feedback, no XOR)" : idx == 1 ? "b (feedback, no XOR)   " :
             idx == 2 ? "c (no feedback, XOR)   " : "d (feedback, XOR)      ",
             n_raw, n_out, bin_means.size(), mean_all[idx], mean_last[idx], var_all[idx], n_steps,
             write_code, int'(vhalf / (1800.0 / 4096.0)));
  endtask

  initial begin
    one_run(0, WM_FIXED, 1'b0);
    one_run(1, WM_FEEDBACK, 1'b0);
    one_run(2, WM_FIXED, 1'b1);
    one_run(3, WM_FEEDBACK, 1'b1);
    check(mean_last[0] < 47.0, "a: drift not visible");
    check(mean_last[1] > 48.0 && mean_last[1] < 52.0, "b: feedback did not hold 50 %");
    check(mean_all[2] < 50.0, "c: XOR mean not below 50 %");
    check((50.0 - mean_last[2]) < (50.0 - mean_last[0]) / 2.0, "c: XOR did not shrink the bias");
    // whole 8192-bit block pairs give 4096 bits each, a partial pair gives
    // what lies beyond its first 4096 bits
    check(outs[2] == half_out(outs[0]) && outs[3] == half_out(outs[1]), "XOR runs not at half rate");
    check(mean_all[3] > 49.5 && mean_all[3] < 50.5, "d: mean off 50 %");
    check(mean_last[3] > 49.5 && mean_last[3] < 50.5, "d: last quarter off 50 %");
    check(var_all[3] < var_all[0] && var_all[3] < var_all[2], "d: variance not below the runs without feedback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
