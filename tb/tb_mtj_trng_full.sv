// tb_mtj_trng_full: the generator at its default sizes through two whole
// feedback windows (2 x 10^6 trials, 4 x 10^7 clocks) with the XOR on.
//
// Behavioural models stand in for the DAC7578 and for the junction with
// its amplifier. The write code starts 20 LSB (about 8.8 mV) below the
// 50 % point, so the first window must count well under 500000 - 5000
// ones and step the code up by one; the new code must reach the DAC over
// I2C. The test counts the raw ones of each window itself and compares
// them with the reported count, checks one raw bit per 20 clocks, and
// checks that the XOR output, raw[n] ^ raw[n-4096] over second blocks,
// comes at exactly half the raw rate.
module tb_mtj_trng_full;
  import trng_pkg::*;

  localparam int unsigned FBW = 1_000_000, SEP = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run = 1'b0;
  wmode_e mode = WM_FIXED;
  logic xor_en = 1'b0;
  logic [23:0] target_ones = 24'd500_000;
  logic [DAC_W-1:0] code_r = 12'd3000, code_v = 12'd400, init_code_w = 12'd795;
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
  logic mtj_state;
  real vhalf;

  assign scl_i = ~scl_oe;
  assign sda_i = ~(sda_oe | sda_pull);

  mtj_trng_top dut (.*);

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

  int n_raw = 0, n_rnd = 0, n_win = 0, n_up = 0, n_bad_bits = 0;
  int cyc = 0, last_raw = -1, n_period_bad = 0;
  int ones_cnt = 0, win_exp[$];
  logic hist [2 * SEP];
  logic rnd_exp[$];

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (fb_step_up) n_up++;
    if (raw_valid) begin
      int n;
      n = n_raw % (2 * SEP);
      hist[n] = dut.raw_bit;
      if (n >= SEP) rnd_exp.push_back(dut.raw_bit ^ hist[n - SEP]);
      n_raw++;
      ones_cnt += int'(dut.raw_bit);
      if (n_raw % FBW == 0) begin
        win_exp.push_back(ones_cnt);
        ones_cnt = 0;
      end
      if (last_raw >= 0 && cyc - last_raw != 20) n_period_bad++;
      last_raw = cyc;
    end
    if (rnd_valid) begin
      logic e;
      n_rnd++;
      e = (rnd_exp.size() != 0) ? rnd_exp.pop_front() : 1'b0;
      if (rnd_bit != e) n_bad_bits++;
    end
    if (win_valid) begin
      int e;
      n_win++;
      e = (win_exp.size() != 0) ? win_exp.pop_front() : -1;
      check(int'(win_ones) == e, $sformatf("window %0d: %0d ones reported, %0d counted", n_win, win_ones, e));
      $display("window %0d: ones=%0d code=%0d", n_win, win_ones, write_code);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    init_code_w <= 12'd795;
    load_w <= 1'b1;
    @(posedge clk);
    load_w <= 1'b0;
    repeat (5) @(posedge clk);
    while (!dac_in_sync) @(posedge clk);
    check(dcode[4] == 12'd795 && dcode[0] == 12'd3000, "DAC after reset");
    mode   = WM_FEEDBACK;
    xor_en = 1'b1;
    repeat (3) @(posedge clk);
    run = 1'b1;
    @(posedge clk iff win_valid);
    @(posedge clk);
    check(write_code == 12'd796, $sformatf("code %0d after first window, expected 796", write_code));
    repeat (5) @(posedge clk);
    while (!dac_in_sync) @(posedge clk);
    check(dcode[4] == 12'd796, "stepped code not on the DAC");
    @(posedge clk iff win_valid);
    repeat (3) @(posedge clk);
    run = 1'b0;
    repeat (60) @(posedge clk);
    check(n_raw >= 2 * FBW, $sformatf("raw bits %0d", n_raw));
    check(n_rnd == (n_raw / (2 * SEP)) * SEP + ((n_raw % (2 * SEP)) > SEP ? (n_raw % (2 * SEP)) - SEP : 0),
          $sformatf("XOR output count %0d for %0d raw bits", n_rnd, n_raw));
    check(n_bad_bits == 0, $sformatf("%0d XOR output bits wrong", n_bad_bits));
    check(n_period_bad == 0, "raw bit period not 20 clocks");
    check(n_up >= 1, "no feedback step");
    $display("raw=%0d rnd=%0d windows=%0d code=%0d dac_writes=%0d", n_raw, n_rnd, n_win, write_code, n_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (45_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
