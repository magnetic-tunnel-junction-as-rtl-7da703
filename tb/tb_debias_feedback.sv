// tb_debias_feedback: self-checking test of the window counter and the
// write-code stepping.
//
// Short windows (100 bits feedback, 50 bits sweep, dead band 5) keep the
// run short; the rule is the same as at 10^6 / 10^7 / 5000. Bits are drawn
// with a chosen probability of ones; the test counts them itself and
// works out the expected code after each window: +1 if ones + TOL <
// target, -1 if ones > target + TOL, else unchanged, saturating at 0 and
// 4095. It covers the fixed mode, feedback steps up and down, the dead
// band, the sweep, load, saturation at both ends and the window restart
// on a mode change.
module tb_debias_feedback;
  import trng_pkg::*;

  localparam int unsigned WIN_W = 24;
  localparam int unsigned FBW = 100, SWW = 50, TOLV = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  wmode_e mode = WM_FIXED;
  logic load = 1'b0;
  logic [DAC_W-1:0] init_code = '0;
  logic [WIN_W-1:0] target_ones = 24'd50;
  logic bit_i = 1'b0, bit_valid = 1'b0;
  logic [DAC_W-1:0] write_code;
  logic [WIN_W-1:0] win_ones;
  logic win_valid, step_up, step_dn;

  int checks = 0, failures = 0;
  int n_win = 0, n_up = 0, n_dn = 0, n_hold = 0;
  logic [WIN_W-1:0] got_ones;

  debias_feedback #(.WIN_W(WIN_W), .FB_WINDOW(FBW), .SWEEP_WINDOW(SWW), .TOL(TOLV)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  always @(posedge clk) if (win_valid) begin
    n_win++;
    got_ones = win_ones;
  end

  int ref_code;

  // One window of n bits, each a one with probability pct/100.
  task automatic window(input int n, input int pct, input wmode_e m);
    int ones = 0;
    int before_win = n_win;
    int gap;
    for (int i = 0; i < n; i++) begin
      bit_i     <= ($urandom_range(0, 99) < pct);
      bit_valid <= 1'b1;
      @(posedge clk);
      if (bit_i) ones++;
      gap = $urandom_range(0, 2);
      if (gap > 0) begin
        bit_valid <= 1'b0;
        repeat (gap) @(posedge clk);
      end
    end
    bit_valid <= 1'b0;
    @(posedge clk);
    @(posedge clk);
    check(n_win == before_win + 1, $sformatf("window end not reported (%0d)", n_win - before_win));
    check(got_ones == WIN_W'(ones), $sformatf("window ones %0d expected %0d", got_ones, ones));
    case (m)
      WM_FEEDBACK: begin
        if (ones + TOLV < int'(target_ones)) begin
          if (ref_code < 4095) ref_code++;
          n_up++;
        end else if (ones > int'(target_ones) + TOLV) begin
          if (ref_code > 0) ref_code--;
          n_dn++;
        end else n_hold++;
      end
      WM_SWEEP: if (ref_code < 4095) ref_code++;
      default: ;
    endcase
    check(write_code == DAC_W'(ref_code), $sformatf("code %0d expected %0d", write_code, ref_code));
  endtask

  task automatic do_load(input int c);
    init_code <= DAC_W'(c);
    load <= 1'b1;
    @(posedge clk);
    load <= 1'b0;
    @(posedge clk);
    ref_code = c;
    check(write_code == DAC_W'(c), "load");
  endtask

  task automatic set_mode(input wmode_e m);
    mode <= m;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    do_load(2000);
    // fixed: code held whatever the bits
    repeat (3) window(FBW, 10, WM_FIXED);
    // feedback: too few ones -> up, too many -> down, balanced -> mostly hold
    set_mode(WM_FEEDBACK);
    repeat (4) window(FBW, 20, WM_FEEDBACK);
    repeat (4) window(FBW, 80, WM_FEEDBACK);
    repeat (6) window(FBW, 50, WM_FEEDBACK);
    // exact dead-band edges via a deterministic pattern
    for (int k = 0; k < 4; k++) begin
      int ones_w;
      ones_w = 50 - 6 + 2 * k;   // 44 (step), 46 (hold), 48, 50
      for (int i = 0; i < FBW; i++) begin
        bit_i <= (i < ones_w); bit_valid <= 1'b1; @(posedge clk);
      end
      bit_valid <= 1'b0;
      @(posedge clk); @(posedge clk);
      check(got_ones == WIN_W'(ones_w), "edge window count");
      if (ones_w + TOLV < 50) begin ref_code++; n_up++; end else n_hold++;
      check(write_code == DAC_W'(ref_code), $sformatf("edge ones=%0d code %0d expected %0d", ones_w, write_code, ref_code));
    end
    // saturation at the top and bottom
    do_load(4095);
    repeat (2) window(FBW, 0, WM_FEEDBACK);
    do_load(0);
    repeat (2) window(FBW, 100, WM_FEEDBACK);
    // a mode change mid-window restarts the window
    do_load(100);
    for (int i = 0; i < 30; i++) begin
      bit_i <= 1'b1; bit_valid <= 1'b1; @(posedge clk);
    end
    bit_valid <= 1'b0;
    // sweep: +1 per SWEEP window
    set_mode(WM_SWEEP);
    repeat (5) window(SWW, 50, WM_SWEEP);
    do_load(4094);
    repeat (3) window(SWW, 50, WM_SWEEP);
    check(n_up > 0 && n_dn > 0 && n_hold > 0, "not all feedback outcomes exercised");
    $display("windows=%0d up=%0d down=%0d hold=%0d", n_win, n_up, n_dn, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
