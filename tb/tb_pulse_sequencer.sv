// tb_pulse_sequencer: self-checking test of the trial state machine.
//
// A small junction model answers the switch enables: the reset pulse sets
// it to AP (comparator 0) unless the test skips a reset on purpose, the
// write pulse sets it to a bit the test chose at random, and the
// comparator shows the junction state. The test checks every delivered
// bit and verify flag against that model, the length of each pulse, the
// pulse order, one bit per 20 clocks (10.6 MHz at 212 MHz) and that
// run = 0 stops the trials.
module tb_pulse_sequencer;
  import trng_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, comp_in;
  logic [N_PULSE_CH-1:0] sw_en, sw_q;
  phase_e phase;
  logic bit_o, bit_valid, verify_fail;

  int checks = 0, failures = 0;
  int cyc = 0;

  pulse_sequencer dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  // junction model
  logic mtj = 1'b0;
  logic skip_reset = 1'b0;
  logic planned = 1'b0;
  logic exp_bits[$];
  logic exp_vf[$];
  logic ver_seen;
  assign comp_in = mtj;

  int len [N_PULSE_CH];
  int last_valid = -1;
  int n_bits = 0, n_vf = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    sw_q <= sw_en;
    if (rst_n) begin
      // rising edges of each switch
      if (sw_en[CH_R] && !sw_q[CH_R]) begin
        skip_reset = ($urandom_range(0, 7) == 0);
        if (!skip_reset) mtj <= 1'b0;
      end
      if (sw_en[CH_W] && !sw_q[CH_W]) begin
        planned = 1'($urandom());
        mtj <= planned;
        exp_bits.push_back(planned);
      end
      // verify level seen by the FPGA: sampled in the middle of V
      if (sw_en[CH_V] && !sw_q[CH_V]) ver_seen = 1'b1;
      if (sw_en[CH_V] && len[CH_V] == 1) exp_vf.push_back(mtj);
      // pulse lengths
      for (int i = 0; i < N_PULSE_CH; i++) begin
        if (sw_en[i]) len[i] = (sw_q[i] ? len[i] : 0) + 1;
        if (!sw_en[i] && sw_q[i]) begin
          case (i)
            CH_R: check(len[i] == 6, $sformatf("R length %0d", len[i]));
            CH_V: check(len[i] == 4, $sformatf("V length %0d", len[i]));
            CH_W: check(len[i] == 4, $sformatf("W length %0d", len[i]));
            default: check(len[i] == 4, $sformatf("M length %0d", len[i]));
          endcase
        end
      end
      // order: a switch closes only right after its predecessor opens
      if (sw_en[CH_V] && !sw_q[CH_V]) check(sw_q[CH_R], "V not after R");
      if (sw_en[CH_W] && !sw_q[CH_W]) check(sw_q[CH_V], "W not after V");
      if (sw_en[CH_M] && !sw_q[CH_M]) check(sw_q[CH_W], "M not after W");
      if (bit_valid) begin
        logic eb, ev;
        n_bits++;
        eb = (exp_bits.size() != 0) ? exp_bits.pop_front() : 1'b0;
        ev = (exp_vf.size() != 0) ? exp_vf.pop_front() : 1'b0;
        check(bit_o == eb, $sformatf("bit %0b expected %0b", bit_o, eb));
        check(verify_fail == ev, $sformatf("verify_fail %0b expected %0b", verify_fail, ev));
        if (verify_fail) n_vf++;
        if (last_valid >= 0) check(cyc - last_valid == 20, $sformatf("bit period %0d", cyc - last_valid));
        last_valid = cyc;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run = 1'b1;
    repeat (20 * 400) @(posedge clk);
    run = 1'b0;
    repeat (40) @(posedge clk);
    begin
      int nb;
      nb = n_bits;
      repeat (200) @(posedge clk) check(sw_en == '0, "switch closed with run = 0");
      check(n_bits == nb, "bits delivered with run = 0");
    end
    check(n_bits >= 395, $sformatf("only %0d bits", n_bits));
    check(n_vf > 0, "no verify failure exercised");
    check(exp_bits.size() == 0, "bits lost");
    $display("bits=%0d verify_failures=%0d", n_bits, n_vf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
