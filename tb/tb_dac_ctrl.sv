// tb_dac_ctrl: self-checking test of the DAC channel updater, with the
// I2C master (DIV = 4) and a behavioural DAC7578 on the bus.
//
// After reset all four pulse channels (R, V, W, M on DAC channels 0, 1, 4,
// 2) must be written once, in channel-index order, and in_sync must rise.
// Then single and double code changes must each cost exactly one write
// per changed channel, and a write refused by the DAC must be counted and
// retried until it goes through.
module tb_dac_ctrl;
  import trng_pkg::*;

  localparam int unsigned DIV = 4;
  localparam int MAP [N_PULSE_CH] = '{0, 1, 4, 2};

  logic clk = 1'b0, rst_n = 1'b0;
  logic [DAC_W-1:0] code [N_PULSE_CH];
  logic i2c_start, i2c_busy, i2c_done, i2c_nack;
  i2c_wr_t i2c_wr;
  logic in_sync, upd_done;
  logic [1:0] upd_ch;
  logic [15:0] nack_cnt;
  logic scl_oe, sda_oe, scl_i, sda_i, sda_pull, force_nack = 1'b0;
  logic [11:0] dcode [8];
  logic [7:0] last_cmd, last_msb, last_lsb;
  int n_writes, n_nacked;

  int checks = 0, failures = 0;
  int upd_order[$];

  assign scl_i = ~scl_oe;
  assign sda_i = ~(sda_oe | sda_pull);

  dac_ctrl dut (
    .clk, .rst_n, .code, .i2c_start, .i2c_wr, .i2c_busy, .i2c_done, .i2c_nack,
    .in_sync, .upd_done, .upd_ch, .nack_cnt
  );
  i2c_master #(.DIV(DIV)) u_i2c (
    .clk, .rst_n, .start(i2c_start), .wr(i2c_wr), .busy(i2c_busy), .done(i2c_done),
    .nack(i2c_nack), .scl_oe, .sda_oe, .scl_i, .sda_i
  );
  dac7578_model #(.ADDR(7'h48)) u_dac (
    .scl(scl_i), .sda(sda_i), .force_nack, .sda_pull, .code(dcode),
    .last_cmd, .last_msb, .last_lsb, .n_writes, .n_nacked
  );

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && upd_done) upd_order.push_back(int'(upd_ch));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  task automatic wait_sync();
    int t = 0;
    repeat (3) @(posedge clk);
    while (!in_sync && t < 20000) begin @(posedge clk); t++; end
    check(in_sync, "in_sync never rose");
    repeat (2) @(posedge clk);
  endtask

  task automatic check_dac(input string what);
    for (int i = 0; i < N_PULSE_CH; i++)
      check(dcode[MAP[i]] == code[i], $sformatf("%s: DAC ch%0d = %h, expected %h", what, MAP[i], dcode[MAP[i]], code[i]));
  endtask

  initial begin
    int nw;
    code[CH_R] = 12'd3000;
    code[CH_V] = 12'd400;
    code[CH_W] = 12'd815;
    code[CH_M] = 12'd400;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait_sync();
    check(n_writes == 4, $sformatf("%0d writes after reset, expected 4", n_writes));
    check(upd_order.size() == 4 && upd_order[0] == 0 && upd_order[1] == 1 &&
          upd_order[2] == 2 && upd_order[3] == 3, "reset write order");
    check_dac("after reset");
    // one feedback step on W
    nw = n_writes;
    upd_order.delete();
    code[CH_W] = code[CH_W] + 1'b1;
    wait_sync();
    check(n_writes == nw + 1 && upd_order.size() == 1 && upd_order[0] == CH_W, "single W update");
    check_dac("after W step");
    // two channels at once
    nw = n_writes;
    code[CH_V] = 12'd410;
    code[CH_M] = 12'd410;
    wait_sync();
    check(n_writes == nw + 2, "double update");
    check_dac("after V/M change");
    // refused write: retried
    force_nack = 1'b1;
    code[CH_W] = code[CH_W] - 1'b1;
    repeat (3 * 160 * DIV) @(posedge clk);
    check(nack_cnt >= 2, $sformatf("nack_cnt %0d", nack_cnt));
    check(!in_sync, "in_sync while the DAC refuses");
    force_nack = 1'b0;
    wait_sync();
    check_dac("after retry");
    $display("writes=%0d nacks=%0d", n_writes, nack_cnt);
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
