// tb_i2c_master: self-checking test of the write-only I2C master against
// a behavioural DAC7578 model.
//
// Random channel writes (address, command, 12-bit code) are sent; the
// model must decode the same bytes and update the addressed channel. Each
// transfer must take exactly 152 quarter periods (plus the registered done) (DIV = 4 here) when the
// slave does not stretch the clock. A wrong address and a forced refusal
// must end in nack with no write; a transfer during which the test holds
// SCL low must still arrive, later by about the time SCL was held.
module tb_i2c_master;
  import trng_pkg::*;

  localparam int unsigned DIV = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  i2c_wr_t wr = '0;
  logic busy, done, nack, scl_oe, sda_oe;
  logic scl_i, sda_i;
  logic sda_pull, force_nack = 1'b0, stretch = 1'b0;
  logic [11:0] code [8];
  logic [7:0] last_cmd, last_msb, last_lsb;
  int n_writes, n_nacked;

  int checks = 0, failures = 0;
  int n_stretch = 0;

  assign scl_i = ~(scl_oe | stretch);
  assign sda_i = ~(sda_oe | sda_pull);

  i2c_master #(.DIV(DIV)) dut (
    .clk, .rst_n, .start, .wr, .busy, .done, .nack,
    .scl_oe, .sda_oe, .scl_i, .sda_i
  );

  dac7578_model #(.ADDR(7'h48)) slave (
    .scl(scl_i), .sda(sda_i), .force_nack, .sda_pull, .code,
    .last_cmd, .last_msb, .last_lsb, .n_writes, .n_nacked
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // Send one transfer; return its length in clocks from start to done.
  task automatic xfer(input i2c_wr_t w, output int cycles, output logic nk, input int hold);
    int c = 0;
    int held = 0;
    wr    <= w;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    do begin
      @(posedge clk);
      c++;
      // hold SCL low for 'hold' clocks once, in the middle of the transfer
      if (hold > 0 && c > 200 && held < hold && (scl_oe || held > 0)) begin
        stretch <= 1'b1;
        held++;
      end else if (held > 0) stretch <= 1'b0;
    end while (!done);
    stretch <= 1'b0;
    cycles = c;
    nk = nack;
    @(posedge clk);
    check(!busy, "busy after done");
  endtask

  initial begin
    int cyc;
    logic nk;
    i2c_wr_t w;
    int nw;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(scl_i && sda_i, "bus not idle after reset");
    for (int k = 0; k < 20; k++) begin
      logic [3:0] ch;
      logic [11:0] c;
      ch = 4'($urandom_range(0, 7));
      c  = 12'($urandom());
      w  = dac7578_write(7'h48, ch, c);
      nw = n_writes;
      xfer(w, cyc, nk, 0);
      check(!nk, "unexpected nack");
      check(n_writes == nw + 1, "write not received");
      check(last_cmd == {4'b0011, ch}, $sformatf("cmd %h", last_cmd));
      check(last_msb == c[11:4] && last_lsb == {c[3:0], 4'b0}, "data bytes");
      check(code[ch[2:0]] == c, $sformatf("ch%0d code %h expected %h", ch, code[ch[2:0]], c));
      // 152 quarters of DIV clocks after start is taken; done is a
      // registered pulse, read here on the clock after it is set
      check(cyc == 152 * DIV + 1, $sformatf("transfer took %0d clocks, expected %0d", cyc, 152 * DIV + 1));
    end
    // wrong address
    nw = n_writes;
    xfer(dac7578_write(7'h4A, 4'd1, 12'h123), cyc, nk, 0);
    check(nk, "wrong address not refused");
    check(n_writes == nw, "write with wrong address");
    check(cyc < 152 * DIV, "refused transfer not cut short");
    // forced refusal
    force_nack = 1'b1;
    xfer(dac7578_write(7'h48, 4'd2, 12'h456), cyc, nk, 0);
    force_nack = 1'b0;
    check(nk, "forced nack not seen");
    check(n_writes == nw, "write despite nack");
    // clock stretching
    xfer(dac7578_write(7'h48, 4'd3, 12'hABC), cyc, nk, 30);
    check(!nk && code[3] == 12'hABC, "stretched transfer lost");
    check(cyc >= 152 * DIV + 20 && cyc <= 152 * DIV + 40, $sformatf("stretched transfer took %0d", cyc));
    check(scl_i && sda_i, "bus not idle at end");
    $display("writes=%0d nacked=%0d", n_writes, n_nacked);
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
