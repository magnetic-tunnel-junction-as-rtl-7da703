// tb_xor_decorrelator: self-checking test of the XOR decorrelator at its
// default separation of 4096 bits.
//
// The test keeps every raw bit it sends since the last restart and
// expects, for raw bit n in the second block of a pair (n mod 8192 >=
// 4096), the output raw[n] ^ raw[n-4096], in order, one clock after that
// raw bit, and nothing for bits of a first block. So the output count is
// exactly half the input count over whole block pairs. It then checks the
// bypass (every bit passed on), and that turning the XOR on again starts a
// fresh first block.
module tb_xor_decorrelator;
  localparam int unsigned SEP = 4096;

  logic clk = 1'b0, rst_n = 1'b0, xor_en = 1'b0;
  logic bit_i = 1'b0, bit_valid = 1'b0;
  logic bit_o, bit_o_valid;

  int checks = 0, failures = 0;
  logic raw[$];
  logic expq[$];
  int n_in = 0, n_out = 0, n_xor_out = 0, n_bypass_out = 0;

  xor_decorrelator dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  always @(posedge clk) if (bit_o_valid) begin
    logic e;
    n_out++;
    if (xor_en) n_xor_out++; else n_bypass_out++;
    e = (expq.size() != 0) ? expq.pop_front() : 1'b0;
    check(expq.size() <= 2, "output late");
    check(bit_o == e, $sformatf("output %0d: %0b expected %0b", n_out, bit_o, e));
  end

  // Send one raw bit; work out what must come out for it.
  task automatic send(input logic b, input int gap);
    if (xor_en) begin
      int n = raw.size();
      raw.push_back(b);
      if ((n % (2 * SEP)) >= SEP) expq.push_back(b ^ raw[n - SEP]);
    end else begin
      expq.push_back(b);
    end
    n_in++;
    bit_i     <= b;
    bit_valid <= 1'b1;
    @(posedge clk);
    if (gap > 0) begin
      bit_valid <= 1'b0;
      repeat (gap) @(posedge clk);
    end
  endtask

  task automatic idle(input int n);
    bit_valid <= 1'b0;
    repeat (n) @(posedge clk);
  endtask

  task automatic set_xor(input logic en);
    bit_valid <= 1'b0;
    xor_en <= en;
    repeat (2) @(posedge clk);
    raw.delete();
  endtask

  initial begin
    int out0;
    idle(3);
    rst_n = 1'b1;
    set_xor(1'b1);
    // three block pairs with biased, correlated bits (runs of equal bits)
    for (int i = 0; i < 6 * SEP; i++) send(($urandom_range(0, 9) < 6) ^ (i[3]), $urandom_range(0, 1));
    idle(3);
    check(n_xor_out == 3 * SEP, $sformatf("XOR outputs %0d expected %0d (half of %0d)", n_xor_out, 3 * SEP, 6 * SEP));
    // half a block, then bypass
    for (int i = 0; i < SEP + SEP / 2; i++) send(1'($urandom()), 0);
    set_xor(1'b0);
    out0 = n_out;
    for (int i = 0; i < 1000; i++) send(1'($urandom()), $urandom_range(0, 1));
    idle(3);
    check(n_out - out0 == 1000, "bypass must pass every bit");
    // back on: fresh first block, no output for SEP bits
    set_xor(1'b1);
    out0 = n_out;
    for (int i = 0; i < SEP; i++) send(1'($urandom()), 0);
    idle(3);
    check(n_out == out0, "output during a first block");
    for (int i = 0; i < SEP; i++) send(1'($urandom()), 0);
    idle(3);
    check(n_out - out0 == SEP, "second block count");
    check(expq.size() == 0, "outputs missing");
    $display("in=%0d out=%0d xor_out=%0d bypass_out=%0d", n_in, n_out, n_xor_out, n_bypass_out);
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
