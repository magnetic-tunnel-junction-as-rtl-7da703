// debias_feedback: keeps the MTJ switching probability at a target by
// stepping the write-pulse DAC code.
//
// The raw bits (1 = the write pulse switched the junction) are counted
// over a window of trials. At the end of a window the count of ones is
// compared with target_ones. If it is more than TOL below the target the
// write code goes up by one DAC LSB (about 0.44 mV, a stronger write pulse
// and a higher switching probability); if it is more than TOL above, it
// goes down by one LSB; inside the dead band the code is kept. The paper
// uses a window of 10^6 bits, a +-0.5 % dead band (5000 of 10^6) and a 50 %
// target, and steps by one DAC step in each direction; these are the
// defaults. The code saturates at 0 and 2^12-1.
//
// Modes (wmode_e): WM_FIXED holds the code (feedback off) but still
// reports window counts; WM_FEEDBACK is the loop above; WM_SWEEP is the
// calibration of the switching curve: the code goes up by one LSB after
// every SWEEP_WINDOW trials (10^7 in the paper) and each window's count is
// reported. Reporting in fixed mode and the saturating code are this
// design's choices.
//
// Interface: bit_i is taken when bit_valid is high. load copies init_code
// into the write code and restarts the window; a change of mode also
// restarts it. win_valid pulses for one clock with win_ones, the count of
// the window just finished, one clock after its last bit; the new
// write_code appears in the same clock, and step_up/step_dn mark a step.
module debias_feedback
  import trng_pkg::*;
#(
  parameter int unsigned WIN_W        = 24,
  parameter int unsigned FB_WINDOW    = 1_000_000,
  parameter int unsigned SWEEP_WINDOW = 10_000_000,
  parameter int unsigned TOL          = 5_000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  wmode_e           mode,
  input  logic             load,
  input  logic [DAC_W-1:0] init_code,
  input  logic [WIN_W-1:0] target_ones,
  input  logic             bit_i,
  input  logic             bit_valid,
  output logic [DAC_W-1:0] write_code,
  output logic [WIN_W-1:0] win_ones,
  output logic             win_valid,
  output logic             step_up,
  output logic             step_dn
);

  initial begin
    assert (FB_WINDOW >= 1 && FB_WINDOW < (1 << WIN_W)) else $error("FB_WINDOW does not fit WIN_W");
    assert (SWEEP_WINDOW >= 1 && SWEEP_WINDOW < (1 << WIN_W)) else $error("SWEEP_WINDOW does not fit WIN_W");
  end

  localparam logic [DAC_W-1:0] CODE_MAX = '1;

  wmode_e          mode_q;
  logic [WIN_W-1:0] n_bits;     // bits counted in this window
  logic [WIN_W-1:0] n_ones;     // ones counted in this window
  logic [WIN_W-1:0] win_len;
  logic             win_end;
  logic [WIN_W-1:0] ones_fin;   // count including the current bit
  logic [WIN_W:0]   lo_sum, hi_sum;
  logic             too_low, too_high;

  assign win_len  = (mode_q == WM_SWEEP) ? WIN_W'(SWEEP_WINDOW) : WIN_W'(FB_WINDOW);
  assign win_end  = bit_valid && (n_bits == win_len - 1'b1);
  assign ones_fin = n_ones + WIN_W'(bit_i);
  // ones + TOL < target  -> probability too low
  // ones > target + TOL  -> probability too high
  assign lo_sum   = {1'b0, ones_fin} + (WIN_W+1)'(TOL);
  assign hi_sum   = {1'b0, target_ones} + (WIN_W+1)'(TOL);
  assign too_low  = lo_sum < {1'b0, target_ones};
  assign too_high = {1'b0, ones_fin} > hi_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q     <= WM_FIXED;
      n_bits     <= '0;
      n_ones     <= '0;
      write_code <= '0;
      win_ones   <= '0;
      win_valid  <= 1'b0;
      step_up    <= 1'b0;
      step_dn    <= 1'b0;
    end else begin
      win_valid <= 1'b0;
      step_up   <= 1'b0;
      step_dn   <= 1'b0;
      mode_q    <= mode;
      if (load || mode != mode_q) begin
        n_bits <= '0;
        n_ones <= '0;
        if (load) write_code <= init_code;
      end else if (win_end) begin
        n_bits    <= '0;
        n_ones    <= '0;
        win_ones  <= ones_fin;
        win_valid <= 1'b1;
        unique case (mode_q)
          WM_FEEDBACK: begin
            if (too_low && write_code != CODE_MAX) begin
              write_code <= write_code + 1'b1;
              step_up    <= 1'b1;
            end else if (too_high && write_code != '0) begin
              write_code <= write_code - 1'b1;
              step_dn    <= 1'b1;
            end
          end
          WM_SWEEP: begin
            if (write_code != CODE_MAX) begin
              write_code <= write_code + 1'b1;
              step_up    <= 1'b1;
            end
          end
          default: ;
        endcase
      end else if (bit_valid) begin
        n_bits <= n_bits + 1'b1;
        n_ones <= ones_fin;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(step_up && step_dn));

endmodule
