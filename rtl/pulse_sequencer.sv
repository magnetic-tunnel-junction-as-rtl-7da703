// pulse_sequencer: one MTJ trial per TRIAL_CYC clocks, one raw bit out.
//
// Each trial gates four DAC channels onto the junction in turn through
// their analog switches: a large reset pulse R sets the junction to the
// antiparallel (AP) state, a small verify pulse V reads it back, a write
// pulse W of opposite polarity switches it with a probability set by the
// write amplitude, and a measure pulse M (same channel level as V) reads
// the result. The amplified, thresholded junction signal arrives on
// comp_in; it is brought into the clock domain by two flip-flops and
// sampled on the last clock of V and of M. comp_in = 1 means the junction
// is in the low-resistance parallel (P) state, i.e. the write switched it,
// so the raw bit is 1 for "switched".
//
// Interface: sw_en[CH_R..CH_M] are the switch enables (one-hot during a
// pulse, all low in IDLE). bit_valid pulses for one clock at the end of M
// with bit_o; verify_fail is set with it when V did not read AP. The bit is
// still delivered: every trial is one bit, which is what gives the rate.
// run = 0 finishes nothing new: the sequencer stays in IDLE.
//
// Timing: TRIAL_CYC = R_CYC+V_CYC+W_CYC+M_CYC+IDLE_CYC clocks per bit. The
// paper gives the order of the pulses and a repetition rate of about
// 10.6 MHz; the phase lengths and the 212 MHz clock that turns the default
// 20 clocks into 10.6 MHz are this design's choice.
module pulse_sequencer
  import trng_pkg::*;
#(
  parameter int unsigned R_CYC    = 6,
  parameter int unsigned V_CYC    = 4,
  parameter int unsigned W_CYC    = 4,
  parameter int unsigned M_CYC    = 4,
  parameter int unsigned IDLE_CYC = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run,
  input  logic                  comp_in,      // asynchronous comparator output
  output logic [N_PULSE_CH-1:0] sw_en,        // analog switch enables
  output phase_e                phase,
  output logic                  bit_o,
  output logic                  bit_valid,
  output logic                  verify_fail
);

  localparam int unsigned MAXC = (R_CYC > 8) ? R_CYC : 8;
  localparam int unsigned CW   = $clog2(MAXC + 1);

  // The synchroniser delays comp_in by two clocks, so a read pulse must be
  // at least three clocks long for the sample to see its own pulse.
  initial begin
    assert (V_CYC >= 3 && M_CYC >= 3) else $error("V_CYC and M_CYC must be >= 3");
    assert (R_CYC >= 1 && W_CYC >= 1 && IDLE_CYC >= 1) else $error("phase lengths must be >= 1");
    assert (V_CYC <= MAXC && W_CYC <= MAXC && M_CYC <= MAXC && IDLE_CYC <= MAXC)
      else $error("phase longer than the counter");
  end

  logic [1:0]    sync;
  logic          comp_s;
  logic [CW-1:0] cnt;
  logic [CW-1:0] len;
  logic          last;
  logic          ver_ap;   // verify read of the current trial

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[0], comp_in};
  end
  assign comp_s = sync[1];

  always_comb begin
    unique case (phase)
      PH_RESET:   len = CW'(R_CYC);
      PH_VERIFY:  len = CW'(V_CYC);
      PH_WRITE:   len = CW'(W_CYC);
      PH_MEASURE: len = CW'(M_CYC);
      default:    len = CW'(IDLE_CYC);
    endcase
  end
  assign last = (cnt == len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= PH_IDLE;
      cnt         <= '0;
      ver_ap      <= 1'b0;
      bit_o       <= 1'b0;
      bit_valid   <= 1'b0;
      verify_fail <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      if (last) begin
        cnt <= '0;
        unique case (phase)
          PH_RESET:   phase <= PH_VERIFY;
          PH_VERIFY:  begin phase <= PH_WRITE; ver_ap <= ~comp_s; end
          PH_WRITE:   phase <= PH_MEASURE;
          PH_MEASURE: begin
            phase       <= PH_IDLE;
            bit_o       <= comp_s;
            bit_valid   <= 1'b1;
            verify_fail <= ~ver_ap;
          end
          default:    if (run) phase <= PH_RESET;
        endcase
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  always_comb begin
    sw_en = '0;
    unique case (phase)
      PH_RESET:   sw_en[CH_R] = 1'b1;
      PH_VERIFY:  sw_en[CH_V] = 1'b1;
      PH_WRITE:   sw_en[CH_W] = 1'b1;
      PH_MEASURE: sw_en[CH_M] = 1'b1;
      default:    sw_en = '0;
    endcase
  end

  // Exactly one switch closes during a pulse, none at rest.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(sw_en));

endmodule
