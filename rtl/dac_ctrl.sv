// dac_ctrl: keeps the four pulse-channel DAC codes in step with the DACs.
//
// The pulse amplitudes of reset (R), verify (V), write (W) and measure (M)
// are the output voltages of four DAC7578 channels, each gated onto the
// junction by its own analog switch. This block holds, per channel, the
// code last written to the DAC. A channel is pending after reset and
// whenever its requested code differs from the written one; the lowest
// pending channel is written next through the I2C master, one
// "write and update" command per channel. A write that is not
// acknowledged leaves the channel pending, so it is retried, and is
// counted in nack_cnt.
//
// Interface: code[i] is the requested code of channel i (index CH_R, CH_V,
// CH_W, CH_M of trng_pkg). i2c_* connect to i2c_master. in_sync is high
// when every channel holds its requested code; upd_done pulses with upd_ch
// when a channel write completed. A code change reaches the DAC one I2C
// transfer (152 quarter periods) after the channel is picked.
//
// The paper places the pulse channels on DAC7578 parts, four of eight
// channels used, the write pulse on one of the four inverted channels, and
// the measure pulse at the verify level. The channel map (R=0, V=1, M=2,
// W=4, all on the DAC at address 0x48) and the retry policy are this
// design's choices.
module dac_ctrl
  import trng_pkg::*;
#(
  parameter logic [6:0] DAC_ADDR [N_PULSE_CH] = '{7'h48, 7'h48, 7'h48, 7'h48},
  parameter logic [3:0] DAC_CH   [N_PULSE_CH] = '{4'd0, 4'd1, 4'd4, 4'd2}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [DAC_W-1:0] code [N_PULSE_CH],
  // to i2c_master
  output logic             i2c_start,
  output i2c_wr_t          i2c_wr,
  input  logic             i2c_busy,
  input  logic             i2c_done,
  input  logic             i2c_nack,
  // status
  output logic             in_sync,
  output logic             upd_done,
  output logic [1:0]       upd_ch,
  output logic [15:0]      nack_cnt
);

  logic [DAC_W-1:0]      written [N_PULSE_CH];
  logic [N_PULSE_CH-1:0] first;     // not yet written since reset
  logic [N_PULSE_CH-1:0] pend;
  logic                  active;    // a transfer is in flight
  logic [1:0]            sel;
  logic [1:0]            cur;
  logic [DAC_W-1:0]      cur_code;
  logic                  any_pend;

  always_comb begin
    for (int i = 0; i < N_PULSE_CH; i++)
      pend[i] = first[i] || (code[i] != written[i]);
    any_pend = |pend;
    sel = '0;
    for (int i = N_PULSE_CH - 1; i >= 0; i--)
      if (pend[i]) sel = 2'(i);
  end

  assign in_sync = !any_pend && !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_PULSE_CH; i++) written[i] <= '0;
      first     <= '1;
      active    <= 1'b0;
      cur       <= '0;
      cur_code  <= '0;
      i2c_start <= 1'b0;
      i2c_wr    <= '0;
      upd_done  <= 1'b0;
      upd_ch    <= '0;
      nack_cnt  <= '0;
    end else begin
      i2c_start <= 1'b0;
      upd_done  <= 1'b0;
      if (!active) begin
        if (any_pend && !i2c_busy) begin
          active    <= 1'b1;
          cur       <= sel;
          cur_code  <= code[sel];
          i2c_wr    <= dac7578_write(DAC_ADDR[sel], DAC_CH[sel], code[sel]);
          i2c_start <= 1'b1;
        end
      end else if (i2c_done) begin
        active <= 1'b0;
        if (i2c_nack) begin
          if (nack_cnt != '1) nack_cnt <= nack_cnt + 1'b1;
        end else begin
          written[cur] <= cur_code;
          first[cur]   <= 1'b0;
          upd_done     <= 1'b1;
          upd_ch       <= cur;
        end
      end
    end
  end

endmodule
