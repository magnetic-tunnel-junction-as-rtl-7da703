// dac7578_model: behavioural model (not synthesizable) of the I2C side of
// a DAC7578 8-channel 12-bit DAC, for simulation only.
//
// It watches the open-drain lines scl and sda, recognises START and STOP,
// takes the address byte and acknowledges it when the address is ADDR
// with the write bit (and force_nack is low), then acknowledges three more
// bytes: command/access byte, data MSB, data LSB. A command 4'b0011 ("write
// and update channel n") sets code[n] to {MSB, LSB[7:4]}. sda_pull = 1
// pulls SDA low for an acknowledge. last_* hold the bytes of the last
// complete write; n_writes counts them; n_nacked counts refused addresses.
module dac7578_model #(
  parameter logic [6:0] ADDR = 7'h48
) (
  input  logic        scl,
  input  logic        sda,
  input  logic        force_nack,
  output logic        sda_pull,
  output logic [11:0] code [8],
  output logic [7:0]  last_cmd,
  output logic [7:0]  last_msb,
  output logic [7:0]  last_lsb,
  output int          n_writes,
  output int          n_nacked
);
  logic       active = 1'b0, addressed = 1'b0, ack_phase = 1'b0;
  int         bit_cnt = 0, byte_cnt = 0;
  logic [7:0] sh = '0;
  logic [7:0] b_cmd = '0, b_msb = '0;

  initial begin
    sda_pull = 1'b0;
    n_writes = 0;
    n_nacked = 0;
    last_cmd = '0;
    last_msb = '0;
    last_lsb = '0;
    for (int i = 0; i < 8; i++) code[i] = '0;
  end

  always @(negedge sda) if (scl) begin   // START or repeated START
    active   = 1'b1;
    bit_cnt  = 0;
    byte_cnt = 0;
    ack_phase = 1'b0;
    addressed = 1'b0;
  end

  always @(posedge sda) if (scl) begin   // STOP
    active   = 1'b0;
    sda_pull = 1'b0;
  end

  always @(posedge scl) if (active && bit_cnt < 8 && !ack_phase) begin
    sh = {sh[6:0], sda};
    bit_cnt++;
  end

  always @(negedge scl) if (active) begin
    if (ack_phase) begin
      sda_pull  = 1'b0;
      ack_phase = 1'b0;
      bit_cnt   = 0;
      byte_cnt++;
    end else if (bit_cnt == 8) begin
      ack_phase = 1'b1;
      case (byte_cnt)
        0: begin
          addressed = (sh[7:1] == ADDR) && !sh[0] && !force_nack;
          if (!addressed) n_nacked++;
        end
        1: b_cmd = sh;
        2: b_msb = sh;
        3: if (addressed) begin
          last_cmd = b_cmd;
          last_msb = b_msb;
          last_lsb = sh;
          n_writes++;
          if (b_cmd[7:4] == 4'b0011) code[b_cmd[2:0]] = {b_msb, sh[7:4]};
        end
        default: ;
      endcase
      sda_pull = addressed;
    end
  end
endmodule
