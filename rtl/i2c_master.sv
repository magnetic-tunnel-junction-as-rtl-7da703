// i2c_master: write-only I2C master for one DAC7578 channel write.
//
// A transfer is START, four bytes (7-bit slave address with the write bit,
// command byte, data MSB, data LSB), each followed by an acknowledge slot,
// then STOP. Bytes go out MSB first. SCL and SDA are open drain: scl_oe /
// sda_oe = 1 pulls the line low, 0 releases it; scl_i / sda_i read the
// lines. Each SCL bit is four quarter periods of DIV clocks: SDA changes
// while SCL is low, SCL is released, the line is sampled a quarter later,
// SCL is pulled low again. A slave that holds SCL low stretches the clock.
// A missing acknowledge (SDA high in an acknowledge slot) ends the
// transfer with STOP and sets nack with done.
//
// Interface: start is taken when busy is low, with the transfer in wr.
// done pulses for one clock after STOP. A full transfer takes
// 4 + 36*4 + 4 = 152 quarter periods, i.e. 152*DIV clocks.
//
// The paper says only that the FPGA sends an I2C signal to the DACs; the
// write-only master, the 400 kHz default (DIV = 133 at 212 MHz) and the
// clock stretching support are this design's choices.
module i2c_master
  import trng_pkg::*;
#(
  parameter int unsigned DIV = 133
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  i2c_wr_t wr,
  output logic    busy,
  output logic    done,
  output logic    nack,
  output logic    scl_oe,
  output logic    sda_oe,
  input  logic    scl_i,
  input  logic    sda_i
);

  initial assert (DIV >= 2) else $error("DIV must be >= 2");

  typedef enum logic [1:0] {S_IDLE, S_START, S_BIT, S_STOP} state_e;

  localparam int unsigned DW = $clog2(DIV);

  state_e        state;
  logic [1:0]    q;
  logic [DW-1:0] cnt;
  logic [31:0]   sh;
  logic [3:0]    bitn;     // 0..7 data bits, 8 = acknowledge slot
  logic [1:0]    byten;
  logic          tick;
  logic          ack_slot;

  assign tick     = (cnt == DW'(DIV - 1));
  assign ack_slot = (bitn == 4'd8);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      q      <= '0;
      cnt    <= '0;
      sh     <= '0;
      bitn   <= '0;
      byten  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      nack   <= 1'b0;
      scl_oe <= 1'b0;
      sda_oe <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == S_IDLE) begin
        cnt <= '0;
        q   <= '0;
        if (start) begin
          sh     <= {wr.addr, 1'b0, wr.cmd, wr.msb, wr.lsb};
          bitn   <= '0;
          byten  <= '0;
          nack   <= 1'b0;
          busy   <= 1'b1;
          scl_oe <= 1'b0;
          sda_oe <= 1'b0;
          state  <= S_START;
        end
      end else if (tick) begin
        cnt <= '0;
        q   <= q + 1'b1;
        unique case (state)
          S_START: unique case (q)
            2'd0: sda_oe <= 1'b1;            // SDA falls while SCL high
            2'd1: ;
            2'd2: scl_oe <= 1'b1;
            2'd3: begin
              sda_oe <= ~sh[31];
              state  <= S_BIT;
            end
          endcase
          S_BIT: unique case (q)
            2'd0: scl_oe <= 1'b0;            // release SCL
            2'd1: begin
              if (!scl_i) q <= q;            // clock stretched by slave
              else if (ack_slot && sda_i) nack <= 1'b1;
            end
            2'd2: scl_oe <= 1'b1;
            2'd3: begin
              if (ack_slot) begin
                if (nack || byten == 2'd3) begin
                  sda_oe <= 1'b1;
                  state  <= S_STOP;
                end else begin
                  byten  <= byten + 1'b1;
                  bitn   <= '0;
                  sda_oe <= ~sh[31];
                end
              end else begin
                sh     <= {sh[30:0], 1'b0};
                bitn   <= bitn + 1'b1;
                sda_oe <= (bitn == 4'd7) ? 1'b0 : ~sh[30];
              end
            end
          endcase
          S_STOP: unique case (q)
            2'd0: scl_oe <= 1'b0;
            2'd1: sda_oe <= 1'b0;            // SDA rises while SCL high
            2'd2: ;
            2'd3: begin
              busy  <= 1'b0;
              done  <= 1'b1;
              state <= S_IDLE;
            end
          endcase
          default: state <= S_IDLE;
        endcase
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
