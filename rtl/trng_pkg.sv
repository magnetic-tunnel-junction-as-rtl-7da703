// trng_pkg: types and constants shared by the MTJ random-bit generator.
//
// The generator drives a perpendicular magnetic tunnel junction with a
// four-pulse sequence per trial (reset R, verify V, write W, measure M),
// reads one bit per trial, keeps the switching probability near a target
// by nudging the 12-bit write-pulse DAC code, and decorrelates the stream
// with an XOR of bits 4096 trials apart.
//
// The 12-bit DAC width and the R/V/W/M pulse names follow the paper. The
// DAC7578 I2C command encoding below comes from that part's data sheet
// (the paper names the part but not its protocol).
package trng_pkg;

  // Width of one DAC channel code (12-bit DAC7578).
  localparam int unsigned DAC_W = 12;

  // Number of DAC channels used by the pulse sequence: R, V, W, M.
  localparam int unsigned N_PULSE_CH = 4;

  // Pulse phases of one trial, in order. IDLE is the rest between trials.
  typedef enum logic [2:0] {
    PH_RESET   = 3'd0,
    PH_VERIFY  = 3'd1,
    PH_WRITE   = 3'd2,
    PH_MEASURE = 3'd3,
    PH_IDLE    = 3'd4
  } phase_e;

  // Index of each pulse channel in the arrays of codes and switch enables.
  localparam int unsigned CH_R = 0;
  localparam int unsigned CH_V = 1;
  localparam int unsigned CH_W = 2;
  localparam int unsigned CH_M = 3;

  // How the write-pulse code is managed.
  typedef enum logic [1:0] {
    WM_FIXED    = 2'd0,  // code held (feedback off)
    WM_FEEDBACK = 2'd1,  // +-1 LSB per window toward the target probability
    WM_SWEEP    = 2'd2   // calibration: +1 LSB per window, counts reported
  } wmode_e;

  // One DAC7578 channel write as sent over I2C: slave address, then the
  // command/access byte, then the code left-justified in two bytes.
  typedef struct packed {
    logic [6:0] addr;
    logic [7:0] cmd;
    logic [7:0] msb;
    logic [7:0] lsb;
  } i2c_wr_t;

  // DAC7578 command "write to input register n and update DAC register n".
  localparam logic [3:0] DAC7578_CMD_WRUPD = 4'b0011;

  function automatic i2c_wr_t dac7578_write(input logic [6:0] addr,
                                            input logic [3:0] ch,
                                            input logic [DAC_W-1:0] code);
    i2c_wr_t w;
    w.addr = addr;
    w.cmd  = {DAC7578_CMD_WRUPD, ch};
    w.msb  = code[11:4];
    w.lsb  = {code[3:0], 4'b0000};
    return w;
  endfunction

endpackage
