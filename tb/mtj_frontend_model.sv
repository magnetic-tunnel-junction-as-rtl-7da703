// mtj_frontend_model: behavioural model (not synthesizable) of the analog
// chain between the FPGA switch enables and the comparator input: analog
// switches, summing amplifier, perpendicular MTJ, transimpedance amplifier
// and threshold. For simulation only.
//
// The junction is a two-state device: 0 = antiparallel (AP, high
// resistance), 1 = parallel (P). A reset pulse sets AP when its DAC code
// is at least R_MIN (a weak reset leaves the state alone). A write pulse
// switches AP -> P with probability p = 1 / (1 + exp(-(Vw - Vhalf)/S)),
// Vw = code_w * LSB_MV, where S = 15.6 mV gives the slope 1.6 %/mV at
// p = 50 % and Vhalf starts at VHALF0_MV and drifts by DRIFT_MV per
// trial. CORR adds a short-term anticorrelation: p is lowered by CORR
// after a trial that switched and raised by CORR after one that did not.
// restart puts Vhalf back to VHALF0_MV (a fresh run). The comparator
// output comp is the junction state while a read pulse (V or M) is applied
// and 0 otherwise.
module mtj_frontend_model #(
  parameter real VHALF0_MV = 358.0,
  parameter real DRIFT_MV  = 0.0,
  parameter real S_MV      = 15.6,
  parameter real LSB_MV    = 1800.0 / 4096.0,
  parameter int  R_MIN     = 1000,
  parameter real CORR      = 0.0
) (
  input  logic        clk,
  input  logic        restart,
  input  logic [3:0]  sw_en,      // R, V, W, M
  input  logic [11:0] code_r,
  input  logic [11:0] code_w,
  output logic        comp,
  output logic        state,
  output real         vhalf_mv
);
  logic [3:0] sw_q = '0;
  logic       prev = 1'b0;
  initial begin
    state    = 1'b0;
    vhalf_mv = VHALF0_MV;
  end

  always @(posedge clk) begin
    sw_q <= sw_en;
    if (restart) vhalf_mv = VHALF0_MV;
    if (sw_en[0] && !sw_q[0] && int'(code_r) >= R_MIN) state = 1'b0;
    if (sw_en[2] && !sw_q[2]) begin
      real p, u;
      p = 1.0 / (1.0 + $exp(-(real'(code_w) * LSB_MV - vhalf_mv) / S_MV));
      p = prev ? p - CORR : p + CORR;
      u = real'($urandom()) / 4294967296.0;
      if (state == 1'b0 && u < p) state = 1'b1;
      prev = state;
      vhalf_mv = vhalf_mv + DRIFT_MV;
    end
  end

  assign comp = (sw_en[1] || sw_en[3]) ? state : 1'b0;
endmodule
