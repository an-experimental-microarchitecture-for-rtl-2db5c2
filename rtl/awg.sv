// awg: one two-channel arbitrary waveform generator of the control box.
//
// A micro-operation unit followed by a codeword-triggered pulse generator. A fired
// micro-operation from the timing control unit becomes one or more codeword triggers,
// each of which plays its calibrated pulse on the I and Q DAC outputs. The latency from
// a micro-operation to the first output sample is 1 cycle (micro-operation unit) +
// CTPG_DELAY cycles (pulse generator), 17 cycles with the defaults.
// Configuration (addr[9] selects the part): addr[9]=0 micro-operation sequence memory,
// addr[9]=1 pulse lookup table; addr[8:0] is passed to the part.
// In the control box each AWG is a board of its own driven over LVDS; here it is a
// module on the same clock.
module awg
  import qumis_pkg::*;
#(
  parameter int unsigned CTPG_DELAY = 16,
  parameter int unsigned MAX_LEN    = 16,
  parameter int unsigned SEQ_LEN    = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [9:0]              cfg_addr,
  input  logic [31:0]             cfg_wdata,
  input  logic                    uop_valid,
  input  logic [UOP_W-1:0]        uop,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic                    pulse_active,
  output logic                    cw_valid,
  output logic [CW_W-1:0]         cw
);
  micro_operation_unit #(.SEQ_LEN(SEQ_LEN)) u_uop (
    .clk, .rst_n,
    .cfg_we(cfg_we && !cfg_addr[9]), .cfg_addr(cfg_addr[8:0]), .cfg_wdata,
    .uop_valid, .uop, .cw_valid, .cw
  );

  ctpg #(.DELAY(CTPG_DELAY), .MAX_LEN(MAX_LEN)) u_ctpg (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_addr[9]), .cfg_addr(cfg_addr[8:0]), .cfg_wdata,
    .cw_valid, .cw, .dac_i, .dac_q, .pulse_active
  );
endmodule
