// mdu: measurement discrimination unit for one qubit.
//
// On a trigger (a fired MD event) it integrates the digitised measurement signal
// against calibrated weight functions and thresholds the result:
//   S = sum_{n=0}^{L-1} ( adc_i[n] * W_I[n] + adc_q[n] * W_Q[n] ),   M = (S > T)
// adc_i / adc_q are the two 8-bit ADC inputs, sampled one per clock starting in the
// cycle after the trigger; L is the programmable integration length (<= MAX_INT),
// W_I / W_Q the weight memories and T the threshold. res_valid rises for one cycle one
// cycle after the last sample with S (to the data collection unit), M and the
// destination register of the MD instruction (to the register file when wb is set).
// A trigger during an integration is ignored and sets the sticky overrun flag.
// Configuration: addr[11:10]=0 / 1 write W_I / W_Q[addr[9:0]] (data[W_W-1:0], signed);
// addr[11:10]=2: addr[0]=0 writes L, addr[0]=1 writes T (signed).
// The paper gives the integrate-and-threshold function; the sample-by-sample weighted
// sum over both ADC channels, the widths and the reset values (L = 300 cycles, the
// AllXY measurement pulse length, T = 0) are this design's choices.
module mdu
  import qumis_pkg::*;
#(
  parameter int unsigned MAX_INT     = 512,
  parameter int unsigned W_W         = 8,
  parameter int unsigned DEFAULT_LEN = 300
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [11:0]              cfg_addr,
  input  logic [31:0]              cfg_wdata,
  input  logic                     trig,
  input  logic                     trig_wb,
  input  logic [REG_AW-1:0]        trig_rd,
  input  logic signed [ADC_W-1:0]  adc_i,
  input  logic signed [ADC_W-1:0]  adc_q,
  output logic                     res_valid,
  output logic signed [31:0]       res_s,
  output logic                     res_m,
  output logic                     res_wb,
  output logic [REG_AW-1:0]        res_rd,
  output logic                     busy,
  output logic                     overrun
);
  localparam int unsigned IAW = $clog2(MAX_INT);

  logic signed [W_W-1:0] w_i [MAX_INT];
  logic signed [W_W-1:0] w_q [MAX_INT];
  logic [IAW:0]          int_len;
  logic signed [31:0]    thresh;

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr[11:10] == 2'd0) w_i[cfg_addr[IAW-1:0]] <= cfg_wdata[W_W-1:0];
    if (cfg_we && cfg_addr[11:10] == 2'd1) w_q[cfg_addr[IAW-1:0]] <= cfg_wdata[W_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      int_len <= (IAW+1)'(DEFAULT_LEN);
      thresh  <= '0;
    end else if (cfg_we && cfg_addr[11:10] == 2'd2) begin
      if (!cfg_addr[0]) int_len <= (cfg_wdata > MAX_INT) ? (IAW+1)'(MAX_INT) : cfg_wdata[IAW:0];
      else              thresh  <= cfg_wdata;
    end
  end

  logic [IAW:0]       n;
  logic signed [31:0] acc, term;
  assign term = 32'(adc_i * w_i[n[IAW-1:0]]) + 32'(adc_q * w_q[n[IAW-1:0]]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      overrun   <= 1'b0;
      n         <= '0;
      acc       <= '0;
      res_valid <= 1'b0;
      res_s     <= '0;
      res_m     <= 1'b0;
      res_wb    <= 1'b0;
      res_rd    <= '0;
    end else begin
      res_valid <= 1'b0;
      if (trig && busy) overrun <= 1'b1;
      if (!busy) begin
        if (trig) begin
          busy   <= (int_len != 0);
          n      <= '0;
          acc    <= '0;
          res_wb <= trig_wb;
          res_rd <= trig_rd;
          if (int_len == 0) begin
            res_valid <= 1'b1;
            res_s     <= '0;
            res_m     <= (thresh < 0);
          end
        end
      end else begin
        acc <= acc + term;
        n   <= n + 1'b1;
        if (n == int_len - 1'b1) begin
          busy      <= 1'b0;
          res_valid <= 1'b1;
          res_s     <= acc + term;
          res_m     <= (acc + term) > thresh;
        end
      end
    end
  end
endmodule
