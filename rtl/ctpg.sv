// ctpg: codeword-triggered pulse generation unit of one AWG.
//
// A lookup table holds one calibrated pulse per codeword: up to MAX_LEN samples of the
// in-phase (I) and quadrature (Q) envelopes, DAC_W-bit two's complement, and a length.
// A codeword trigger makes the unit play that pulse to the two DACs, one sample per
// clock (200 MHz, 5 ns), starting exactly DELAY cycles after the trigger; the paper's
// unit has a fixed 80 ns delay, DELAY = 16. Outside a pulse both outputs are 0. A
// trigger that arrives while a pulse is playing cuts it and starts the new one, so
// triggers spaced by a pulse length give back-to-back pulses.
// Implementation: the trigger passes a DELAY-1 stage shift register and then starts a
// sample counter that reads the table; the DAC outputs are registered.
// Configuration: addr[8]=0 writes sample addr[SAW-1:0] of codeword addr[SAW+:CW_W]
// with data[DAC_W-1:0]=I, data[16+:DAC_W]=Q; addr[8]=1 writes the length of codeword
// addr[CW_W-1:0] (data[7:0]). Lengths reset to zero (an empty pulse).
// Table size, sample format and one sample per clock are this design's choices.
module ctpg
  import qumis_pkg::*;
#(
  parameter int unsigned DELAY   = 16,
  parameter int unsigned MAX_LEN = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cfg_we,
  input  logic [8:0]              cfg_addr,
  input  logic [31:0]             cfg_wdata,
  input  logic                    cw_valid,
  input  logic [CW_W-1:0]         cw,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic                    pulse_active
);
  initial assert (DELAY >= 2) else $fatal(1, "ctpg: DELAY must be at least 2");
  localparam int unsigned SAW   = $clog2(MAX_LEN);
  localparam int unsigned N_CW  = 1 << CW_W;

  logic [DAC_W-1:0] lut_i [N_CW * MAX_LEN];
  logic [DAC_W-1:0] lut_q [N_CW * MAX_LEN];
  logic [7:0]       len_tab [N_CW];

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_addr[8]) begin
      lut_i[cfg_addr[SAW+CW_W-1:0]] <= cfg_wdata[DAC_W-1:0];
      lut_q[cfg_addr[SAW+CW_W-1:0]] <= cfg_wdata[16 +: DAC_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CW; i++) len_tab[i] <= '0;
    end else if (cfg_we && cfg_addr[8]) begin
      len_tab[cfg_addr[CW_W-1:0]] <= cfg_wdata[7:0];
    end
  end

  // delay line: DELAY-2 stages, then the playback register stage and the output register
  localparam int unsigned NSTG = DELAY - 1;
  logic [NSTG-1:0]            dl_v;
  logic [NSTG-1:0][CW_W-1:0]  dl_cw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dl_v  <= '0;
      dl_cw <= '0;
    end else begin
      dl_v[0]  <= cw_valid;
      dl_cw[0] <= cw;
      for (int s = 1; s < NSTG; s++) begin
        dl_v[s]  <= dl_v[s-1];
        dl_cw[s] <= dl_cw[s-1];
      end
    end
  end

  logic            start;
  logic [CW_W-1:0] start_cw;
  assign start    = dl_v[NSTG-1];
  assign start_cw = dl_cw[NSTG-1];

  // playback: sample index of the current cycle
  logic            playing;
  logic [CW_W-1:0] cur_cw;
  logic [7:0]      sidx;
  logic [7:0]      cur_len;
  logic            p_on;
  logic [CW_W-1:0] p_cw;
  logic [7:0]      p_idx;

  always_comb begin
    // choose what is played in this cycle
    if (start) begin
      p_on  = (len_tab[start_cw] != 0);
      p_cw  = start_cw;
      p_idx = '0;
    end else begin
      p_on  = playing;
      p_cw  = cur_cw;
      p_idx = sidx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      playing      <= 1'b0;
      cur_cw       <= '0;
      sidx         <= '0;
      cur_len      <= '0;
      dac_i        <= '0;
      dac_q        <= '0;
      pulse_active <= 1'b0;
    end else begin
      if (start) begin
        cur_cw  <= start_cw;
        cur_len <= len_tab[start_cw];
        sidx    <= 8'd1;
        playing <= (len_tab[start_cw] > 1);
      end else if (playing) begin
        sidx <= sidx + 1'b1;
        if (sidx + 1'b1 >= cur_len || sidx + 1'b1 >= 8'(MAX_LEN)) playing <= 1'b0;
      end
      pulse_active <= p_on;
      dac_i <= p_on ? lut_i[{p_cw, p_idx[SAW-1:0]}] : '0;
      dac_q <= p_on ? lut_q[{p_cw, p_idx[SAW-1:0]}] : '0;
    end
  end
endmodule
