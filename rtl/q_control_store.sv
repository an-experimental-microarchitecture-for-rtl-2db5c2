// q_control_store: microprogram store of the physical microcode unit.
//
// Translates a QIS quantum instruction "Apply qop, qaddr" into the sequence of QuMIS
// microinstructions of its microprogram, e.g. the CNOT microprogram
//   Pulse {qt}, Ym90 / Wait 4 / Pulse {qt,qc}, CZ / Wait 8 / Pulse {qt}, Y90 / Wait 4.
// The store is two writable tables: a microprogram memory of UPROG_DEPTH QuMIS words
// (same encoding as in the instruction cache) and, per quantum opcode, the start
// address and length of its microprogram. An accepted Apply makes the unit busy; it then
// emits one microinstruction per cycle on a valid/ready stream until the microprogram
// ends. In the emitted Pulse microinstructions the AWG mask is the stored mask ANDed
// with the Apply's qubit address, so one microprogram serves any chosen qubits; Wait,
// MPG and MD words pass unchanged. A length of zero emits nothing.
// Configuration writes: addr[9]=0 writes microprogram word addr[7:0]; addr[9]=1 writes
// the table entry of opcode addr[5:0] with data[7:0]=start, data[15:8]=length.
// The paper gives the function (quantum instruction -> microinstructions using
// uploaded microprograms) and the CNOT example; it states that its own implementation
// lacks this unit. The table organisation and the qubit-address substitution are this
// design's choices.
module q_control_store
  import qumis_pkg::*;
#(
  parameter int unsigned UPROG_DEPTH = 256,
  parameter int unsigned N_QOPS      = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  logic [9:0]   cfg_addr,
  input  logic [31:0]  cfg_wdata,
  // Apply instructions in
  input  logic         in_valid,
  input  qumis_t       in_instr,
  output logic         in_ready,
  // microinstructions out
  output logic         out_valid,
  output qumis_t       out_instr,
  input  logic         out_ready,
  output logic         busy
);
  localparam int unsigned PAW = $clog2(UPROG_DEPTH);

  logic [31:0]    uprog [UPROG_DEPTH];
  logic [PAW-1:0] start_tab [N_QOPS];
  logic [7:0]     len_tab [N_QOPS];

  logic [PAW-1:0]   ptr;
  logic [7:0]       remaining;
  logic [N_AWG-1:0] qmask;
  qumis_t           dec;

  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_addr[9]) uprog[cfg_addr[PAW-1:0]] <= cfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_QOPS; i++) begin
        start_tab[i] <= '0;
        len_tab[i]   <= '0;
      end
    end else if (cfg_we && cfg_addr[9]) begin
      start_tab[cfg_addr[$clog2(N_QOPS)-1:0]] <= cfg_wdata[PAW-1:0];
      len_tab[cfg_addr[$clog2(N_QOPS)-1:0]]   <= cfg_wdata[15:8];
    end
  end

  assign busy      = (remaining != 0);
  assign in_ready  = !busy;
  assign out_valid = busy;

  always_comb begin
    dec = decode_qumis(uprog[ptr], '0);
    if (dec.op == Q_PULSE) dec.awg_mask = dec.awg_mask & qmask;
    out_instr = dec;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      remaining <= '0;
      qmask     <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        ptr       <= start_tab[in_instr.qis_op[$clog2(N_QOPS)-1:0]];
        remaining <= len_tab[in_instr.qis_op[$clog2(N_QOPS)-1:0]];
        qmask     <= in_instr.awg_mask;
      end
    end else if (out_ready) begin
      ptr       <= ptr + 1'b1;
      remaining <= remaining - 1'b1;
    end
  end
endmodule
