// physical_microcode_unit: assigns timing to QuMIS microinstructions and decomposes them
// into timed events for the queues of the timing control unit (the function of the
// quantum microinstruction buffer, QMB).
//
// Every Wait (or QNopReg, already turned into a Wait by the execution controller) opens a
// new time point: the label counter advances and (interval, label) is pushed into the
// timing queue. Pulse, MPG and MD are events of the most recent time point: each is
// pushed with the current label into its queue. A Pulse is horizontal: it pushes one
// (uop, label) entry into the queue of every AWG selected by its mask. MPG pushes
// (qaddr, duration, label), MD pushes (qaddr, write-back flag, rd, label); measurement
// operations bypass the micro-operation units. Events before the first Wait carry
// label 0, the time point at which the timing domain starts.
// An Apply (QIS quantum instruction) is expanded by the Q control store and its
// microinstructions are handled the same way; while it is expanding no new
// instruction is accepted, so program order is kept.
// Interface: valid/ready stream in; one microinstruction is retired per cycle when every
// queue it needs has room, otherwise in_ready stays low (back-pressure to the pipeline).
// The label scheme follows the queue tables of the paper; the label width and the
// stall-on-full policy are this design's choices.
module physical_microcode_unit
  import qumis_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,      // program start: labels restart at 0
  input  logic                 cfg_we,
  input  logic [9:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  input  logic                 in_valid,
  input  qumis_t               in_instr,
  output logic                 in_ready,
  // to the timing control unit
  output logic                 tq_push,
  output tq_entry_t            tq_din,
  input  logic                 tq_full,
  output logic [N_AWG-1:0]     awg_push,
  output awg_ev_t [N_AWG-1:0]  awg_din,
  input  logic [N_AWG-1:0]     awg_full,
  output logic                 mpg_push,
  output mpg_ev_t              mpg_din,
  input  logic                 mpg_full,
  output logic                 md_push,
  output md_ev_t               md_din,
  input  logic                 md_full,
  output logic [LABEL_W-1:0]   cur_label
);
  logic   cs_in_valid, cs_in_ready, cs_out_valid, cs_out_ready, cs_busy;
  qumis_t cs_out;
  logic   m_valid, m_ready;
  qumis_t m;

  q_control_store u_cs (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .in_valid (cs_in_valid), .in_instr (in_instr), .in_ready (cs_in_ready),
    .out_valid(cs_out_valid), .out_instr(cs_out), .out_ready(cs_out_ready),
    .busy     (cs_busy)
  );

  logic in_is_apply;
  assign in_is_apply = (in_instr.op == Q_APPLY);
  assign cs_in_valid = in_valid && in_is_apply && !cs_busy;

  // microinstruction selected for this cycle
  always_comb begin
    if (cs_busy) begin
      m_valid = cs_out_valid;
      m       = cs_out;
    end else begin
      m_valid = in_valid && !in_is_apply;
      m       = in_instr;
    end
  end

  // room check
  always_comb begin
    unique case (m.op)
      Q_WAIT:  m_ready = !tq_full;
      Q_PULSE: m_ready = ((m.awg_mask & awg_full) == '0);
      Q_MPG:   m_ready = !mpg_full;
      Q_MD:    m_ready = !md_full;
      default: m_ready = 1'b1;
    endcase
  end

  assign cs_out_ready = cs_busy && m_ready;
  assign in_ready     = cs_busy ? 1'b0 : (in_is_apply ? cs_in_ready : m_ready);

  logic fire;
  assign fire = m_valid && m_ready;

  always_comb begin
    tq_push  = fire && (m.op == Q_WAIT);
    tq_din   = '{interval: m.interval, label: cur_label + 1'b1};
    mpg_push = fire && (m.op == Q_MPG);
    mpg_din  = '{qaddr: m.qaddr, dur: m.dur, label: cur_label};
    md_push  = fire && (m.op == Q_MD);
    md_din   = '{qaddr: m.qaddr, wb: m.wb, rd: m.rd, label: cur_label};
    for (int i = 0; i < N_AWG; i++) begin
      awg_push[i] = fire && (m.op == Q_PULSE) && m.awg_mask[i];
      awg_din[i]  = '{uop: m.uops[i], label: cur_label};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cur_label <= '0;
    else if (clear) cur_label <= '0;
    else if (tq_push) cur_label <= cur_label + 1'b1;
  end
endmodule
