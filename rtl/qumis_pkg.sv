// qumis_pkg: types and constants shared by the control-box RTL.
//
// The instruction word is 32 bits. The paper gives the instruction set (auxiliary
// classical instructions mov/add/addi/sub/beq/bne, QNopReg and the QuMIS
// microinstructions Wait, Pulse, MPG, MD) but no binary encoding; the encoding below
// is this design's own. Field layout (bit 31 is the MSB):
//
//   [31:26] opcode
//   ALU     rd[25:22] rs[21:18] rt[17:14]            add/sub/and/or/xor rd = rs op rt
//   MOV     rd[25:22] imm[21:0] (sign extended)
//   ADDI    rd[25:22] rs[21:18] imm[17:0] (sign extended)
//   BEQ/BNE ra[25:22] rb[21:18] target[17:0] (absolute instruction address)
//   QNOPREG rs[21:18]                                 issues Wait R[rs]
//   WAIT    interval[23:0]
//   PULSE   awg_mask[25:23], uop of AWG i in [3i+2:3i] (horizontal: one uop per AWG)
//   MPG     qaddr[25:18] (one bit per digital output), duration[15:0]
//   MD      qaddr[25:18], wb[17], rd[3:0]             wb=1 writes the result bit to rd
//   APPLY   opcode_q[25:20], qaddr (AWG mask)[19:17]  QIS quantum instruction, expanded
//                                                     by the Q control store
//   STOP    ends execution (this design's own addition)
package qumis_pkg;

  localparam int unsigned DATA_W     = 32;  // register / ALU width (assumed)
  localparam int unsigned N_REGS     = 16;  // r0..r15; r15 is the highest register used in the paper
  localparam int unsigned REG_AW     = 4;
  localparam int unsigned IADDR_W    = 18;  // branch target field width
  localparam int unsigned N_AWG      = 3;   // three AWG boards in the control box
  localparam int unsigned N_DOUT     = 8;   // eight digital measurement-pulse outputs
  localparam int unsigned UOP_W      = 3;   // micro-operation index width (assumed)
  localparam int unsigned CW_W       = 3;   // codeword width (assumed, covers codewords 0..7)
  localparam int unsigned INTERVAL_W = 24;  // Wait interval width in cycles (assumed)
  localparam int unsigned DUR_W      = 16;  // MPG duration width in cycles (assumed)
  localparam int unsigned LABEL_W    = 8;   // timing label width (assumed)
  localparam int unsigned QOP_W      = 6;   // QIS quantum opcode width (assumed)
  localparam int unsigned ADC_W      = 8;   // ADC resolution
  localparam int unsigned DAC_W      = 14;  // DAC resolution

  typedef enum logic [5:0] {
    OP_NOP     = 6'd0,
    OP_MOV     = 6'd1,
    OP_ADD     = 6'd2,
    OP_SUB     = 6'd3,
    OP_ADDI    = 6'd4,
    OP_AND     = 6'd5,
    OP_OR      = 6'd6,
    OP_XOR     = 6'd7,
    OP_BEQ     = 6'd8,
    OP_BNE     = 6'd9,
    OP_STOP    = 6'd10,
    OP_WAIT    = 6'd16,
    OP_QNOPREG = 6'd17,
    OP_PULSE   = 6'd18,
    OP_MPG     = 6'd19,
    OP_MD      = 6'd20,
    OP_APPLY   = 6'd24
  } opcode_e;

  // Microinstruction kinds seen by the physical microcode unit.
  typedef enum logic [2:0] {
    Q_WAIT  = 3'd0,
    Q_PULSE = 3'd1,
    Q_MPG   = 3'd2,
    Q_MD    = 3'd3,
    Q_APPLY = 3'd4
  } qop_e;

  // One QuMIS microinstruction (or one QIS Apply) after register read.
  typedef struct packed {
    qop_e                          op;
    logic [INTERVAL_W-1:0]         interval;
    logic [N_AWG-1:0]              awg_mask;
    logic [N_AWG-1:0][UOP_W-1:0]   uops;
    logic [N_DOUT-1:0]             qaddr;
    logic [DUR_W-1:0]              dur;
    logic                          wb;
    logic [REG_AW-1:0]             rd;
    logic [QOP_W-1:0]              qis_op;
  } qumis_t;

  // Queue entries of the timing control unit.
  typedef struct packed {
    logic [INTERVAL_W-1:0] interval;
    logic [LABEL_W-1:0]    label;
  } tq_entry_t;

  typedef struct packed {
    logic [UOP_W-1:0]   uop;
    logic [LABEL_W-1:0] label;
  } awg_ev_t;

  typedef struct packed {
    logic [N_DOUT-1:0]  qaddr;
    logic [DUR_W-1:0]   dur;
    logic [LABEL_W-1:0] label;
  } mpg_ev_t;

  typedef struct packed {
    logic [N_DOUT-1:0]  qaddr;
    logic               wb;
    logic [REG_AW-1:0]  rd;
    logic [LABEL_W-1:0] label;
  } md_ev_t;

  // Host configuration write (the stand-in for the communication manager).
  typedef struct packed {
    logic        we;
    logic [15:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Instruction builders (used by testbenches and documentation).
  function automatic logic [31:0] enc_r(opcode_e op, int rd, int rs, int rt);
    return {op, 4'(rd), 4'(rs), 4'(rt), 14'd0};
  endfunction
  function automatic logic [31:0] enc_mov(int rd, int imm);
    return {OP_MOV, 4'(rd), 22'(imm)};
  endfunction
  function automatic logic [31:0] enc_addi(int rd, int rs, int imm);
    return {OP_ADDI, 4'(rd), 4'(rs), 18'(imm)};
  endfunction
  function automatic logic [31:0] enc_br(opcode_e op, int ra, int rb, int target);
    return {op, 4'(ra), 4'(rb), 18'(target)};
  endfunction
  function automatic logic [31:0] enc_wait(int interval);
    return {OP_WAIT, 2'b00, 24'(interval)};
  endfunction
  function automatic logic [31:0] enc_qnopreg(int rs);
    return {OP_QNOPREG, 4'd0, 4'(rs), 18'd0};
  endfunction
  function automatic logic [31:0] enc_pulse(logic [N_AWG-1:0] mask, logic [N_AWG-1:0][UOP_W-1:0] uops);
    return {OP_PULSE, mask, 14'd0, uops};
  endfunction
  function automatic logic [31:0] enc_mpg(logic [N_DOUT-1:0] qaddr, int dur);
    return {OP_MPG, qaddr, 2'b00, 16'(dur)};
  endfunction
  function automatic logic [31:0] enc_md(logic [N_DOUT-1:0] qaddr, logic wb, int rd);
    return {OP_MD, qaddr, wb, 13'd0, 4'(rd)};
  endfunction
  function automatic logic [31:0] enc_apply(int qop, logic [N_AWG-1:0] qaddr);
    return {OP_APPLY, 6'(qop), qaddr, 17'd0};
  endfunction
  function automatic logic [31:0] enc_stop();
    return {OP_STOP, 26'd0};
  endfunction

  // Decode a QuMIS / Apply instruction word into a microinstruction. regval is the value
  // of the register named by a QNopReg (ignored otherwise).
  function automatic qumis_t decode_qumis(logic [31:0] w, logic [DATA_W-1:0] regval);
    qumis_t q;
    q = '0;
    q.interval = w[INTERVAL_W-1:0];
    q.awg_mask = w[25 -: N_AWG];
    for (int i = 0; i < N_AWG; i++) q.uops[i] = w[UOP_W*i +: UOP_W];
    q.qaddr    = w[25 -: N_DOUT];
    q.dur      = w[DUR_W-1:0];
    q.wb       = w[17];
    q.rd       = w[REG_AW-1:0];
    q.qis_op   = w[25 -: QOP_W];
    unique case (opcode_e'(w[31:26]))
      OP_QNOPREG: begin q.op = Q_WAIT; q.interval = regval[INTERVAL_W-1:0]; end
      OP_PULSE:   q.op = Q_PULSE;
      OP_MPG:     q.op = Q_MPG;
      OP_MD:      q.op = Q_MD;
      OP_APPLY:   begin q.op = Q_APPLY; q.awg_mask = w[19 -: N_AWG]; end
      default:    q.op = Q_WAIT;
    endcase
    return q;
  endfunction

  function automatic logic is_quantum(logic [31:0] w);
    opcode_e o;
    o = opcode_e'(w[31:26]);
    return (o == OP_WAIT) || (o == OP_QNOPREG) || (o == OP_PULSE) || (o == OP_MPG) ||
           (o == OP_MD) || (o == OP_APPLY);
  endfunction

endpackage
