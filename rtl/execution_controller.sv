// execution_controller: classical pipeline of the QuMA core.
//
// Executes the auxiliary classical instructions (mov, add, addi, sub, and, or, xor, beq,
// bne) and streams every quantum instruction (Wait, QNopReg, Pulse, MPG, MD, Apply) to
// the physical microcode unit after its register operand has been read. A QNopReg rs is
// sent as a Wait whose interval is the run-time value of register rs, which is how the
// AllXY program sets its 40000-cycle initialisation time from r15.
//
// Pipeline (the stages of the implemented core: fetch, decode, register file,
// ALU / branch, write back):
//   F  instruction cache read (synchronous, one cycle)
//   D  decode and register read, with forwarding of the ALU result from E
//   E  ALU, branch resolution, dispatch of quantum instructions (valid/ready)
//   W  register write-back (the register file writes through to D)
// A taken branch in E discards the one instruction in D (one-cycle penalty). When the
// physical microcode unit is not ready (a queue is full) the pipeline stalls with the
// quantum instruction held in E: the stall of the non-deterministic timing domain.
// start begins execution at address 0; STOP ends it and running falls once the
// pipeline has drained. The pipeline organisation, the hazard handling, STOP and the
// register width are this design's choices; the paper names the stages only.
module execution_controller
  import qumis_pkg::*;
#(
  parameter int unsigned IAW = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            running,
  // instruction cache read port
  output logic [IAW-1:0]  imem_addr,
  input  logic [31:0]     imem_data,
  // stream to the physical microcode unit
  output logic            q_valid,
  output qumis_t          q_instr,
  input  logic            q_ready,
  // measurement result write port into the register file
  input  logic            m_en,
  input  logic [REG_AW-1:0] m_addr,
  input  logic [DATA_W-1:0] m_data,
  // host read-back of a register
  input  logic [REG_AW-1:0] host_reg_addr,
  output logic [DATA_W-1:0] host_reg_data,
  // statistics
  output logic [31:0]     stall_cycles
);
  // ---------------- D stage ----------------
  logic [IAW-1:0] pc_d;
  logic           d_valid;
  logic           fetching;
  logic [31:0]    d_word;
  opcode_e        d_op;
  assign d_word = imem_data;
  assign d_op   = opcode_e'(d_word[31:26]);

  // ---------------- E stage registers ----------------
  logic                e_valid;
  opcode_e             e_op;
  logic [31:0]         e_word;
  logic [REG_AW-1:0]   e_rd;
  logic [DATA_W-1:0]   e_a, e_b;
  logic                e_writes;
  logic [DATA_W-1:0]   e_result;
  logic                e_is_q;
  logic                e_taken;
  logic [IAW-1:0]      e_target;

  // ---------------- W stage registers ----------------
  logic                w_en;
  logic [REG_AW-1:0]   w_addr;
  logic [DATA_W-1:0]   w_data;

  logic stall, flush;
  assign stall = e_valid && e_is_q && !q_ready;
  assign flush = e_valid && e_taken;

  // ---------------- register read in D ----------------
  logic d_branch;
  logic [REG_AW-1:0] ra_addr, rb_addr;
  logic [DATA_W-1:0] ra_data, rb_data, d_a, d_b;
  assign d_branch = (d_op == OP_BEQ) || (d_op == OP_BNE);
  assign ra_addr  = d_branch ? d_word[25:22] : d_word[21:18];
  assign rb_addr  = d_branch ? d_word[21:18] : d_word[17:14];

  register_file u_rf (
    .clk, .rst_n,
    .ra_addr, .ra_data, .rb_addr, .rb_data,
    .rc_addr(host_reg_addr), .rc_data(host_reg_data),
    .w_en, .w_addr, .w_data,
    .m_en, .m_addr, .m_data
  );

  // forwarding of the E-stage ALU result
  always_comb begin
    d_a = (e_valid && e_writes && e_rd == ra_addr) ? e_result : ra_data;
    d_b = (e_valid && e_writes && e_rd == rb_addr) ? e_result : rb_data;
  end

  // ---------------- E stage: ALU and branch ----------------
  logic [DATA_W-1:0] imm22, imm18;
  assign imm22 = DATA_W'(signed'(e_word[21:0]));
  assign imm18 = DATA_W'(signed'(e_word[17:0]));

  always_comb begin
    e_writes = 1'b1;
    e_result = '0;
    e_taken  = 1'b0;
    e_is_q   = is_quantum(e_word);
    e_target = e_word[IAW-1:0];
    unique case (e_op)
      OP_MOV:  e_result = imm22;
      OP_ADD:  e_result = e_a + e_b;
      OP_SUB:  e_result = e_a - e_b;
      OP_ADDI: e_result = e_a + imm18;
      OP_AND:  e_result = e_a & e_b;
      OP_OR:   e_result = e_a | e_b;
      OP_XOR:  e_result = e_a ^ e_b;
      OP_BEQ:  begin e_writes = 1'b0; e_taken = (e_a == e_b); end
      OP_BNE:  begin e_writes = 1'b0; e_taken = (e_a != e_b); end
      default: e_writes = 1'b0;
    endcase
  end

  assign q_valid = e_valid && e_is_q;
  assign q_instr = decode_qumis(e_word, e_a);

  // ---------------- fetch control ----------------
  logic [IAW-1:0] pc_next;
  logic           d_valid_next;
  logic           stop_now;
  always_comb begin
    imem_addr    = pc_d + 1'b1;
    pc_next      = pc_d + 1'b1;
    d_valid_next = 1'b1;
    stop_now     = 1'b0;
    if (start) begin
      imem_addr = '0; pc_next = '0;
    end else if (!fetching) begin
      imem_addr = pc_d; pc_next = pc_d; d_valid_next = 1'b0;
    end else if (flush) begin
      imem_addr = e_target; pc_next = e_target;
    end else if (stall) begin
      imem_addr = pc_d; pc_next = pc_d; d_valid_next = d_valid;
    end else if (d_valid && d_op == OP_STOP) begin
      imem_addr = pc_d; pc_next = pc_d; d_valid_next = 1'b0; stop_now = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_d         <= '0;
      d_valid      <= 1'b0;
      fetching     <= 1'b0;
      e_valid      <= 1'b0;
      e_op         <= OP_NOP;
      e_word       <= '0;
      e_rd         <= '0;
      e_a          <= '0;
      e_b          <= '0;
      w_en         <= 1'b0;
      w_addr       <= '0;
      w_data       <= '0;
      stall_cycles <= '0;
    end else begin
      pc_d    <= pc_next;
      d_valid <= d_valid_next;
      if (start) fetching <= 1'b1;
      else if (stop_now) fetching <= 1'b0;
      if (stall) stall_cycles <= stall_cycles + 1;

      // D -> E
      if (!stall) begin
        e_valid <= d_valid && !flush && !start && d_op != OP_STOP && d_op != OP_NOP;
        e_op    <= d_op;
        e_word  <= d_word;
        e_rd    <= d_word[25:22];
        e_a     <= d_a;
        e_b     <= d_b;
      end
      // E -> W
      w_en   <= e_valid && e_writes && !stall;
      w_addr <= e_rd;
      w_data <= e_result;
    end
  end

  assign running = fetching || d_valid || e_valid || w_en;

  assert property (@(posedge clk) disable iff (!rst_n) q_valid && !q_ready |=> q_valid && $stable(q_instr))
    else $error("execution_controller: quantum instruction dropped while stalled");
endmodule
