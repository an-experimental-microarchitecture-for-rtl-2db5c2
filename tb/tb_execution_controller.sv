// tb_execution_controller: runs a small program with a loop, arithmetic, a taken and a
// not-taken branch and QNopReg, with a randomly stalling consumer, and compares the
// stream of dispatched quantum instructions with the list worked out by hand from the
// program. Also checks that STOP ends execution, that stalls happened and that a
// measurement-port write is visible to the program.
module tb_execution_controller;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, running;
  logic [9:0] imem_addr;
  logic [31:0] imem_data;
  logic q_valid, q_ready;
  qumis_t q_instr;
  logic m_en = 0;
  logic [3:0] m_addr = 0;
  logic [31:0] m_data = 0;
  logic [31:0] stall_cycles;
  logic [3:0] host_reg_addr = 0;
  logic [31:0] host_reg_data;
  int checks = 0, failures = 0;

  logic [31:0] prog [1024];
  always_ff @(posedge clk) imem_data <= prog[imem_addr];

  execution_controller dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected stream
  typedef struct { qop_e op; int interval; } exp_t;
  exp_t exp_q [$];
  int n_seen = 0;

  always @(posedge clk) begin
    if (rst_n && q_valid && q_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected quantum instruction op=%0d", q_instr.op);
      end else begin
        exp_t e;
        e = exp_q.pop_front();
        if (q_instr.op != e.op || (e.op == Q_WAIT && q_instr.interval != 24'(e.interval))) begin
          failures++;
          $display("#%0d got op=%0d ivl=%0d exp op=%0d ivl=%0d", n_seen, q_instr.op, q_instr.interval, e.op, e.interval);
        end
        if (e.op == Q_MD && (q_instr.rd != 7 || !q_instr.wb || q_instr.qaddr != 8'h02)) begin
          failures++; $display("MD fields wrong");
        end
        if (e.op == Q_MPG && (q_instr.dur != 300 || q_instr.qaddr != 8'h02)) begin
          failures++; $display("MPG fields wrong");
        end
        if (e.op == Q_PULSE && (q_instr.awg_mask != 3'b100 || q_instr.uops[2] != 3'd1)) begin
          failures++; $display("Pulse fields wrong");
        end
      end
      n_seen++;
    end
  end

  always @(negedge clk) q_ready = ($urandom % 3) != 0;

  initial begin
    for (int i = 0; i < 1024; i++) prog[i] = enc_wait(777);
    prog[0]  = enc_mov(1, 0);
    prog[1]  = enc_mov(2, 3);
    prog[2]  = enc_mov(15, 100);
    prog[3]  = enc_qnopreg(15);                   // loop:
    prog[4]  = enc_pulse(3'b100, {3'd1, 3'd0, 3'd0});
    prog[5]  = enc_wait(4);
    prog[6]  = enc_mpg(8'h02, 300);
    prog[7]  = enc_md(8'h02, 1'b1, 7);
    prog[8]  = enc_addi(15, 15, 10);
    prog[9]  = enc_addi(1, 1, 1);
    prog[10] = enc_br(OP_BNE, 1, 2, 3);
    prog[11] = enc_mov(4, 'h55);
    prog[12] = enc_r(OP_XOR, 5, 4, 2);            // 0x55 ^ 3 = 0x56
    prog[13] = enc_qnopreg(5);
    prog[14] = enc_r(OP_SUB, 6, 15, 2);           // 130 - 3 = 127
    prog[15] = enc_qnopreg(6);
    prog[16] = enc_br(OP_BEQ, 1, 2, 18);          // taken
    prog[17] = enc_wait(999);                     // skipped
    prog[18] = enc_r(OP_AND, 8, 4, 6);            // 0x55 & 0x7f = 0x55
    prog[19] = enc_r(OP_OR, 9, 8, 2);             // 0x57
    prog[20] = enc_br(OP_BEQ, 9, 4, 17);          // not taken
    prog[21] = enc_qnopreg(9);
    prog[22] = enc_qnopreg(12);                   // r12 written by the measurement port
    prog[23] = enc_stop();
    prog[24] = enc_wait(888);                     // never reached
    for (int i = 0; i < 3; i++) begin
      exp_q.push_back('{Q_WAIT, 100 + 10 * i});
      exp_q.push_back('{Q_PULSE, 0});
      exp_q.push_back('{Q_WAIT, 4});
      exp_q.push_back('{Q_MPG, 0});
      exp_q.push_back('{Q_MD, 0});
    end
    exp_q.push_back('{Q_WAIT, 'h56});
    exp_q.push_back('{Q_WAIT, 127});
    exp_q.push_back('{Q_WAIT, 'h57});
    exp_q.push_back('{Q_WAIT, 1234});

    repeat (3) @(posedge clk);
    rst_n = 1;
    // measurement result written into r12 before the program runs
    @(negedge clk); m_en = 1; m_addr = 12; m_data = 1234;
    @(negedge clk); m_en = 0;
    start = 1;
    @(negedge clk); start = 0;
    wait (!running);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d expected instructions missing", exp_q.size()); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no stall happened"); end
    $display("dispatched %0d quantum instructions, %0d stall cycles", n_seen, stall_cycles);
    // with the consumer always ready the loop body issues one instruction per cycle
    q_ready = 1;
    host_reg_addr = 9; #1;
    checks++; if (host_reg_data != 'h57) begin failures++; $display("r9 = %h", host_reg_data); end
    host_reg_addr = 1; #1;
    checks++; if (host_reg_data != 3) begin failures++; $display("r1 = %h", host_reg_data); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
