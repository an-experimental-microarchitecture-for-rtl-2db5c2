// tb_q_control_store: uploads the CNOT microprogram (Pulse {qt} Ym90, Wait 4,
// Pulse {qt,qc} CZ, Wait 8, Pulse {qt} Y90, Wait 4) for quantum opcode 5 and a
// one-word microprogram for opcode 9, applies them with different qubit addresses
// under random back-pressure, and checks every emitted microinstruction, the masking
// of the AWG mask by the qubit address, and that Apply is refused while busy.
module tb_q_control_store;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [9:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, busy;
  qumis_t in_instr, out_instr;
  int checks = 0, failures = 0;

  q_control_store dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // uops: Ym90 = 6, CZ = 7, Y90 = 5 ; qt = AWG0, qc = AWG1
  logic [31:0] cnot [6];
  initial begin
    cnot[0] = enc_pulse(3'b001, {3'd0, 3'd0, 3'd6});
    cnot[1] = enc_wait(4);
    cnot[2] = enc_pulse(3'b011, {3'd0, 3'd7, 3'd7});
    cnot[3] = enc_wait(8);
    cnot[4] = enc_pulse(3'b001, {3'd0, 3'd0, 3'd5});
    cnot[5] = enc_wait(4);
  end

  task automatic apply_and_check(int qop, logic [2:0] qaddr, int start, int len, logic [31:0] words [$]);
    int got;
    in_instr = decode_qumis(enc_apply(qop, qaddr), '0);
    @(negedge clk); in_valid = 1;
    checks++; if (!in_ready) begin failures++; $display("not ready for Apply"); end
    @(negedge clk); in_valid = 1;   // a second Apply while busy must not be taken
    checks++; if (len > 0 && in_ready) begin failures++; $display("ready while busy"); end
    got = 0;
    while (got < len) begin
      out_ready = ($urandom % 2) == 1;
      #1;
      if (out_valid && out_ready) begin
        qumis_t e;
        e = decode_qumis(words[got], '0);
        if (e.op == Q_PULSE) e.awg_mask &= qaddr;
        checks++;
        if (out_instr != e) begin failures++; $display("word %0d of opcode %0d wrong", got, qop); end
        got++;
      end
      @(negedge clk);
    end
    in_valid = 0; out_ready = 0;
    #1; checks++; if (busy) begin failures++; $display("still busy after microprogram"); end
  endtask

  initial begin
    logic [31:0] w [$];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 6; i++) cfg(20 + i, cnot[i]);
    cfg(512 + 5, {16'd0, 8'd6, 8'd20});        // opcode 5: start 20, length 6
    cfg(40, enc_mpg(8'h81, 300));
    cfg(512 + 9, {16'd0, 8'd1, 8'd40});        // opcode 9: start 40, length 1
    w = {}; for (int i = 0; i < 6; i++) w.push_back(cnot[i]);
    apply_and_check(5, 3'b011, 20, 6, w);
    apply_and_check(5, 3'b110, 20, 6, w);      // qt absent: its pulses are masked off
    w = {}; w.push_back(enc_mpg(8'h81, 300));
    apply_and_check(9, 3'b111, 40, 1, w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
