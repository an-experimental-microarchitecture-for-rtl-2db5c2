// tb_physical_microcode_unit: feeds the first AllXY round (Wait 40000, Pulse I, Wait 4,
// Pulse I, Wait 4, MPG 300, MD r7) and checks that the queue entries carry the timing
// labels of the paper's queue table: timing queue (40000,1) (4,2) (4,3), pulse queue
// (I,1) (I,2), MPG queue (3), MD queue (r7,3). Then checks back-pressure (a full AWG
// queue blocks a Pulse for that AWG only) and an Apply expanded by the Q control store.
module tb_physical_microcode_unit;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0;
  logic cfg_we = 0; logic [9:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic in_valid = 0, in_ready;
  qumis_t in_instr;
  logic tq_push, tq_full = 0, mpg_push, mpg_full = 0, md_push, md_full = 0;
  tq_entry_t tq_din;
  logic [N_AWG-1:0] awg_push, awg_full = 0;
  awg_ev_t [N_AWG-1:0] awg_din;
  mpg_ev_t mpg_din;
  md_ev_t md_din;
  logic [LABEL_W-1:0] cur_label;
  int checks = 0, failures = 0;

  physical_microcode_unit dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  string log [$];
  always @(posedge clk) if (rst_n) begin
    if (tq_push)  log.push_back($sformatf("T(%0d,%0d)", tq_din.interval, tq_din.label));
    for (int i = 0; i < N_AWG; i++)
      if (awg_push[i]) log.push_back($sformatf("A%0d(%0d,%0d)", i, awg_din[i].uop, awg_din[i].label));
    if (mpg_push) log.push_back($sformatf("M(%0h,%0d,%0d)", mpg_din.qaddr, mpg_din.dur, mpg_din.label));
    if (md_push)  log.push_back($sformatf("D(%0h,%0d,%0d,%0d)", md_din.qaddr, md_din.wb, md_din.rd, md_din.label));
  end

  task automatic send(logic [31:0] w);
    in_instr = decode_qumis(w, '0);
    @(negedge clk); in_valid = 1;
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic cfg(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic expect_log(string exp [$]);
    checks++;
    if (log != exp) begin
      failures++;
      $display("got:"); foreach (log[i]) $display("  %s", log[i]);
      $display("exp:"); foreach (exp[i]) $display("  %s", exp[i]);
    end
    log = {};
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    send(enc_wait(40000));
    send(enc_pulse(3'b100, {3'd0, 3'd0, 3'd0}));
    send(enc_wait(4));
    send(enc_pulse(3'b100, {3'd0, 3'd0, 3'd0}));
    send(enc_wait(4));
    send(enc_mpg(8'h04, 300));
    send(enc_md(8'h04, 1'b1, 7));
    expect_log('{"T(40000,1)", "A2(0,1)", "T(4,2)", "A2(0,2)", "T(4,3)", "M(4,300,3)", "D(4,1,7,3)"});

    // horizontal pulse on two AWGs with different uops
    send(enc_pulse(3'b011, {3'd0, 3'd4, 3'd1}));
    expect_log('{"A0(1,3)", "A1(4,3)"});

    // back-pressure: AWG1 full blocks a Pulse that needs it
    awg_full = 3'b010;
    in_instr = decode_qumis(enc_pulse(3'b011, {3'd0, 3'd2, 3'd2}), '0);
    @(negedge clk); in_valid = 1;
    repeat (4) begin
      @(posedge clk); #1;
      checks++; if (in_ready || awg_push != 0) begin failures++; $display("pushed into a full queue"); end
    end
    // ... but a Pulse on AWG0 only goes through
    in_instr = decode_qumis(enc_pulse(3'b001, {3'd0, 3'd2, 3'd2}), '0);
    #1; checks++; if (!in_ready) begin failures++; $display("blocked by an unrelated queue"); end
    @(negedge clk); in_valid = 0; awg_full = 0;
    log = {};
    tq_full = 1;
    in_instr = decode_qumis(enc_wait(9), '0);
    @(negedge clk); in_valid = 1; #1;
    checks++; if (in_ready) begin failures++; $display("Wait accepted with timing queue full"); end
    @(negedge clk); in_valid = 0; tq_full = 0;

    // Apply via the control store: opcode 3 = Pulse {AWG0,AWG1} uop 3 ; Wait 4 ; MPG
    cfg(0, enc_pulse(3'b011, {3'd0, 3'd3, 3'd3}));
    cfg(1, enc_wait(4));
    cfg(2, enc_mpg(8'h01, 50));
    cfg(512 + 3, {16'd0, 8'd3, 8'd0});
    send(enc_apply(3, 3'b010));
    send(enc_wait(6));            // must come after the whole microprogram
    repeat (6) @(posedge clk);
    expect_log('{"A1(3,3)", "T(4,4)", "M(1,50,4)", "T(6,5)"});

    // clear restarts the labels
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    send(enc_wait(10));
    expect_log('{"T(10,1)"});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
