// tb_timing_control_unit: loads the queues with the first two AllXY rounds exactly as
// in the paper's queue tables (intervals 40000, 4, 4 per round), starts T_D and checks
// that every event fires at its time point: pulses at T_D = 40000, 40004, 80008, 80012,
// MPG and MD at 40008 and 80016, a label-0 event at T_D = 0 (outputs are registered:
// they are seen one cycle later). Also checks the late flag for an event whose time
// point has passed and for a time point that arrives after its interval has elapsed.
module tb_timing_control_unit;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0, td_start = 0;
  logic tq_push = 0, tq_full, mpg_push = 0, mpg_full, md_push = 0, md_full;
  tq_entry_t tq_din;
  logic [N_AWG-1:0] awg_push = 0, awg_full;
  awg_ev_t [N_AWG-1:0] awg_din;
  mpg_ev_t mpg_din;
  md_ev_t md_din;
  logic [N_AWG-1:0] awg_fire;
  logic [N_AWG-1:0][UOP_W-1:0] awg_uop;
  logic mpg_fire, md_fire, md_wb;
  logic [N_DOUT-1:0] mpg_qaddr, md_qaddr;
  logic [DUR_W-1:0] mpg_dur;
  logic [REG_AW-1:0] md_rd;
  logic td_running, bcast_valid, late, all_empty;
  logic [47:0] td;
  logic [LABEL_W-1:0] bcast_label;
  int checks = 0, failures = 0;

  timing_control_unit dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic push_t(int ivl, int lbl);
    @(negedge clk); tq_push = 1; tq_din = '{interval: 24'(ivl), label: 8'(lbl)};
    @(negedge clk); tq_push = 0;
  endtask
  task automatic push_a(int awg, int uop, int lbl);
    @(negedge clk); awg_push[awg] = 1; awg_din[awg] = '{uop: 3'(uop), label: 8'(lbl)};
    @(negedge clk); awg_push = 0;
  endtask
  task automatic push_m(int lbl);
    @(negedge clk); mpg_push = 1; mpg_din = '{qaddr: 8'h02, dur: 16'd300, label: 8'(lbl)};
    md_push = 1; md_din = '{qaddr: 8'h02, wb: 1'b1, rd: 4'd7, label: 8'(lbl)};
    @(negedge clk); mpg_push = 0; md_push = 0;
  endtask

  // observed firing times
  longint awg_t [$], mpg_t [$], md_t [$], a0_t [$];
  int awg_u [$];
  always @(posedge clk) if (rst_n) begin
    if (awg_fire[2]) begin awg_t.push_back(td); awg_u.push_back(awg_uop[2]); end
    if (awg_fire[0]) a0_t.push_back(td);
    if (mpg_fire) begin
      mpg_t.push_back(td);
      if (mpg_dur != 300 || mpg_qaddr != 8'h02) begin failures++; $display("MPG fields"); end
    end
    if (md_fire) begin
      md_t.push_back(td);
      if (md_rd != 7 || !md_wb) begin failures++; $display("MD fields"); end
    end
  end

  task automatic cmp(longint got [$], longint exp [$], string what);
    checks++;
    if (got != exp) begin
      failures++; $display("%s fired at:", what);
      foreach (got[i]) $display("   %0d", got[i]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    push_a(0, 3, 0);
    push_t(40000, 1); push_a(2, 0, 1);
    push_t(4, 2);     push_a(2, 0, 2);
    push_t(4, 3);     push_m(3);
    push_t(40000, 4); push_a(2, 1, 4);
    push_t(4, 5);     push_a(2, 1, 5);
    push_t(4, 6);     push_m(6);
    checks++; if (all_empty) begin failures++; $display("all_empty with full queues"); end
    @(negedge clk); td_start = 1; @(negedge clk); td_start = 0;
    wait (td == 80030);
    // td counts from 0 in the first running cycle; fired events appear one cycle later
    cmp(a0_t, '{1}, "label-0 event");
    cmp(awg_t, '{40001, 40005, 80009, 80013}, "pulse queue");
    cmp(mpg_t, '{40009, 80017}, "MPG queue");
    cmp(md_t, '{40009, 80017}, "MD queue");
    checks++; if (awg_u != '{0, 0, 1, 1}) begin failures++; $display("uops wrong"); end
    checks++; if (late) begin failures++; $display("late set in a correct schedule"); end
    checks++; if (!all_empty) begin failures++; $display("queues not empty"); end

    // an event for label 5, which has already fired, is late: it fires at once
    push_a(2, 6, 5);
    repeat (4) @(posedge clk);
    checks++; if (!late || awg_t.size() != 5) begin failures++; $display("late event not flagged"); end

    // a time point pushed after its interval has elapsed fires at once, late
    @(negedge clk); td_start = 1; @(negedge clk); td_start = 0;
    checks++; if (late) begin failures++; $display("late not cleared by td_start"); end
    repeat (50) @(posedge clk);
    push_t(10, 1); push_a(2, 2, 1);
    repeat (4) @(posedge clk);
    checks++; if (!late || awg_t.size() != 6) begin failures++; $display("late time point not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
