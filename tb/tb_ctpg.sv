// tb_ctpg: fills the pulse table with a known pattern (I = 100*cw + n, Q = -(I)),
// gives codewords different lengths, and checks that each trigger produces exactly its
// samples starting 16 cycles (80 ns) after the trigger, that triggers spaced by a pulse
// length give back-to-back pulses, and that the output is 0 between pulses.
module tb_ctpg;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [8:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic cw_valid = 0; logic [CW_W-1:0] cw = 0;
  logic signed [DAC_W-1:0] dac_i, dac_q;
  logic pulse_active;
  int checks = 0, failures = 0;
  int cyc = 0;
  int len [8];

  ctpg dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected output per cycle, built from the trigger list
  int exp_i [int];
  task automatic trig(int c);
    @(negedge clk); cw_valid = 1; cw = 3'(c);
    for (int n = 0; n < len[c]; n++) exp_i[cyc + 16 + n] = 100 * c + n + 1;
    // a later pulse overrides the tail of an earlier one
    for (int n = len[c]; n < 16; n++) if (exp_i.exists(cyc + 16 + n)) exp_i.delete(cyc + 16 + n);
    @(negedge clk); cw_valid = 0;
  endtask

  always @(posedge clk) if (rst_n && cyc > 5) begin
    int e;
    e = exp_i.exists(cyc) ? exp_i[cyc] : 0;
    checks++;
    if (dac_i != DAC_W'(e) || dac_q != DAC_W'(-e) || pulse_active != (e != 0)) begin
      failures++; $display("cycle %0d: I=%0d Q=%0d exp %0d", cyc, dac_i, dac_q, e);
    end
  end

  initial begin
    for (int c = 0; c < 8; c++) len[c] = (c == 3) ? 8 : (c == 5) ? 1 : 4;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 8; c++) begin
      for (int n = 0; n < 16; n++) begin
        @(negedge clk); cfg_we = 1; cfg_addr = 9'({3'(c), 4'(n)});
        cfg_wdata = {2'b0, 14'(-(100 * c + n + 1)), 2'b0, 14'(100 * c + n + 1)};
      end
      @(negedge clk); cfg_addr = 9'(256 + c); cfg_wdata = len[c];
    end
    @(negedge clk); cfg_we = 0;
    repeat (3) @(negedge clk);
    trig(1);                          // single pulse
    repeat (30) @(negedge clk);
    trig(2); repeat (2) @(negedge clk); trig(4);   // back to back (4-sample pulses)
    repeat (30) @(negedge clk);
    trig(3); repeat (1) @(negedge clk); trig(5);   // cut an 8-sample pulse
    repeat (30) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
