// tb_micro_operation_unit: checks the reset mapping Seq_i = ([0,i]) (one codeword, one
// cycle after the trigger), then programs Seq_Z = ([0,1]; [4,4]) and a three-entry
// sequence and checks codewords and their exact cycles, and that a new trigger
// restarts a running sequence.
module tb_micro_operation_unit;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [8:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic uop_valid = 0; logic [UOP_W-1:0] uop = 0;
  logic cw_valid; logic [CW_W-1:0] cw;
  int checks = 0, failures = 0;
  int cyc = 0;

  micro_operation_unit dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { int t; int cw; } ev_t;
  ev_t seen [$];
  always @(posedge clk) if (rst_n && cw_valid) seen.push_back('{cyc, cw});

  task automatic cfg(int u, int j, int dt, int c, bit last);
    @(negedge clk); cfg_we = 1; cfg_addr = 9'({3'(u), 2'(j)}); cfg_wdata = {15'd0, last, 5'd0, 3'(c), 8'(dt)};
    @(negedge clk); cfg_we = 0;
  endtask

  // trigger uop, wait, compare codeword times relative to the trigger cycle
  task automatic run(int u, int wait_cycles, ev_t exp [$]);
    int t0;
    seen = {};
    @(negedge clk); uop_valid = 1; uop = 3'(u); t0 = cyc;
    @(negedge clk); uop_valid = 0;
    repeat (wait_cycles) @(negedge clk);
    foreach (seen[i]) seen[i].t -= t0;
    checks++;
    if (seen != exp) begin
      failures++; $display("uop %0d:", u);
      foreach (seen[i]) $display("  t+%0d cw %0d", seen[i].t, seen[i].cw);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int u = 0; u < 8; u++) run(u, 6, '{'{1, u}});
    cfg(7, 0, 0, 1, 0); cfg(7, 1, 4, 4, 1);              // Seq_Z = ([0,1];[4,4])
    run(7, 10, '{'{1, 1}, '{5, 4}});
    cfg(6, 0, 0, 2, 0); cfg(6, 1, 3, 5, 0); cfg(6, 2, 1, 3, 1);
    run(6, 10, '{'{1, 2}, '{4, 5}, '{5, 3}});
    // restart: trigger uop 7 again two cycles after uop 6
    seen = {};
    @(negedge clk); uop_valid = 1; uop = 3'd6;
    @(negedge clk); uop_valid = 0;
    @(negedge clk); uop_valid = 1; uop = 3'd0;
    @(negedge clk); uop_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (seen.size() != 2 || seen[0].cw != 2 || seen[1].cw != 0) begin
      failures++; $display("restart wrong, %0d codewords", seen.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
