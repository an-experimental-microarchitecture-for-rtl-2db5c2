// tb_awg: micro-operation to DAC path of one AWG. With the reset (forwarding)
// sequences a micro-operation u plays pulse u 17 cycles after the trigger; with
// Seq_Z = ([0,1]; [4,4]) programmed for micro-operation 7 it plays pulse 1 and then
// pulse 4 back to back. Pulses are 4 samples of I = 1000*(cw+1) + n.
module tb_awg;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [9:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic uop_valid = 0; logic [UOP_W-1:0] uop = 0;
  logic signed [DAC_W-1:0] dac_i, dac_q;
  logic pulse_active, cw_valid; logic [CW_W-1:0] cw;
  int checks = 0, failures = 0, cyc = 0;

  awg dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int exp_i [int];
  always @(posedge clk) if (rst_n && cyc > 5) begin
    int e;
    e = exp_i.exists(cyc) ? exp_i[cyc] : 0;
    checks++;
    if (dac_i != DAC_W'(e)) begin failures++; $display("cycle %0d: I=%0d exp %0d", cyc, dac_i, e); end
  end

  task automatic cfgw(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 10'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic fire(int u, int cws [$], int gaps [$]);
    int t;
    @(negedge clk); uop_valid = 1; uop = 3'(u);
    t = cyc + 17;
    foreach (cws[k]) begin
      t += gaps[k];
      for (int n = 0; n < 4; n++) exp_i[t + n] = 1000 * (cws[k] + 1) + n;
    end
    @(negedge clk); uop_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 8; c++) begin
      for (int n = 0; n < 4; n++) cfgw(512 + c * 16 + n, 32'(1000 * (c + 1) + n));
      cfgw(512 + 256 + c, 4);
    end
    cfgw(int'({3'd7, 2'd0}), {15'd0, 1'b0, 5'd0, 3'd1, 8'd0});
    cfgw(int'({3'd7, 2'd1}), {15'd0, 1'b1, 5'd0, 3'd4, 8'd4});
    repeat (3) @(negedge clk);
    fire(2, '{2}, '{0});
    repeat (30) @(negedge clk);
    fire(7, '{1, 4}, '{0, 4});
    repeat (40) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
