// tb_mdu: random weights, ADC samples and thresholds; for each trigger the testbench
// computes S = sum adc_i*W_I + adc_q*W_Q over L samples (starting the cycle after the
// trigger) and M = S > T, and checks them, the destination register, the latency of
// L+1 cycles and the overrun flag for a trigger during an integration.
module tb_mdu;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [11:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic trig = 0, trig_wb = 0; logic [3:0] trig_rd = 0;
  logic signed [7:0] adc_i = 0, adc_q = 0;
  logic res_valid, res_m, res_wb, busy, overrun;
  logic signed [31:0] res_s;
  logic [3:0] res_rd;
  int checks = 0, failures = 0, cyc = 0;
  int wi [512], wq [512];

  mdu dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfgw(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 12'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic measure(int L, int T, int rd, bit wb);
    longint s; int t0, tres;
    s = 0;
    cfgw(2048, L); cfgw(2049, T);
    @(negedge clk); trig = 1; trig_rd = 4'(rd); trig_wb = wb; t0 = cyc;
    adc_i = 8'($urandom); adc_q = 8'($urandom);
    @(negedge clk); trig = 0;
    for (int n = 0; n < L; n++) begin
      s += adc_i * wi[n] + adc_q * wq[n];
      @(negedge clk);
      if (n == 5) begin trig = 1; end       // ignored: unit busy
      if (n == 6) trig = 0;
      adc_i = 8'($urandom); adc_q = 8'($urandom);
    end
    while (!res_valid) @(negedge clk);
    tres = cyc - t0;
    checks++;
    if (res_s != 32'(s) || res_m != (s > T) || res_rd != 4'(rd) || res_wb != wb) begin
      failures++; $display("L=%0d: S=%0d exp %0d M=%0d", L, res_s, s, res_m);
    end
    checks++; if (tres != L + 1) begin failures++; $display("latency %0d, expected %0d", tres, L + 1); end
    checks++; if (L > 7 && !overrun) begin failures++; $display("overrun not flagged"); end
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 512; n++) begin
      wi[n] = $signed(8'($urandom)); wq[n] = $signed(8'($urandom));
      cfgw(n, 32'(wi[n])); cfgw(1024 + n, 32'(wq[n]));
    end
    measure(300, 0, 7, 1);
    measure(300, 1000, 3, 0);
    measure(300, -1000, 9, 1);
    measure(512, 0, 1, 1);
    measure(20, 0, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
