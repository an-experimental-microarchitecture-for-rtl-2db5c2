// tb_data_collection_unit: K = 42 results per round over N = 7 rounds of random signed
// integration results; the averages (truncated toward zero) are computed by the
// testbench and compared with what the unit stores. A second run with K = 5, N = 3
// checks that arming clears the previous sums.
module tb_data_collection_unit;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [1:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic s_valid = 0; logic signed [31:0] s = 0;
  logic [5:0] rd_addr = 0;
  logic signed [47:0] rd_data;
  logic collecting, done;
  logic [31:0] rounds_done;
  int checks = 0, failures = 0;

  data_collection_unit dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfgw(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 2'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(int K, int N);
    longint sum [64];
    cfgw(0, K); cfgw(1, N); cfgw(2, 0);
    for (int k = 0; k < K; k++) sum[k] = 0;
    for (int j = 0; j < N; j++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk); s_valid = 1; s = $signed($urandom) >>> ($urandom % 24); sum[k] += s;
        @(negedge clk); s_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
    checks++; if (collecting) begin failures++; $display("still collecting"); end
    while (!done) @(negedge clk);
    for (int k = 0; k < K; k++) begin
      longint e;
      e = sum[k] / N;   // SystemVerilog integer division truncates toward zero
      rd_addr = 6'(k); #1;
      checks++;
      if (rd_data != 48'(e)) begin failures++; $display("k=%0d avg %0d exp %0d", k, rd_data, e); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(42, 7);
    run(5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
