// tb_digital_output_unit: random MPG events (mask, duration) checked cycle by cycle
// against a per-output model: each selected output is high for exactly D cycles from
// the cycle after the event; a new event restarts the duration.
module tb_digital_output_unit;
  import qumis_pkg::*;
  logic clk = 0, rst_n = 0, mpg_fire = 0;
  logic [7:0] mpg_qaddr = 0; logic [15:0] mpg_dur = 0;
  logic [7:0] dout;
  int checks = 0, failures = 0;
  int rem [8];

  digital_output_unit dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int highs = 0;
    for (int i = 0; i < 8; i++) rem[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      mpg_fire = ($urandom % 40) == 0;
      mpg_qaddr = 8'($urandom); mpg_dur = 16'($urandom % 60);
      if (it == 10) begin mpg_fire = 1; mpg_qaddr = 8'h02; mpg_dur = 300; end
      @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        if (mpg_fire && mpg_qaddr[i]) rem[i] = mpg_dur;
        else if (rem[i] > 0) rem[i]--;
      end
      #1;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (dout[i] != (rem[i] > 0)) begin failures++; $display("output %0d wrong at %0d", i, it); end
        if (dout[i]) highs++;
      end
    end
    checks++; if (highs == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
