// tb_instr_cache: writes random words to random addresses of the instruction cache,
// reads them back and checks the data and the one-cycle read latency against a
// reference array kept by the testbench.
module tb_instr_cache;
  localparam int DEPTH = 1024;
  logic clk = 0, wr_en = 0;
  logic [9:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [DEPTH];
  logic        written [DEPTH];

  instr_cache #(.DEPTH(DEPTH)) dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 10'($urandom); wr_data = $urandom;
      ref_mem[wr_addr] = wr_data; written[wr_addr] = 1;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < DEPTH; i++) begin
      if (!written[i]) continue;
      rd_addr = 10'(i);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[i]) begin
        failures++; $display("mismatch at %0d: %h vs %h", i, rd_data, ref_mem[i]);
      end
    end
    // latency: data must not be visible before the clock edge
    @(negedge clk) wr_en = 1; wr_addr = 10'd5; wr_data = 32'hA5A5_0001;
    @(negedge clk) wr_en = 1; wr_addr = 10'd6; wr_data = 32'h5A5A_0002;
    @(negedge clk) wr_en = 0; rd_addr = 10'd5;
    @(posedge clk); #1; rd_addr = 10'd6; #1;
    checks++; if (rd_data !== 32'hA5A5_0001) begin failures++; $display("latency fail"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
