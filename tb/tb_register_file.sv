// tb_register_file: random writes through both write ports checked against a reference
// model, including the write-through to the read ports and the rule that a measurement
// write wins over a pipeline write to the same register.
module tb_register_file;
  logic clk = 0, rst_n = 0;
  logic [3:0] ra_addr = 0, rb_addr = 0, rc_addr = 0, w_addr = 0, m_addr = 0;
  logic [31:0] ra_data, rb_data, rc_data, w_data = 0, m_data = 0;
  logic w_en = 0, m_en = 0;
  int checks = 0, failures = 0;
  logic [31:0] model [16];

  register_file dut (.*);
  always #2.5 clk = ~clk;  // 200 MHz

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); ra_addr = 4'(i); #1; chk(ra_data, 0, "reset value");
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      w_en = 1'($urandom); w_addr = 4'($urandom); w_data = $urandom;
      m_en = 1'($urandom); m_addr = 4'($urandom); m_data = $urandom;
      if ((it % 7) == 0) m_addr = w_addr;
      ra_addr = 4'($urandom); rb_addr = (it % 3 == 0) ? m_addr : w_addr;
      #1;
      begin
        logic [31:0] ea, eb;
        ea = model[ra_addr]; eb = model[rb_addr];
        if (w_en && w_addr == ra_addr) ea = w_data;
        if (m_en && m_addr == ra_addr) ea = m_data;
        if (w_en && w_addr == rb_addr) eb = w_data;
        if (m_en && m_addr == rb_addr) eb = m_data;
        chk(ra_data, ea, "port a");
        chk(rb_data, eb, "port b");
      end
      @(posedge clk);
      if (w_en) model[w_addr] = w_data;
      if (m_en) model[m_addr] = m_data;
    end
    @(negedge clk); w_en = 0; m_en = 0;
    for (int i = 0; i < 16; i++) begin
      ra_addr = 4'(i); rc_addr = 4'(15 - i); #1; chk(ra_data, model[i], "final");
      chk(rc_data, model[15 - i], "host port");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
