// register_file: register file of the execution controller.
//
// N_REGS x DATA_W registers with three combinational read ports (two for the pipeline,
// one for the host to read results back) and two write ports.
// Port W (write-back of the classical pipeline) and port M (measurement results from the
// measurement discrimination unit, the dashed path of the implemented core) both write
// at the clock edge. When both name the same register in one cycle the measurement
// result wins. Reads see a write of the same cycle (write-through), so the pipeline needs
// no forwarding from its write-back stage. All registers reset to zero.
// The paper names the register file and says it holds run-time information; its size,
// width and port structure are this design's choices.
module register_file
  import qumis_pkg::*;
#(
  parameter int unsigned NREGS = N_REGS,
  parameter int unsigned DW    = DATA_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(NREGS)-1:0]  ra_addr,
  output logic [DW-1:0]             ra_data,
  input  logic [$clog2(NREGS)-1:0]  rb_addr,
  output logic [DW-1:0]             rb_data,
  input  logic [$clog2(NREGS)-1:0]  rc_addr,
  output logic [DW-1:0]             rc_data,
  input  logic                      w_en,
  input  logic [$clog2(NREGS)-1:0]  w_addr,
  input  logic [DW-1:0]             w_data,
  input  logic                      m_en,
  input  logic [$clog2(NREGS)-1:0]  m_addr,
  input  logic [DW-1:0]             m_data
);
  logic [DW-1:0] regs [NREGS];

  function automatic logic [DW-1:0] rd(logic [$clog2(NREGS)-1:0] a);
    if (m_en && m_addr == a) return m_data;
    if (w_en && w_addr == a) return w_data;
    return regs[a];
  endfunction

  assign ra_data = rd(ra_addr);
  assign rb_data = rd(rb_addr);
  assign rc_data = rd(rc_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      if (w_en) regs[w_addr] <= w_data;
      if (m_en) regs[m_addr] <= m_data;
    end
  end
endmodule
