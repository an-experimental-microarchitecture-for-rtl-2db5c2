// quma_control_box: top level of the quantum control box.
//
// The master controller (QuMA core: instruction cache, execution controller, physical
// microcode unit with Q control store, timing control unit; plus the digital output
// unit, one measurement discrimination unit and the data collection unit) together
// with N_AWG two-channel AWGs (micro-operation unit + codeword-triggered pulse
// generator). Instructions flow left to right: the execution controller runs the
// classical instructions and streams quantum ones as fast as it can into the queues;
// from the timing control unit on, every event happens at a deterministic cycle of the
// timing domain T_D.
//
// Host interface (stand-in for the PC / USB communication manager): a configuration
// write bus cfg_* with the map
//   addr[15:12] = 0  instruction cache, word addr[9:0]
//               = 1  AWG addr[11:10]: addr[9]=0 micro-op sequences, 1 pulse table
//               = 2  MDU (weights, integration length, threshold)
//               = 3  data collection unit (K, N, arm)
//               = 4  Q control store (microprograms, opcode table)
// run starts program execution at address 0 (and restarts the timing labels);
// td_start starts the deterministic timing domain (the paper's instruction or external
// trigger). adc_* are the two ADC sample streams, dac_* the I/Q DAC sample streams of
// each AWG and dout the eight measurement-pulse trigger outputs. Every MD event
// triggers the single MDU; its result bit is written into register rd when the MD
// instruction asks for it (the dashed feedback path of the paper's core) and its
// integration result goes to the data collection unit, read back via dcu_rd_*;
// reg_rd_* reads a register of the execution controller.
// Fixed latencies after a time point fires in the timing controller: digital output
// and MDU start +1 cycle, AWG output +1 (queue register) +1 (micro-op unit) +16 (CTPG).
module quma_control_box
  import qumis_pkg::*;
#(
  parameter int unsigned ICACHE_DEPTH = 1024,
  parameter int unsigned TQ_DEPTH     = 32,
  parameter int unsigned EQ_DEPTH     = 32,
  parameter int unsigned CTPG_DELAY   = 16,
  parameter int unsigned MAX_PULSE    = 16,
  parameter int unsigned SEQ_LEN      = 4,
  parameter int unsigned MAX_INT      = 512,
  parameter int unsigned K_MAX        = 64
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // host
  input  logic                                cfg_we,
  input  logic [15:0]                         cfg_addr,
  input  logic [31:0]                         cfg_wdata,
  input  logic                                run,
  input  logic                                td_start,
  input  logic [$clog2(K_MAX)-1:0]            dcu_rd_addr,
  output logic signed [47:0]                  dcu_rd_data,
  output logic                                dcu_done,
  input  logic [REG_AW-1:0]                   reg_rd_addr,
  output logic [DATA_W-1:0]                   reg_rd_data,
  // analog-digital interface
  input  logic signed [ADC_W-1:0]             adc_i,
  input  logic signed [ADC_W-1:0]             adc_q,
  output logic [N_AWG-1:0][DAC_W-1:0]         dac_i,
  output logic [N_AWG-1:0][DAC_W-1:0]         dac_q,
  output logic [N_DOUT-1:0]                   dout,
  // status
  output logic                                exec_running,
  output logic                                td_running,
  output logic [47:0]                         td,
  output logic                                timing_late,
  output logic                                md_overrun,
  output logic                                queues_empty,
  output logic [31:0]                         stall_cycles,
  output logic                                md_result_valid,
  output logic                                md_result_bit
);
  localparam int unsigned IAW = $clog2(ICACHE_DEPTH);

  // ---------------- configuration decode ----------------
  logic cfg_ic, cfg_mdu, cfg_dcu, cfg_cs;
  logic [N_AWG-1:0] cfg_awg;
  always_comb begin
    cfg_ic  = cfg_we && cfg_addr[15:12] == 4'd0;
    cfg_mdu = cfg_we && cfg_addr[15:12] == 4'd2;
    cfg_dcu = cfg_we && cfg_addr[15:12] == 4'd3;
    cfg_cs  = cfg_we && cfg_addr[15:12] == 4'd4;
    for (int i = 0; i < N_AWG; i++)
      cfg_awg[i] = cfg_we && cfg_addr[15:12] == 4'd1 && cfg_addr[11:10] == 2'(i);
  end

  // ---------------- quantum control unit ----------------
  logic [IAW-1:0] imem_addr;
  logic [31:0]    imem_data;

  instr_cache #(.DEPTH(ICACHE_DEPTH)) u_icache (
    .clk, .wr_en(cfg_ic), .wr_addr(cfg_addr[IAW-1:0]), .wr_data(cfg_wdata),
    .rd_addr(imem_addr), .rd_data(imem_data)
  );

  logic   q_valid, q_ready;
  qumis_t q_instr;
  logic   res_valid, res_m, res_wb;
  logic signed [31:0] res_s;
  logic [REG_AW-1:0]  res_rd;

  execution_controller #(.IAW(IAW)) u_exec (
    .clk, .rst_n, .start(run), .running(exec_running),
    .imem_addr, .imem_data,
    .q_valid, .q_instr, .q_ready,
    .m_en(res_valid && res_wb), .m_addr(res_rd), .m_data(DATA_W'(res_m)),
    .host_reg_addr(reg_rd_addr), .host_reg_data(reg_rd_data),
    .stall_cycles
  );

  // ---------------- physical execution layer ----------------
  logic                tq_push, tq_full, mpg_push, mpg_full, md_push, md_full;
  tq_entry_t           tq_din;
  logic [N_AWG-1:0]    awg_push, awg_full;
  awg_ev_t [N_AWG-1:0] awg_din;
  mpg_ev_t             mpg_din;
  md_ev_t              md_din;
  logic [LABEL_W-1:0]  cur_label;

  physical_microcode_unit u_pmu (
    .clk, .rst_n, .clear(run),
    .cfg_we(cfg_cs), .cfg_addr(cfg_addr[9:0]), .cfg_wdata,
    .in_valid(q_valid), .in_instr(q_instr), .in_ready(q_ready),
    .tq_push, .tq_din, .tq_full,
    .awg_push, .awg_din, .awg_full,
    .mpg_push, .mpg_din, .mpg_full,
    .md_push, .md_din, .md_full,
    .cur_label
  );

  logic [N_AWG-1:0]            awg_fire;
  logic [N_AWG-1:0][UOP_W-1:0] awg_uop;
  logic                        mpg_fire, md_fire, md_wb;
  logic [N_DOUT-1:0]           mpg_qaddr, md_qaddr;
  logic [DUR_W-1:0]            mpg_dur;
  logic [REG_AW-1:0]           md_rd;
  logic                        bcast_valid;
  logic [LABEL_W-1:0]          bcast_label;

  timing_control_unit #(.TQ_DEPTH(TQ_DEPTH), .EQ_DEPTH(EQ_DEPTH)) u_tcu (
    .clk, .rst_n, .td_start,
    .tq_push, .tq_din, .tq_full,
    .awg_push, .awg_din, .awg_full,
    .mpg_push, .mpg_din, .mpg_full,
    .md_push, .md_din, .md_full,
    .awg_fire, .awg_uop,
    .mpg_fire, .mpg_qaddr, .mpg_dur,
    .md_fire, .md_qaddr, .md_wb, .md_rd,
    .td_running, .td, .bcast_valid, .bcast_label,
    .late(timing_late), .all_empty(queues_empty)
  );

  // ---------------- analog-digital interface ----------------
  digital_output_unit u_dout (
    .clk, .rst_n, .mpg_fire, .mpg_qaddr, .mpg_dur, .dout
  );

  logic mdu_busy;
  mdu #(.MAX_INT(MAX_INT)) u_mdu (
    .clk, .rst_n,
    .cfg_we(cfg_mdu), .cfg_addr(cfg_addr[11:0]), .cfg_wdata,
    .trig(md_fire), .trig_wb(md_wb), .trig_rd(md_rd),
    .adc_i, .adc_q,
    .res_valid, .res_s, .res_m, .res_wb, .res_rd,
    .busy(mdu_busy), .overrun(md_overrun)
  );
  assign md_result_valid = res_valid;
  assign md_result_bit   = res_m;

  logic        dcu_collecting;
  logic [31:0] dcu_rounds;
  data_collection_unit #(.K_MAX(K_MAX)) u_dcu (
    .clk, .rst_n,
    .cfg_we(cfg_dcu), .cfg_addr(cfg_addr[1:0]), .cfg_wdata,
    .s_valid(res_valid), .s(res_s),
    .rd_addr(dcu_rd_addr), .rd_data(dcu_rd_data),
    .collecting(dcu_collecting), .done(dcu_done), .rounds_done(dcu_rounds)
  );

  for (genvar i = 0; i < N_AWG; i++) begin : g_awg
    logic signed [DAC_W-1:0] di, dq;
    logic                    active, cwv;
    logic [CW_W-1:0]         cw;
    awg #(.CTPG_DELAY(CTPG_DELAY), .MAX_LEN(MAX_PULSE), .SEQ_LEN(SEQ_LEN)) u_awg (
      .clk, .rst_n,
      .cfg_we(cfg_awg[i]), .cfg_addr(cfg_addr[9:0]), .cfg_wdata,
      .uop_valid(awg_fire[i]), .uop(awg_uop[i]),
      .dac_i(di), .dac_q(dq), .pulse_active(active), .cw_valid(cwv), .cw(cw)
    );
    assign dac_i[i] = di;
    assign dac_q[i] = dq;
  end
endmodule
