// tb_allxy_harness: end-to-end test of the control box running the AllXY experiment.
//
// The host uploads the pulse tables (codewords of the paper's lookup-table example:
// 0 I, 1 X180, 2 X90, 3 Xm90, 4 Y180, 5 Y90, 6 Ym90, plus 7 = a CZ flux pulse), the
// measurement weights, the data-collection setup (K = 42, N = ROUNDS) and the program,
// which is the paper's AllXY program: r15 = INIT, each of the 21 gate pairs twice as
//   QNopReg r15; Pulse {q} g0; Wait 4; Pulse {q} g1; Wait 4; MPG {q}, 300; MD {q}, r7
// inside a loop over the rounds, followed by a CNOT expanded from a microprogram
// (Apply) and a Z built by the micro-operation unit from X180 and Y180.
// The program is started first and fills the queues (the pipeline stalls when they are
// full); T_D is started afterwards, as in the paper's queue tables.
//
// A behavioural qubit model watches the DAC samples of AWG 2 (each sample carries its
// codeword), rotates a Bloch vector with components in {-1, 0, 1} and, while the
// measurement trigger (digital output 1), delayed by a 30-cycle readout latency, is
// high, drives the ADC with -40*z. It relaxes to |0> after each measurement. The MDU
// integrates 300 samples with unit weights, so a measurement of z gives
// S = 270 * (-40 z) and the average of combination k must follow the ideal AllXY
// staircase: -10800 for pairs 0-4, 0 for pairs 5-16, +10800 for pairs 17-20.
//
// Checked: the 42 averages, the exact spacing of the first pulses of consecutive
// combinations (INIT + 8 cycles), back-to-back gate pulses (4 cycles), measurement
// write-back into r7 and r8, the CNOT and Z pulse timing, and that each mechanism
// (stall, measurement bypass, Apply expansion, multi-codeword micro-operation, result
// write-back, averaging) happened.
module tb_allxy_harness #(
  parameter int INIT   = 400,
  parameter int ROUNDS = 3
) ();
  import qumis_pkg::*;
  localparam int K = 42;
  localparam int LAT = 30;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [15:0] cfg_addr = 0; logic [31:0] cfg_wdata = 0;
  logic run = 0, td_start = 0;
  logic [5:0] dcu_rd_addr = 0;
  logic signed [47:0] dcu_rd_data;
  logic dcu_done;
  logic [3:0] reg_rd_addr = 0;
  logic [31:0] reg_rd_data;
  logic signed [7:0] adc_i = 0, adc_q = 0;
  logic [N_AWG-1:0][DAC_W-1:0] dac_i, dac_q;
  logic [7:0] dout;
  logic exec_running, td_running, timing_late, md_overrun, queues_empty;
  logic [47:0] td;
  logic [31:0] stall_cycles;
  logic md_result_valid, md_result_bit;
  int checks = 0, failures = 0;
  longint cyc = 0;

  quma_control_box dut (.*);

  always #2.5 clk = ~clk;  // 200 MHz
  always @(posedge clk) cyc <= cyc + 1;

  localparam int LIMIT = K * (INIT + 8) * ROUNDS + 200000;
  initial begin
    repeat (LIMIT) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cfgw(int a, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // ---------------- AllXY gate pairs (codewords) ----------------
  localparam int I_ = 0, X = 1, X9 = 2, Y = 4, Y9 = 5;
  int pair0 [21] = '{I_, X, Y, X, Y, X9, Y9, X9, X9, X9, Y9, X, Y, X9, X, Y9, Y, X, Y, X9, Y9};
  int pair1 [21] = '{I_, X, Y, Y, X, I_, I_, Y9, Y9, Y, X, Y9, X9, X, X9, Y, Y9, I_, I_, X9, Y9};

  // ---------------- behavioural qubit and readout ----------------
  int qx = 0, qy = 0, qz = 1;
  logic [LAT-1:0] meas_dly = '0;
  longint pulse_start [$];     // start cycles of pulses on AWG 2
  int     pulse_cw [$];
  longint a0_start [$], a1_start [$];
  int     a0_cw [$], a1_cw [$];
  int     n_meas = 0;

  function automatic void rotate(int cw);
    int x, y, z;
    x = qx; y = qy; z = qz;
    case (cw)
      1: begin qy = -y; qz = -z; end          // X180
      2: begin qy = -z; qz = y;  end          // X90
      3: begin qy = z;  qz = -y; end          // Xm90
      4: begin qx = -x; qz = -z; end          // Y180
      5: begin qx = z;  qz = -x; end          // Y90
      6: begin qx = -z; qz = x;  end          // Ym90
      default: ;
    endcase
  endfunction

  always @(posedge clk) if (rst_n) begin
    int v;
    v = int'($signed(dac_i[2]));
    if (v != 0 && (v % 1000) == 0) begin
      pulse_start.push_back(cyc); pulse_cw.push_back(v / 1000 - 1);
      rotate(v / 1000 - 1);
    end
    v = int'($signed(dac_i[0]));
    if (v != 0 && (v % 1000) == 0) begin a0_start.push_back(cyc); a0_cw.push_back(v / 1000 - 1); end
    v = int'($signed(dac_i[1]));
    if (v != 0 && (v % 1000) == 0) begin a1_start.push_back(cyc); a1_cw.push_back(v / 1000 - 1); end
    meas_dly <= {meas_dly[LAT-2:0], dout[1]};
    if (meas_dly[LAT-1] && !meas_dly[LAT-2]) begin qx = 0; qy = 0; qz = 1; end  // relaxation
    adc_i <= meas_dly[LAT-2] ? 8'(-40 * qz) : 8'd0;
    if (md_result_valid) n_meas++;
  end

  // ---------------- program ----------------
  logic [31:0] prog [$];
  int loop_addr;
  task automatic build_program();
    prog = {};
    prog.push_back(enc_mov(15, INIT));
    prog.push_back(enc_mov(1, 0));
    prog.push_back(enc_mov(2, ROUNDS));
    prog.push_back(enc_mov(8, 5));
    loop_addr = prog.size();
    for (int p = 0; p < 21; p++)
      for (int rep = 0; rep < 2; rep++) begin
        prog.push_back(enc_qnopreg(15));
        prog.push_back(enc_pulse(3'b100, {3'(pair0[p]), 3'd0, 3'd0}));
        prog.push_back(enc_wait(4));
        prog.push_back(enc_pulse(3'b100, {3'(pair1[p]), 3'd0, 3'd0}));
        prog.push_back(enc_wait(4));
        prog.push_back(enc_mpg(8'h02, 300));
        prog.push_back(enc_md(8'h02, 1'b1, 7));
      end
    prog.push_back(enc_addi(1, 1, 1));
    prog.push_back(enc_br(OP_BNE, 1, 2, loop_addr));
    // CNOT on AWG0 (target) and AWG1 (control), then Z on the measured qubit
    prog.push_back(enc_qnopreg(15));
    prog.push_back(enc_apply(5, 3'b011));
    prog.push_back(enc_wait(20));
    prog.push_back(enc_pulse(3'b100, {3'd7, 3'd0, 3'd0}));
    prog.push_back(enc_wait(12));
    prog.push_back(enc_mpg(8'h02, 300));
    prog.push_back(enc_md(8'h02, 1'b1, 8));
    prog.push_back(enc_wait(400));
    prog.push_back(enc_stop());
  endtask

  // ---------------- test ----------------
  initial begin
    longint exp_avg;
    repeat (3) @(posedge clk); rst_n = 1;
    // pulse tables of the three AWGs: 4 samples, I = 1000*(cw+1) + n, Q = 0
    for (int a = 0; a < 3; a++)
      for (int c = 0; c < 8; c++) begin
        for (int n = 0; n < 4; n++)
          cfgw('h1000 + a * 1024 + 512 + c * 16 + n, 32'(1000 * (c + 1) + n));
        cfgw('h1000 + a * 1024 + 512 + 256 + c, 4);
      end
    // AWG2 micro-operation 7 = Z = ([0, X180]; [4, Y180])
    cfgw('h1000 + 2 * 1024 + 7 * 4 + 0, {15'd0, 1'b0, 5'd0, 3'd1, 8'd0});
    cfgw('h1000 + 2 * 1024 + 7 * 4 + 1, {15'd0, 1'b1, 5'd0, 3'd4, 8'd4});
    // MDU: unit I weights over 300 samples, zero Q weights, threshold 0
    for (int n = 0; n < 512; n++) begin
      cfgw('h2000 + n, (n < 300) ? 1 : 0);
      cfgw('h2000 + 1024 + n, 0);
    end
    cfgw('h2000 + 2048, 300);
    cfgw('h2000 + 2049, 0);
    // CNOT microprogram for quantum opcode 5: Pulse{qt} Ym90; Wait 4; Pulse{qt,qc} CZ;
    // Wait 8; Pulse{qt} Y90; Wait 4
    cfgw('h4000 + 0, enc_pulse(3'b001, {3'd0, 3'd0, 3'd6}));
    cfgw('h4000 + 1, enc_wait(4));
    cfgw('h4000 + 2, enc_pulse(3'b011, {3'd0, 3'd7, 3'd7}));
    cfgw('h4000 + 3, enc_wait(8));
    cfgw('h4000 + 4, enc_pulse(3'b001, {3'd0, 3'd0, 3'd5}));
    cfgw('h4000 + 5, enc_wait(4));
    cfgw('h4000 + 512 + 5, {16'd0, 8'd6, 8'd0});
    // data collection
    cfgw('h3000, K); cfgw('h3001, ROUNDS); cfgw('h3002, 0);
    // program
    build_program();
    foreach (prog[i]) cfgw(i, prog[i]);
    $display("program: %0d instructions", prog.size());

    @(negedge clk); run = 1; @(negedge clk); run = 0;
    repeat (200) @(negedge clk);           // queues fill, pipeline stalls
    chk(stall_cycles > 0, "pipeline never stalled on full queues");
    @(negedge clk); td_start = 1; @(negedge clk); td_start = 0;

    wait (!exec_running && queues_empty);
    repeat (1000) @(negedge clk);
    for (int i = 0; i < 10000 && !dcu_done; i++) @(negedge clk);

    // ---- staircase ----
    chk(dcu_done, "data collection not finished");
    for (int k = 0; k < K; k++) begin
      int p;
      p = k / 2;
      exp_avg = (p < 5) ? -10800 : (p < 17) ? 0 : 10800;
      dcu_rd_addr = 6'(k); #1;
      chk(dcu_rd_data == 48'(exp_avg), $sformatf("combination %0d: average %0d, expected %0d", k, dcu_rd_data, exp_avg));
    end
    // ---- timing ----
    chk(pulse_start.size() == 2 * K * ROUNDS + 2, $sformatf("%0d pulses on AWG2", pulse_start.size()));
    for (int c = 0; c < K * ROUNDS; c++) begin
      chk(pulse_start[2 * c + 1] - pulse_start[2 * c] == 4, "gate pulses not back to back");
      chk(pulse_cw[2 * c] == pair0[(c % K) / 2] && pulse_cw[2 * c + 1] == pair1[(c % K) / 2], "wrong gate played");
      if (c > 0) chk(pulse_start[2 * c] - pulse_start[2 * c - 2] == longint'(INIT) + 8,
                     $sformatf("combination %0d starts %0d cycles after the previous one", c, pulse_start[2 * c] - pulse_start[2 * c - 2]));
    end
    // Z = X180 then Y180, 4 cycles apart
    chk(pulse_cw[2 * K * ROUNDS] == 1 && pulse_cw[2 * K * ROUNDS + 1] == 4 &&
        pulse_start[2 * K * ROUNDS + 1] - pulse_start[2 * K * ROUNDS] == 4, "Z sequence wrong");
    // CNOT: AWG0 Ym90, CZ, Y90 at +0, +4, +12; AWG1 CZ at +4
    chk(a0_cw.size() == 3 && a1_cw.size() == 1, "CNOT pulse count");
    if (a0_cw.size() == 3 && a1_cw.size() == 1) begin
      chk(a0_cw[0] == 6 && a0_cw[1] == 7 && a0_cw[2] == 5 && a1_cw[0] == 7, "CNOT codewords");
      chk(a0_start[1] - a0_start[0] == 4 && a0_start[2] - a0_start[0] == 12 && a1_start[0] == a0_start[1], "CNOT timing");
    end
    // ---- feedback registers ----
    reg_rd_addr = 7; #1;
    chk(reg_rd_data == 1, "r7 should hold the last AllXY result (|1>)");
    reg_rd_addr = 8; #1;
    chk(reg_rd_data == 0, "r8 should hold the Z-sequence result (|0>, preset 5)");
    reg_rd_addr = 1; #1;
    chk(reg_rd_data == ROUNDS, "loop counter r1");
    // ---- mechanisms ----
    chk(n_meas == K * ROUNDS + 1, "measurement count");
    chk(!timing_late, "a time point or event was late");
    chk(!md_overrun, "MDU overrun");
    $display("mechanisms: stall cycles %0d, measurements %0d, AWG2 pulses %0d, CNOT pulses %0d, Z codewords 2, averages %0d",
             stall_cycles, n_meas, pulse_start.size(), a0_cw.size() + a1_cw.size(), K);
    $display("T_D at end: %0d cycles", td);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
