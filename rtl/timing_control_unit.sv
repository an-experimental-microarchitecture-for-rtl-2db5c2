// timing_control_unit: queue-based event timing control.
//
// Divides the design into a non-deterministic timing domain (everything that fills the
// queues) and a deterministic one (everything driven from the fired events). It holds
// a timing queue of (interval, label) time points, one event queue per AWG with
// (uop, label) entries, an MPG queue and an MD queue, and the timing controller.
//
// Timing controller. td_start (an instruction-independent start, e.g. an external
// trigger) starts the deterministic clock T_D at 0. In that first cycle label 0 is
// broadcast. A counter then counts cycles; when it reaches the interval at the front of
// the timing queue the front label is broadcast, the entry is popped and the counter
// restarts, so that the time point of a "Wait n" lies exactly n cycles after the
// previous one (40000, 4, 4 -> T_D = 40000, 40004, 40008). An interval of 0 is treated
// as 1. Every event queue whose front entry carries the broadcast label fires it
// (label comparators); fired events leave on registered outputs one cycle later, a
// fixed latency.
//
// Error handling (this design's choice; the paper assumes the queues are filled in
// time): if the counter has passed the front interval by the time the entry arrives,
// the time point fires at once and late is set; an event whose label has already been
// broadcast fires at once and also sets late. late is sticky until the next td_start.
// At most one event per queue is fired per time point; a second one with the same
// label follows one cycle later as a late event.
// Queue depths and widths are this design's choices.
module timing_control_unit
  import qumis_pkg::*;
#(
  parameter int unsigned TQ_DEPTH = 32,
  parameter int unsigned EQ_DEPTH = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      td_start,
  // queue inputs
  input  logic                      tq_push,
  input  tq_entry_t                 tq_din,
  output logic                      tq_full,
  input  logic [N_AWG-1:0]          awg_push,
  input  awg_ev_t [N_AWG-1:0]       awg_din,
  output logic [N_AWG-1:0]          awg_full,
  input  logic                      mpg_push,
  input  mpg_ev_t                   mpg_din,
  output logic                      mpg_full,
  input  logic                      md_push,
  input  md_ev_t                    md_din,
  output logic                      md_full,
  // fired events (deterministic domain)
  output logic [N_AWG-1:0]          awg_fire,
  output logic [N_AWG-1:0][UOP_W-1:0] awg_uop,
  output logic                      mpg_fire,
  output logic [N_DOUT-1:0]         mpg_qaddr,
  output logic [DUR_W-1:0]          mpg_dur,
  output logic                      md_fire,
  output logic [N_DOUT-1:0]         md_qaddr,
  output logic                      md_wb,
  output logic [REG_AW-1:0]         md_rd,
  // status
  output logic                      td_running,
  output logic [47:0]               td,
  output logic                      bcast_valid,
  output logic [LABEL_W-1:0]        bcast_label,
  output logic                      late,
  output logic                      all_empty
);
  initial assert (TQ_DEPTH < (1 << LABEL_W)) else $fatal(1, "timing queue deeper than the label space");

  // ---------------- queues ----------------
  localparam int unsigned TCW = $clog2(TQ_DEPTH+1);
  localparam int unsigned ECW = $clog2(EQ_DEPTH+1);
  tq_entry_t tq_front;
  logic      tq_empty, tq_pop;
  logic [TCW-1:0] tq_count;

  sync_fifo #(.WIDTH($bits(tq_entry_t)), .DEPTH(TQ_DEPTH)) u_tq (
    .clk, .rst_n, .push(tq_push), .din(tq_din), .pop(tq_pop), .dout(tq_front),
    .empty(tq_empty), .full(tq_full), .count(tq_count));

  awg_ev_t [N_AWG-1:0]  awg_front;
  logic [N_AWG-1:0]     awg_empty, awg_pop;
  for (genvar i = 0; i < N_AWG; i++) begin : g_awgq
    logic [ECW-1:0] cnt_unused;
    sync_fifo #(.WIDTH($bits(awg_ev_t)), .DEPTH(EQ_DEPTH)) u_q (
      .clk, .rst_n, .push(awg_push[i]), .din(awg_din[i]), .pop(awg_pop[i]),
      .dout(awg_front[i]), .empty(awg_empty[i]), .full(awg_full[i]), .count(cnt_unused));
  end

  mpg_ev_t mpg_front;
  logic    mpg_empty, mpg_pop;
  logic [ECW-1:0] mpg_cnt_unused;
  sync_fifo #(.WIDTH($bits(mpg_ev_t)), .DEPTH(EQ_DEPTH)) u_mpgq (
    .clk, .rst_n, .push(mpg_push), .din(mpg_din), .pop(mpg_pop), .dout(mpg_front),
    .empty(mpg_empty), .full(mpg_full), .count(mpg_cnt_unused));

  md_ev_t  md_front;
  logic    md_empty, md_pop;
  logic [ECW-1:0] md_cnt_unused;
  sync_fifo #(.WIDTH($bits(md_ev_t)), .DEPTH(EQ_DEPTH)) u_mdq (
    .clk, .rst_n, .push(md_push), .din(md_din), .pop(md_pop), .dout(md_front),
    .empty(md_empty), .full(md_full), .count(md_cnt_unused));

  // ---------------- timing controller ----------------
  logic                  first;        // label 0 pending (first cycle of T_D)
  logic [31:0]           cnt;          // cycles since the last time point
  logic [LABEL_W-1:0]    last_label;   // most recently broadcast label
  logic [31:0]           ivl;
  logic                  tq_due, tq_late;

  assign ivl     = (tq_front.interval == '0) ? 32'd1 : 32'(tq_front.interval);
  assign tq_due  = td_running && !first && !tq_empty && (cnt >= ivl);
  assign tq_late = tq_due && (cnt > ivl);
  assign tq_pop  = tq_due;

  assign bcast_valid = td_running && (first || tq_due);
  assign bcast_label = first ? '0 : tq_front.label;

  // label of an event lies in the past: already broadcast, or not among the pending
  // time points of the timing queue
  function automatic logic is_past(logic [LABEL_W-1:0] l);
    logic [LABEL_W-1:0] d;
    d = l - last_label;
    return td_running && !first && ((d == '0) || (32'(d) > 32'(tq_count)));
  endfunction

  logic [N_AWG-1:0] awg_late;
  logic             mpg_late, md_late;
  always_comb begin
    for (int i = 0; i < N_AWG; i++) begin
      awg_late[i] = !awg_empty[i] && !(bcast_valid && awg_front[i].label == bcast_label) &&
                    is_past(awg_front[i].label);
      awg_pop[i]  = !awg_empty[i] && ((bcast_valid && awg_front[i].label == bcast_label) || awg_late[i]);
    end
    mpg_late = !mpg_empty && !(bcast_valid && mpg_front.label == bcast_label) && is_past(mpg_front.label);
    mpg_pop  = !mpg_empty && ((bcast_valid && mpg_front.label == bcast_label) || mpg_late);
    md_late  = !md_empty && !(bcast_valid && md_front.label == bcast_label) && is_past(md_front.label);
    md_pop   = !md_empty && ((bcast_valid && md_front.label == bcast_label) || md_late);
  end

  assign all_empty = tq_empty && (&awg_empty) && mpg_empty && md_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      td_running <= 1'b0;
      first      <= 1'b0;
      cnt        <= '0;
      td         <= '0;
      last_label <= '0;
      late       <= 1'b0;
    end else if (td_start) begin
      td_running <= 1'b1;
      first      <= 1'b1;
      cnt        <= '0;
      td         <= '0;
      last_label <= '0;
      late       <= 1'b0;
    end else if (td_running) begin
      first <= 1'b0;
      td    <= td + 1'b1;
      if (tq_due) cnt <= 32'd1;
      else if (cnt != '1) cnt <= cnt + 1'b1;
      if (bcast_valid) last_label <= bcast_label;
      if (tq_late || (|awg_late) || mpg_late || md_late) late <= 1'b1;
    end
  end

  // registered event outputs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      awg_fire  <= '0;
      awg_uop   <= '0;
      mpg_fire  <= 1'b0;
      mpg_qaddr <= '0;
      mpg_dur   <= '0;
      md_fire   <= 1'b0;
      md_qaddr  <= '0;
      md_wb     <= 1'b0;
      md_rd     <= '0;
    end else begin
      for (int i = 0; i < N_AWG; i++) begin
        awg_fire[i] <= awg_pop[i];
        awg_uop[i]  <= awg_front[i].uop;
      end
      mpg_fire  <= mpg_pop;
      mpg_qaddr <= mpg_front.qaddr;
      mpg_dur   <= mpg_front.dur;
      md_fire   <= md_pop;
      md_qaddr  <= md_front.qaddr;
      md_wb     <= md_front.wb;
      md_rd     <= md_front.rd;
    end
  end
endmodule
