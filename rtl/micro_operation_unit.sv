// micro_operation_unit: translates a micro-operation into a timed sequence of codeword
// triggers for the codeword-triggered pulse generator.
//
// For every micro-operation uop_i the sequence memory holds
//   Seq_i = ([0, cw_0]; [dt_1, cw_1]; [dt_2, cw_2]; ...)
// where dt_j is the number of cycles between codeword cw_(j-1) and cw_j. When uop_i is
// triggered, cw_0 is output in the next cycle (the unit's fixed delay of one cycle)
// and every following codeword dt_j cycles after the previous one. Example: with the
// lookup table {0:I, 1:X180, 4:Y180}, Z = X.Y is Seq_Z = ([0,1]; [4,4]).
// Each entry is {last, cw, dt}; the entry marked last ends the sequence. A trigger
// that arrives while a sequence is still running restarts the unit with the new
// sequence (the paper does not say; the timing controller is expected to space the
// micro-operations). After reset Seq_i = ([0, i]) for every i, so the unit forwards
// codewords untranslated, which is how the AllXY experiment used it.
// Configuration write: addr[UOP_W+SEQ_AW-1:0] = {uop, j}; data[DT_W-1:0] = dt,
// data[8 +: CW_W] = cw, data[16] = last.
// Sequence length and dt width are this design's choices.
module micro_operation_unit
  import qumis_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 4,
  parameter int unsigned DT_W    = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [8:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  input  logic              uop_valid,
  input  logic [UOP_W-1:0]  uop,
  output logic              cw_valid,
  output logic [CW_W-1:0]   cw
);
  localparam int unsigned SEQ_AW = (SEQ_LEN > 1) ? $clog2(SEQ_LEN) : 1;
  localparam int unsigned N_UOP  = 1 << UOP_W;

  typedef struct packed {
    logic            last;
    logic [CW_W-1:0] cw;
    logic [DT_W-1:0] dt;
  } seq_entry_t;

  seq_entry_t seq [N_UOP][SEQ_LEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_UOP; i++)
        for (int j = 0; j < SEQ_LEN; j++)
          seq[i][j] <= '{last: 1'b1, cw: CW_W'(i), dt: '0};
    end else if (cfg_we) begin
      seq[cfg_addr[SEQ_AW +: UOP_W]][cfg_addr[SEQ_AW-1:0]] <=
        '{last: cfg_wdata[16], cw: cfg_wdata[8 +: CW_W], dt: cfg_wdata[DT_W-1:0]};
    end
  end

  // sequencer
  logic              active;
  logic [UOP_W-1:0]  cur_uop;
  logic [SEQ_AW-1:0] idx;      // entry waiting to be output
  logic [DT_W-1:0]   wait_cnt; // cycles since the last codeword
  seq_entry_t        e;
  assign e = seq[cur_uop][idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      cur_uop  <= '0;
      idx      <= '0;
      wait_cnt <= '0;
      cw_valid <= 1'b0;
      cw       <= '0;
    end else begin
      cw_valid <= 1'b0;
      if (uop_valid) begin
        // first entry goes out immediately (dt_0 = 0)
        cw_valid <= 1'b1;
        cw       <= seq[uop][0].cw;
        cur_uop  <= uop;
        idx      <= SEQ_AW'(1);
        wait_cnt <= DT_W'(1);
        active   <= !seq[uop][0].last && (SEQ_LEN > 1);
      end else if (active) begin
        if (wait_cnt >= e.dt) begin
          cw_valid <= 1'b1;
          cw       <= e.cw;
          wait_cnt <= DT_W'(1);
          idx      <= idx + 1'b1;
          if (e.last || idx == SEQ_AW'(SEQ_LEN-1)) active <= 1'b0;
        end else begin
          wait_cnt <= wait_cnt + 1'b1;
        end
      end
    end
  end
endmodule
