// digital_output_unit: measurement pulse triggers of the master controller.
//
// Converts a fired MPG event (QAddr, D) into a '1' level lasting D cycles on each of
// the N_DOUT digital outputs selected by the mask QAddr. The outputs gate external
// microwave sources that form the measurement pulse. Each output has its own
// down-counter; an MPG event reloads the counters of the outputs it selects, so a new
// event on an output that is still high restarts its duration (this design's choice).
// D = 0 gives no pulse. The level starts in the cycle after the event (registered).
module digital_output_unit
  import qumis_pkg::*;
#(
  parameter int unsigned NOUT = N_DOUT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mpg_fire,
  input  logic [NOUT-1:0]   mpg_qaddr,
  input  logic [DUR_W-1:0]  mpg_dur,
  output logic [NOUT-1:0]   dout
);
  logic [NOUT-1:0][DUR_W-1:0] remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
    end else begin
      for (int i = 0; i < NOUT; i++) begin
        if (mpg_fire && mpg_qaddr[i]) remaining[i] <= mpg_dur;
        else if (remaining[i] != 0)   remaining[i] <= remaining[i] - 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NOUT; i++) dout[i] = (remaining[i] != 0);
  end
endmodule
