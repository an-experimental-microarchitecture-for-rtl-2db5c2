// tb_quma_control_box: end-to-end AllXY run of the control box with a shortened
// initialisation time (400 cycles instead of 40000) and 3 rounds; see tb_allxy_harness.
module tb_quma_control_box;
  tb_allxy_harness #(.INIT(400), .ROUNDS(3)) h ();
endmodule
