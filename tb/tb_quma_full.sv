// tb_quma_full: AllXY as run in the paper's experiment - 40000-cycle (200 us)
// initialisation, 42 combinations - for 10 rounds (the experiment used 25600), with
// every parameter of the control box at its default; see tb_allxy_harness.
module tb_quma_full;
  tb_allxy_harness #(.INIT(40000), .ROUNDS(10)) h ();
endmodule
