// Full-size end-to-end test of the Lauberhorn NIC.
//
// Runs the same scenario as tb_lauberhorn_nic, but the NIC is instantiated
// with every parameter at its default: 48 cores (96 endpoints), 16 services,
// 64 message slots and the 15 ms TryAgain timeout at 250 MHz (3,750,000
// cycles). The scenario waits out that timeout twice, so the run covers
// roughly eight million clock cycles. The environment instantiates the NIC
// without a parameter list when FULL is set; NC and TO here only tell the
// environment's client and CPU models what the NIC was built with.
//
// Clock period 4 ns; about 80 s of wall-clock time in verilator.
`timescale 1ns/1ps
module tb_lauberhorn_full;
  tb_lauberhorn_env #(.FULL(1'b1), .NC(48), .TO(3_750_000), .NREQ(200)) env ();
endmodule
