// tb_lauberhorn_nic: end-to-end test of the NIC at reduced size (4 cores,
// TryAgain after 3000 cycles), see tb_lauberhorn_env for what it checks.
//
// Clock period 4 ns; a watchdog bounds the run.
`timescale 1ns/1ps
module tb_lauberhorn_nic;
  tb_lauberhorn_env #(.FULL(1'b0), .NC(4), .TO(3000), .NREQ(60)) env ();
endmodule
