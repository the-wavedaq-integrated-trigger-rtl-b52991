// tb_wavedaq_crate: end-to-end test of one crate at reduced size (4
// boards, 128 DRS4 cells).  Drives pulses through the ADC/DRS4 models,
// lets the trigger concentrator decide, and checks the trigger, its
// latency, the veto, the busy inhibit, the hit requirement, the TDC fine
// times and every event packet merged by the data concentrator, under
// output back-pressure.  See crate_bench.svh.
module tb_wavedaq_crate;
  import wavedaq_pkg::*;
  localparam int NB    = 4;
  localparam int CELLS = 128;

  `include "crate_bench.svh"

  wavedaq_crate #(.NB(NB), .CELLS(CELLS)) dut (.*);
endmodule
