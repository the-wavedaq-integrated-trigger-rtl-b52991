// tb_wavedaq_crate_full: the end-to-end crate test of crate_bench.svh with
// the crate at its full size: 16 boards of 16 channels (256 channels) and
// 1024 DRS4 cells, all parameters at their defaults.
module tb_wavedaq_crate_full;
  import wavedaq_pkg::*;
  localparam int NB    = N_BOARDS;
  localparam int CELLS = DRS_CELLS;

  `include "crate_bench.svh"

  wavedaq_crate dut (.*);
endmodule
