// tb_espim_full: end-to-end test of the ESPIM channel at its default size
// (16 banks, 11 execution units per bank, 8-entry FIFOs, 32768-row banks,
// vector-rows of 32 slices = 512 elements): one complete pass of 352 matrix
// rows against one vector-row, then a dense pass. See espim_host_body.svh.
module tb_espim_full;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NB = 16;
  localparam int NS = 32;
  localparam int G  = 1;
  localparam int P  = 1;
  localparam int DMIN = 2;
  localparam int DMAX = 20;

  `include "espim_host_body.svh"

  // watchdog: a hung handshake ends the run as a failure
  initial begin
    #(64'd500_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  espim_channel dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .res_valid_o(res_valid), .res_o(res), .ev_drop_o(ev_drop), .ev_starve_o(ev_starve),
    .ev_extract_o(ev_extract)
  );
endmodule
