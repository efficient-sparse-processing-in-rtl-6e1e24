// tb_espim_channel: end-to-end test of the ESPIM channel at reduced size
// (2 banks, vector-rows of 8 slices, 2 row groups x 2 vector-rows), see
// espim_host_body.svh for what it does and checks.
module tb_espim_channel;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NB = 2;
  localparam int NS = 8;
  localparam int G  = 2;
  localparam int P  = 2;
  localparam int DMIN = 2;
  localparam int DMAX = 20;

  `include "espim_host_body.svh"

  // watchdog: a hung handshake ends the run as a failure
  initial begin
    #(64'd200_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  espim_channel #(.N_BANKS(NB)) dut (
    .clk, .rst_n, .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .res_valid_o(res_valid), .res_o(res), .ev_drop_o(ev_drop), .ev_starve_o(ev_starve),
    .ev_extract_o(ev_extract)
  );
endmodule
