// tb_espim_sparsity50: the low-sparsity end of the LLaMA-7B sparsity sweep
// (50 % to 90 % sparsity) on the ESPIM channel at its default size. One row
// group of 352 rows against two vector-rows (1024 vector elements), row
// densities drawn from 45..55 %, small integer values so that every output
// can be checked exactly. At this density every unit has several cells in
// almost every slice, so the run exercises the switch's reordering, full
// iFIFOs (placeholders) and the eFIFO limits much harder than the sparse
// runs; invalid (empty-slice) entries do not occur. The 90 % end is covered
// by tb_espim_llama. See espim_host_body.svh for the host sequence and the
// checks.
module tb_espim_sparsity50;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NB = 16;
  localparam int NS = 32;
  localparam int G  = 1;
  localparam int P  = 2;
  localparam int DMIN = 45;
  localparam int DMAX = 55;

  `include "espim_host_body.svh"

  // watchdog: a hung handshake ends the run as a failure
  initial begin
    #(64'd2_000_000_000);
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
