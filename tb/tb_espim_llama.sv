// tb_espim_llama: a whole LLaMA-7B attention projection on the ESPIM channel
// at its default size. The attention projections (wq, wk, wv, wo) are
// 4096 x 4096 matrices multiplied by a 4096-element vector, evaluated at 90 %
// sparsity. The test runs 12 row groups of 352 rows (4224 rows: the 4096 of
// the layer rounded up to whole row groups) across the whole 4096-element
// vector, i.e. 8 vector-rows of 512 elements: 96 passes, whose partial sums
// per vector-row the host adds. Row densities are drawn from 8..12 % (about
// 90 % sparsity, unstructured). Values are small integers rather than trained
// weights so that every output can be checked exactly; the layer size and the
// sparsity are those of the workload, the values are not. The feed-forward
// layers (11008 x 4096, 4096 x 11008) differ only in the number of row
// groups (32) and vector-rows (22). See espim_host_body.svh for the host
// sequence and the checks. Runs in about half a minute.
module tb_espim_llama;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NB = 16;
  localparam int NS = 32;
  localparam int G  = 12;
  localparam int P  = 8;
  localparam int DMIN = 8;
  localparam int DMAX = 12;

  `include "espim_host_body.svh"

  // watchdog: a hung handshake ends the run as a failure
  initial begin
    #(64'd5_000_000_000);
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
