// espim_bank: the ESPIM datapath attached to one DRAM bank.
//
// Every column command brings one 256-bit column from the bank's row buffer
// (col_i, valid in sub-cycle 0) and, for COMP-BR, one 256-bit vector slice on
// the channel's broadcast bus (bcast_i, valid in sub-cycle 0), which is kept
// in the slice latch for the following COMP-NoBR commands.
//
// Column layout (shared by both modes, so only the MAC vector input needs a
// multiplexer):
//   bits [16u+15:16u], u = 0..10   matrix values D0..D10 (bfloat16)
//   dense mode, u = 11..15         matrix values D11..D15
//   sparse mode, bits 176+7u..     metadata I0..I10, 7 bits each
//                                  {select, start, valid, index[3:0]}
//   index-only column (LOAD-IDX)   33 metadata fields, field 11s+u at bits
//                                  7(11s+u), pushed to unit u in sub-cycle s
// The 11-values-then-metadata layout, the 11 sparse units with FIFOs and the
// 5 dense-only lanes follow the paper; the index-only packing is this
// design's choice (the paper says only that indices are packed there).
//
// The shared input stage of the switch, the 11 execution units and, when
// FLEXIBLE = 1, five dense-only MAC lanes (value times broadcast element,
// output buffer 0) make up the datapath. The two output buffers hold 16 fp32
// entries each (buffer 1 entries 11..15 are always zero). rd_i reads them on
// res_o and clears them at the next edge together with the FIFOs.
module espim_bank
  import espim_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter bit          FLEXIBLE   = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                dense_i,
  input  bank_op_e            op_i,
  input  logic [1:0]          sub_i,
  input  logic [COL_BITS-1:0] col_i,
  input  logic [COL_BITS-1:0] bcast_i,
  input  logic                rd_i,
  output fp32_t               res_o [2][N_LANES],
  output logic [N_SPARSE-1:0] ev_drop_o,
  output logic [N_SPARSE-1:0] ev_starve_o,
  output logic [N_SPARSE-1:0] ev_extract_o
);

  logic [COL_BITS-1:0] col_q, col_eff, slice_eff;
  logic [COL_BITS-1:0] slice_q;
  logic                first;
  bf16_t               slice_elems [SLICE];
  bf16_t               sw_elem [N_SPARSE];
  logic                sw_hit  [N_SPARSE];
  logic [3:0]          head_idx [N_SPARSE];
  logic                dense_eff;

  assign dense_eff = FLEXIBLE ? dense_i : 1'b0;
  assign first     = (sub_i == 2'd0) && (op_i != BOP_IDLE);

  // column word and slice latch: fresh in sub-cycle 0, held afterwards
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_q   <= '0;
      slice_q <= '0;
    end else begin
      if (first) col_q <= col_i;
      if (first && op_i == BOP_COMP_BR) slice_q <= bcast_i;
    end
  end
  assign col_eff   = first ? col_i : col_q;
  assign slice_eff = (first && op_i == BOP_COMP_BR) ? bcast_i : slice_q;

  always_comb begin
    for (int e = 0; e < SLICE; e++) slice_elems[e] = slice_eff[16*e +: 16];
  end

  vec_switch #(.N_UNITS(N_SPARSE)) u_switch (
    .slice_i(slice_elems), .sub_i, .idx_i(head_idx), .elem_o(sw_elem), .hit_o(sw_hit)
  );

  // ---- sparse execution units ----
  for (genvar u = 0; u < N_SPARSE; u++) begin : g_unit
    logic  push;
    meta_t meta;
    fp32_t acc [2];
    always_comb begin
      push = 1'b0;
      meta = META_PLACEHOLDER;
      if (op_i == BOP_LOAD_IDX && sub_i < 2'(IDX_SLOTS)) begin
        push = 1'b1;
        meta = meta_t'(col_eff[META_BITS*(N_SPARSE*sub_i + u) +: META_BITS]);
      end else if ((op_i == BOP_COMP_BR || op_i == BOP_COMP_NOBR) && sub_i == 2'd0) begin
        push = 1'b1;
        meta = meta_t'(col_eff[META_BASE + META_BITS*u +: META_BITS]);
      end
    end
    exec_unit #(.FIFO_DEPTH(FIFO_DEPTH)) u_exec (
      .clk, .rst_n, .dense_i(dense_eff), .op_i, .sub_i, .clear_i(rd_i),
      .value_i(col_eff[16*u +: 16]), .meta_push_i(push), .meta_i(meta),
      .sw_elem_i(sw_elem[u]), .sw_hit_i(sw_hit[u]),
      .dense_elem_i(slice_elems[u]), .head_idx_o(head_idx[u]), .acc_o(acc),
      .ev_drop_o(ev_drop_o[u]), .ev_starve_o(ev_starve_o[u]),
      .ev_extract_o(ev_extract_o[u])
    );
    assign res_o[0][u] = acc[0];
    assign res_o[1][u] = acc[1];
  end

  // ---- dense-only lanes (flexible configuration) ----
  for (genvar l = N_SPARSE; l < N_LANES; l++) begin : g_dense
    if (FLEXIBLE) begin : g_on
      fp32_t acc_q, mac_out;
      bf16_mac u_mac (.a_i(col_eff[16*l +: 16]), .b_i(slice_elems[l]),
                      .acc_i(acc_q), .acc_o(mac_out));
      always_ff @(posedge clk) begin
        if (!rst_n || rd_i) acc_q <= '0;
        else if (dense_eff && op_i == BOP_COMP_BR && sub_i == 2'd0) acc_q <= mac_out;
      end
      assign res_o[0][l] = acc_q;
    end else begin : g_off
      assign res_o[0][l] = '0;
    end
    assign res_o[1][l] = '0;
  end

endmodule
