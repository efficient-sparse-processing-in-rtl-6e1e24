// exec_unit: one ESPIM execution unit ("U"), the sparse lane of a bank.
//
// Holds an iFIFO of prefetched metadata, an eFIFO of extracted vector
// elements, the extraction control, a 2:1 multiplexer on the MAC's vector
// input (eFIFO head in sparse mode, the broadcast element in dense mode), one
// bf16 MAC and two fp32 accumulators, this lane's entry in each of the bank's
// two output buffers.
//
// A column command lasts four cycles, sub-cycles 0..3 (tCCD = 4):
//  * sub-cycle 0 of COMP-BR / COMP-NoBR, sparse mode: the column's matrix
//    value is multiplied with the eFIFO head and added into the output
//    buffer named by the head's select bit; the head is popped. If the eFIFO
//    is empty nothing is accumulated: the scheduler put a zero value there.
//    Dense mode, COMP-BR: value times broadcast element into buffer 0.
//  * meta_push_i offers a metadata entry to the iFIFO (sub-cycle 0 of a
//    compute command, sub-cycles 0..2 of LOAD-IDX).
//  * every sub-cycle i of COMP-BR / COMP-NoBR, sparse mode: the switch has
//    selected the slice element addressed by the iFIFO head's low index bits
//    and reports whether the index lies in range 4i..4i+3. The head is
//    retired if it belongs to the current slice and (valid) it hits and the
//    eFIFO can take the element, or (invalid, i.e. no match in its slice) at
//    once without writing the eFIFO.
//    "Belongs to the current slice": in COMP-BR the first retired entry must
//    carry the start bit and later ones must not; in COMP-NoBR only entries
//    without start bit are retired. A one-bit flag remembers whether the
//    start entry of the current broadcast has been taken.
// These rules are the paper's; the cycle-level order within a command
// (compute, then push, then extraction, write-through iFIFO) is this
// design's choice and the offline scheduler must follow it.
module exec_unit
  import espim_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       dense_i,        // 1: dense mode (FIFOs idle)
  input  bank_op_e   op_i,
  input  logic [1:0] sub_i,
  input  logic       clear_i,        // result read: clear buffers and FIFOs
  input  bf16_t      value_i,        // matrix value of this lane
  input  logic       meta_push_i,
  input  meta_t      meta_i,
  input  bf16_t      sw_elem_i,      // switch output for this unit
  input  logic       sw_hit_i,
  input  bf16_t      dense_elem_i,   // broadcast element of this lane
  output logic [3:0] head_idx_o,     // iFIFO head index, to the switch
  output fp32_t      acc_o [2],      // output buffer entries 0 and 1
  output logic       ev_drop_o,      // a real index met a full iFIFO
  output logic       ev_starve_o,    // compute found the eFIFO empty
  output logic       ev_extract_o    // an element entered the eFIFO
);

  meta_t  ihead;
  logic   ihead_valid, idrop;
  elem_t  ehead, edin;
  logic   eempty, efull, epush, epop, ipop;
  logic   is_comp, is_br, compute, took_q, took_eff, can_take;
  fp32_t  acc_q [2];
  fp32_t  mac_acc_in, mac_out;
  bf16_t  mac_b;
  logic   acc_sel, acc_we;

  assign is_comp = (op_i == BOP_COMP_BR) || (op_i == BOP_COMP_NOBR);
  assign is_br   = (op_i == BOP_COMP_BR);
  assign compute = is_comp && (sub_i == 2'd0);

  ififo #(.DEPTH(FIFO_DEPTH)) u_ififo (
    .clk, .rst_n, .clear_i,
    .push_i(meta_push_i && !dense_i), .din_i(meta_i),
    .pop_i(ipop), .head_o(ihead), .head_valid_o(ihead_valid),
    .dropped_o(idrop), .count_o()
  );

  efifo #(.DEPTH(FIFO_DEPTH)) u_efifo (
    .clk, .rst_n, .clear_i,
    .push_i(epush), .din_i(edin), .pop_i(epop),
    .head_o(ehead), .empty_o(eempty), .full_o(efull), .count_o()
  );

  // ---- extraction control ----
  assign took_eff = (is_br && sub_i == 2'd0) ? 1'b0 : took_q;
  always_comb begin
    can_take = 1'b0;
    if (!dense_i && is_comp && ihead_valid) begin
      if (is_br) can_take = ihead.start ? !took_eff : took_eff;
      else       can_take = !ihead.start;
    end
  end
  assign epop  = compute && !dense_i && !eempty;
  assign epush = can_take && ihead.valid && sw_hit_i && (!efull || epop);
  assign ipop  = can_take && (!ihead.valid || epush);
  assign edin  = '{sel: ihead.sel, elem: sw_elem_i};

  always_ff @(posedge clk) begin
    if (!rst_n || clear_i) took_q <= 1'b0;
    else if (is_comp)      took_q <= took_eff | (ipop && ihead.start);
  end

  // ---- MAC with its 2:1 vector-input multiplexer ----
  always_comb begin
    mac_b      = dense_i ? dense_elem_i : ehead.elem;
    acc_sel    = dense_i ? 1'b0 : ehead.sel;
    mac_acc_in = acc_q[acc_sel];
    acc_we     = dense_i ? (is_br && sub_i == 2'd0) : epop;
  end

  bf16_mac u_mac (.a_i(value_i), .b_i(mac_b), .acc_i(mac_acc_in), .acc_o(mac_out));

  always_ff @(posedge clk) begin
    if (!rst_n || clear_i) begin
      acc_q[0] <= '0;
      acc_q[1] <= '0;
    end else if (acc_we) begin
      acc_q[acc_sel] <= mac_out;
    end
  end

  assign acc_o        = acc_q;
  assign head_idx_o   = ihead.idx;
  assign ev_drop_o    = idrop;
  assign ev_starve_o  = compute && !dense_i && eempty;
  assign ev_extract_o = epush;

endmodule
