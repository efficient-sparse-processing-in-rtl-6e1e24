// ififo: the matrix cell-index FIFO (iFIFO) of one ESPIM execution unit.
//
// A strict, non-searching FIFO of 7-bit metadata entries {select, start,
// valid, index}. Column reads offer one entry per command (up to three for an
// index-only column); the switch retires entries from the head.
//  * An offered entry is stored unless it is a placeholder (valid=0 and
//    start=0) or the FIFO is full; in both cases it is dropped and
//    dropped_o pulses when a real entry met a full FIFO. The offline
//    scheduler puts a placeholder wherever it knows the FIFO is full, as the
//    paper describes; dropping on full is the same rule applied in hardware.
//  * Fullness is judged on the occupancy at the start of the cycle, so a pop
//    in the same cycle does not make room for the push.
//  * Write-through: when the FIFO is empty, an entry being stored is already
//    visible at the head in the same cycle and may be popped at once, so an
//    index can meet the broadcast that arrives with its own column read.
// Reset is synchronous and active low. Interface timing: push_i/din_i and pop_i are sampled at the rising edge;
// head_o/head_valid_o are combinational from state and din_i.
// Depth 8 and 7-bit width follow the paper; the placeholder encoding and
// write-through are choices of this design.
module ififo
  import espim_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear_i,       // synchronous flush
  input  logic  push_i,
  input  meta_t din_i,
  input  logic  pop_i,
  output meta_t head_o,
  output logic  head_valid_o,
  output logic  dropped_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  meta_t             mem [DEPTH];
  logic [AW-1:0]     rptr, wptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic              real_entry, store, do_pop;

  assign real_entry = push_i && (din_i.valid || din_i.start);
  assign store      = real_entry && (count < ($clog2(DEPTH+1))'(DEPTH));
  assign dropped_o  = real_entry && !store;

  always_comb begin
    if (count != '0) begin
      head_o       = mem[rptr];
      head_valid_o = 1'b1;
    end else begin
      head_o       = din_i;            // write-through when empty
      head_valid_o = store;
    end
  end

  assign do_pop  = pop_i && head_valid_o;
  assign count_o = count;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else if (clear_i) begin
      rptr  <= '0;
      wptr  <= '0;
      count <= '0;
    end else begin
      if (store) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(store) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (store) mem[wptr] <= din_i;
  end

  // A pop is only requested when the head is meaningful.
  assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> head_valid_o)
    else $error("ififo: pop of an empty FIFO");

endmodule
