// efifo: the vector-element FIFO (eFIFO) of one ESPIM execution unit.
//
// A strict FIFO of extracted vector elements. The switch writes at most one
// element per cycle at the tail; a compute column read takes the head, which
// the MAC multiplies with the matrix value that arrives in that column.
// Each entry is a bfloat16 element plus the select bit that travelled with
// its index, naming the output buffer its product goes to (17 bits; the paper
// sizes the eFIFO at 16 bits and does not say where the select bit is kept
// once values and indices are decoupled, so carrying it here is this
// design's choice).
// A push while full is accepted only when the head is popped in the same
// cycle. Reset is synchronous and active low. Timing: inputs sampled at the rising edge; head_o, empty_o and
// full_o are registered-state outputs.
module efifo
  import espim_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear_i,
  input  logic  push_i,
  input  elem_t din_i,
  input  logic  pop_i,
  output elem_t head_o,
  output logic  empty_o,
  output logic  full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  elem_t         mem [DEPTH];
  logic [AW-1:0] rptr, wptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic          do_push, do_pop;

  assign empty_o = (count == '0);
  assign full_o  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head_o  = mem[rptr];
  assign count_o = count;
  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && (!full_o || do_pop);

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
      if (do_push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din_i;
  end

  assert property (@(posedge clk) disable iff (!rst_n) push_i |-> (!full_o || pop_i))
    else $error("efifo: push into a full FIFO");

endmodule
