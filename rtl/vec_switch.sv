// vec_switch: ESPIM's simplified 4xN switch between the broadcast slice latch
// and the execution units' eFIFOs.
//
// Instead of a 16xN crossbar, the tCCD = 4 cycles between broadcasts are used
// to serialise the selection: in sub-cycle i (0..3) a shared 16-to-4 stage
// presents elements 4i..4i+3 of the latched slice, and each unit has one
// 4-to-1 multiplexer steered by the low two bits of its iFIFO head index.
// The high two index bits are compared with i; hit_o[u] says that unit u's
// index lies in the range handled this sub-cycle. Each unit can therefore
// take at most one element per cycle and up to four per broadcast, one per
// index range. This structure is the paper's; the module is combinational.
module vec_switch
  import espim_pkg::*;
#(
  parameter int unsigned N_UNITS = 11
) (
  input  bf16_t      slice_i [SLICE],
  input  logic [1:0] sub_i,
  input  logic [3:0] idx_i  [N_UNITS],
  output bf16_t      elem_o [N_UNITS],
  output logic       hit_o  [N_UNITS]
);

  bf16_t group [4];

  // shared input stage: the i-th group of four contiguous elements
  always_comb begin
    for (int j = 0; j < 4; j++) group[j] = slice_i[{sub_i, 2'(j)}];
  end

  // one 4-to-1 multiplexer and one range comparator per unit
  always_comb begin
    for (int u = 0; u < N_UNITS; u++) begin
      elem_o[u] = group[idx_i[u][1:0]];
      hit_o[u]  = (idx_i[u][3:2] == sub_i);
    end
  end

endmodule
