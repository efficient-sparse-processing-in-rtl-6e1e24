// global_buffer: the channel-wide vector buffer of ESPIM (as in Newton).
//
// Holds one vector-row, a DRAM-row-sized piece of the input vector: 32
// chunks of 256 bits, i.e. 512 bfloat16 elements in 32 slices of 16. The host
// fills it chunk by chunk (LOAD-GB#). Every COMP-BR broadcasts the next
// slice to all banks over the internal data buses; COMP-NoBR broadcasts
// nothing and the banks keep the slice they latched. A result read-out ends
// a pass over the vector-row, so the next broadcast starts again at slice 0.
//
// Timing: load_i writes at the rising edge. bcast_i at edge t puts slice
// `ptr` on bcast_data_o from t+1 (registered), which is the first sub-cycle
// of the column command that asked for it, and advances the pointer.
// The buffer size and the slice-by-slice broadcast follow the paper; the
// pointer and its restart rule are this design's choices (the paper only
// says slices are broadcast sequentially).
module global_buffer
  import espim_pkg::*;
#(
  parameter int unsigned N_CHUNKS = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load_i,
  input  logic [$clog2(N_CHUNKS)-1:0] load_chunk_i,
  input  logic [COL_BITS-1:0]         load_data_i,
  input  logic                        bcast_i,
  input  logic                        restart_i,
  output logic [COL_BITS-1:0]         bcast_data_o,
  output logic [$clog2(N_CHUNKS)-1:0] ptr_o
);

  localparam int unsigned PW = $clog2(N_CHUNKS);

  logic [COL_BITS-1:0] mem [N_CHUNKS];
  logic [PW-1:0]       ptr;

  always_ff @(posedge clk) begin
    if (load_i) mem[load_chunk_i] <= load_data_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr          <= '0;
      bcast_data_o <= '0;
    end else if (restart_i) begin
      ptr <= '0;
    end else if (bcast_i) begin
      bcast_data_o <= mem[ptr];
      ptr          <= (ptr == PW'(N_CHUNKS-1)) ? '0 : ptr + 1'b1;
    end
  end

  assign ptr_o = ptr;

  assert property (@(posedge clk) disable iff (!rst_n) !(bcast_i && restart_i))
    else $error("global_buffer: broadcast and restart in one cycle");

endmodule
