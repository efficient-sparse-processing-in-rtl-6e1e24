// espim_channel: top level of one ESPIM processing-in-memory channel.
//
// ESPIM computes sparse-matrix times dense-vector products inside DRAM. The
// matrix sits in the banks in a compressed, fine-grained interleaved layout;
// the vector sits in the channel's global buffer and is broadcast one
// 16-element slice at a time to all banks, which work in lockstep. Each bank
// has 11 execution units, one per matrix row segment, that prefetch cell
// indices into iFIFOs, pick the matching vector elements out of the
// broadcasts into eFIFOs through a small 4x11 switch, and multiply them with
// the cell values when those are read. An offline scheduler produced the
// command stream, including every broadcast stall, so the chip itself needs
// no sparsity control. With FLEXIBLE = 1 the banks also run dense matrices
// Newton-style on 16 MAC lanes.
//
// Contents: cmd_decoder, global_buffer, and per bank a dram_bank_model with
// an espim_bank datapath on its column I/O.
//
// Interface: host commands (pim_cmd_t) with a valid/ready handshake. RDRES
// for bank b puts that bank's two output buffers on res_o with res_valid_o
// one cycle later, and clears them. All activations and precharges are
// all-bank; WR writes one bank (ordinary DRAM write used to load the matrix).
// Event outputs pulse per cycle (OR over banks and units) so a test can see
// the mechanisms at work.
module espim_channel
  import espim_pkg::*;
#(
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned ROWS       = 32768,
  parameter int unsigned COLS       = 32,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter bit          FLEXIBLE   = 1'b1,
  parameter int unsigned T_RCD      = 10,
  parameter int unsigned T_RP       = 10,
  parameter int unsigned T_RAS      = 24,
  parameter int unsigned T_RTP      = 5,
  parameter int unsigned T_WTR      = 5
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid_i,
  output logic     cmd_ready_o,
  input  pim_cmd_t cmd_i,
  output logic     res_valid_o,
  output fp32_t    res_o [2][N_LANES],
  output logic     ev_drop_o,
  output logic     ev_starve_o,
  output logic     ev_extract_o
);

  logic act, pre, rd, wr, gb_load, gb_bcast, res_rd, dense;
  bank_op_e op;
  logic [1:0] sub;
  logic [COL_BITS-1:0] bcast;
  fp32_t bank_res [N_BANKS][2][N_LANES];
  logic [N_BANKS-1:0] drop_b, starve_b, extract_b;

  cmd_decoder #(.T_CCD_P(T_CCD), .T_RCD(T_RCD), .T_RP(T_RP),
                .T_RAS(T_RAS), .T_RTP(T_RTP), .T_WTR(T_WTR)) u_dec (
    .clk, .rst_n, .cmd_valid_i, .cmd_ready_o, .cmd_i,
    .act_o(act), .pre_o(pre), .rd_o(rd), .wr_o(wr), .gb_load_o(gb_load),
    .gb_bcast_o(gb_bcast), .res_rd_o(res_rd), .op_o(op), .sub_o(sub), .dense_o(dense)
  );

  global_buffer #(.N_CHUNKS(COLS)) u_gb (
    .clk, .rst_n, .load_i(gb_load), .load_chunk_i(cmd_i.col[$clog2(COLS)-1:0]),
    .load_data_i(cmd_i.data), .bcast_i(gb_bcast), .restart_i(res_rd),
    .bcast_data_o(bcast), .ptr_o()
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [COL_BITS-1:0] rdata;
    logic [N_SPARSE-1:0] drop, starve, extract;
    dram_bank_model #(.ROWS(ROWS), .COLS(COLS), .T_RCD(T_RCD), .T_RP(T_RP)) u_dram (
      .clk, .rst_n, .act_i(act), .row_i(cmd_i.row[$clog2(ROWS)-1:0]), .pre_i(pre),
      .rd_i(rd), .wr_i(wr && cmd_i.bank == BANK_W'(b)),
      .col_i(cmd_i.col[$clog2(COLS)-1:0]), .wdata_i(cmd_i.data), .rdata_o(rdata)
    );
    espim_bank #(.FIFO_DEPTH(FIFO_DEPTH), .FLEXIBLE(FLEXIBLE)) u_pim (
      .clk, .rst_n, .dense_i(dense), .op_i(op), .sub_i(sub), .col_i(rdata),
      .bcast_i(bcast), .rd_i(res_rd && cmd_i.bank == BANK_W'(b)),
      .res_o(bank_res[b]), .ev_drop_o(drop), .ev_starve_o(starve), .ev_extract_o(extract)
    );
    assign drop_b[b]    = |drop;
    assign starve_b[b]  = |starve;
    assign extract_b[b] = |extract;
  end

  // result read-out: capture the addressed bank before it clears
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid_o <= 1'b0;
      for (int k = 0; k < 2; k++)
        for (int l = 0; l < N_LANES; l++) res_o[k][l] <= '0;
    end else begin
      res_valid_o <= res_rd;
      if (res_rd) begin
        res_o     <= bank_res[cmd_i.bank];
      end
    end
  end

  assign ev_drop_o    = |drop_b;
  assign ev_starve_o  = |starve_b;
  assign ev_extract_o = |extract_b;

endmodule
