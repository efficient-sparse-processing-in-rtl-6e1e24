// dram_bank_model: behavioural model of one DRAM bank (cell array, sense
// amplifiers / row buffer and column I/O). Not synthesizable logic: the cell
// array is a process-specific macro, stood in for here by a sparse
// associative array so that the full 32768 x 32 x 256-bit bank can be
// simulated; columns never written read as zero.
//
// act_i opens row_i into the row buffer; pre_i closes it. rd_i/wr_i access
// column col_i of the open row; read data appears on rdata_o one cycle after
// rd_i (registered). Writes go straight to the array. Assertions check that
// column accesses hit an open row and come at least T_RCD cycles after the
// activation, and that an activation finds the bank precharged, at least
// T_RP cycles after the precharge. The geometry and timing numbers are the
// paper's HBM2E-like configuration.
module dram_bank_model
  import espim_pkg::*;
#(
  parameter int unsigned ROWS  = 32768,
  parameter int unsigned COLS  = 32,
  parameter int unsigned T_RCD = 10,
  parameter int unsigned T_RP  = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    act_i,
  input  logic [$clog2(ROWS)-1:0] row_i,
  input  logic                    pre_i,
  input  logic                    rd_i,
  input  logic                    wr_i,
  input  logic [$clog2(COLS)-1:0] col_i,
  input  logic [COL_BITS-1:0]     wdata_i,
  output logic [COL_BITS-1:0]     rdata_o
);

  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  logic [COL_BITS-1:0] cells [logic [RW+CW-1:0]];
  logic                open_q;
  logic [RW-1:0]       row_q;
  int unsigned         since_act, since_pre;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      open_q    <= 1'b0;
      row_q     <= '0;
      rdata_o   <= '0;
      since_act <= 0;
      since_pre <= T_RP;
    end else begin
      since_act <= (since_act < 1000) ? since_act + 1 : since_act;
      since_pre <= (since_pre < 1000) ? since_pre + 1 : since_pre;
      if (act_i) begin
        open_q    <= 1'b1;
        row_q     <= row_i;
        since_act <= 1;
      end
      if (pre_i) begin
        open_q    <= 1'b0;
        since_pre <= 1;
      end
      if (rd_i) begin
        if (cells.exists({row_q, col_i})) rdata_o <= cells[{row_q, col_i}];
        else                              rdata_o <= '0;
      end
    end
  end

  // array write (blocking: the array is a simulation-only store)
  always @(posedge clk) begin
    if (rst_n && wr_i) cells[{row_q, col_i}] = wdata_i;
  end

  assert property (@(posedge clk) disable iff (!rst_n) (rd_i || wr_i) |-> open_q)
    else $error("dram_bank_model: column access to a closed bank");
  assert property (@(posedge clk) disable iff (!rst_n) (rd_i || wr_i) |-> since_act >= T_RCD)
    else $error("dram_bank_model: tRCD violated");
  assert property (@(posedge clk) disable iff (!rst_n) act_i |-> (!open_q && since_pre >= T_RP))
    else $error("dram_bank_model: activation of an open bank or tRP violated");

endmodule
