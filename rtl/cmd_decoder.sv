// cmd_decoder: the command front end of a headless ESPIM channel.
//
// ESPIM keeps almost no control on chip: the offline scheduler (static
// data-dependent scheduling) has already decided, cycle by cycle, when to
// broadcast, stall, prefetch indices and read results, and the host sends
// that command stream in order. This block only turns each command into the
// strobes of one cycle and, for the column commands, into four sub-cycles
// (tCCD = 4) during which the banks' switch is used once per index range.
//
// Handshake: a command is taken when cmd_valid_i && cmd_ready_o. At that
// edge t the DRAM/global-buffer strobes are asserted combinationally
// (act_o, pre_o, rd_o, wr_o, gb_load_o, gb_bcast_o, res_rd_o); a column
// command then shows op_o/sub_o = 0..3 at t+1..t+4 and cmd_ready_o returns
// at t+4, so back-to-back column commands run at one per tCCD. ALL-ACT holds
// ready low for tRCD cycles, PRE for tRP, WR for tCCD. On top of that a PRE
// is held back until tRAS after the ACT and tRTP after the last column read,
// and a column read until tCCD + tWTR after a WR; so cmd_ready_o also depends
// on the offered opcode. tRRD does not arise (every activation is all-bank)
// and tRC = tRAS + tRP follows from the two. The timing values are the
// paper's (tRCD 10, tRP 10, tRAS 24, tRTP 5, tWTR 5, tCCD 4); in the paper the
// host itself respects DRAM timing, and holding ready low is this design's
// way of doing the same. The encoding and the mode command are its own.
module cmd_decoder
  import espim_pkg::*;
#(
  parameter int unsigned T_CCD_P = 4,
  parameter int unsigned T_RCD   = 10,
  parameter int unsigned T_RP    = 10,
  parameter int unsigned T_RAS   = 24,
  parameter int unsigned T_RTP   = 5,
  parameter int unsigned T_WTR   = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  pim_cmd_t             cmd_i,
  // strobes in the accepting cycle
  output logic                 act_o,
  output logic                 pre_o,
  output logic                 rd_o,
  output logic                 wr_o,
  output logic                 gb_load_o,
  output logic                 gb_bcast_o,
  output logic                 res_rd_o,
  // per-cycle control of the bank datapaths
  output bank_op_e             op_o,
  output logic [1:0]           sub_o,
  output logic                 dense_o
);

  localparam int unsigned WAIT_W = 8;

  logic              take;
  logic [WAIT_W-1:0] wait_q;
  logic [1:0]        sub_q;
  bank_op_e          op_q;
  logic              dense_q;
  logic              is_col;
  logic [WAIT_W-1:0] ras_q, rtp_q, wtr_q;   // per-constraint hold-offs
  logic              blocked;

  // PRE waits for tRAS after ACT and tRTP after the last column read; a
  // column read waits for tWTR after the write data of a WR (tCCD + tWTR
  // after the WR command).
  assign blocked     = (cmd_i.op == CMD_PRE && (ras_q != '0 || rtp_q != '0)) ||
                       (is_col && wtr_q != '0);
  assign cmd_ready_o = (wait_q == '0) && !blocked;
  assign take        = cmd_valid_i && cmd_ready_o;
  assign is_col      = cmd_i.op inside {CMD_LOAD_IDX, CMD_COMP_NOBR, CMD_COMP_BR};

  assign act_o      = take && cmd_i.op == CMD_ACT;
  assign pre_o      = take && cmd_i.op == CMD_PRE;
  assign wr_o       = take && cmd_i.op == CMD_WR;
  assign rd_o       = take && is_col;
  assign gb_load_o  = take && cmd_i.op == CMD_LOAD_GB;
  assign gb_bcast_o = take && cmd_i.op == CMD_COMP_BR;
  assign res_rd_o   = take && cmd_i.op == CMD_RDRES;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wait_q  <= '0;
      ras_q   <= '0;
      rtp_q   <= '0;
      wtr_q   <= '0;
      op_q    <= BOP_IDLE;
      sub_q   <= '0;
      dense_q <= 1'b0;
    end else begin
      // sub-cycle sequencer
      if (take && is_col) begin
        sub_q <= '0;
        unique case (cmd_i.op)
          CMD_LOAD_IDX:  op_q <= BOP_LOAD_IDX;
          CMD_COMP_NOBR: op_q <= BOP_COMP_NOBR;
          default:       op_q <= BOP_COMP_BR;
        endcase
      end else if (op_q != BOP_IDLE) begin
        if (sub_q == 2'(T_CCD_P - 1)) op_q <= BOP_IDLE;
        sub_q <= sub_q + 1'b1;
      end
      // timing hold-off
      if (take) begin
        unique case (cmd_i.op)
          CMD_ACT:                                wait_q <= WAIT_W'(T_RCD - 1);
          CMD_PRE:                                wait_q <= WAIT_W'(T_RP - 1);
          CMD_WR, CMD_LOAD_IDX,
          CMD_COMP_NOBR, CMD_COMP_BR:             wait_q <= WAIT_W'(T_CCD_P - 1);
          default:                                wait_q <= '0;
        endcase
        if (cmd_i.op == CMD_MODE) dense_q <= cmd_i.dense;
      end else if (wait_q != '0) begin
        wait_q <= wait_q - 1'b1;
      end
      if (act_o)           ras_q <= WAIT_W'(T_RAS - 1);
      else if (ras_q != '0) ras_q <= ras_q - 1'b1;
      if (rd_o)            rtp_q <= WAIT_W'(T_RTP - 1);
      else if (rtp_q != '0) rtp_q <= rtp_q - 1'b1;
      if (wr_o)            wtr_q <= WAIT_W'(T_CCD_P + T_WTR - 1);
      else if (wtr_q != '0) wtr_q <= wtr_q - 1'b1;
    end
  end

  assign op_o    = op_q;
  assign sub_o   = sub_q;
  assign dense_o = dense_q;

  // a column command must not start while the previous one is in flight
  assert property (@(posedge clk) disable iff (!rst_n)
                   (take && is_col) |-> (op_q == BOP_IDLE || sub_q == 2'(T_CCD_P - 1)))
    else $error("cmd_decoder: column commands overlap");

endmodule
