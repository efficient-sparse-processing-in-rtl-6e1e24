// tb_cmd_decoder: self-checking test of the command front end. Sends a
// stream of commands as fast as the handshake allows and checks, cycle by
// cycle, the strobes of the accepting cycle, the sub-cycle sequence 0..3 of
// each column command, the command rate (one column command per tCCD = 4
// cycles, ACT every tRCD, PRE every tRP, PRE no earlier than tRAS after ACT
// and tRTP after a read, a read no earlier than tCCD + tWTR after a WR) and
// the mode register.
module tb_cmd_decoder;
  import espim_pkg::*;

  logic clk = 0, rst_n = 0, valid = 0, ready;
  pim_cmd_t cmd;
  logic act, pre, rd, wr, gbl, gbb, rres, dense;
  bank_op_e op;
  logic [1:0] sub;
  int checks = 0, failures = 0, cyc = 0;

  cmd_decoder dut (.clk, .rst_n, .cmd_valid_i(valid), .cmd_ready_o(ready), .cmd_i(cmd),
    .act_o(act), .pre_o(pre), .rd_o(rd), .wr_o(wr), .gb_load_o(gbl), .gb_bcast_o(gbb),
    .res_rd_o(rres), .op_o(op), .sub_o(sub), .dense_o(dense));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected behaviour
  cmd_op_e seq [] = '{CMD_MODE, CMD_ACT, CMD_LOAD_IDX, CMD_COMP_BR, CMD_COMP_NOBR, CMD_COMP_BR,
                      CMD_WR, CMD_RDRES, CMD_LOAD_GB, CMD_PRE, CMD_ACT, CMD_COMP_BR,
                      CMD_PRE, CMD_ACT, CMD_WR, CMD_COMP_BR, CMD_COMP_BR, CMD_PRE};
  // after the second ACT: PRE waits for tRAS (24 after ACT = 14 after the
  // read), a read after WR waits tCCD + tWTR = 9, PRE after a read tRTP = 5
  int gap [] = '{1, 10, 4, 4, 4, 4, 4, 1, 1, 10, 10, 14, 10, 10, 9, 4, 5, 0};

  initial begin
    int t_prev, t_now;
    cmd = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t_prev = -1;
    foreach (seq[i]) begin
      cmd = '0; cmd.op = seq[i]; cmd.dense = 1'b1;
      valid = 1;
      #1;
      while (!ready) begin @(negedge clk); #1; end
      t_now = cyc;
      if (i > 0) chk(t_now - t_prev == gap[i-1], $sformatf("spacing after command %0d", i-1));
      t_prev = t_now;
      chk(act == (seq[i] == CMD_ACT), "act");
      chk(pre == (seq[i] == CMD_PRE), "pre");
      chk(wr == (seq[i] == CMD_WR), "wr");
      chk(rd == (seq[i] inside {CMD_LOAD_IDX, CMD_COMP_BR, CMD_COMP_NOBR}), "rd");
      chk(gbb == (seq[i] == CMD_COMP_BR), "broadcast");
      chk(gbl == (seq[i] == CMD_LOAD_GB), "gb load");
      chk(rres == (seq[i] == CMD_RDRES), "result read");
      @(negedge clk);
      valid = 0;
      if (seq[i] inside {CMD_LOAD_IDX, CMD_COMP_BR, CMD_COMP_NOBR}) begin
        for (int s = 0; s < 4; s++) begin
          chk(sub == 2'(s), "sub-cycle");
          chk(op == ((seq[i] == CMD_LOAD_IDX) ? BOP_LOAD_IDX :
                     (seq[i] == CMD_COMP_BR) ? BOP_COMP_BR : BOP_COMP_NOBR), "bank op");
          if (s < 3) @(negedge clk);
        end
      end
    end
    @(negedge clk); @(negedge clk);
    chk(op == BOP_IDLE, "idle at end");
    chk(dense == 1'b1, "mode register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
