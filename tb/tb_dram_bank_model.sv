// tb_dram_bank_model: self-checking test of the DRAM bank model: writes to
// columns of two rows far apart, reads them back through activations and
// precharges honouring tRCD and tRP, checks the one-cycle read latency and
// that unwritten columns read as zero.
module tb_dram_bank_model;
  import espim_pkg::*;

  logic clk = 0, rst_n = 0, act = 0, pre = 0, rd = 0, wr = 0;
  logic [14:0] row = 0;
  logic [4:0] col = 0;
  logic [COL_BITS-1:0] wdata = '0, rdata;
  logic [COL_BITS-1:0] model [2][32];
  int checks = 0, failures = 0;
  int rows [2] = '{17, 32000};

  dram_bank_model dut (.clk, .rst_n, .act_i(act), .row_i(row), .pre_i(pre), .rd_i(rd),
    .wr_i(wr), .col_i(col), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic open_row(int r);
    @(negedge clk); act = 1; row = 15'(r);
    @(negedge clk); act = 0;
    repeat (10) @(negedge clk);
  endtask

  task automatic close_row();
    @(negedge clk); pre = 1;
    @(negedge clk); pre = 0;
    repeat (10) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    for (int r = 0; r < 2; r++) begin
      open_row(rows[r]);
      for (int c = 0; c < 32; c++) begin
        @(negedge clk);
        wr = (c % 3 != 2); col = 5'(c);
        for (int w = 0; w < COL_BITS/32; w++) wdata[32*w +: 32] = $urandom;
        model[r][c] = wr ? wdata : '0;
      end
      @(negedge clk); wr = 0;
      close_row();
    end
    for (int r = 1; r >= 0; r--) begin
      open_row(rows[r]);
      for (int c = 31; c >= 0; c--) begin
        @(negedge clk); rd = 1; col = 5'(c);
        @(negedge clk); rd = 0;
        checks++;
        if (rdata !== model[r][c]) begin failures++; $display("FAIL row %0d col %0d", rows[r], c); end
      end
      close_row();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
