// tb_global_buffer: self-checking test of the global buffer. Loads 32 random
// chunks, then checks that consecutive broadcasts deliver the chunks in
// order one cycle after the request, that the pointer wraps, that a restart
// returns to slice 0 and that loading a chunk does not disturb the others.
module tb_global_buffer;
  import espim_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, bc = 0, restart = 0;
  logic [4:0] chunk = 0;
  logic [COL_BITS-1:0] din = '0, dout;
  logic [4:0] ptr;
  logic [COL_BITS-1:0] model [32];
  int checks = 0, failures = 0;

  global_buffer dut (.clk, .rst_n, .load_i(load), .load_chunk_i(chunk), .load_data_i(din),
    .bcast_i(bc), .restart_i(restart), .bcast_data_o(dout), .ptr_o(ptr));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bcast_check(int expect_idx);
    @(negedge clk); bc = 1;
    @(negedge clk); bc = 0;
    checks++;
    if (dout !== model[expect_idx]) begin
      failures++; $display("FAIL broadcast expected chunk %0d", expect_idx);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 32; c++) begin
      @(negedge clk);
      load = 1; chunk = 5'(c);
      for (int w = 0; w < COL_BITS/32; w++) din[32*w +: 32] = $urandom;
      model[c] = din;
    end
    @(negedge clk); load = 0;
    for (int n = 0; n < 40; n++) bcast_check(n % 32);
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    checks++;
    if (ptr != 0) begin failures++; $display("FAIL restart"); end
    @(negedge clk); load = 1; chunk = 5'd1; din = ~model[1]; model[1] = din;
    @(negedge clk); load = 0;
    for (int n = 0; n < 3; n++) bcast_check(n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
