// tb_efifo: self-checking test of the eFIFO against a queue model, with
// random pushes and pops, including push-while-full with a simultaneous pop
// and a synchronous clear.
module tb_efifo;
  import espim_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  elem_t din, head;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0, n_full_pp = 0;
  elem_t q[$];

  efifo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clear_i(clear), .push_i(push), .din_i(din),
    .pop_i(pop), .head_o(head), .empty_o(empty), .full_o(full), .count_o(count));

  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == DEPTH), "full");
      chk(count == 4'(q.size()), "count");
      if (q.size() > 0) chk(head == q[0], "head");
      pop   = (q.size() > 0) && ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 60));
      push  = ($urandom_range(0, 99) < 55) && ((q.size() < DEPTH) || pop);
      din   = elem_t'(17'($urandom));
      clear = (n == 1500);
      if (push && pop && q.size() == DEPTH) n_full_pp++;
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    chk(n_full_pp > 0, "push while full with pop seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
