// tb_ififo: self-checking test of the iFIFO against a queue model.
// Random pushes (real entries and placeholders) and pops; checks the head,
// write-through on an empty FIFO, dropping of placeholders and of entries
// offered to a full FIFO, and the occupancy.
module tb_ififo;
  import espim_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  meta_t din, head;
  logic head_valid, dropped;
  logic [3:0] count;
  int checks = 0, failures = 0, n_full_drop = 0, n_wt = 0;
  meta_t q[$];

  ififo #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .clear_i(clear), .push_i(push), .din_i(din),
    .pop_i(pop), .head_o(head), .head_valid_o(head_valid), .dropped_o(dropped), .count_o(count));

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
      logic is_real, exp_store, exp_valid;
      meta_t exp_head;
      @(negedge clk);
      push = ($urandom_range(0, 99) < 55);
      din  = meta_t'(7'($urandom));
      if ($urandom_range(0, 9) == 0) begin din.valid = 0; din.start = 0; end
      is_real   = push && (din.valid || din.start);
      exp_store = is_real && (q.size() < DEPTH);
      // expected head, with write-through when empty
      exp_valid = (q.size() > 0) || exp_store;
      exp_head  = (q.size() > 0) ? q[0] : din;
      pop = exp_valid && ($urandom_range(0, 99) < 45);
      #1;
      chk(head_valid == exp_valid, "head_valid");
      if (exp_valid) chk(head == exp_head, "head value");
      chk(dropped == (is_real && !exp_store), "dropped");
      chk(count == 4'(q.size()), "count");
      if (is_real && !exp_store) n_full_drop++;
      if (exp_store && q.size() == 0 && pop) n_wt++;
      @(posedge clk);
      if (exp_store) q.push_back(din);
      if (pop) void'(q.pop_front());
    end
    chk(n_full_drop > 0, "full drop seen");
    chk(n_wt > 0, "write-through seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
