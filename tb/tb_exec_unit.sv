// tb_exec_unit: self-checking test of one execution unit.
// The unit is driven as the bank drives it: per command four sub-cycles,
// metadata pushed in sub-cycle 0 (0..2 for LOAD-IDX), matrix value in
// sub-cycle 0. The switch is modelled here from its definition (element
// 4*sub + idx[1:0] of the latched slice, hit when idx[3:2] == sub). Cases:
// the two rows of the scheduling example in the text (indices 5, 34 and
// 10, 20, 21, 40, here sharing one unit through the select bit), then random
// rows. The two accumulators must equal the exact inner products, and the
// number of eFIFO insertions must equal the number of non-zero cells.
module tb_exec_unit;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NS = 4;

  logic clk = 0, rst_n = 0, dense = 0, clear = 0, meta_push = 0;
  bank_op_e op = BOP_IDLE;
  logic [1:0] sub = 0;
  bf16_t value = 0, sw_elem, dense_elem = 0;
  logic sw_hit;
  meta_t meta = '0;
  logic [3:0] head_idx;
  fp32_t acc [2];
  logic ev_drop, ev_starve, ev_extract;
  int checks = 0, failures = 0, extracts = 0;
  int x [NS*SLICE];
  bf16_t slice_lat [SLICE];

  exec_unit dut (.clk, .rst_n, .dense_i(dense), .op_i(op), .sub_i(sub), .clear_i(clear),
    .value_i(value), .meta_push_i(meta_push), .meta_i(meta), .sw_elem_i(sw_elem),
    .sw_hit_i(sw_hit), .dense_elem_i(dense_elem), .head_idx_o(head_idx), .acc_o(acc),
    .ev_drop_o(ev_drop), .ev_starve_o(ev_starve), .ev_extract_o(ev_extract));

  // reference switch
  assign sw_elem = slice_lat[{sub, head_idx[1:0]}];
  assign sw_hit  = (head_idx[3:2] == sub);

  always #5 clk = ~clk;
  always @(posedge clk) if (ev_extract) extracts++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(int c0 [$], int v0 [$], int c1 [$], int v1 [$], bit reorder);
    sdds_sched sd;
    int e0 = 0, e1 = 0, sent = 0, ext0;
    sd = new(1, 1, 8, NS, 1, reorder);
    foreach (c0[i]) e0 += v0[i] * x[c0[i]];
    foreach (c1[i]) e1 += v1[i] * x[c1[i]];
    sd.set_unit(0, c0, v0, c1, v1);
    sd.schedule();
    ext0 = extracts;
    foreach (sd.kind[n]) begin
      logic [COL_BITS-1:0] w;
      w = sd.cols[n];
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        if (s == 0 && sd.kind[n] == K_COMP_BR) begin
          for (int e = 0; e < SLICE; e++) slice_lat[e] = int_to_bf16(x[sent*SLICE + e]);
          sent++;
        end
        op = (sd.kind[n] == K_LOAD_IDX) ? BOP_LOAD_IDX :
             (sd.kind[n] == K_COMP_BR) ? BOP_COMP_BR : BOP_COMP_NOBR;
        sub = 2'(s);
        value = w[15:0];
        if (sd.kind[n] == K_LOAD_IDX) begin
          meta_push = (s < 3);
          meta = meta_t'(w[META_BITS*N_SPARSE*(s%3) +: META_BITS]);
        end else begin
          meta_push = (s == 0);
          meta = meta_t'(w[META_BASE +: META_BITS]);
        end
      end
    end
    @(negedge clk);
    op = BOP_IDLE; meta_push = 0;
    @(negedge clk);
    checks += 3;
    if (acc[0] !== real_to_fp32(real'(e0))) begin failures++; $display("FAIL acc0 %h expected %0d", acc[0], e0); end
    if (acc[1] !== real_to_fp32(real'(e1))) begin failures++; $display("FAIL acc1 %h expected %0d", acc[1], e1); end
    if (extracts - ext0 != c0.size() + c1.size()) begin
      failures++; $display("FAIL %0d extractions for %0d cells", extracts - ext0, c0.size() + c1.size());
    end
    $display("case: %0d commands (%0d BR, %0d NoBR)", sd.kind.size(), sd.n_br, sd.n_nobr);
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (acc[0] != 0 || acc[1] != 0) begin failures++; $display("FAIL clear"); end
  endtask

  initial begin
    int c0 [$], v0 [$], c1 [$], v1 [$];
    for (int i = 0; i < NS*SLICE; i++) x[i] = int'($urandom_range(0, 10)) - 5;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // example rows r0 (5, 34) and r1 (10, 20, 21, 40)
    c0 = '{5, 34}; v0 = '{2, -3};
    c1 = '{10, 20, 21, 40}; v1 = '{1, 3, -2, 2};
    run_case(c0, v0, c1, v1, 1'b1);
    // same-range conflict example: indices 2, 3, 5, 6 with and without reordering
    c0 = '{2, 3, 5, 6}; v0 = '{1, 2, 3, -1};
    c1.delete(); v1.delete();
    run_case(c0, v0, c1, v1, 1'b0);
    run_case(c0, v0, c1, v1, 1'b1);
    for (int n = 0; n < 20; n++) begin
      c0.delete(); v0.delete(); c1.delete(); v1.delete();
      for (int c = 0; c < NS*SLICE; c++) begin
        if ($urandom_range(0, 99) < 5 + n*3) begin c0.push_back(c); v0.push_back(int'($urandom_range(1, 5))); end
        if ($urandom_range(0, 99) < 8) begin c1.push_back(c); v1.push_back(-int'($urandom_range(1, 5))); end
      end
      run_case(c0, v0, c1, v1, 1'b1);
    end
    // dense mode: value times broadcast element into buffer 0
    begin
      int e = 0;
      dense = 1;
      for (int n = 0; n < 10; n++) begin
        int a, b;
        a = int'($urandom_range(0, 8)) - 4;
        b = int'($urandom_range(0, 8)) - 4;
        e += a * b;
        @(negedge clk); op = BOP_COMP_BR; sub = 0; value = int_to_bf16(a); dense_elem = int_to_bf16(b);
        for (int s = 1; s < 4; s++) begin @(negedge clk); sub = 2'(s); value = 0; dense_elem = 0; end
      end
      @(negedge clk); op = BOP_IDLE;
      @(negedge clk);
      checks++;
      if (acc[0] !== real_to_fp32(real'(e))) begin failures++; $display("FAIL dense %h expected %0d", acc[0], e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
