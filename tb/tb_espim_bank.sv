// tb_espim_bank: self-checking test of one bank datapath (11 execution units,
// switch, slice latch, dense lanes, output buffers).
// Sparse part: 22 random sparse rows over a vector-row of NS slices are
// scheduled by the behavioural SDDS, and the columns are played into the
// bank as the command decoder would (four sub-cycles per command, broadcast
// slice in sub-cycle 0 of COMP-BR). The two output buffers must then hold the
// exact integer inner products of the rows mapped to them.
// Dense part: NS dense columns with broadcasts; lane l must hold
// sum_c D[c][l] * x[16c+l].
module tb_espim_bank;
  import espim_pkg::*;
  import fp_ref_pkg::*;
  import sdds_pkg::*;

  localparam int NS = 8;          // slices per vector-row in this test
  localparam int NU = N_SPARSE;

  logic clk = 0, rst_n = 0, dense = 0, rd = 0;
  bank_op_e op = BOP_IDLE;
  logic [1:0] sub = 0;
  logic [COL_BITS-1:0] col = '0, bcast = '0;
  fp32_t res [2][N_LANES];
  logic [NU-1:0] ev_drop, ev_starve, ev_extract;
  int checks = 0, failures = 0, cycles = 0;
  int x [NS*SLICE];
  int expect_res [2][NU];

  espim_bank dut (.clk, .rst_n, .dense_i(dense), .op_i(op), .sub_i(sub), .col_i(col),
    .bcast_i(bcast), .rd_i(rd), .res_o(res), .ev_drop_o(ev_drop), .ev_starve_o(ev_starve),
    .ev_extract_o(ev_extract));

  always #5 clk = ~clk;
  int starve_seen = 0, drop_seen = 0;
  always @(posedge clk) begin
    cycles++;
    if (|ev_starve) starve_seen++;
    if (|ev_drop) drop_seen++;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [COL_BITS-1:0] slice_bits(int s);
    logic [COL_BITS-1:0] w;
    for (int e = 0; e < SLICE; e++) w[16*e +: 16] = int_to_bf16(x[s*SLICE + e]);
    return w;
  endfunction

  task automatic run_cmd(bank_op_e o, logic [COL_BITS-1:0] c, logic [COL_BITS-1:0] bc);
    for (int s = 0; s < 4; s++) begin
      @(negedge clk);
      op = o; sub = 2'(s); col = (s == 0) ? c : '0; bcast = (s == 0) ? bc : '0;
    end
    @(negedge clk);
    op = BOP_IDLE; sub = 0;
  endtask

  initial begin
    sdds_sched sd;
    int sent = 0, t0;
    for (int i = 0; i < NS*SLICE; i++) x[i] = int'($urandom_range(0, 8)) - 4;
    sd = new(1, NU, 8, NS, 2, 1'b1);
    for (int u = 0; u < NU; u++) begin
      int c0 [$], v0 [$], c1 [$], v1 [$];
      int pct0, pct1;
      c0.delete(); v0.delete(); c1.delete(); v1.delete();
      pct0 = 10 + 5*u;          // a denser and a sparser row per unit
      pct1 = 5 + u;
      expect_res[0][u] = 0; expect_res[1][u] = 0;
      for (int c = 0; c < NS*SLICE; c++) begin
        if ($urandom_range(0, 99) < pct0) begin
          int v;
          v = int'($urandom_range(1, 6)) - 3; if (v == 0) v = 3;
          c0.push_back(c); v0.push_back(v); expect_res[0][u] += v * x[c];
        end
        if ($urandom_range(0, 99) < pct1) begin
          int v;
          v = int'($urandom_range(1, 6)) - 3; if (v == 0) v = -3;
          c1.push_back(c); v1.push_back(v); expect_res[1][u] += v * x[c];
        end
      end
      sd.set_unit(u, c0, v0, c1, v1);
    end
    sd.schedule();
    $display("SDDS: %0d commands, %0d BR, %0d NoBR, %0d LOAD-IDX, %0d placeholders, %0d zero values",
             sd.kind.size(), sd.n_br, sd.n_nobr, sd.n_loadidx, sd.n_placeholder, sd.n_starve);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cycles;
    foreach (sd.kind[n]) begin
      bank_op_e o;
      logic [COL_BITS-1:0] bc;
      bc = '0;
      o = (sd.kind[n] == K_LOAD_IDX) ? BOP_LOAD_IDX :
          (sd.kind[n] == K_COMP_BR) ? BOP_COMP_BR : BOP_COMP_NOBR;
      if (o == BOP_COMP_BR) begin bc = slice_bits(sent); sent++; end
      run_cmd(o, sd.cols[n], bc);
    end
    checks++;
    if (sent != NS) begin failures++; $display("FAIL %0d broadcasts", sent); end
    for (int u = 0; u < NU; u++)
      for (int s = 0; s < 2; s++) begin
        checks++;
        if (res[s][u] !== real_to_fp32(real'(expect_res[s][u]))) begin
          failures++;
          $display("FAIL unit %0d buffer %0d: got %h (%f) expected %0d", u, s, res[s][u],
                   fp32_to_real(res[s][u]), expect_res[s][u]);
        end
      end
    checks++;
    if (drop_seen != 0) begin failures++; $display("FAIL unexpected iFIFO drop"); end
    checks++;
    if (starve_seen == 0 && sd.n_starve > 0) begin failures++; $display("FAIL starve never seen"); end
    // read clears the buffers
    @(negedge clk); rd = 1; @(negedge clk); rd = 0;
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (res[0][u] != 0 || res[1][u] != 0) begin failures++; $display("FAIL not cleared"); end
    end

    // ---------------- dense mode ----------------
    begin
      int dexp [N_LANES];
      for (int l = 0; l < N_LANES; l++) dexp[l] = 0;
      dense = 1;
      for (int c = 0; c < NS; c++) begin
        logic [COL_BITS-1:0] w;
        for (int l = 0; l < N_LANES; l++) begin
          int v;
          v = int'($urandom_range(0, 6)) - 3;
          w[16*l +: 16] = int_to_bf16(v);
          dexp[l] += v * x[c*SLICE + l];
        end
        run_cmd(BOP_COMP_BR, w, slice_bits(c));
      end
      for (int l = 0; l < N_LANES; l++) begin
        checks++;
        if (res[0][l] !== real_to_fp32(real'(dexp[l]))) begin
          failures++;
          $display("FAIL dense lane %0d: got %h expected %0d", l, res[0][l], dexp[l]);
        end
      end
      dense = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
