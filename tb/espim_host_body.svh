// espim_host_body.svh: body shared by the end-to-end testbenches of
// espim_channel. The including module defines NB (banks), NS (slices per
// vector-row), G (row groups), P (vector-rows) and DMIN..DMAX (range of the
// per-row density in percent) and instantiates the channel as `dut` on the
// signals declared here.
//
// The test plays host and offline scheduler:
//  1. A random sparse matrix of G*NB*22 rows and P*NS*16 columns (row
//     densities DMIN..DMAX %, small integer values) and a random integer vector.
//  2. Greedy load balancing: within each row group the rows are sorted by
//     density and dealt to the banks round-robin; in each bank the densest
//     and the sparsest row share execution unit 0 (select bits 0 and 1), the
//     next pair unit 1, and so on.
//  3. For every (group, vector-row) pass the behavioural SDDS produces the
//     column stream; the host writes it into the banks with ordinary WR
//     commands, loads the vector-row into the global buffer (LOAD-GB), then
//     replays the stream (ALL-ACT / PRE at DRAM row boundaries, LOAD-IDX,
//     COMP-BR, COMP-NoBR) and reads every bank's results (RDRES), adding the
//     partial sums of the P vector-rows.
//  4. A dense pass in Newton style (mode switch, one matrix row per DRAM row,
//     one broadcast per column read).
// Checks: every output equals the exact inner product; column commands
// issue one per tCCD = 4 cycles, the first of a DRAM row tRCD after ALL-ACT,
// and PRE comes exactly when both tRTP after the last read and tRAS after the
// ACT have passed; and each mechanism happened at least once.

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, res_valid;
  pim_cmd_t cmd;
  fp32_t res [2][N_LANES];
  logic ev_drop, ev_starve, ev_extract;
  int checks = 0, failures = 0, cyc = 0;
  int ev_starve_n = 0, ev_drop_n = 0, ev_extract_n = 0;
  int last_col_cyc = -1, last_act_cyc = -1, gap_checks = 0, row_changes = 0, row_change_flag = 0;
  int n_br = 0, n_nobr = 0, n_loadidx = 0, n_placeholder = 0, n_sel1 = 0,
      n_invalid = 0, n_multi = 0, n_dense = 0, n_mode_switch = 0, n_span = 0;

  localparam int NU    = N_SPARSE;
  localparam int NROWS = G * NB * 2 * NU;
  localparam int NCOLS = P * NS * SLICE;

  int  mat [NROWS][NCOLS];
  int  x [NCOLS];
  longint expect_row [NROWS];
  real got_row [NROWS];
  int  dram_row = 0;
  bit  row_open = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && cyc > 4) begin
      if (ev_starve) ev_starve_n++;
      if (ev_drop) ev_drop_n++;
      if (ev_extract) ev_extract_n++;
    end
  end

  // command rate monitor: the host sends every command as soon as it is
  // accepted, so each column command must follow the previous column command
  // by exactly tCCD = 4 or its ALL-ACT by tRCD = 10, and a PRE that follows a
  // column read must come exactly max(tRTP = 5 after the read, tRAS = 24
  // after the ACT) cycles later.
  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      int want;
      want = -1;
      if (cmd.op inside {CMD_LOAD_IDX, CMD_COMP_BR, CMD_COMP_NOBR}) begin
        if (last_col_cyc >= 0 && !row_change_flag) want = T_CCD;
        if (last_col_cyc >= 0 && !row_change_flag && cyc - last_col_cyc != want) begin
          failures++;
          if (failures < 10) $display("FAIL column command gap %0d, expected %0d", cyc - last_col_cyc, want);
        end
        if (row_change_flag && cyc - last_act_cyc != 10) begin
          failures++;
          if (failures < 10) $display("FAIL ACT to column gap %0d", cyc - last_act_cyc);
        end
        gap_checks++;
        last_col_cyc = cyc;
        row_change_flag = 0;
      end else if (cmd.op == CMD_PRE && last_col_cyc >= 0 && last_act_cyc >= 0) begin
        want = (last_col_cyc + 5 > last_act_cyc + 24) ? last_col_cyc + 5 : last_act_cyc + 24;
        gap_checks++;
        if (cyc != want) begin
          failures++;
          if (failures < 10) $display("FAIL PRE at %0d, expected %0d", cyc, want);
        end
      end else if (cmd.op == CMD_ACT) begin
        last_act_cyc = cyc;
        row_change_flag = 1;
      end else begin
        last_col_cyc = -1;
        row_change_flag = 0;
      end
    end
  end


  task automatic send(pim_cmd_t c);
    cmd = c;
    cmd_valid = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic send_op(cmd_op_e op, int bank = 0, int row = 0, int col = 0,
                         logic [COL_BITS-1:0] data = '0, bit dense = 0);
    pim_cmd_t c;
    c = '0;
    c.op = op; c.bank = BANK_W'(bank); c.row = ROW_W'(row); c.col = COLADDR_W'(col);
    c.data = data; c.dense = dense;
    send(c);
  endtask

  task automatic open_row(int r);
    if (row_open) send_op(CMD_PRE);
    send_op(CMD_ACT, 0, r);
    row_open = 1;
  endtask

  function automatic logic [COL_BITS-1:0] slice_bits(int p, int s);
    logic [COL_BITS-1:0] w;
    for (int e = 0; e < SLICE; e++) w[16*e +: 16] = int_to_bf16(x[p*NS*SLICE + s*SLICE + e]);
    return w;
  endfunction

  task automatic sparse_pass(int g, int p, int rowmap [NB][NU][2]);
    sdds_sched sd;
    int base, ncmd, sent;
    sd = new(NB, NU, 8, NS, 2, 1'b1);
    for (int b = 0; b < NB; b++)
      for (int u = 0; u < NU; u++) begin
        int c0 [$], v0 [$], c1 [$], v1 [$];
        c0.delete(); v0.delete(); c1.delete(); v1.delete();
        for (int c = 0; c < NS*SLICE; c++) begin
          if (mat[rowmap[b][u][0]][p*NS*SLICE + c] != 0) begin
            c0.push_back(c); v0.push_back(mat[rowmap[b][u][0]][p*NS*SLICE + c]);
          end
          if (mat[rowmap[b][u][1]][p*NS*SLICE + c] != 0) begin
            c1.push_back(c); v1.push_back(mat[rowmap[b][u][1]][p*NS*SLICE + c]);
          end
        end
        sd.set_unit(b*NU + u, c0, v0, c1, v1);
      end
    sd.schedule();
    ncmd = sd.kind.size();
    n_br += sd.n_br; n_nobr += sd.n_nobr; n_loadidx += sd.n_loadidx;
    n_placeholder += sd.n_placeholder; n_sel1 += sd.n_sel1; n_invalid += sd.n_invalid;
    n_multi += sd.n_multi;
    if (ncmd > 32) n_span++;
    // write the compressed matrix into the banks
    base = dram_row;
    for (int n = 0; n < ncmd; n++) begin
      if (n % 32 == 0) open_row(base + n / 32);
      for (int b = 0; b < NB; b++) send_op(CMD_WR, b, 0, n % 32, sd.cols[n*NB + b]);
    end
    dram_row = base + (ncmd + 31) / 32;
    // vector-row into the global buffer
    for (int s = 0; s < NS; s++) send_op(CMD_LOAD_GB, 0, 0, s, slice_bits(p, s));
    // replay the command stream
    sent = 0;
    for (int n = 0; n < ncmd; n++) begin
      if (n % 32 == 0) open_row(base + n / 32);
      unique case (sd.kind[n])
        K_LOAD_IDX:  send_op(CMD_LOAD_IDX, 0, 0, n % 32);
        K_COMP_BR:   send_op(CMD_COMP_BR, 0, 0, n % 32);
        default:     send_op(CMD_COMP_NOBR, 0, 0, n % 32);
      endcase
    end
    // read out
    for (int b = 0; b < NB; b++) begin
      send_op(CMD_RDRES, b);
      checks++;
      if (!res_valid) begin failures++; $display("FAIL no result valid"); end
      for (int u = 0; u < NU; u++)
        for (int s = 0; s < 2; s++) got_row[rowmap[b][u][s]] += fp32_to_real(res[s][u]);
    end
    $display("pass g=%0d p=%0d: %0d column commands (%0d COMP-BR, %0d COMP-NoBR, %0d LOAD-IDX)",
             g, p, ncmd, sd.n_br, sd.n_nobr, sd.n_loadidx);
  endtask

  initial begin
    int t_start;
    cmd = '0;
    for (int c = 0; c < NCOLS; c++) x[c] = int'($urandom_range(0, 8)) - 4;
    for (int r = 0; r < NROWS; r++) begin
      int pct;
      pct = int'($urandom_range(DMIN, DMAX));
      expect_row[r] = 0; got_row[r] = 0.0;
      for (int c = 0; c < NCOLS; c++) begin
        mat[r][c] = 0;
        if ($urandom_range(0, 99) < pct) begin
          mat[r][c] = int'($urandom_range(1, 6)) - 7 + 2 * int'($urandom_range(0, 1)) * int'($urandom_range(4, 6));
          if (mat[r][c] == 0) mat[r][c] = 1;
          expect_row[r] += longint'(mat[r][c]) * longint'(x[c]);
        end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (12) @(negedge clk);
    t_start = cyc;
    send_op(CMD_MODE, 0, 0, 0, '0, 1'b0);

    for (int g = 0; g < G; g++) begin
      int rowmap [NB][NU][2];
      int ord [$], nnz [$];
      int bank_rows [NB][$];
      ord.delete(); nnz.delete();
      // greedy load balancing within the group
      for (int i = 0; i < NB*2*NU; i++) begin
        int r, z;
        r = g*NB*2*NU + i;
        z = 0;
        for (int c = 0; c < NCOLS; c++) if (mat[r][c] != 0) z++;
        ord.push_back(r); nnz.push_back(z);
      end
      for (int i = 0; i < ord.size(); i++)
        for (int j = i + 1; j < ord.size(); j++)
          if (nnz[j] > nnz[i]) begin
            int t;
            t = nnz[i]; nnz[i] = nnz[j]; nnz[j] = t;
            t = ord[i]; ord[i] = ord[j]; ord[j] = t;
          end
      for (int b = 0; b < NB; b++) bank_rows[b].delete();
      for (int i = 0; i < ord.size(); i++) bank_rows[i % NB].push_back(ord[i]);
      for (int b = 0; b < NB; b++)
        for (int u = 0; u < NU; u++) begin
          rowmap[b][u][0] = bank_rows[b][u];
          rowmap[b][u][1] = bank_rows[b][2*NU - 1 - u];
        end
      for (int p = 0; p < P; p++) sparse_pass(g, p, rowmap);
    end
    for (int r = 0; r < NROWS; r++) begin
      checks++;
      if (got_row[r] != real'(expect_row[r])) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d: got %f expected %0d", r, got_row[r], expect_row[r]);
      end
    end
    $display("sparse MV of %0d x %0d done in %0d cycles", NROWS, NCOLS, cyc - t_start);

    // ---------------- dense (Newton-style) pass ----------------
    send_op(CMD_MODE, 0, 0, 0, '0, 1'b1);
    n_mode_switch++;
    for (int rep = 0; rep < 2; rep++) begin
      longint dexp [NB];
      open_row(dram_row);
      for (int b = 0; b < NB; b++) begin
        dexp[b] = 0;
        for (int c = 0; c < NS; c++) begin
          logic [COL_BITS-1:0] w;
          for (int l = 0; l < N_LANES; l++) begin
            int v;
            v = int'($urandom_range(0, 8)) - 4;
            w[16*l +: 16] = int_to_bf16(v);
            dexp[b] += longint'(v) * longint'(x[c*SLICE + l]);
          end
          send_op(CMD_WR, b, 0, c, w);
        end
      end
      for (int s = 0; s < NS; s++) send_op(CMD_LOAD_GB, 0, 0, s, slice_bits(0, s));
      for (int c = 0; c < NS; c++) send_op(CMD_COMP_BR, 0, 0, c);
      for (int b = 0; b < NB; b++) begin
        real sum;
        send_op(CMD_RDRES, b);
        sum = 0.0;
        for (int l = 0; l < N_LANES; l++) sum += fp32_to_real(res[0][l]);
        checks++;
        if (sum != real'(dexp[b])) begin
          failures++; $display("FAIL dense bank %0d: got %f expected %0d", b, sum, dexp[b]);
        end
      end
      n_dense++;
      dram_row++;
    end
    send_op(CMD_MODE, 0, 0, 0, '0, 1'b0);
    n_mode_switch++;

    // ---------------- mechanisms ----------------
    $display("mechanisms: COMP-BR %0d, broadcast stalls (COMP-NoBR) %0d, LOAD-IDX %0d, placeholders %0d,",
             n_br, n_nobr, n_loadidx, n_placeholder);
    $display("  zero-value computes (empty eFIFO) %0d, select=1 cells %0d, invalid start entries %0d,",
             ev_starve_n, n_sel1, n_invalid);
    $display("  slices with several cells (reordered) %0d, segments over several DRAM rows %0d,",
             n_multi, n_span);
    $display("  dense passes %0d, mode switches %0d, element extractions %0d, rate checks %0d",
             n_dense, n_mode_switch, ev_extract_n, gap_checks);
    checks++; if (n_br == 0)          begin failures++; $display("FAIL no COMP-BR"); end
    checks++; if (n_nobr == 0)        begin failures++; $display("FAIL no broadcast stall"); end
    checks++; if (n_loadidx == 0)     begin failures++; $display("FAIL no LOAD-IDX"); end
    checks++; if (n_placeholder == 0) begin failures++; $display("FAIL no placeholder"); end
    checks++; if (ev_starve_n == 0)   begin failures++; $display("FAIL no empty-eFIFO compute"); end
    checks++; if (n_sel1 == 0)        begin failures++; $display("FAIL no select=1 cell"); end
    // a slice with no cell for a unit (two rows, 16 columns) is practically
    // impossible above about 20 % density, so only sparser runs demand one
    if (DMIN <= 20) begin
      checks++; if (n_invalid == 0)   begin failures++; $display("FAIL no invalid entry"); end
    end
    checks++; if (n_multi == 0)       begin failures++; $display("FAIL no multi-cell slice"); end
    checks++; if (n_span == 0)        begin failures++; $display("FAIL no multi-row segment"); end
    checks++; if (n_dense == 0)       begin failures++; $display("FAIL no dense pass"); end
    checks++; if (gap_checks == 0)    begin failures++; $display("FAIL no rate check"); end
    checks++; if (ev_drop_n != 0)     begin failures++; $display("FAIL iFIFO dropped a real entry"); end
    checks += gap_checks;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
