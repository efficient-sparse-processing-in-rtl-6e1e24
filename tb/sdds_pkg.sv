// sdds_pkg: a behavioural static data-dependent scheduler (SDDS) for the
// testbenches. It plays the part of the offline software that prepares a
// sparse matrix for the chip:
//  * per execution unit it merges the two matrix rows that share the unit
//    (select bit 0 and 1) in increasing column order and turns them into an
//    index stream: per 16-element slice, the cells falling in that slice,
//    reordered so that consecutive indices use different index ranges of the
//    4x11 switch (sweeps over ranges 0..3), the first one marked start; a
//    slice without cells gets one invalid entry marked start;
//  * it then simulates the banks command by command, with the same
//    cycle-level rules as the hardware, and decides for every column whether
//    it is an index-only prefetch (LOAD-IDX, only at the start of a pass), a
//    compute with the next broadcast (COMP-BR, when every unit of every bank
//    would take its start entry during it) or a compute with a broadcast stall
//    (COMP-NoBR). It puts a placeholder wherever an iFIFO is full or a
//    stream is exhausted, and a zero value wherever an eFIFO is empty;
//  * it emits the packed 256-bit columns, bank by bank, in command order.
// Matrix values are small integers so that results are exact.
package sdds_pkg;
  import espim_pkg::*;
  import fp_ref_pkg::*;

  typedef enum int { K_LOAD_IDX = 0, K_COMP_NOBR = 1, K_COMP_BR = 2 } kind_e;

  typedef struct {
    meta_t m;
    int    val;
  } tok_t;

  class sdds_sched;
    int nb, nu, depth, nslices, prefetch;
    bit reorder;
    // token streams, flattened over units k = b*nu + u
    tok_t tok_all [$];
    int   tstart [], tlen [], vstart [], vlen [];
    int   vals_all [$];
    // simulated unit state
    meta_t iq [];       // [k*depth + i]
    int   iq_head [], iq_cnt [], eq_cnt [], tp [], vp [];
    bit   took [];
    // output
    kind_e                kind [$];
    logic [COL_BITS-1:0]  cols [$];   // [cmd*nb + b]
    // statistics
    int n_br, n_nobr, n_loadidx, n_placeholder, n_starve, n_sel1, n_invalid, n_multi;

    function new(int nb_, int nu_, int depth_, int nslices_, int prefetch_, bit reorder_);
      nb = nb_; nu = nu_; depth = depth_; nslices = nslices_;
      prefetch = prefetch_; reorder = reorder_;
      tstart = new[nb*nu]; tlen = new[nb*nu]; vstart = new[nb*nu]; vlen = new[nb*nu];
      iq = new[nb*nu*depth]; iq_head = new[nb*nu]; iq_cnt = new[nb*nu];
      eq_cnt = new[nb*nu]; tp = new[nb*nu]; vp = new[nb*nu]; took = new[nb*nu];
    endfunction

    // cells of the two rows of unit k: column positions (increasing) and values
    function void set_unit(int k, int c0 [$], int v0 [$], int c1 [$], int v1 [$]);
      int a = 0, b = 0;
      int mc [$], mv [$], ms [$];
      // merge the two rows in increasing column order
      while (a < c0.size() || b < c1.size()) begin
        if (b >= c1.size() || (a < c0.size() && c0[a] <= c1[b])) begin
          mc.push_back(c0[a]); mv.push_back(v0[a]); ms.push_back(0); a++;
        end else begin
          mc.push_back(c1[b]); mv.push_back(v1[b]); ms.push_back(1); b++;
        end
      end
      tstart[k] = tok_all.size();
      vstart[k] = vals_all.size();
      for (int s = 0; s < nslices; s++) begin
        int pc [$], pv [$], psel [$];
        bit used [$];
        int left, first;
        pc.delete(); pv.delete(); psel.delete(); used.delete();
        for (int i = 0; i < mc.size(); i++)
          if (mc[i] / SLICE == s) begin pc.push_back(mc[i]); pv.push_back(mv[i]); psel.push_back(ms[i]); used.push_back(0); end
        if (pc.size() == 0) begin
          tok_t t;
          t.m = '{sel: 1'b0, start: 1'b1, valid: 1'b0, idx: 4'd0};
          t.val = 0;
          tok_all.push_back(t);
          n_invalid++;
          continue;
        end
        if (pc.size() > 1) n_multi++;
        left = pc.size();
        first = 1;
        while (left > 0) begin
          for (int r = 0; r < 4 && left > 0; r++) begin
            for (int i = 0; i < pc.size(); i++) begin
              if (!used[i] && (!reorder || (pc[i] % SLICE) / 4 == r)) begin
                tok_t t;
                t.val = 0;
                t.m = '{sel: psel[i][0], start: first[0], valid: 1'b1, idx: 4'(pc[i] % SLICE)};
                t.val = pv[i];
                tok_all.push_back(t);
                vals_all.push_back(pv[i]);
                if (psel[i] == 1) n_sel1++;
                used[i] = 1; left--; first = 0;
                break;
              end
            end
          end
        end
      end
      tlen[k] = tok_all.size() - tstart[k];
      vlen[k] = vals_all.size() - vstart[k];
    endfunction

    function meta_t iq_head_m(int k);
      return iq[k*depth + iq_head[k]];
    endfunction

    function meta_t offer(int k);   // next token into the iFIFO, or a placeholder
      if (tp[k] < tlen[k]) begin
        if (iq_cnt[k] < depth) begin
          meta_t m;
          m = tok_all[tstart[k] + tp[k]].m;
          iq[k*depth + (iq_head[k] + iq_cnt[k]) % depth] = m;
          iq_cnt[k]++; tp[k]++;
          return m;
        end
        n_placeholder++;
      end
      return META_PLACEHOLDER;
    endfunction

    // extraction during one compute command; returns 1 if the start entry
    // was taken in a broadcast. Changes state only when commit is set.
    function bit extract(int k, bit is_br, bit commit);
      int  h = iq_head[k], c = iq_cnt[k], e = eq_cnt[k];
      bit  t = took[k];
      for (int i = 0; i < 4; i++) begin
        bit teff, popped, can;
        meta_t m;
        teff = (is_br && i == 0) ? 1'b0 : t;
        popped = 0;
        m = iq[k*depth + h];
        if (c > 0) begin
          can = is_br ? (m.start ? !teff : teff) : !m.start;
          if (can) begin
            if (!m.valid) popped = 1;
            else if (int'(m.idx[3:2]) == i && e < depth) begin popped = 1; e++; end
          end
        end
        t = teff | (popped && m.start);
        if (popped) begin h = (h + 1) % depth; c--; end
      end
      if (commit) begin iq_head[k] = h; iq_cnt[k] = c; eq_cnt[k] = e; took[k] = t; end
      return t;
    endfunction

    function bit finished(int sent);
      if (sent < nslices) return 0;
      for (int k = 0; k < nb*nu; k++)
        if (tp[k] < tlen[k] || iq_cnt[k] != 0 || vp[k] < vlen[k]) return 0;
      return 1;
    endfunction

    function void schedule();
      int sent = 0;
      logic [COL_BITS-1:0] cw [];
      cw = new[nb];
      for (int k = 0; k < nb*nu; k++) begin
        iq_head[k] = 0; iq_cnt[k] = 0; eq_cnt[k] = 0; tp[k] = 0; vp[k] = 0; took[k] = 0;
      end
      // index-only prefetch columns
      for (int p = 0; p < prefetch; p++) begin
        for (int b = 0; b < nb; b++) cw[b] = '0;
        for (int s = 0; s < IDX_SLOTS; s++)
          for (int b = 0; b < nb; b++)
            for (int u = 0; u < nu; u++)
              cw[b][META_BITS*(N_SPARSE*s + u) +: META_BITS] = offer(b*nu + u);
        kind.push_back(K_LOAD_IDX);
        for (int b = 0; b < nb; b++) cols.push_back(cw[b]);
        n_loadidx++;
      end
      while (!finished(sent)) begin
        bit all_took = (sent < nslices);
        for (int b = 0; b < nb; b++) cw[b] = '0;
        for (int b = 0; b < nb; b++)
          for (int u = 0; u < nu; u++) begin
            int k, v;
            k = b*nu + u;
            v = 0;
            if (eq_cnt[k] > 0) begin
              v = vals_all[vstart[k] + vp[k]];
              vp[k]++; eq_cnt[k]--;
            end else if (vp[k] < vlen[k]) n_starve++;
            cw[b][16*u +: 16] = int_to_bf16(v);
            cw[b][META_BASE + META_BITS*u +: META_BITS] = offer(k);
          end
        if (all_took)
          for (int k = 0; k < nb*nu; k++) if (!extract(k, 1'b1, 1'b0)) all_took = 0;
        for (int k = 0; k < nb*nu; k++) void'(extract(k, all_took, 1'b1));
        if (all_took) begin sent++; n_br++; kind.push_back(K_COMP_BR); end
        else begin n_nobr++; kind.push_back(K_COMP_NOBR); end
        for (int b = 0; b < nb; b++) cols.push_back(cw[b]);
        if (kind.size() > 100000) begin
          $display("SDDS: no progress");
          break;
        end
      end
    endfunction
  endclass
endpackage
