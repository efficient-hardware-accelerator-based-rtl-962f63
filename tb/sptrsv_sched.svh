// sptrsv_sched.svh: test-program generator shared by the end-to-end
// testbenches of sptrsv_accel. It is included inside a testbench module that
// declares the accelerator's port signals, clk, checks, failures, chk(),
// P (number of CUs), MAXN, MAXNNZ and MAXCYC.
//
// It holds random lower-triangular matrix generators, an off-line scheduler
// that plays the role of the accelerator's compiler (row i on CU i mod P,
// medium-granularity dataflow, partial-sum caching, greedy edge choice; see
// the header of sptrsv_accel_tb), and run_loaded(), which loads the program
// and the L / b streams through the load port, runs it, checks the run
// length and the start-to-done latency (prog_len + 5 cycles) and compares
// every solution bit for bit with a reference solve performed in the
// scheduled operation order. The scheduler is this design's own; the
// published compiler is not reproduced (no edge reordering, no spilling).

  // ------------------------------------------------------------------ matrix
  int n, nnz_off;
  int rowptr [MAXN + 1];
  int colidx [MAXNNZ];
  logic [31:0] lval [MAXNNZ];
  logic [31:0] diag [MAXN];
  logic [31:0] recip [MAXN];
  logic [31:0] rhs [MAXN];
  int uses0 [MAXN];

  // Random matrix: row i has up to maxdeg inputs, drawn from the previous
  // 'window' rows (small window = long dependence chains, few independent
  // nodes per level) or from all earlier rows.
  task automatic gen_matrix(input int nn, input int maxdeg, input int window);
    int k, j, deg, tries;
    bit used [MAXN];
    n = nn;
    k = 0;
    for (int i = 0; i < n; i++) begin
      rowptr[i] = k;
      deg = (i == 0) ? 0 : int'($urandom_range(maxdeg));
      if (deg > i) deg = i;
      for (int q = 0; q < i; q++) used[q] = 0;
      for (int e = 0; e < deg; e++) begin
        tries = 0;
        do begin
          if (window > 0 && i > window) j = i - 1 - int'($urandom_range(window - 1));
          else j = int'($urandom_range(i - 1));
          tries++;
        end while (used[j] && tries < 20);
        if (used[j]) continue;
        used[j] = 1;
        colidx[k] = j;
        // |off-diagonals| sum below 1, diagonal in [1,2): bounded solution
        lval[k] = {1'($urandom), 8'(126 - int'($urandom_range(3)) - ((deg > 4) ? 2 : 0)), 23'($urandom)};
        k++;
      end
      diag[i]  = {1'b0, 8'd127, 23'($urandom)};
      recip[i] = r2f(1.0 / f2r(diag[i]));
      rhs[i]   = rand_f(2);
    end
    rowptr[n] = k;
    nnz_off = k;
    for (int i = 0; i < n; i++) uses0[i] = 0;
    for (int e = 0; e < k; e++) uses0[colidx[e]]++;
  endtask

  // Random matrix with nn rows and exactly nnz_target off-diagonal entries:
  // each entry is given to a random row (a row i takes at most i entries, or
  // 'window' with a window), then each row draws distinct sources from the
  // previous 'window' rows or from all earlier rows. Row degrees come out
  // roughly Poisson distributed.
  task automatic gen_matrix_nnz(input int nn, input int nnz_target, input int window);
    int degs [MAXN];
    int i, placed, k, j, tries, lim;
    bit used [MAXN];
    n = nn;
    for (int r = 0; r < n; r++) degs[r] = 0;
    placed = 0;
    while (placed < nnz_target) begin
      i = 1 + int'($urandom_range(n - 2));
      lim = (window > 0 && window < i) ? window : i;
      if (degs[i] < lim) begin degs[i]++; placed++; end
    end
    k = 0;
    for (int r = 0; r < n; r++) begin
      rowptr[r] = k;
      for (int q = 0; q < r; q++) used[q] = 0;
      for (int e = 0; e < degs[r]; e++) begin
        tries = 0;
        do begin
          if (window > 0 && r > window) j = r - 1 - int'($urandom_range(window - 1));
          else j = int'($urandom_range(r - 1));
          tries++;
        end while (used[j] && tries < 1000);
        used[j] = 1;
        colidx[k] = j;
        lval[k] = {1'($urandom), 8'(126 - int'($urandom_range(3)) - ((degs[r] > 4) ? 2 : 0)), 23'($urandom)};
        k++;
      end
      diag[r]  = {1'b0, 8'd127, 23'($urandom)};
      recip[r] = r2f(1.0 / f2r(diag[r]));
      rhs[r]   = rand_f(2);
    end
    rowptr[n] = k;
    nnz_off = k;
    for (int r = 0; r < n; r++) uses0[r] = 0;
    for (int e = 0; e < k; e++) uses0[colidx[e]]++;
  endtask

  // ---------------------------------------------------------------- schedule
  cu_instr_t prog [MAXCYC][P];
  logic [31:0] lstream [P][$];
  logic [31:0] bstream [P][$];
  int plen;
  int order_src [MAXN][$];     // edge execution order per node (source ids)
  logic [31:0] order_l [MAXN][$];
  int dm_addr [MAXN];

  // mechanism counters
  int n_park, n_reload, n_swap, n_block_dag, n_block_psum, n_fresh, n_rfread,
      n_broadcast, n_release, n_final, n_dmwrite, n_edge_early;

  task automatic schedule(output bit ok);
    int owner_rf_port [P];   // node read from CU c's x_i file this cycle, -1 none
    int port_readers [P];
    bit port_busy [P];       // S4 carries the own fresh result
    int osel [P];            // output crossbar selection, -1 free
    int fresh [P];           // node whose result is at CU c's PE output this cycle
    bit xi_valid [P][XI_WORDS];
    int psum_node [P][PSUM_WORDS];   // node parked at a psum word, -1 free
    int fb_node [P];          // node at the PE output
    bit fb_open [P];          // that node is unsolved (a partial sum)
    int next_new [P];         // first unstarted task-list position
    int dmcnt [P];
    int t_out [MAXN];         // cycle in which x_i is at the PE output
    int rf_addr [MAXN];
    bit in_rf [MAXN];
    bit started [MAXN];
    bit solved [MAXN];
    int rem [MAXN];
    int uses [MAXN];
    bit edone [MAXNNZ];
    int nsolved, t, last_out;

    ok = 1;
    for (int c = 0; c < P; c++) begin
      lstream[c].delete(); bstream[c].delete();
      for (int a = 0; a < XI_WORDS; a++) xi_valid[c][a] = 0;
      for (int a = 0; a < PSUM_WORDS; a++) psum_node[c][a] = -1;
      fb_node[c] = -1; fb_open[c] = 0; next_new[c] = 0; dmcnt[c] = 0;
    end
    for (int i = 0; i < n; i++) begin
      t_out[i] = -1; in_rf[i] = 0; started[i] = 0; solved[i] = 0;
      rem[i] = rowptr[i+1] - rowptr[i]; uses[i] = uses0[i];
      order_src[i].delete(); order_l[i].delete();
    end
    for (int e = 0; e < nnz_off; e++) edone[e] = 0;
    nsolved = 0; last_out = -1;

    for (t = 0; t < MAXCYC; t++) begin
      if (nsolved == n && t > last_out) break;
      for (int c = 0; c < P; c++) begin
        prog[t][c] = '0;
        prog[t][c].pe_en = PE_EN_BLOCK;
        owner_rf_port[c] = -1; port_readers[c] = 0; port_busy[c] = 0;
        osel[c] = -1; fresh[c] = -1;
      end
      for (int i = 0; i < n; i++)
        if (t_out[i] == t) begin fresh[i % P] = i; port_busy[i % P] = 1; osel[i % P] = i % P; end

      // --- each CU picks a node and an operation
      for (int c = 0; c < P; c++) begin
        int cand, kind, ed, cached_addr, nfree, first_new, pos;
        cand = -1; kind = 0; ed = -1; cached_addr = -1;
        nfree = 0;
        for (int a = 0; a < PSUM_WORDS; a++) if (psum_node[c][a] < 0) nfree++;
        // 1: parked nodes, in task-list order
        begin
          int best_node;
          best_node = MAXN;
          for (int a = 0; a < PSUM_WORDS; a++) begin
            int nd, e2;
            nd = psum_node[c][a];
            if (nd < 0 || nd > best_node) continue;
            e2 = pick_edge(c, nd, t, owner_rf_port, port_busy, osel, t_out, in_rf, edone);
            if (rem[nd] == 0 || e2 >= 0) begin best_node = nd; cand = nd; kind = 3; ed = e2; cached_addr = a; end
          end
        end
        // 2: current node
        if (cand < 0 && fb_open[c]) begin
          ed = pick_edge(c, fb_node[c], t, owner_rf_port, port_busy, osel, t_out, in_rf, edone);
          if (rem[fb_node[c]] == 0 || ed >= 0) begin cand = fb_node[c]; kind = 1; end
        end
        // 3: first computable new node
        if (cand < 0) begin
          first_new = -1;
          for (pos = next_new[c]; pos * P + c < n; pos++) begin
            int nd;
            nd = pos * P + c;
            if (started[nd]) continue;
            if (first_new < 0) first_new = nd;
            ed = pick_edge(c, nd, t, owner_rf_port, port_busy, osel, t_out, in_rf, edone);
            if (rem[nd] == 0 || ed >= 0) begin
              int need;
              need = fb_open[c] ? ((nd == first_new) ? 1 : 2) : 0;
              if (nfree >= need) begin cand = nd; kind = 2; end
              else n_block_psum++;
              break;
            end
          end
        end
        if (cand < 0) begin
          if (!(nsolved == n)) n_block_dag++;
          continue;
        end

        // partial-sum movements
        if (kind == 1) begin
          prog[t][c].psum_raddr = 3'b100;            // S1 = feedback
        end else begin
          if (kind == 3) begin
            prog[t][c].psum_ren   = 1;
            prog[t][c].psum_raddr = K'(cached_addr);
            psum_node[c][cached_addr] = -1;          // released by the read
            n_reload++;
          end
          if (fb_open[c]) begin
            int wa;
            wa = -1;
            for (int a = PSUM_WORDS - 1; a >= 0; a--) if (psum_node[c][a] < 0) wa = a;
            if (wa < 0) begin $display("psum file overflow"); ok = 0; return; end
            psum_node[c][wa] = fb_node[c];
            prog[t][c].psum_wen = 1;
            n_park++;
            if (kind == 3) n_swap++;
          end
          if (kind == 2) begin
            started[cand] = 1;
            while (next_new[c] * P + c < n && started[next_new[c] * P + c]) next_new[c]++;
          end
        end

        // the operation
        if (rem[cand] == 0) begin
          prog[t][c].pe_en = PE_EN_FINAL;
          lstream[c].push_back(recip[cand]);
          bstream[c].push_back(rhs[cand]);
          t_out[cand] = t + 1;
          if (t + 1 > last_out) last_out = t + 1;
          solved[cand] = 1; nsolved++;
          fb_node[c] = cand; fb_open[c] = 0;
          n_final++;
        end else begin
          int j, o;
          j = colidx[ed];
          o = j % P;
          if (t_out[j] == t && (osel[c] < 0 || osel[c] == o)) begin
            prog[t][c].pe_en = PE_EN_MAC_PE;
            osel[c] = o;
            prog[t][c].o_en = N'(o);
            n_fresh++;
          end else begin
            prog[t][c].pe_en = PE_EN_MAC_XI;
            prog[t][c].i_en = N'(o);
            if (owner_rf_port[o] < 0) begin
              owner_rf_port[o] = j;
              prog[t][o].xi_ren = 1;
              prog[t][o].xi_raddr = M'(rf_addr[j]);
              n_rfread++;
            end
            port_readers[o]++;
            if (port_readers[o] == 2) n_broadcast++;
          end
          lstream[c].push_back(lval[ed]);
          order_src[cand].push_back(j);
          order_l[cand].push_back(lval[ed]);
          edone[ed] = 1;
          rem[cand]--;
          uses[j]--;
          // an edge computed while other inputs of the node are still unsolved
          for (int e = rowptr[cand]; e < rowptr[cand+1]; e++)
            if (!edone[e] && !solved[colidx[e]]) begin n_edge_early++; break; end
          fb_node[c] = cand; fb_open[c] = 1;
        end
      end

      // --- register-file releases (read-before-write), then write-backs
      for (int c = 0; c < P; c++) begin
        int j;
        j = owner_rf_port[c];
        if (j >= 0 && uses[j] == 0) begin
          prog[t][c].xi_rvs = 1;
          xi_valid[c][rf_addr[j]] = 0;
          in_rf[j] = 0;
          n_release++;
        end
      end
      for (int c = 0; c < P; c++) begin
        int i;
        i = fresh[c];
        if (i < 0) continue;
        prog[t][c].o_en = N'(c);
        prog[t][c].s34_en = 2'b01;       // S3 = output crossbar, S4 = own PE result
        prog[t][c].dm_wen = 1;
        if (dmcnt[c] >= DM_WORDS) begin $display("data memory bank overflow"); ok = 0; return; end
        dm_addr[i] = dmcnt[c]++;
        n_dmwrite++;
        if (uses[i] > 0) begin
          int wa;
          wa = -1;
          for (int a = XI_WORDS - 1; a >= 0; a--) if (!xi_valid[c][a]) wa = a;
          if (wa < 0) begin $display("x_i file overflow"); ok = 0; return; end
          xi_valid[c][wa] = 1;
          rf_addr[i] = wa;
          in_rf[i] = 1;
          prog[t][c].xi_wen = 1;
        end
      end
    end
    plen = t;
    if (nsolved != n || t >= MAXCYC) begin $display("schedule does not fit: %0d of %0d rows solved in %0d cycles", nsolved, n, t); ok = 0; end
    for (int c = 0; c < P; c++)
      if (lstream[c].size() + bstream[c].size() > (1 << SMEM_AW)) begin
        $display("stream bank overflow"); ok = 0;
      end
  endtask

  // Best computable edge of node nd for CU c in cycle t, or -1.
  function automatic int pick_edge(input int c, input int nd, input int t,
                                   input int owner_rf_port [P], input bit port_busy [P],
                                   input int osel [P], input int t_out [MAXN],
                                   input bit in_rf [MAXN], input bit edone [MAXNNZ]);
    int best, best_rank, j, o, rank;
    best = -1; best_rank = 99;
    for (int e = rowptr[nd]; e < rowptr[nd+1]; e++) begin
      if (edone[e]) continue;
      j = colidx[e];
      o = j % P;
      rank = 99;
      if (in_rf[j] && t_out[j] < t && owner_rf_port[o] == j && !port_busy[o]) rank = 0;
      else if (t_out[j] == t && (osel[c] < 0 || osel[c] == o)) rank = 1;
      else if (in_rf[j] && t_out[j] < t && owner_rf_port[o] < 0 && !port_busy[o]) rank = 2;
      if (rank < best_rank) begin best = e; best_rank = rank; end
    end
    return best;
  endfunction

  // ---------------------------------------------------------------- run
  task automatic run_case(input string name, input int nn, input int maxdeg, input int window);
    gen_matrix(nn, maxdeg, window);
    run_loaded(name);
  endtask

  // Schedule, load, run and check the matrix currently held in the arrays.
  task automatic run_loaded(input string name);
    bit ok;
    logic [31:0] xref [MAXN];
    logic [31:0] ps, got;
    int mism, t0, lat;
    schedule(ok);
    chk(ok, {name, ": schedule fits the machine"});
    if (!ok) return;
    // reference solve in the scheduled operation order
    for (int i = 0; i < n; i++) begin
      ps = 32'd0;
      for (int q = 0; q < order_src[i].size(); q++)
        ps = f_add(ps, f_mul(order_l[i][q], xref[order_src[i][q]]));
      xref[i] = f_mul(f_add(rhs[i], {~ps[31], ps[30:0]}), recip[i]);
    end
    // load
    for (int c = 0; c < P; c++) begin
      for (int a = 0; a < plen; a++) begin
        @(negedge clk);
        load_we = 1; load_sel = 0; load_cu = N'(c); load_addr = IMEM_AW'(a);
        load_data = prog[a][c];
      end
      for (int a = 0; a < lstream[c].size(); a++) begin
        @(negedge clk);
        load_we = 1; load_sel = 1; load_cu = N'(c); load_addr = IMEM_AW'(a);
        load_data = INSTR_W'(lstream[c][a]);
      end
      for (int a = 0; a < bstream[c].size(); a++) begin
        @(negedge clk);
        load_we = 1; load_sel = 1; load_cu = N'(c); load_addr = IMEM_AW'((1 << SMEM_AW) - 1 - a);
        load_data = INSTR_W'(bstream[c][a]);
      end
    end
    @(negedge clk) load_we = 0;
    // run
    prog_len = (IMEM_AW+1)'(plen);
    start = 1;
    @(negedge clk) start = 0;
    t0 = 1;
    while (!done) begin @(negedge clk); t0++; end
    lat = t0;
    chk(cycles == (IMEM_AW+1)'(plen), {name, ": issued instruction count"});
    // start sampled (1) -> clear (1) -> prefetch (3) -> plen instructions -> done
    chk(lat == plen + 5, $sformatf("%s: run latency %0d, expected %0d", name, lat, plen + 5));
    // read back
    mism = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk) begin rd_cu = N'(i % P); rd_addr = T'(dm_addr[i]); end
      @(negedge clk) got = rd_data;
      checks++;
      if (got !== xref[i]) begin
        mism++; failures++;
        if (mism < 6) $display("%s: x[%0d] = %h expected %h", name, i, got, xref[i]);
      end
    end
    $display("%s: n=%0d off-diagonal nnz=%0d, %0d cycles (%0d ops, %.1f ops/cycle), %0d mismatches",
             name, n, nnz_off, plen, 2 * nnz_off + n, real'(2 * nnz_off + n) / plen, mism);
  endtask
