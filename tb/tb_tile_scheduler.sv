// tb_tile_scheduler: self-checking test of the whole scheduling sequence on a
// reduced 16x10 grid (the block is parameterised by grid size; the full grid
// is covered by the end-to-end test). Random per-tile statistics, with MPKI
// clustered in rectangles plus noise, are written into the record table; the
// scheduler runs; its affinity map, region count, region list and
// region-number map are compared with a reference chain computed here:
// stable sort by MPKI (highest first), two-ended cycle-balanced split,
// highly/totally isolated pair swaps, small-region merge, BFS labelling.
// The total run must stay within the paper-derived cycle budget. Four frames.
module tb_tile_scheduler;
  import khepri_pkg::*;

  localparam int unsigned TX = 16, TY = 10, N = TX * TY, RMIN = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, st_we, lbl_we, seed_we;
  tile_id_t st_addr, lbl_addr, lbl_data, seed_addr;
  tile_rec_t st_rec;
  logic [N-1:0] aff_map;
  logic [ID_W:0] seed_data, num_regions, pairs_flipped, small_regions;
  logic [31:0] sched_cycles, mem_cycles, cmp_cycles;

  tile_scheduler #(.TILES_X(TX), .TILES_Y(TY), .REGION_MIN(RMIN)) dut (.*);

  int lbl [N];
  int seeds [N];
  always_ff @(posedge clk) begin
    if (lbl_we)  lbl[lbl_addr] <= int'(lbl_data);
    if (seed_we) seeds[seed_addr] <= int'(seed_data);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference chain ----------------
  function automatic void ref_isolation(ref bit m [N]);
    int qv [2][$];
    for (int s = 0; s < 2; s++) begin
      qv[0].delete(); qv[1].delete();
      for (int t = 0; t < N; t++) begin
        int x = t % TX, y = t / TX, nc = 0, oc = 0, d = int'(m[t]);
        bit c;
        if (y > 0)      begin nc++; if (m[t-TX] != m[t]) oc++; end
        if (y < TY - 1) begin nc++; if (m[t+TX] != m[t]) oc++; end
        if (x > 0)      begin nc++; if (m[t-1]  != m[t]) oc++; end
        if (x < TX - 1) begin nc++; if (m[t+1]  != m[t]) oc++; end
        c = (nc > 0) && ((s == 0) ? (4 * oc >= 3 * nc) : (oc == nc));
        if (c) begin
          if (qv[1-d].size() > 0) begin
            int o = qv[1-d].pop_front();
            m[t] = ~m[t]; m[o] = ~m[o];
          end else qv[d].push_back(t);
        end
      end
    end
  endfunction

  function automatic int ref_bfs(ref bit m [N], input bit merge, ref int lab [N], ref int sd [N]);
    bit vis [N];
    int nreg = 0;
    foreach (vis[i]) vis[i] = 0;
    for (int s = 0; s < N; s++) begin
      int qq [$], members [$];
      if (vis[s]) continue;
      vis[s] = 1; qq.push_back(s);
      sd[nreg] = (int'(m[s]) << ID_W) | s;
      while (qq.size() > 0) begin
        int c = qq.pop_front(), x = c % TX, y = c / TX;
        members.push_back(c);
        lab[c] = nreg;
        if (y > 0      && !vis[c-TX] && m[c-TX] == m[s]) begin vis[c-TX] = 1; qq.push_back(c-TX); end
        if (y < TY - 1 && !vis[c+TX] && m[c+TX] == m[s]) begin vis[c+TX] = 1; qq.push_back(c+TX); end
        if (x > 0      && !vis[c-1]  && m[c-1]  == m[s]) begin vis[c-1]  = 1; qq.push_back(c-1); end
        if (x < TX - 1 && !vis[c+1]  && m[c+1]  == m[s]) begin vis[c+1]  = 1; qq.push_back(c+1); end
      end
      nreg++;
      if (merge && members.size() < RMIN) foreach (members[i]) m[members[i]] = ~m[members[i]];
    end
    return nreg;
  endfunction

  task automatic run_frame();
    tile_rec_t recs [N];
    longint keys [$];
    bit m [N];
    int lab [N], sd [N], nreg, top, bot, mt, ct, cyc, bad;
    longint ms, cs;
    int x0, y0, w, h;
    // statistics: low background, high rectangles, noise
    for (int t = 0; t < N; t++) begin
      recs[t] = '{cycles: 16'($urandom_range(100, 4000)), mpki: 16'($urandom_range(0, 20)),
                  ctype: core_type_e'($urandom_range(0, 1)), id: tile_id_t'(t)};
    end
    for (int b = 0; b < 3; b++) begin
      x0 = $urandom_range(0, TX - 3); y0 = $urandom_range(0, TY - 3);
      w = $urandom_range(2, 7); h = $urandom_range(2, 5);
      for (int y = y0; y < y0 + h && y < TY; y++)
        for (int x = x0; x < x0 + w && x < TX; x++) recs[y*TX+x].mpki = 16'($urandom_range(40, 200));
    end
    for (int i = 0; i < 12; i++) recs[$urandom_range(0, N - 1)].mpki = 16'($urandom_range(0, 200));
    // reference: stable sort by MPKI descending
    foreach (recs[t]) keys.push_back((longint'(65535 - recs[t].mpki) << 16) | t);
    keys.sort();
    ms = 0; cs = 0; mt = 0; ct = 0; top = 0; bot = N - 1;
    for (int s = 0; s < N; s++) begin
      int it = int'(keys[top] & 16'hffff), ib = int'(keys[bot] & 16'hffff);
      if (ms < cs || (ms == cs && mt <= ct)) begin m[it] = 1; ms += recs[it].cycles; mt++; top++; end
      else begin m[ib] = 0; cs += recs[ib].cycles; ct++; bot--; end
    end
    ref_isolation(m);
    void'(ref_bfs(m, 1, lab, sd));
    nreg = ref_bfs(m, 0, lab, sd);
    // load statistics
    for (int t = 0; t < N; t++) begin
      @(negedge clk); st_we = 1; st_addr = tile_id_t'(t); st_rec = recs[t];
    end
    @(negedge clk); st_we = 0; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    bad = 0;
    for (int t = 0; t < N; t++) if (aff_map[t] != m[t]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d tiles with wrong final type", bad); end
    checks++;
    if (int'(num_regions) != nreg) begin failures++; $display("FAIL %0d regions, expected %0d", num_regions, nreg); end
    bad = 0;
    for (int t = 0; t < N; t++) if (lbl[t] != lab[t]) bad++;
    for (int r = 0; r < nreg; r++) if (seeds[r] != sd[r]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d label/region-list entries", bad); end
    checks++;
    if (mem_cycles != 32'(ms) || cmp_cycles != 32'(cs)) begin failures++; $display("FAIL cycle sums"); end
    checks++;
    if (int'(sched_cycles) > 3 * N * merge_passes(N) + 4 * N + 14 * N + 16) begin
      failures++; $display("FAIL %0d cycles over budget", sched_cycles);
    end
    $display("frame: %0d cycles, %0d regions, %0d pairs, %0d small regions", sched_cycles, num_regions, pairs_flipped, small_regions);
  endtask

  initial begin
    start = 0; st_we = 0; st_addr = '0; st_rec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (4) run_frame();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
