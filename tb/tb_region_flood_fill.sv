// tb_region_flood_fill: self-checking test of region detection on the full
// 60x34 grid. For random blob-like affinity maps the block first runs in
// merge mode (small regions flipped) and then in label mode. Checked against
// a reference BFS written here: the map after merging, the small-region count,
// the region count and the region list. The labels are also checked by
// properties that do not depend on BFS order: edge neighbours of equal type
// share a label and of different type do not, every tile is labelled, and
// labels first appear in scanline order. The label run must fit in 7n cycles.
module tb_region_flood_fill;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;
  localparam int unsigned RMIN = DEF_REGION_MIN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, mode, busy, done, flip_valid, lbl_we, seed_we;
  tile_id_t flip_idx, lbl_addr, lbl_data, seed_addr;
  logic [ID_W:0] seed_data, num_regions, small_regions;
  logic [N-1:0] aff_map, load_map;
  logic load;

  region_flood_fill #(.TILES_X(TX), .TILES_Y(TY), .REGION_MIN(RMIN)) dut (.*);

  int lbl [N];
  int lbl_writes [N];
  int seeds [N];
  always_ff @(posedge clk) begin
    if (load) aff_map <= load_map;
    else if (flip_valid) aff_map[flip_idx] <= ~aff_map[flip_idx];
    if (lbl_we) begin lbl[lbl_addr] <= int'(lbl_data); lbl_writes[lbl_addr] <= lbl_writes[lbl_addr] + 1; end
    if (seed_we) seeds[seed_addr] <= int'(seed_data);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference BFS. merge=1 flips small regions; returns region count.
  function automatic int ref_bfs(ref logic [N-1:0] m, input bit merge, ref int seeds_r [N],
                                 output int smalls);
    bit vis [N];
    int qq [$];
    int members [$];
    int nreg = 0;
    smalls = 0;
    foreach (vis[i]) vis[i] = 0;
    for (int s = 0; s < N; s++) begin
      if (vis[s]) continue;
      vis[s] = 1; qq.push_back(s); members.delete();
      seeds_r[nreg] = (int'(m[s]) << ID_W) | s;
      while (qq.size() > 0) begin
        int c = qq.pop_front(), x = c % TX, y = c / TX;
        int nbl [4];
        bit ok [4];
        members.push_back(c);
        nbl = '{c - TX, c + TX, c - 1, c + 1};
        ok  = '{y > 0, y < TY - 1, x > 0, x < TX - 1};
        for (int k = 0; k < 4; k++)
          if (ok[k] && !vis[nbl[k]] && m[nbl[k]] == m[s]) begin vis[nbl[k]] = 1; qq.push_back(nbl[k]); end
      end
      nreg++;
      if (merge && members.size() < RMIN) begin
        smalls++;
        foreach (members[i]) m[members[i]] = ~m[members[i]];
      end
    end
    return nreg;
  endfunction

  int tot_small = 0;

  task automatic run_map(int blobs);
    logic [N-1:0] m, em;
    int exp_seeds [N];
    int exp_nreg, exp_small, dummy, cyc, bad, next_lbl;
    // blobs: random rectangles of memory tiles over a compute background plus noise
    m = '0;
    for (int b = 0; b < blobs; b++) begin
      int x0 = $urandom_range(0, TX - 1), y0 = $urandom_range(0, TY - 1);
      int w = $urandom_range(1, 12), h = $urandom_range(1, 8);
      for (int y = y0; y < y0 + h && y < TY; y++)
        for (int x = x0; x < x0 + w && x < TX; x++) m[y*TX+x] = ~m[y*TX+x];
    end
    for (int i = 0; i < 60; i++) begin int t = $urandom_range(0, N - 1); m[t] = ~m[t]; end
    em = m;
    void'(ref_bfs(em, 1, exp_seeds, exp_small));
    tot_small += exp_small;
    load_map = m; load = 1; @(posedge clk); load = 0;
    // merge run
    mode = 0; start = 1; @(posedge clk); start = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    checks++;
    if (aff_map != em) begin failures++; $display("FAIL merged map differs"); end
    checks++;
    if (int'(small_regions) != exp_small) begin failures++; $display("FAIL small %0d vs %0d", small_regions, exp_small); end
    // label run
    exp_nreg = ref_bfs(em, 0, exp_seeds, dummy);
    foreach (lbl_writes[i]) lbl_writes[i] = 0;
    mode = 1; start = 1; @(posedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    checks++;
    if (int'(num_regions) != exp_nreg) begin failures++; $display("FAIL regions %0d vs %0d", num_regions, exp_nreg); end
    bad = 0;
    for (int r = 0; r < exp_nreg; r++) if (seeds[r] != exp_seeds[r]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d region-list entries", bad); end
    bad = 0; next_lbl = 0;
    for (int t = 0; t < N; t++) begin
      int x = t % TX, y = t / TX;
      if (lbl_writes[t] != 1) bad++;
      if (x < TX - 1 && ((aff_map[t] == aff_map[t+1]) != (lbl[t] == lbl[t+1]))) bad++;
      if (y < TY - 1 && ((aff_map[t] == aff_map[t+TX]) != (lbl[t] == lbl[t+TX]))) bad++;
      if (lbl[t] > next_lbl) bad++;
      else if (lbl[t] == next_lbl) next_lbl++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d label property violations", bad); end
    checks++;
    if (cyc > 7 * N + 2) begin failures++; $display("FAIL label run %0d cycles > 7n", cyc); end
    $display("blobs %0d: %0d small regions merged, %0d regions, label run %0d cycles (7n = %0d)",
             blobs, small_regions, num_regions, cyc, 7 * N);
  endtask

  initial begin
    start = 0; mode = 0; load = 0; load_map = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_map(10);
    run_map(40);
    run_map(80);
    checks++;
    if (tot_small == 0) begin failures++; $display("FAIL no small region ever merged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
