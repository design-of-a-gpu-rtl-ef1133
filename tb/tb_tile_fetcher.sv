// tb_tile_fetcher: self-checking test of region-by-region S-order dispatch on
// the full 60x34 grid. The testbench builds a random affinity map, labels its
// regions with its own BFS, loads the region-number map and the region list
// into RAMs, and runs the fetcher with random back-pressure on both Raster
// Unit ports. The tile sequence of each Raster Unit must equal the reference
// sequence: its own regions in region-list order, each region row by row in
// alternating direction starting left to right. Every tile must be issued
// exactly once and the issue counters must match.
module tb_tile_fetcher;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [ID_W:0] num_regions;
  logic seed_re [2], lbl_re [2], tile_valid [2], tile_ready [2];
  tile_id_t seed_raddr [2], lbl_raddr [2], lbl_rdata [2], tile_id [2];
  logic [ID_W:0] seed_rdata [2], regions_issued [2], tiles_issued [2];

  tile_fetcher #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  logic ld_we; tile_id_t ld_addr; logic [ID_W:0] ld_seed; tile_id_t ld_lbl;
  tile_ram #(.DEPTH(N), .WIDTH(ID_W + 1), .AW(ID_W)) seed_ram (
    .clk, .we(ld_we), .waddr(ld_addr), .wdata(ld_seed),
    .re_a(seed_re[0]), .raddr_a(seed_raddr[0]), .rdata_a(seed_rdata[0]),
    .re_b(seed_re[1]), .raddr_b(seed_raddr[1]), .rdata_b(seed_rdata[1]));
  tile_ram #(.DEPTH(N), .WIDTH(ID_W), .AW(ID_W)) lbl_ram (
    .clk, .we(ld_we), .waddr(ld_addr), .wdata(ld_lbl),
    .re_a(lbl_re[0]), .raddr_a(lbl_raddr[0]), .rdata_a(lbl_rdata[0]),
    .re_b(lbl_re[1]), .raddr_b(lbl_raddr[1]), .rdata_b(lbl_rdata[1]));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got [2][$];
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++) if (tile_valid[c] && tile_ready[c]) got[c].push_back(int'(tile_id[c]));
    for (int c = 0; c < 2; c++) tile_ready[c] <= ($urandom_range(0, 3) != 0);
  end

  task automatic run_frame(int blobs);
    bit m [N];
    int lab [N];
    int seed_t [$];
    int exp_seq [2][$];
    int nreg, cnt [N];
    int bad;
    foreach (m[i]) m[i] = 0;
    for (int b = 0; b < blobs; b++) begin
      int x0 = $urandom_range(0, TX - 1), y0 = $urandom_range(0, TY - 1);
      int w = $urandom_range(1, 15), h = $urandom_range(1, 10);
      for (int y = y0; y < y0 + h && y < TY; y++)
        for (int x = x0; x < x0 + w && x < TX; x++) m[y*TX+x] = ~m[y*TX+x];
    end
    // reference labelling (scanline seeds, BFS)
    foreach (lab[i]) lab[i] = -1;
    nreg = 0;
    for (int s = 0; s < N; s++) if (lab[s] < 0) begin
      int qq [$];
      qq.push_back(s); lab[s] = nreg;
      while (qq.size()) begin
        int c = qq.pop_front(), x = c % TX, y = c / TX;
        if (y > 0      && lab[c-TX] < 0 && m[c-TX] == m[s]) begin lab[c-TX] = nreg; qq.push_back(c-TX); end
        if (y < TY - 1 && lab[c+TX] < 0 && m[c+TX] == m[s]) begin lab[c+TX] = nreg; qq.push_back(c+TX); end
        if (x > 0      && lab[c-1]  < 0 && m[c-1]  == m[s]) begin lab[c-1]  = nreg; qq.push_back(c-1); end
        if (x < TX - 1 && lab[c+1]  < 0 && m[c+1]  == m[s]) begin lab[c+1]  = nreg; qq.push_back(c+1); end
      end
      seed_t.push_back(s);
      nreg++;
    end
    // reference S-order sequences
    for (int r = 0; r < nreg; r++) begin
      int c = int'(m[seed_t[r]]), k = 0;
      for (int y = seed_t[r] / TX; y < TY; y++, k++) begin
        bit any = 0;
        for (int i = 0; i < TX; i++) begin
          int x = (k % 2 == 0) ? i : TX - 1 - i;
          if (lab[y*TX+x] == r) begin exp_seq[c].push_back(y*TX+x); any = 1; end
        end
        if (!any) break;
      end
    end
    // load RAMs
    for (int t = 0; t < N; t++) begin
      ld_we = 1; ld_addr = tile_id_t'(t); ld_lbl = tile_id_t'(lab[t]);
      ld_seed = (t < nreg) ? {1'(m[seed_t[t]]), tile_id_t'(seed_t[t])} : '0;
      @(posedge clk);
    end
    ld_we = 0;
    got[0].delete(); got[1].delete();
    num_regions = (ID_W+1)'(nreg);
    start = 1; @(posedge clk); start = 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (got[c] != exp_seq[c]) begin
        failures++; $display("FAIL RU%0d sequence (%0d tiles, expected %0d)", c, got[c].size(), exp_seq[c].size());
      end
      checks++;
      if (int'(tiles_issued[c]) != exp_seq[c].size()) begin failures++; $display("FAIL RU%0d tile counter", c); end
    end
    foreach (cnt[i]) cnt[i] = 0;
    for (int c = 0; c < 2; c++) foreach (got[c][i]) cnt[got[c][i]]++;
    bad = 0;
    foreach (cnt[i]) if (cnt[i] != 1) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d tiles not issued exactly once", bad); end
    checks++;
    if (int'(regions_issued[0] + regions_issued[1]) != nreg) begin failures++; $display("FAIL region counters"); end
    $display("frame: %0d regions, RU0 %0d tiles in %0d regions, RU1 %0d tiles in %0d regions",
             nreg, tiles_issued[0], regions_issued[0], tiles_issued[1], regions_issued[1]);
  endtask

  initial begin
    start = 0; ld_we = 0; ld_addr = '0; ld_seed = '0; ld_lbl = '0; num_regions = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(6);
    run_frame(30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
