// tb_isolation_reclassifier: self-checking test of the two isolation scans on
// the full 60x34 grid. Random affinity maps of several densities are
// reclassified by the block; the testbench owns the map and applies the
// block's flips. A reference written here performs the same two scans
// sequentially (highly isolated, then totally isolated, candidates paired
// through FIFO queues) and the final maps must match bit for bit. Also
// checked: the memory-tile count is unchanged (flips come in pairs), the run
// takes 2n cycles, and at least one pair is flipped in each scan kind.
module tb_isolation_reclassifier;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, flip0_valid, flip1_valid;
  tile_id_t flip0_idx, flip1_idx;
  logic [ID_W:0] pairs_flipped;
  logic [N-1:0] aff_map;
  logic load;
  logic [N-1:0] load_map;

  isolation_reclassifier #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  always_ff @(posedge clk) begin
    if (load) aff_map <= load_map;
    else begin
      if (flip0_valid) aff_map[flip0_idx] <= ~aff_map[flip0_idx];
      if (flip1_valid) aff_map[flip1_idx] <= ~aff_map[flip1_idx];
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popc(logic [N-1:0] m);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(m[i]);
    return c;
  endfunction

  // Reference: returns the reclassified map; counts pairs per scan.
  function automatic logic [N-1:0] ref_model(logic [N-1:0] m, output int p1, output int p2);
    int qv [2][$];
    p1 = 0; p2 = 0;
    for (int s = 0; s < 2; s++) begin
      qv[0].delete(); qv[1].delete();
      for (int t = 0; t < N; t++) begin
        int x = t % TX, y = t / TX, nc = 0, oc = 0, d;
        bit c;
        d = int'(m[t]);
        if (y > 0)      begin nc++; if (m[t-TX] != m[t]) oc++; end
        if (y < TY - 1) begin nc++; if (m[t+TX] != m[t]) oc++; end
        if (x > 0)      begin nc++; if (m[t-1]  != m[t]) oc++; end
        if (x < TX - 1) begin nc++; if (m[t+1]  != m[t]) oc++; end
        c = (nc > 0) && ((s == 0) ? (4 * oc >= 3 * nc) : (oc == nc));
        if (c) begin
          if (qv[1-d].size() > 0) begin
            int o = qv[1-d].pop_front();
            m[t] = ~m[t];
            m[o] = ~m[o];
            if (s == 0) p1++; else p2++;
          end else qv[d].push_back(t);
        end
      end
    end
    return m;
  endfunction

  int tot_p1 = 0, tot_p2 = 0;

  task automatic run_map(int density);
    logic [N-1:0] m, exp_m;
    int p1, p2, cyc;
    for (int i = 0; i < N; i++) m[i] = ($urandom_range(0, 99) < density);
    exp_m = ref_model(m, p1, p2);
    tot_p1 += p1; tot_p2 += p2;
    load_map = m; load = 1; @(posedge clk); load = 0;
    start = 1; @(posedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    checks++;
    if (aff_map != exp_m) begin failures++; $display("FAIL map mismatch (density %0d)", density); end
    checks++;
    if (popc(aff_map) != popc(m)) begin failures++; $display("FAIL balance"); end
    checks++;
    if (int'(pairs_flipped) != p1 + p2) begin failures++; $display("FAIL pair count %0d vs %0d", pairs_flipped, p1 + p2); end
    checks++;
    if (cyc > 2 * N + 2) begin failures++; $display("FAIL cycles %0d", cyc); end
    $display("density %0d: %0d cycles, pairs scan1=%0d scan2=%0d", density, cyc, p1, p2);
  endtask

  initial begin
    start = 0; load = 0; load_map = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_map(50);
    run_map(20);
    run_map(80);
    run_map(35);
    checks++;
    if (tot_p1 == 0 || tot_p2 == 0) begin failures++; $display("FAIL a scan kind never flipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
