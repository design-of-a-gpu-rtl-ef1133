// tb_khepri_gpu: end-to-end test of the whole design at its default size
// (60x34 tiles, 2040 per frame, 1920x1080 pixels). Each Raster Unit is a
// behavioural model:
// it accepts a tile when idle (after a random pause), renders it for a number
// of cycles that depends on the tile's nature and on whether the RU's core
// type suits it, and reports 8 retired instructions per cycle and a miss
// pattern that makes memory-intensive tiles show a high MPKI. The synthetic
// scene is a compute-bound background with memory-bound rectangles plus
// scattered single tiles of both kinds. Per tile the RU model also sends a
// few quads through Early Z (a tagged quad naming the tile, then random ones,
// some bypassing, some hidden) and a shader model blends the survivors,
// sending bypass quads through the Late Z-Test with new depths first; a
// Frame Buffer model with back-pressure takes the flushed lines.
// Three frames are run:
//   frame 0 is scheduled from the zeroed statistics left by reset,
//   frames 1 and 2 from the statistics of the frame before.
// Checked: every tile dispatched exactly once per frame and only to the RU of
// its assigned type, the recorded per-tile MPKI and core type, frame_done,
// the scheduler's cycle budget, and that from frame 1 on most memory-bound
// tiles go to the memory RU and most compute-bound ones to the compute RU.
// Also checked: every Frame Buffer line written exactly once per frame, by
// the RU that rendered its tile, the tag pixel of every tile, the clear
// colour where nothing was drawn, and the total line count.
// Mechanisms counted (each must occur): paired reclassification, small-region
// merging, several regions, tiles on both RUs, dispatch stalls, statistics
// write collisions, right-to-left rows of the S-order walk, quads hidden by
// Early Z, bypass quads, quads hidden by Late Z (must match the unit's
// counters), blended lanes and tiles held back by a flush.
module tb_khepri_gpu;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint tb_cyc = 0;

  logic sched_start, sched_busy, sched_done, frame_done;
  logic ru_tile_valid [2], ru_tile_ready [2], ru_frag_active [2], ru_tile_end [2];
  tile_id_t ru_tile_id [2];
  logic [5:0] ru_instr_cnt [2];
  logic [3:0] ru_miss_cnt [2];
  logic [ID_W:0] num_regions, pairs_flipped, small_regions, tiles_issued [2];
  logic [31:0] sched_cycles, mem_cycles, cmp_cycles;
  rgba8_t clear_color;
  logic rz_valid [2], rz_ready [2], ez_valid [2], ez_ready [2], sh_valid [2], sh_ready [2];
  logic fb_valid [2], fb_ready [2];
  zquad_t rz_quad [2], ez_quad [2];
  cquad_t sh_quad [2];
  logic [31:0] fb_addr [2], quads_killed [2], frags_blended [2], lines_written [2], late_killed [2];
  logic lz_valid [2], lz_ready [2], lzr_valid [2], lzr_ready [2];
  zquad_t lz_quad [2], lzr_quad [2];
  logic [LINE_BYTES*8-1:0] fb_data [2];

  khepri_gpu dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scene: 1 = memory-bound tile.
  bit memtile [N];
  initial begin
    int x0, y0, w, h, t;
    foreach (memtile[i]) memtile[i] = 0;
    for (int b = 0; b < 12; b++) begin
      x0 = $urandom_range(0, TX - 8); y0 = $urandom_range(0, TY - 6);
      w = $urandom_range(4, 14); h = $urandom_range(3, 9);
      for (int y = y0; y < y0 + h && y < TY; y++)
        for (int x = x0; x < x0 + w && x < TX; x++) memtile[y*TX+x] = 1;
    end
    for (int i = 0; i < 80; i++) begin t = $urandom_range(0, N - 1); memtile[t] = ~memtile[t]; end
  end

  // Render length of a tile on a given RU (cycles).
  function automatic int render_len(int t, int ru);
    if (memtile[t]) return (ru == 1) ? 90 + t % 17 : 130 + t % 17;
    else            return (ru == 0) ? 70 + t % 13 : 100 + t % 13;
  endfunction

  // Per-frame bookkeeping.
  int dispatched [N];
  int ran_on [N];
  int exp_mpki [N];
  longint stalls = 0, collisions = 0, reversals = 0;
  int last_id [2];

  // Quads of a tile: first a tag quad at quad (0,0), nearest depth, whose
  // colour names the tile; then random quads in the upper half of the tile
  // (quad rows 0..7, never at (0,0)) around a hot spot, so some are hidden,
  // some bypass the early test and some lanes blend. Pixel rows 16..31 are
  // never drawn and must hold the frame's clear colour in the Frame Buffer.
  int cur_t [2];
  bit q_done [2], sh_busy [2];
  longint late_sent = 0, late_hidden = 0;
  longint bypass_sent = 0, blend_lanes = 0, quads_sent = 0, tag_ok = 0, tag_bad = 0;
  longint clear_ok = 0, clear_bad = 0, flush_waits = 0;

  function automatic rgba8_t tag_color(int t);
    rgba8_t c;
    c.r = 8'hA5; c.g = 8'(t); c.b = 8'(t >> 8); c.a = 8'hFF;
    return c;
  endfunction

  task automatic send_quads(int r, int t);
    int nq = 4 + t % 9;
    for (int n = 0; n < nq; n++) begin
      zquad_t q;
      q.bypass = 0;
      if (n == 0) begin
        q.qx = 0; q.qy = 0; q.mask = 4'hF;
        for (int l = 0; l < 4; l++) q.z[l] = '0;
      end else begin
        q.qx = QC_W'($urandom_range(1, 3)); q.qy = QC_W'($urandom_range(0, 7));
        q.mask = 4'($urandom_range(1, 15));
        q.bypass = ($urandom_range(0, 7) == 0);
        for (int l = 0; l < 4; l++) q.z[l] = Z_W'($urandom_range(1, 200));
      end
      rz_quad[r] = q; rz_valid[r] = 1;
      do @(posedge clk); while (!rz_ready[r]);
      #1 rz_valid[r] = 0;
      quads_sent++;
      if (q.bypass) bypass_sent++;
    end
    repeat (3) @(posedge clk);
    while (ez_valid[r] || sh_busy[r]) @(posedge clk);
    #1 q_done[r] = 1;
  endtask

  for (genvar r = 0; r < 2; r++) begin : g_shade
    // Shader model: takes surviving quads (random back-pressure) and sends
    // them shaded to the Blending Unit one cycle later. A bypass quad's
    // shader writes depth: it goes through the Late Z-Test first with new
    // depths and only its surviving lanes are blended.
    initial begin
      zquad_t q;
      cquad_t c;
      ez_ready[r] = 0; sh_valid[r] = 0; sh_quad[r] = '0; rz_valid[r] = 0; rz_quad[r] = '0;
      lz_valid[r] = 0; lz_quad[r] = '0; lzr_ready[r] = 0; sh_busy[r] = 0;
      forever begin
        #1 ez_ready[r] = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (ez_valid[r] && ez_ready[r]) begin
          q = ez_quad[r];
          #1 ez_ready[r] = 0; sh_busy[r] = 1;
          if (q.bypass) begin
            for (int l = 0; l < 4; l++) q.z[l] = Z_W'($urandom_range(1, 200));
            lz_quad[r] = q; lz_valid[r] = 1;
            do @(posedge clk); while (!lz_ready[r]);
            #1 lz_valid[r] = 0; lzr_ready[r] = 1;
            do @(posedge clk); while (!lzr_valid[r]);
            late_sent++;
            if (lzr_quad[r].mask == 0) late_hidden++;
            q.mask = lzr_quad[r].mask;
            #1 lzr_ready[r] = 0;
          end
          c.qx = q.qx; c.qy = q.qy; c.mask = q.mask;
          if (q.qx == 0 && q.qy == 0) begin
            c.blend = '0;
            for (int l = 0; l < 4; l++) c.color[l] = tag_color(cur_t[r]);
          end else begin
            c.blend = 4'($urandom_range(0, 15));
            for (int l = 0; l < 4; l++) begin
              c.color[l] = rgba8_t'($urandom);
              if (c.blend[l] && c.mask[l]) blend_lanes++;
            end
          end
          if (c.mask != 0) begin
            sh_quad[r] = c; sh_valid[r] = 1;
            do @(posedge clk); while (!sh_ready[r]);
            #1 sh_valid[r] = 0;
          end
          sh_busy[r] = 0;
        end
      end
    end

    // Frame Buffer model: random back-pressure; each line may be written
    // once per frame; tag and clear-colour pixels are checked.
    always @(negedge clk) fb_ready[r] = ($urandom_range(0, 7) != 0);
    always @(posedge clk) if (rst_n && fb_valid[r] && fb_ready[r]) begin
      int line, row, col, tt;
      rgba8_t px;
      line = int'(fb_addr[r] / LINE_BYTES);
      row  = line / (SCREEN_W / LINE_PIX);
      col  = (line % (SCREEN_W / LINE_PIX)) * LINE_PIX;
      tt   = (row / TILE_PIX) * TX + col / TILE_PIX;
      fb_lines[line]++;
      if (dispatched[tt] == 0 || ran_on[tt] != r) fb_wrong_ru++;
      if (row % TILE_PIX == 0 && col % TILE_PIX == 0) begin
        px = fb_data[r][31:0];
        if (px == tag_color(tt)) tag_ok++; else tag_bad++;
      end
      if (row % TILE_PIX >= 16) begin
        px = fb_data[r][5*32 +: 32];
        if (px == clear_color) clear_ok++; else clear_bad++;
      end
    end
  end

  int fb_lines [SCREEN_W * SCREEN_H / LINE_PIX];
  longint fb_wrong_ru = 0;

  for (genvar r = 0; r < 2; r++) begin : g_ru
    initial begin
      int t, len, pause;
      longint ins, mis;
      ru_tile_ready[r] = 0; ru_frag_active[r] = 0; ru_tile_end[r] = 0;
      ru_instr_cnt[r] = 0; ru_miss_cnt[r] = 0;
      last_id[r] = -10;
      forever begin
        pause = $urandom_range(0, 3);
        repeat (pause) @(posedge clk);
        #1 ru_tile_ready[r] = 1;
        do @(posedge clk); while (!ru_tile_valid[r]);
        t = int'(ru_tile_id[r]);
        #1 ru_tile_ready[r] = 0;
        dispatched[t]++;
        ran_on[t] = r;
        if (t == last_id[r] - 1 && (t % TX) != TX - 1) reversals++;
        last_id[r] = t;
        len = render_len(t, r);
        ins = 0; mis = 0;
        cur_t[r] = t;
        q_done[r] = 0;
        fork
          send_quads(r, t);
        join_none
        for (int c = 0; c < len; c++) begin
          // The last cycle waits for the quads to drain and, to make the
          // two RUs' records collide now and then, for a 16-cycle grid.
          if (c == len - 1 && (!q_done[r] || tb_cyc % 16 != 0)) begin
            ru_frag_active[r] = 0; ru_instr_cnt[r] = 0; ru_miss_cnt[r] = 0;
            while (!q_done[r] || tb_cyc % 16 != 0) begin @(posedge clk); #1; end
          end
          ru_frag_active[r] = (c % 5 != 4);
          ru_instr_cnt[r]   = 6'd8;
          ru_miss_cnt[r]    = memtile[t] ? 4'((c % 2) + 1) : 4'(c % 16 == 0);
          ru_tile_end[r]    = (c == len - 1);
          ins += 8; mis += ru_miss_cnt[r];
          @(posedge clk);
          #1;
        end
        exp_mpki[t] = int'((mis * 1000) / ins);
        ru_frag_active[r] = 0; ru_instr_cnt[r] = 0; ru_miss_cnt[r] = 0; ru_tile_end[r] = 0;
      end
    end
  end

  always @(posedge clk) begin
    tb_cyc++;
    for (int r = 0; r < 2; r++) begin
      if (dut.fetch_valid[r] && !dut.fetch_ready[r]) stalls++;
      if (ru_tile_ready[r] && dut.fl_busy[r]) flush_waits++;
    end
    if (dut.rec_valid[0] && dut.rec_valid[1]) collisions++;
  end

  longint tot_pairs = 0, tot_small = 0, max_regions = 0, both_rus = 0;

  task automatic run_frame(int f);
    int bad, mm, mt, cc, ct, cyc_budget;
    foreach (dispatched[i]) dispatched[i] = 0;
    foreach (fb_lines[i]) fb_lines[i] = 0;
    clear_color = rgba8_t'($urandom);
    @(posedge clk); #1 sched_start = 1; @(posedge clk); #1 sched_start = 0;
    while (!sched_done) @(posedge clk);
    tot_pairs += pairs_flipped; tot_small += small_regions;
    if (num_regions > max_regions) max_regions = num_regions;
    cyc_budget = 3 * N * merge_passes(N) + 4 * N + 14 * N + 16;
    checks++;
    if (int'(sched_cycles) > cyc_budget) begin failures++; $display("FAIL scheduler %0d cycles", sched_cycles); end
    $display("frame %0d: scheduled in %0d cycles (paper's estimate 89725), %0d regions, %0d pairs reclassified, %0d small regions merged",
             f, sched_cycles, num_regions, pairs_flipped, small_regions);
    while (!frame_done) @(posedge clk);
    @(posedge clk);
    if (tiles_issued[0] > 0 && tiles_issued[1] > 0) both_rus++;
    bad = 0;
    foreach (dispatched[i]) if (dispatched[i] != 1) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d tiles not dispatched exactly once", bad); end
    bad = 0;
    foreach (fb_lines[i]) if (fb_lines[i] != 1) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d Frame Buffer lines not written exactly once", bad); end
    bad = 0;
    for (int t = 0; t < N; t++) begin
      tile_rec_t r = dut.u_sched.u_buf_a.mem[t];
      if (int'(r.id) != t || int'(r.mpki) != exp_mpki[t] || int'(r.ctype) != ran_on[t]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d statistics records wrong", bad); end
    mm = 0; mt = 0; cc = 0; ct = 0;
    for (int t = 0; t < N; t++) begin
      if (memtile[t]) begin mt++; if (ran_on[t] == 1) mm++; end
      else begin ct++; if (ran_on[t] == 0) cc++; end
    end
    $display("frame %0d: RU0 %0d tiles, RU1 %0d tiles; memory-bound on RU1 %0d/%0d, compute-bound on RU0 %0d/%0d",
             f, tiles_issued[0], tiles_issued[1], mm, mt, cc, ct);
    if (f > 0) begin
      checks++;
      if (mm * 4 < mt * 3) begin failures++; $display("FAIL memory-bound tiles mostly not on RU1"); end
      checks++;
      if (cc * 2 < ct) begin failures++; $display("FAIL compute-bound tiles mostly not on RU0"); end
    end
  endtask

  initial begin
    sched_start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (sched_busy) @(posedge clk);      // record table being cleared
    for (int f = 0; f < 3; f++) run_frame(f);
    checks++; if (tot_pairs == 0)   begin failures++; $display("FAIL no reclassification happened"); end
    checks++; if (tot_small == 0)   begin failures++; $display("FAIL no small region merged"); end
    checks++; if (max_regions < 2)  begin failures++; $display("FAIL never more than one region"); end
    checks++; if (both_rus == 0)    begin failures++; $display("FAIL one RU never used"); end
    checks++; if (stalls == 0)      begin failures++; $display("FAIL no dispatch stall"); end
    checks++; if (collisions == 0)  begin failures++; $display("FAIL no statistics collision"); end
    checks++; if (tag_bad != 0 || tag_ok != 3 * N) begin failures++; $display("FAIL tag pixels %0d ok %0d bad", tag_ok, tag_bad); end
    checks++; if (clear_bad != 0 || clear_ok == 0) begin failures++; $display("FAIL clear pixels %0d ok %0d bad", clear_ok, clear_bad); end
    checks++; if (fb_wrong_ru != 0) begin failures++; $display("FAIL %0d lines flushed by the wrong RU", fb_wrong_ru); end
    checks++; if (quads_killed[0] + quads_killed[1] == 0) begin failures++; $display("FAIL no quad hidden by Early Z"); end
    checks++; if (bypass_sent == 0) begin failures++; $display("FAIL no bypass quad"); end
    checks++; if (late_hidden == 0 || 64'(late_killed[0]) + 64'(late_killed[1]) != late_hidden) begin
      failures++; $display("FAIL late Z: %0d hidden seen, %0d counted", late_hidden, late_killed[0] + late_killed[1]);
    end
    checks++; if (blend_lanes == 0) begin failures++; $display("FAIL no blended lane"); end
    checks++; if (flush_waits == 0) begin failures++; $display("FAIL no tile held back by a flush"); end
    checks++; if (64'(lines_written[0]) + 64'(lines_written[1]) != 3 * SCREEN_W * SCREEN_H / LINE_PIX) begin
      failures++; $display("FAIL %0d lines written", lines_written[0] + lines_written[1]);
    end
    checks++; if (reversals == 0)   begin failures++; $display("FAIL no right-to-left S-order row"); end
    $display("mechanisms: pairs=%0d small=%0d max_regions=%0d stalls=%0d collisions=%0d reversals=%0d",
             tot_pairs, tot_small, max_regions, stalls, collisions, reversals);
    $display("late Z: %0d quads tested, %0d hidden", late_sent, late_hidden);
    $display("back end: quads=%0d killed=%0d bypass=%0d blended_lanes=%0d frags_blended=%0d lines=%0d flush_waits=%0d tags=%0d",
             quads_sent, quads_killed[0] + quads_killed[1], bypass_sent, blend_lanes,
             frags_blended[0] + frags_blended[1], lines_written[0] + lines_written[1], flush_waits, tag_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
