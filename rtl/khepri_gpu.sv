// khepri_gpu: a heterogeneous tile-based GPU's tile scheduling and Raster
// Unit back ends, with one Raster Unit of compute-specialized shader cores
// (RU0) and one of memory-specialized shader cores (RU1).
//
// While a frame renders, each RU's tile_stats_counter measures every tile it
// executes (Fragment Stage cycles and L1 misses per 1000 instructions) and the
// records are written, one per cycle with RU0 first on a collision, into the
// scheduler's per-tile table. sched_start (typically at the start of the next
// frame's geometry work) runs the tile_scheduler: rank by MPKI, cycle-balanced
// core-type split, isolation clean-up and region detection. Its results, the
// region-number map and the region list, are kept in two tile_ram buffers
// from which the tile_fetcher then feeds each RU the regions of its core type
// in scanline order, tiles in S-order.
// Each RU has a back end built here: an early_z_unit with the tile's Z-Buffer
// between the Rasterizer (rz_* ports) and the shader cores (ez_* ports), a
// blending_unit with the tile's Color Buffer fed by the shader cores (sh_*),
// and a flushing_unit that writes the finished tile to the Frame Buffer
// (fb_* ports, 64-byte lines). Quads whose shader writes depth pass Early Z
// flagged bypass; after shading the core sends them to the late_z_unit
// (lz_* ports), which tests them against the same Z-Buffer and returns the
// surviving lanes (lzr_* ports) for blending. The rasterizers, shader
// cores, caches and memory are outside.
// Interface and timing: a tile is handed over with ru_tile_valid /
// ru_tile_ready / ru_tile_id. The offer is held back while the RU's back end
// is busy (tile still open, flush running or buffers clearing); the
// handshake starts the tile's measurement and clears its Z and Color
// Buffers (256 cycles). The RU reports per cycle whether its Fragment Stage
// is busy, how many instructions retired and how many L1 texture misses
// occurred, and pulses ru_tile_end when its last quad has been blended; the
// Color Buffer is then flushed (about 10 cycles per line, 64 lines). All
// quad and line ports are valid/ready. frame_done pulses once all N tiles
// are recorded and the last flushes have finished.
// The structure (two specialized RUs fed by one Tile Fetcher, decisions from
// the previous frame's per-tile statistics, per-RU Early Z, Blending and
// flushing, Late Z for depth-writing shaders) is the paper's; the port
// protocol, the frame sequencing and the single (not double) tile buffers
// are this design's.
module khepri_gpu
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X    = DEF_TILES_X,
  parameter int unsigned TILES_Y    = DEF_TILES_Y,
  parameter int unsigned REGION_MIN = DEF_REGION_MIN
) (
  input  logic          clk,
  input  logic          rst_n,
  // frame control
  input  logic          sched_start,
  output logic          sched_busy,
  output logic          sched_done,
  output logic          frame_done,
  // tile dispatch, index = Raster Unit (0 compute, 1 memory)
  output logic          ru_tile_valid [2],
  input  logic          ru_tile_ready [2],
  output tile_id_t      ru_tile_id    [2],
  // per-cycle activity reported by the Raster Units
  input  logic          ru_frag_active [2],
  input  logic [5:0]    ru_instr_cnt   [2],
  input  logic [3:0]    ru_miss_cnt    [2],
  input  logic          ru_tile_end    [2],
  // status
  output logic [ID_W:0] num_regions,
  output logic [31:0]   sched_cycles,
  output logic [ID_W:0] pairs_flipped,
  output logic [ID_W:0] small_regions,
  output logic [ID_W:0] tiles_issued [2],
  output logic [31:0]   mem_cycles,
  output logic [31:0]   cmp_cycles,
  // Raster Unit back end, index = Raster Unit
  input  rgba8_t        clear_color,
  input  logic          rz_valid [2],      // quads from the Rasterizer
  output logic          rz_ready [2],
  input  zquad_t        rz_quad  [2],
  output logic          ez_valid [2],      // surviving quads to the shader cores
  input  logic          ez_ready [2],
  output zquad_t        ez_quad  [2],
  input  logic          lz_valid [2],      // depth-writing quads, shaded, to Late Z
  output logic          lz_ready [2],
  input  zquad_t        lz_quad  [2],
  output logic          lzr_valid [2],     // their surviving lanes, back to the cores
  input  logic          lzr_ready [2],
  output zquad_t        lzr_quad  [2],
  input  logic          sh_valid [2],      // shaded quads from the shader cores
  output logic          sh_ready [2],
  input  cquad_t        sh_quad  [2],
  output logic          fb_valid [2],      // Frame Buffer line writes
  input  logic          fb_ready [2],
  output logic [31:0]   fb_addr  [2],
  output logic [LINE_BYTES*8-1:0] fb_data [2],
  output logic [31:0]   quads_killed  [2],
  output logic [31:0]   late_killed   [2],
  output logic [31:0]   frags_blended [2],
  output logic [31:0]   lines_written [2]
);

  localparam int unsigned N = TILES_X * TILES_Y;

  // Statistics collection, one counter per Raster Unit.
  logic      rec_valid [2], rec_ready [2];
  tile_rec_t rec [2];

  // Tile hand-over: the Tile Fetcher's offer reaches an RU only when its
  // back end is free (previous tile flushed, buffers cleared).
  logic     fetch_valid [2], fetch_ready [2], be_free [2], tile_go [2];
  tile_id_t fetch_id [2];

  for (genvar r = 0; r < 2; r++) begin : g_ru
    assign ru_tile_valid[r] = fetch_valid[r] && be_free[r];
    assign ru_tile_id[r]    = fetch_id[r];
    assign fetch_ready[r]   = ru_tile_ready[r] && be_free[r];
    assign tile_go[r]       = ru_tile_valid[r] && ru_tile_ready[r];

    tile_stats_counter #(.CORE_TYPE(core_type_e'(r))) u_stats (
      .clk, .rst_n,
      .tile_start(tile_go[r]), .tile_id(ru_tile_id[r]),
      .frag_active(ru_frag_active[r]), .instr_cnt(ru_instr_cnt[r]), .miss_cnt(ru_miss_cnt[r]),
      .tile_end(ru_tile_end[r]),
      .rec_valid(rec_valid[r]), .rec_ready(rec_ready[r]), .rec(rec[r]));
  end

  logic      st_we;
  tile_id_t  st_addr;
  tile_rec_t st_rec;
  logic      sched_idle;

  assign sched_idle   = !sched_busy;
  assign rec_ready[0] = sched_idle;
  assign rec_ready[1] = sched_idle && !rec_valid[0];
  assign st_we        = sched_idle && (rec_valid[0] || rec_valid[1]);
  assign st_rec       = rec_valid[0] ? rec[0] : rec[1];
  assign st_addr      = st_rec.id;

  // Scheduler.
  logic [N-1:0]  aff_map;
  logic          lbl_we, seed_we;
  tile_id_t      lbl_addr, lbl_data, seed_addr;
  logic [ID_W:0] seed_data;

  tile_scheduler #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .REGION_MIN(REGION_MIN)) u_sched (
    .clk, .rst_n, .start(sched_start), .busy(sched_busy), .done(sched_done),
    .st_we, .st_addr, .st_rec,
    .aff_map, .lbl_we, .lbl_addr, .lbl_data, .seed_we, .seed_addr, .seed_data, .num_regions,
    .sched_cycles, .mem_cycles, .cmp_cycles, .pairs_flipped, .small_regions);

  // Region-number map and region list.
  logic     seed_re [2], lbl_re [2];
  tile_id_t seed_raddr [2], lbl_raddr [2], lbl_rdata [2];
  logic [ID_W:0] seed_rdata [2];

  tile_ram #(.DEPTH(N), .WIDTH(ID_W), .AW(ID_W)) u_label_map (
    .clk, .we(lbl_we), .waddr(lbl_addr), .wdata(lbl_data),
    .re_a(lbl_re[0]), .raddr_a(lbl_raddr[0]), .rdata_a(lbl_rdata[0]),
    .re_b(lbl_re[1]), .raddr_b(lbl_raddr[1]), .rdata_b(lbl_rdata[1]));

  tile_ram #(.DEPTH(N), .WIDTH(ID_W + 1), .AW(ID_W)) u_region_list (
    .clk, .we(seed_we), .waddr(seed_addr), .wdata(seed_data),
    .re_a(seed_re[0]), .raddr_a(seed_raddr[0]), .rdata_a(seed_rdata[0]),
    .re_b(seed_re[1]), .raddr_b(seed_raddr[1]), .rdata_b(seed_rdata[1]));

  // Tile Fetcher.
  logic          fetch_busy, fetch_done;
  logic [ID_W:0] regions_issued [2];

  tile_fetcher #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_fetch (
    .clk, .rst_n, .start(sched_done), .num_regions,
    .seed_re, .seed_raddr, .seed_rdata, .lbl_re, .lbl_raddr, .lbl_rdata,
    .tile_valid(fetch_valid), .tile_ready(fetch_ready), .tile_id(fetch_id),
    .busy(fetch_busy), .done(fetch_done), .regions_issued, .tiles_issued);

  // Raster Unit back ends: Early Z with its Z-Buffer, Blending with its
  // Color Buffer, Flushing to the Frame Buffer. A tile opens at the
  // hand-over (both buffers are cleared) and closes at ru_tile_end (the
  // Color Buffer is flushed); the next tile is held back until then.
  logic     tile_open [2], ez_clearing [2], bl_clearing [2], fl_busy [2], fl_start [2];
  logic     cb_re [2];
  logic [QIDX_W-1:0] cb_addr [2];
  rgba8_t [3:0]      cb_rdata [2];
  tile_id_t cur_tile [2];
  logic     zb_hold [2], zb_re [2], zb_we [2];
  logic [QIDX_W-1:0] zb_raddr [2], zb_waddr [2];
  logic [3:0][Z_W-1:0] zb_rdata [2], zb_wdata [2];

  for (genvar r = 0; r < 2; r++) begin : g_be
    assign be_free[r]  = !tile_open[r] && !fl_busy[r] && !ez_clearing[r] && !bl_clearing[r];
    assign fl_start[r] = tile_open[r] && ru_tile_end[r];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        tile_open[r] <= 1'b0;
        cur_tile[r]  <= '0;
      end else if (tile_go[r]) begin
        tile_open[r] <= 1'b1;
        cur_tile[r]  <= ru_tile_id[r];
      end else if (fl_start[r]) begin
        tile_open[r] <= 1'b0;
      end
    end

    early_z_unit u_early_z (
      .clk, .rst_n, .clear(tile_go[r]), .clearing(ez_clearing[r]),
      .in_valid(rz_valid[r]), .in_ready(rz_ready[r]), .in_quad(rz_quad[r]),
      .out_valid(ez_valid[r]), .out_ready(ez_ready[r]), .out_quad(ez_quad[r]),
      .quads_killed(quads_killed[r]), .frags_killed(),
      .zb_hold(zb_hold[r]), .zb_re(zb_re[r]), .zb_raddr(zb_raddr[r]), .zb_rdata(zb_rdata[r]),
      .zb_we(zb_we[r]), .zb_waddr(zb_waddr[r]), .zb_wdata(zb_wdata[r]));

    late_z_unit u_late_z (
      .clk, .rst_n,
      .in_valid(lz_valid[r]), .in_ready(lz_ready[r]), .in_quad(lz_quad[r]),
      .out_valid(lzr_valid[r]), .out_ready(lzr_ready[r]), .out_quad(lzr_quad[r]),
      .zb_hold(zb_hold[r]), .zb_re(zb_re[r]), .zb_raddr(zb_raddr[r]), .zb_rdata(zb_rdata[r]),
      .zb_we(zb_we[r]), .zb_waddr(zb_waddr[r]), .zb_wdata(zb_wdata[r]),
      .quads_killed(late_killed[r]), .frags_killed());

    blending_unit u_blend (
      .clk, .rst_n, .clear(tile_go[r]), .clear_color, .clearing(bl_clearing[r]),
      .in_valid(sh_valid[r]), .in_ready(sh_ready[r]), .in_quad(sh_quad[r]),
      .fl_re(cb_re[r]), .fl_addr(cb_addr[r]), .fl_rdata(cb_rdata[r]),
      .frags_blended(frags_blended[r]));

    flushing_unit #(.TILES_X(TILES_X)) u_flush (
      .clk, .rst_n, .start(fl_start[r]), .tile(cur_tile[r]), .busy(fl_busy[r]), .done(),
      .cb_re(cb_re[r]), .cb_addr(cb_addr[r]), .cb_rdata(cb_rdata[r]),
      .mem_valid(fb_valid[r]), .mem_ready(fb_ready[r]), .mem_addr(fb_addr[r]),
      .mem_data(fb_data[r]), .lines_written(lines_written[r]));
  end

  // Frame completion: all tiles recorded and the last Color Buffers flushed.
  logic [ID_W:0] recorded;
  logic          all_rec;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      recorded   <= '0;
      all_rec    <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (sched_done) begin
        recorded <= '0;
        all_rec  <= 1'b0;
      end else if (st_we) begin
        if (32'(recorded) == N - 1) begin
          recorded <= '0;
          all_rec  <= 1'b1;
        end else begin
          recorded <= recorded + 1'b1;
        end
      end
      if (all_rec && !fl_busy[0] && !fl_busy[1] && !tile_open[0] && !tile_open[1]) begin
        all_rec    <= 1'b0;
        frame_done <= 1'b1;
      end
    end
  end

  // A dispatched tile always has the core type of the RU it goes to.
  for (genvar r = 0; r < 2; r++) begin : g_chk
    a_type_match: assert property (@(posedge clk) disable iff (!rst_n)
      ru_tile_valid[r] |-> (aff_map[ru_tile_id[r]] == 1'(r)));
  end

endmodule
