// tile_scheduler: the affinity- and locality-aware tile scheduler. From the
// statistics of the last frame it decides, for every tile, whether it runs on
// the compute-specialized or the memory-specialized Raster Unit, and groups
// the tiles into regions for the Tile Fetcher.
//
// It owns the per-tile record table (buffer A, indexed by tile ID and written
// through st_* while a frame renders), the scratch buffer B used by the merge
// sort, and the affinity map (one flip-flop per tile, 1 = memory). A start
// pulse runs, one after the other:
//   1. mpki_merge_sorter      rank tiles by MPKI, highest first
//   2. affinity_partitioner   two-ended, cycle-balanced core-type assignment
//   3. isolation_reclassifier highly, then totally isolated tiles, in pairs
//   4. region_flood_fill (0)  merge regions smaller than REGION_MIN
//   5. region_flood_fill (1)  number the regions, write the region-number map
//                             (lbl_*) and the region list (seed_*)
// and then pulses done; sched_cycles holds the run's length. After reset the
// block first fills the record table with zero statistics (N cycles, busy
// high), so the first frame is split evenly by tile count. Statistics must
// not be written while busy (assertion).
// The steps and their order are the paper's; the buffer organisation,
// reset fill and handshake are this design's.
module tile_scheduler
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X    = DEF_TILES_X,
  parameter int unsigned TILES_Y    = DEF_TILES_Y,
  parameter int unsigned REGION_MIN = DEF_REGION_MIN
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // statistics of the frame being rendered
  input  logic                       st_we,
  input  tile_id_t                   st_addr,
  input  tile_rec_t                  st_rec,
  // results
  output logic [TILES_X*TILES_Y-1:0] aff_map,
  output logic                       lbl_we,
  output tile_id_t                   lbl_addr,
  output tile_id_t                   lbl_data,
  output logic                       seed_we,
  output tile_id_t                   seed_addr,
  output logic [ID_W:0]              seed_data,
  output logic [ID_W:0]              num_regions,
  // observability
  output logic [31:0]                sched_cycles,
  output logic [31:0]                mem_cycles,
  output logic [31:0]                cmp_cycles,
  output logic [ID_W:0]              pairs_flipped,
  output logic [ID_W:0]              small_regions
);

  localparam int unsigned N = TILES_X * TILES_Y;

  typedef enum logic [2:0] {P_INIT, P_IDLE, P_SORT, P_PART, P_RECL, P_MERGE, P_LABEL} phase_e;
  phase_e phase;
  logic   kick;            // start pulse for the unit of the new phase
  logic [ID_W:0] init_a;

  // Record buffers.
  rec_ram_req_t a_req, b_req, sort_a_req, sort_b_req, part_req;
  rec_ram_rsp_t a_rsp, b_rsp, part_rsp;
  logic         result_in_b;

  tile_ram #(.DEPTH(N), .WIDTH(REC_W), .AW(ID_W)) u_buf_a (
    .clk, .we(a_req.we), .waddr(a_req.waddr), .wdata(a_req.wdata),
    .re_a(a_req.re_a), .raddr_a(a_req.raddr_a), .rdata_a(a_rsp.rdata_a),
    .re_b(a_req.re_b), .raddr_b(a_req.raddr_b), .rdata_b(a_rsp.rdata_b));

  tile_ram #(.DEPTH(N), .WIDTH(REC_W), .AW(ID_W)) u_buf_b (
    .clk, .we(b_req.we), .waddr(b_req.waddr), .wdata(b_req.wdata),
    .re_a(b_req.re_a), .raddr_a(b_req.raddr_a), .rdata_a(b_rsp.rdata_a),
    .re_b(b_req.re_b), .raddr_b(b_req.raddr_b), .rdata_b(b_rsp.rdata_b));

  always_comb begin
    a_req = '0;
    b_req = '0;
    unique case (phase)
      P_INIT: begin
        a_req.we    = 1'b1;
        a_req.waddr = tile_id_t'(init_a);
        a_req.wdata = '{cycles: '0, mpki: '0, ctype: CORE_COMPUTE, id: tile_id_t'(init_a)};
      end
      P_IDLE: begin
        a_req.we    = st_we;
        a_req.waddr = st_addr;
        a_req.wdata = st_rec;
      end
      P_SORT: begin
        a_req = sort_a_req;
        b_req = sort_b_req;
      end
      P_PART: begin
        if (result_in_b) b_req = part_req;
        else             a_req = part_req;
      end
      default: ;
    endcase
  end
  assign part_rsp = result_in_b ? b_rsp : a_rsp;

  // Units.
  logic sort_busy, sort_done, part_busy, part_done, recl_busy, recl_done, ff_busy, ff_done;
  logic part_we;
  tile_id_t part_idx;
  core_type_e part_val;
  logic [ID_W:0] mem_tiles, cmp_tiles;
  logic f0_v, f1_v, ff_flip;
  tile_id_t f0_i, f1_i, ff_idx;
  logic [ID_W:0] ff_regions;

  mpki_merge_sorter #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_sort (
    .clk, .rst_n, .start(kick && phase == P_SORT), .busy(sort_busy), .done(sort_done),
    .result_in_b, .ram_a_req(sort_a_req), .ram_a_rsp(a_rsp), .ram_b_req(sort_b_req), .ram_b_rsp(b_rsp));

  affinity_partitioner #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_part (
    .clk, .rst_n, .start(kick && phase == P_PART), .busy(part_busy), .done(part_done),
    .rd_req(part_req), .rd_rsp(part_rsp), .aff_we(part_we), .aff_idx(part_idx), .aff_val(part_val),
    .mem_cycles, .cmp_cycles, .mem_tiles, .cmp_tiles);

  isolation_reclassifier #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_recl (
    .clk, .rst_n, .start(kick && phase == P_RECL), .aff_map, .busy(recl_busy), .done(recl_done),
    .flip0_valid(f0_v), .flip0_idx(f0_i), .flip1_valid(f1_v), .flip1_idx(f1_i), .pairs_flipped);

  region_flood_fill #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .REGION_MIN(REGION_MIN)) u_ff (
    .clk, .rst_n, .start(kick && (phase == P_MERGE || phase == P_LABEL)), .mode(phase == P_LABEL),
    .aff_map, .busy(ff_busy), .done(ff_done), .flip_valid(ff_flip), .flip_idx(ff_idx),
    .lbl_we, .lbl_addr, .lbl_data, .seed_we, .seed_addr, .seed_data,
    .num_regions(ff_regions), .small_regions);

  assign num_regions = ff_regions;

  // Affinity map.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aff_map <= '0;
    end else begin
      if (part_we) aff_map[part_idx] <= part_val;
      if (f0_v)    aff_map[f0_i]     <= ~aff_map[f0_i];
      if (f1_v)    aff_map[f1_i]     <= ~aff_map[f1_i];
      if (ff_flip) aff_map[ff_idx]   <= ~aff_map[ff_idx];
    end
  end

  // Phase sequencer.
  assign busy = (phase != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= P_INIT;
      init_a       <= '0;
      kick         <= 1'b0;
      done         <= 1'b0;
      sched_cycles <= '0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      if (phase != P_IDLE && phase != P_INIT) sched_cycles <= sched_cycles + 1'b1;
      unique case (phase)
        P_INIT: begin
          init_a <= init_a + 1'b1;
          if (32'(init_a) == N - 1) phase <= P_IDLE;
        end
        P_IDLE: if (start) begin
          phase        <= P_SORT;
          kick         <= 1'b1;
          sched_cycles <= 32'd1;
        end
        P_SORT:  if (sort_done) begin phase <= P_PART;  kick <= 1'b1; end
        P_PART:  if (part_done) begin phase <= P_RECL;  kick <= 1'b1; end
        P_RECL:  if (recl_done) begin phase <= P_MERGE; kick <= 1'b1; end
        P_MERGE: if (ff_done)   begin phase <= P_LABEL; kick <= 1'b1; end
        P_LABEL: if (ff_done)   begin phase <= P_IDLE;  done <= 1'b1; end
        default: phase <= P_IDLE;
      endcase
    end
  end

  // Statistics may only be written between scheduling runs.
  a_no_stats_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    st_we |-> (phase == P_IDLE));
  // Only one unit edits the affinity map at a time.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({part_we, f0_v, ff_flip}));

endmodule
