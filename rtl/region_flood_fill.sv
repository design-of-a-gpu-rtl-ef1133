// region_flood_fill: finds the regions of the affinity map, groups of
// edge-connected tiles of one core type, by breadth-first flood fill.
//
// A scan pointer walks the tiles in scanline order; each tile not yet visited
// seeds a new region, so regions are numbered in the scanline order of their
// first tile. The region is grown breadth-first through a queue of tile IDs:
// one cycle dequeues a tile, then four cycles check its up, down, left and
// right neighbours, and a neighbour of the region's type that has not been
// visited is marked in the visited array and enqueued in the same cycle. The
// queue is never reused within a run, so when the region is complete its
// member list is the queue segment from its seed to the tail.
//   mode 0 (merge): a region with fewer than REGION_MIN tiles is merged into
//     the region around it by flipping the core type of each member through
//     flip_valid/flip_idx (one tile per cycle, after the region is complete).
//   mode 1 (label): each tile's region number is written through lbl_*, and
//     the region list entry {core type, seed tile} through seed_*; num_regions
//     counts the regions.
// A run costs one scan cycle per tile, five cycles per tile grown, one cycle
// per region and, in merge mode, one per flipped tile: at most 7n cycles
// for labelling, the paper's budget. Interface: pulse start with mode and
// aff_map valid (bit t = core type of tile t, 1 memory); done pulses at the
// end. The owner of the map inverts flipped bits at the next clock edge.
// Flood fill by BFS, the visited array, the queues of 11-bit tile IDs and the
// 8-tile threshold are the paper's; merging by flipping a small region's
// tiles in a first pass and labelling in a second pass are this design's.
module region_flood_fill
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X    = DEF_TILES_X,
  parameter int unsigned TILES_Y    = DEF_TILES_Y,
  parameter int unsigned REGION_MIN = DEF_REGION_MIN
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic                       mode,        // 0 merge, 1 label
  input  logic [TILES_X*TILES_Y-1:0] aff_map,
  output logic                       busy,
  output logic                       done,
  output logic                       flip_valid,
  output tile_id_t                   flip_idx,
  output logic                       lbl_we,
  output tile_id_t                   lbl_addr,
  output tile_id_t                   lbl_data,
  output logic                       seed_we,
  output tile_id_t                   seed_addr,
  output logic [ID_W:0]              seed_data,   // {core type, seed tile}
  output logic [ID_W:0]              num_regions,
  output logic [ID_W:0]              small_regions // merged in the last merge run
);

  localparam int unsigned N = TILES_X * TILES_Y;

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_POP, S_NB, S_FLIP} state_e;
  state_e state;

  logic          lbl_mode;
  logic [N-1:0]  visited;
  tile_id_t      q [N];
  logic [ID_W:0] head, tail, reg_start, fl;
  logic [ID_W:0] s;                 // scan pointer
  logic          reg_type;
  tile_id_t      cur;
  logic [1:0]    nb_k;              // neighbour being checked: up, down, left, right
  logic [ID_W:0] cur_x, cur_y;

  assign cur_x = (ID_W+1)'(32'(cur) % TILES_X);
  assign cur_y = (ID_W+1)'(32'(cur) / TILES_X);

  // Neighbour under test.
  logic          nb_in;
  logic [ID_W:0] nb;
  always_comb begin
    nb_in = 1'b0;
    nb    = {1'b0, cur};
    unique case (nb_k)
      2'd0: begin nb_in = (cur_y != 0);                    nb = {1'b0, cur} - (ID_W+1)'(TILES_X); end
      2'd1: begin nb_in = (32'(cur_y) != TILES_Y - 1);     nb = {1'b0, cur} + (ID_W+1)'(TILES_X); end
      2'd2: begin nb_in = (cur_x != 0);                    nb = {1'b0, cur} - 1'b1; end
      default: begin nb_in = (32'(cur_x) != TILES_X - 1);  nb = {1'b0, cur} + 1'b1; end
    endcase
  end

  logic nb_take, scan_seed, q_empty, reg_small;
  assign nb_take   = (state == S_NB) && nb_in && !visited[tile_id_t'(nb)] &&
                     (aff_map[tile_id_t'(nb)] == reg_type);
  assign scan_seed = (state == S_SCAN) && (32'(s) < N) && !visited[tile_id_t'(s)];
  assign q_empty   = (head == tail);
  assign reg_small = (32'(tail - reg_start) < REGION_MIN);

  assign busy       = (state != S_IDLE);
  assign flip_valid = (state == S_FLIP);
  assign flip_idx   = q[tile_id_t'(fl)];
  assign lbl_we     = lbl_mode && (state == S_POP) && !q_empty;
  assign lbl_addr   = q[tile_id_t'(head)];
  assign lbl_data   = tile_id_t'(num_regions);
  assign seed_we    = lbl_mode && scan_seed;
  assign seed_addr  = tile_id_t'(num_regions);
  assign seed_data  = {aff_map[tile_id_t'(s)], tile_id_t'(s)};

  // Queue and visited array.
  always_ff @(posedge clk) begin
    if (scan_seed) q[tile_id_t'(tail)] <= tile_id_t'(s);
    else if (nb_take) q[tile_id_t'(tail)] <= tile_id_t'(nb);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      lbl_mode      <= 1'b0;
      visited       <= '0;
      head          <= '0;
      tail          <= '0;
      reg_start     <= '0;
      fl            <= '0;
      s             <= '0;
      reg_type      <= 1'b0;
      cur           <= '0;
      nb_k          <= '0;
      num_regions   <= '0;
      small_regions <= '0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state       <= S_SCAN;
          lbl_mode    <= mode;
          visited     <= '0;
          head        <= '0;
          tail        <= '0;
          s           <= '0;
          num_regions <= '0;
          if (!mode) small_regions <= '0;
        end
        S_SCAN: begin
          if (32'(s) >= N) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (scan_seed) begin
            visited[tile_id_t'(s)] <= 1'b1;
            reg_type  <= aff_map[tile_id_t'(s)];
            reg_start <= tail;
            tail      <= tail + 1'b1;
            state     <= S_POP;
          end else begin
            s <= s + 1'b1;
          end
        end
        S_POP: begin
          if (!q_empty) begin
            cur   <= q[tile_id_t'(head)];
            head  <= head + 1'b1;
            nb_k  <= '0;
            state <= S_NB;
          end else begin
            // region complete
            num_regions <= num_regions + 1'b1;
            s           <= s + 1'b1;
            if (!lbl_mode && reg_small) begin
              fl            <= reg_start;
              small_regions <= small_regions + 1'b1;
              state         <= S_FLIP;
            end else begin
              state <= S_SCAN;
            end
          end
        end
        S_NB: begin
          if (nb_take) begin
            visited[tile_id_t'(nb)] <= 1'b1;
            tail <= tail + 1'b1;
          end
          nb_k <= nb_k + 1'b1;
          if (nb_k == 2'd3) state <= S_POP;
        end
        S_FLIP: begin
          fl <= fl + 1'b1;
          if (fl + 1'b1 == tail) state <= S_SCAN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The queue never holds more than one entry per tile.
  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n)
    32'(tail) <= N);

endmodule
