// isolation_reclassifier: removes isolated tiles from the affinity map while
// keeping the two Raster Units balanced.
//
// Two scans of the map follow the core-type assignment. Scan 1 looks for
// highly isolated tiles: at least 75% of their in-frame edge neighbours (up,
// down, left, right) are of the other core type, i.e. 3 of 4 inside the
// frame, 3 of 3 on an edge, 2 of 2 in a corner. Scan 2 looks only for totally
// isolated tiles, all of whose neighbours are of the other type, since scan 1
// can create new ones. A candidate is reassigned to its neighbours' type only
// together with a candidate going the other way, so tiles move between the
// RUs in pairs: a candidate that finds no partner waits in a queue of its
// direction (memory->compute or compute->memory), and a later candidate of the
// other direction takes the oldest waiting one; both flip in the same cycle
// through the flip0/flip1 outputs. Candidates still waiting at the end of a
// scan stay where they are. The scan visits one tile per cycle in scanline
// order and sees the map as updated by earlier flips, so each scan takes N
// cycles and the two take the paper's 2n.
// Interface: aff_map bit t is the core type of tile t (1 memory); the owner of
// the map inverts the bits named by flip0/flip1 at the next clock edge.
// Pulse start; done pulses after scan 2.
// The isolation classes, the 75% threshold, the two scans and the
// only-while-both-kinds-exist rule are the paper's; pairing by tile count
// through FIFO queues is this design's reading of that rule.
module isolation_reclassifier
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X = DEF_TILES_X,
  parameter int unsigned TILES_Y = DEF_TILES_Y
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [TILES_X*TILES_Y-1:0]        aff_map,
  output logic                              busy,
  output logic                              done,
  output logic                              flip0_valid,
  output tile_id_t                          flip0_idx,
  output logic                              flip1_valid,
  output tile_id_t                          flip1_idx,
  output logic [ID_W:0]                     pairs_flipped   // pairs in the last run
);

  localparam int unsigned N = TILES_X * TILES_Y;

  typedef enum logic [1:0] {S_IDLE, S_SCAN} state_e;
  state_e state;

  logic          scan2;                 // 0: highly isolated, 1: totally isolated
  logic [ID_W:0] t;                     // tile under test
  logic [ID_W:0] x, y;

  // Candidate queues: index 0 holds compute tiles that want to become memory,
  // index 1 memory tiles that want to become compute.
  tile_id_t      q [2][N];
  logic [ID_W:0] q_head [2];
  logic [ID_W:0] q_tail [2];

  // Neighbourhood of tile t.
  logic       my_type;
  logic [2:0] n_cnt, o_cnt;
  logic       cand, partner_avail;
  logic       dir;                      // queue index of t: its own type

  always_comb begin
    my_type = aff_map[tile_id_t'(t)];
    n_cnt   = '0;
    o_cnt   = '0;
    if (y != 0) begin
      n_cnt++;
      if (aff_map[tile_id_t'(t - (ID_W+1)'(TILES_X))] != my_type) o_cnt++;
    end
    if (32'(y) != TILES_Y - 1) begin
      n_cnt++;
      if (aff_map[tile_id_t'(t + (ID_W+1)'(TILES_X))] != my_type) o_cnt++;
    end
    if (x != 0) begin
      n_cnt++;
      if (aff_map[tile_id_t'(t - 1'b1)] != my_type) o_cnt++;
    end
    if (32'(x) != TILES_X - 1) begin
      n_cnt++;
      if (aff_map[tile_id_t'(t + 1'b1)] != my_type) o_cnt++;
    end
    if (n_cnt == 0)  cand = 1'b0;
    else if (scan2)  cand = (o_cnt == n_cnt);
    else             cand = ({o_cnt, 2'b00} >= ({1'b0, n_cnt} * 5'd3));   // >= 75%
    dir           = my_type;
    partner_avail = (q_head[~dir] != q_tail[~dir]);
  end

  logic active;
  assign active      = (state == S_SCAN) && cand;
  assign flip0_valid = active && partner_avail;
  assign flip0_idx   = tile_id_t'(t);
  assign flip1_valid = active && partner_avail;
  assign flip1_idx   = q[~dir][tile_id_t'(q_head[~dir])];
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (active && !partner_avail) q[dir][tile_id_t'(q_tail[dir])] <= tile_id_t'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      scan2         <= 1'b0;
      t             <= '0;
      x             <= '0;
      y             <= '0;
      q_head        <= '{default: '0};
      q_tail        <= '{default: '0};
      done          <= 1'b0;
      pairs_flipped <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state         <= S_SCAN;
          scan2         <= 1'b0;
          t             <= '0;
          x             <= '0;
          y             <= '0;
          q_head        <= '{default: '0};
          q_tail        <= '{default: '0};
          pairs_flipped <= '0;
        end
        S_SCAN: begin
          if (active) begin
            if (partner_avail) begin
              q_head[~dir]  <= q_head[~dir] + 1'b1;
              pairs_flipped <= pairs_flipped + 1'b1;
            end else begin
              q_tail[dir] <= q_tail[dir] + 1'b1;
            end
          end
          if (32'(t) == N - 1) begin
            t      <= '0;
            x      <= '0;
            y      <= '0;
            q_head <= '{default: '0};
            q_tail <= '{default: '0};
            if (scan2) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
            scan2 <= 1'b1;
          end else begin
            t <= t + 1'b1;
            if (32'(x) == TILES_X - 1) begin
              x <= '0;
              y <= y + 1'b1;
            end else begin
              x <= x + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The two flips of a pair are of opposite core types.
  a_pair_opposite: assert property (@(posedge clk) disable iff (!rst_n)
    flip0_valid |-> (aff_map[flip0_idx] != aff_map[flip1_idx]));

endmodule
