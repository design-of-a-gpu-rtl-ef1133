// tile_fetcher: issues the frame's tiles to the two Raster Units region by
// region.
//
// Channel c serves Raster Unit c and takes only the regions of core type c
// (0 compute, 1 memory). It walks the region list in order, which is the
// scanline order of the regions' first tiles, and gives each region of its
// type entirely to its Raster Unit before starting the next. Inside a region
// the tiles go out in S-order: row by row from the region's first row, the
// first row left to right and each following row in the opposite direction
// of the one before, so consecutive tiles are nearly always neighbours. To
// find the region's tiles the channel reads the region-number map along each
// row; a region is edge-connected, so its rows are contiguous and the first
// row with no member ends it. Each map probe takes two cycles (request, then
// compare); a tile is offered on tile_valid/tile_id and held until
// tile_ready. Reading primitives from the Parameter Buffer is outside this
// block. Interface: pulse start with num_regions valid; seed and label read
// ports are synchronous (one-cycle) RAM ports; done pulses once both channels
// have finished.
// Region-per-RU assignment, scanline order of regions and S-order inside a
// region are the paper's; the row-probing method is this design's.
module tile_fetcher
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X = DEF_TILES_X,
  parameter int unsigned TILES_Y = DEF_TILES_Y
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [ID_W:0] num_regions,
  // region list: {core type, seed tile} per region
  output logic          seed_re    [2],
  output tile_id_t      seed_raddr [2],
  input  logic [ID_W:0] seed_rdata [2],
  // region-number map
  output logic          lbl_re     [2],
  output tile_id_t      lbl_raddr  [2],
  input  tile_id_t      lbl_rdata  [2],
  // tile streams, index = Raster Unit
  output logic          tile_valid [2],
  input  logic          tile_ready [2],
  output tile_id_t      tile_id    [2],
  output logic          busy,
  output logic          done,
  output logic [ID_W:0] regions_issued [2],
  output logic [ID_W:0] tiles_issued   [2]
);

  typedef enum logic [2:0] {C_IDLE, C_RREQ, C_RCHK, C_LREQ, C_LCHK, C_EMIT, C_DONE} cstate_e;

  logic     ch_done [2];
  logic     running;

  for (genvar c = 0; c < 2; c++) begin : g_ch
    cstate_e       st;
    logic [ID_W:0] rp;        // region pointer
    logic [ID_W:0] row, col;  // col counts positions walked in this row
    logic          rev;       // row walked right to left
    logic          row_hit;
    logic [ID_W:0] col_eff;
    tile_id_t      cur_tile;
    logic          seed_type;
    tile_id_t      seed_tile;
    logic          is_member;
    logic          row_end;

    assign col_eff   = rev ? ((ID_W+1)'(TILES_X - 1) - col) : col;
    assign cur_tile  = tile_id_t'(row * (ID_W+1)'(TILES_X) + col_eff);
    assign seed_type = seed_rdata[c][ID_W];
    assign seed_tile = seed_rdata[c][ID_W-1:0];
    assign is_member = (lbl_rdata[c] == tile_id_t'(rp));
    assign row_end   = (32'(col) == TILES_X - 1);

    assign seed_re[c]    = (st == C_RREQ) && (rp != num_regions);
    assign seed_raddr[c] = tile_id_t'(rp);
    assign lbl_re[c]     = (st == C_LREQ);
    assign lbl_raddr[c]  = cur_tile;
    assign tile_valid[c] = (st == C_EMIT);
    assign tile_id[c]    = cur_tile;

    // Move to the next map position after a probe of the current one: after
    // a miss in C_LCHK or once an offered tile has been taken in C_EMIT.
    logic do_adv, adv_hit, region_over;
    assign adv_hit     = (st == C_EMIT);
    assign do_adv      = ((st == C_LCHK) && !is_member) || ((st == C_EMIT) && tile_ready[c]);
    assign region_over = row_end && (!(row_hit || adv_hit) || (32'(row) == TILES_Y - 1));
    assign ch_done[c]  = (st == C_DONE);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st                <= C_IDLE;
        rp                <= '0;
        row               <= '0;
        col               <= '0;
        rev               <= 1'b0;
        row_hit           <= 1'b0;
        regions_issued[c] <= '0;
        tiles_issued[c]   <= '0;
      end else if (do_adv) begin
        if (adv_hit) tiles_issued[c] <= tiles_issued[c] + 1'b1;
        if (region_over) begin
          rp <= rp + 1'b1;
          st <= C_RREQ;
        end else if (row_end) begin
          row     <= row + 1'b1;
          col     <= '0;
          rev     <= ~rev;
          row_hit <= 1'b0;
          st      <= C_LREQ;
        end else begin
          col     <= col + 1'b1;
          row_hit <= row_hit || adv_hit;
          st      <= C_LREQ;
        end
      end else begin
        unique case (st)
          C_IDLE: if (start) begin
            rp                <= '0;
            regions_issued[c] <= '0;
            tiles_issued[c]   <= '0;
            st                <= C_RREQ;
          end
          C_RREQ: st <= (rp == num_regions) ? C_DONE : C_RCHK;
          C_RCHK: begin
            if (seed_type == 1'(c)) begin
              row               <= (ID_W+1)'(32'(seed_tile) / TILES_X);
              col               <= '0;
              rev               <= 1'b0;
              row_hit           <= 1'b0;
              regions_issued[c] <= regions_issued[c] + 1'b1;
              st                <= C_LREQ;
            end else begin
              rp <= rp + 1'b1;
              st <= C_RREQ;
            end
          end
          C_LREQ: st <= C_LCHK;
          C_LCHK: if (is_member) st <= C_EMIT;
          C_EMIT: ;
          C_DONE: if (!running) st <= C_IDLE;
          default: st <= C_IDLE;
        endcase
      end
    end

    // A tile offered to a Raster Unit stays stable until it is taken.
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (tile_valid[c] && !tile_ready[c]) |=> (tile_valid[c] && $stable(tile_id[c])));
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) running <= 1'b1;
      else if (running && ch_done[0] && ch_done[1]) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
    end
  end

endmodule
