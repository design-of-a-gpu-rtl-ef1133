// flushing_unit: writes the finished tile's Color Buffer to the Frame Buffer
// in main memory, once per tile.
//
// On start (with the tile's ID) the unit walks the tile's pixel rows top to
// bottom and each row in two 16-pixel halves; each half is one 64-byte line
// of the Frame Buffer (RGBA8, row-major, SCREEN_W pixels per row, base
// address FB_BASE). A line is gathered from eight quad words of the Color
// Buffer (eight one-cycle reads through cb_re/cb_addr/cb_rdata, taking the
// quads' upper or lower pixel pair) and then offered on
// mem_valid/mem_addr/mem_data until mem_ready. Rows below the bottom of the
// screen (the last tile row covers 1056..1087 but the screen ends at 1079)
// are skipped. done pulses after the last line. Timing: ten cycles per line
// plus the memory's back-pressure, at most 64 lines per tile.
// Flushing the Color Buffer to the Frame Buffer once per tile is the paper's;
// the line format, addressing and order are this design's.
module flushing_unit
  import khepri_pkg::*;
#(
  parameter int unsigned   TILES_X = DEF_TILES_X,
  parameter logic [31:0]   FB_BASE = 32'h0000_0000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  tile_id_t               tile,
  output logic                   busy,
  output logic                   done,
  output logic                   cb_re,
  output logic [QIDX_W-1:0]      cb_addr,
  input  rgba8_t [3:0]           cb_rdata,
  output logic                   mem_valid,
  input  logic                   mem_ready,
  output logic [31:0]            mem_addr,
  output logic [LINE_BYTES*8-1:0] mem_data,
  output logic [31:0]            lines_written
);

  typedef enum logic [1:0] {F_IDLE, F_GATHER, F_WRITE} fstate_e;
  fstate_e st;

  logic [ID_W-1:0] tx, ty;
  logic [4:0]      py;          // pixel row in tile
  logic            half;        // 0: pixels 0..15, 1: 16..31
  logic [3:0]      k;           // quad being requested (0..7), 8 = last data
  logic            rd_pending;
  logic [2:0]      rd_k;
  rgba8_t [LINE_PIX-1:0] line;
  logic [31:0]     row_abs, col_abs;

  assign row_abs = 32'(ty) * TILE_PIX + 32'(py);
  assign col_abs = 32'(tx) * TILE_PIX + (half ? 32'(LINE_PIX) : 32'd0);

  assign busy     = (st != F_IDLE);
  assign cb_re    = (st == F_GATHER) && (k < 4'd8);
  assign cb_addr  = {QC_W'(py >> 1), QC_W'({half, k[2:0]})};
  assign mem_data = line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= F_IDLE;
      tx            <= '0;
      ty            <= '0;
      py            <= '0;
      half          <= 1'b0;
      k             <= '0;
      rd_pending    <= 1'b0;
      rd_k          <= '0;
      line          <= '0;
      mem_valid     <= 1'b0;
      mem_addr      <= '0;
      done          <= 1'b0;
      lines_written <= '0;
    end else begin
      done <= 1'b0;
      // collect the quad word requested last cycle: its two pixels of row py
      rd_pending <= cb_re;
      rd_k       <= k[2:0];
      if (rd_pending) begin
        line[2*rd_k]     <= cb_rdata[{py[0], 1'b0}];
        line[2*rd_k + 1] <= cb_rdata[{py[0], 1'b1}];
      end
      unique case (st)
        F_IDLE: if (start) begin
          tx   <= ID_W'(32'(tile) % TILES_X);
          ty   <= ID_W'(32'(tile) / TILES_X);
          py   <= '0;
          half <= 1'b0;
          k    <= '0;
          st   <= F_GATHER;
        end
        F_GATHER: begin
          if (row_abs >= SCREEN_H) begin
            // below the screen: nothing left to write for this tile
            st   <= F_IDLE;
            done <= 1'b1;
          end else if (k < 4'd8) begin
            k <= k + 1'b1;
          end else if (!rd_pending) begin
            mem_valid <= 1'b1;
            mem_addr  <= FB_BASE + ((row_abs * SCREEN_W + col_abs) << 2);
            st        <= F_WRITE;
          end
        end
        F_WRITE: if (mem_ready) begin
          mem_valid     <= 1'b0;
          lines_written <= lines_written + 1'b1;
          k             <= '0;
          half          <= ~half;
          if (half) py <= py + 1'b1;
          if (half && py == 5'd31) begin
            st   <= F_IDLE;
            done <= 1'b1;
          end else begin
            st <= F_GATHER;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  // A line stays stable while it waits for the memory.
  a_line_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_valid && !mem_ready) |=> (mem_valid && $stable(mem_addr) && $stable(mem_data)));

endmodule
