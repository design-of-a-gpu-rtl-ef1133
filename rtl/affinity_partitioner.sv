// affinity_partitioner: assigns every tile a core type from the MPKI ranking
// so that both Raster Units get about the same Fragment Stage time.
//
// The sorted list (highest MPKI first) is walked from both ends at once: the
// top pointer offers the most memory-intensive tile not yet assigned, the
// bottom pointer the least memory-intensive one. Each step gives one tile to
// the Raster Unit whose accumulated cycle count (from the last frame) is
// smaller: the memory RU takes the top tile, the compute RU the bottom tile.
// On equal sums the RU with fewer tiles goes first, then the memory RU. Each
// tile costs two cycles, a read of both ends and an accumulate/decide cycle,
// which is the paper's 2n-cycle budget. The chosen type is written into the
// affinity map through aff_we/aff_idx/aff_val (0 compute, 1 memory).
// Interface: pulse start; done pulses when all N tiles are assigned; the two
// cycle sums and tile counts stay on the outputs until the next start.
// The two-ended, time-balanced walk is the paper's; the tie rule and the
// handshake are this design's own.
module affinity_partitioner
  import khepri_pkg::*;
#(
  parameter int unsigned TILES_X = DEF_TILES_X,
  parameter int unsigned TILES_Y = DEF_TILES_Y
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  output logic         busy,
  output logic         done,
  output rec_ram_req_t rd_req,     // only the read ports are used
  input  rec_ram_rsp_t rd_rsp,
  output logic         aff_we,
  output tile_id_t     aff_idx,
  output core_type_e   aff_val,
  output logic [31:0]  mem_cycles,
  output logic [31:0]  cmp_cycles,
  output logic [ID_W:0] mem_tiles,
  output logic [ID_W:0] cmp_tiles
);

  localparam int unsigned N = TILES_X * TILES_Y;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_ACC} state_e;
  state_e state;

  logic [ID_W:0] top, bot, remaining;
  logic          pick_mem;

  assign pick_mem = (mem_cycles < cmp_cycles) ||
                    ((mem_cycles == cmp_cycles) && (mem_tiles <= cmp_tiles));

  always_comb begin
    rd_req = '0;
    if (state == S_READ) begin
      rd_req.re_a    = 1'b1;
      rd_req.raddr_a = tile_id_t'(top);
      rd_req.re_b    = 1'b1;
      rd_req.raddr_b = tile_id_t'(bot);
    end
  end

  assign aff_we  = (state == S_ACC);
  assign aff_idx = pick_mem ? rd_rsp.rdata_a.id : rd_rsp.rdata_b.id;
  assign aff_val = pick_mem ? CORE_MEMORY : CORE_COMPUTE;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      top        <= '0;
      bot        <= '0;
      remaining  <= '0;
      mem_cycles <= '0;
      cmp_cycles <= '0;
      mem_tiles  <= '0;
      cmp_tiles  <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          top        <= '0;
          bot        <= (ID_W+1)'(N - 1);
          remaining  <= (ID_W+1)'(N);
          mem_cycles <= '0;
          cmp_cycles <= '0;
          mem_tiles  <= '0;
          cmp_tiles  <= '0;
          state      <= S_READ;
        end
        S_READ: state <= S_ACC;
        S_ACC: begin
          if (pick_mem) begin
            mem_cycles <= mem_cycles + 32'(rd_rsp.rdata_a.cycles);
            mem_tiles  <= mem_tiles + 1'b1;
            top        <= top + 1'b1;
          end else begin
            cmp_cycles <= cmp_cycles + 32'(rd_rsp.rdata_b.cycles);
            cmp_tiles  <= cmp_tiles + 1'b1;
            bot        <= bot - 1'b1;
          end
          remaining <= remaining - 1'b1;
          if (remaining == 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The two pointers never cross while tiles remain.
  a_pointers: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ACC) |-> (top <= bot));

endmodule
