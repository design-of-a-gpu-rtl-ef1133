// tile_stats_counter: measures each tile a Raster Unit renders and produces
// the statistics record the scheduler uses for the next frame.
//
// Between tile_start and tile_end it counts the cycles in which the Fragment
// Stage is busy (frag_active), the instructions the RU's cores retire
// (instr_cnt per cycle) and the L1 texture-cache misses (miss_cnt per cycle).
// At tile_end the counts are frozen and a restoring divider computes the
// memory intensity MPKI = floor(misses * 1000 / instructions), one quotient
// bit per cycle (NUM_W = 42 cycles); MPKI is 0 for a tile without
// instructions. Cycles and MPKI saturate at 16 bits, the record widths the
// paper gives. The record {cycles, mpki, CORE_TYPE, tile id} is then offered
// on rec_valid/rec until rec_ready. Counting for the next tile may start while
// the divider works; a tile must not end while the previous record is still
// being divided or waiting (checked by an assertion), which holds because a
// tile takes far longer than the divider.
// What is measured (MPKI and Fragment Stage cycles per tile, previous frame)
// is the paper's; the per-cycle count inputs, the divider and the handshake
// are this design's.
module tile_stats_counter
  import khepri_pkg::*;
#(
  parameter core_type_e  CORE_TYPE  = CORE_COMPUTE,
  parameter int unsigned INSTR_IN_W = 6,    // up to 4 cores x issue width 6
  parameter int unsigned MISS_IN_W  = 4     // up to 4 cores x 2 memory pipelines
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  tile_start,
  input  tile_id_t              tile_id,
  input  logic                  frag_active,
  input  logic [INSTR_IN_W-1:0] instr_cnt,
  input  logic [MISS_IN_W-1:0]  miss_cnt,
  input  logic                  tile_end,
  output logic                  rec_valid,
  input  logic                  rec_ready,
  output tile_rec_t             rec
);

  localparam int unsigned CNT_W = 32;
  localparam int unsigned NUM_W = CNT_W + 10;   // misses * 1000 < 2^42

  // Counting side.
  logic             in_tile;
  tile_id_t         cur_id;
  logic [CYC_W-1:0] cyc;
  logic [CNT_W-1:0] instr, miss;

  // Division side.
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_OUT} dstate_e;
  dstate_e          dst;
  logic [NUM_W-1:0] num, quo;
  logic [CNT_W:0]   rem;
  logic [CNT_W-1:0] den;
  logic [5:0]       bit_i;
  logic [CNT_W:0]   rem_sh;

  assign rem_sh = {rem[CNT_W-1:0], num[bit_i]};

  function automatic logic [CNT_W-1:0] sat_add(logic [CNT_W-1:0] a, logic [CNT_W-1:0] b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_tile <= 1'b0;
      cur_id  <= '0;
      cyc     <= '0;
      instr   <= '0;
      miss    <= '0;
    end else if (tile_start) begin
      in_tile <= 1'b1;
      cur_id  <= tile_id;
      cyc     <= '0;
      instr   <= '0;
      miss    <= '0;
    end else if (in_tile) begin
      if (frag_active && cyc != '1) cyc <= cyc + 1'b1;
      instr <= sat_add(instr, CNT_W'(instr_cnt));
      miss  <= sat_add(miss, CNT_W'(miss_cnt));
      if (tile_end) in_tile <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst       <= D_IDLE;
      num       <= '0;
      den       <= '0;
      rem       <= '0;
      quo       <= '0;
      bit_i     <= '0;
      rec       <= '0;
      rec_valid <= 1'b0;
    end else begin
      unique case (dst)
        D_IDLE: if (in_tile && tile_end && !tile_start) begin
          // freeze this cycle's totals (the end cycle's counts included)
          num       <= NUM_W'(sat_add(miss, CNT_W'(miss_cnt))) * NUM_W'(1000);
          den       <= sat_add(instr, CNT_W'(instr_cnt));
          rec.cycles <= (frag_active && cyc != '1) ? cyc + 1'b1 : cyc;
          rec.ctype <= CORE_TYPE;
          rec.id    <= cur_id;
          rem       <= '0;
          quo       <= '0;
          bit_i     <= 6'(NUM_W - 1);
          dst       <= D_RUN;
        end
        D_RUN: begin
          if (rem_sh >= {1'b0, den}) begin
            rem        <= rem_sh - {1'b0, den};
            quo[bit_i] <= 1'b1;
          end else begin
            rem <= rem_sh;
          end
          if (bit_i == 0) dst <= D_OUT;
          else            bit_i <= bit_i - 1'b1;
        end
        D_OUT: begin
          if (!rec_valid) begin
            rec.mpki  <= (den == 0) ? '0 : (|quo[NUM_W-1:MPKI_W]) ? '1 : quo[MPKI_W-1:0];
            rec_valid <= 1'b1;
          end else if (rec_ready) begin
            rec_valid <= 1'b0;
            dst       <= D_IDLE;
          end
        end
        default: dst <= D_IDLE;
      endcase
    end
  end

  // A tile may only end once the previous record has been delivered.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    (in_tile && tile_end) |-> (dst == D_IDLE));

endmodule
