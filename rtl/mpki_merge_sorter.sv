// mpki_merge_sorter: ranks the tile records by memory intensity (MPKI),
// highest first, with a bottom-up merge sort.
//
// The N records start in buffer A (the per-tile record table). Pass p merges
// runs of 2^p records into runs of 2^(p+1), reading from one buffer and
// writing the other, so after ceil(log2 N) passes the sorted list is in B when
// the pass count is odd (result_in_b = 1) and in A otherwise. Read port a of
// the source buffer follows the left run and read port b the right run; the
// heads stay parked on the ports' outputs. Each merge cycle compares the two
// heads, writes the larger to the destination and reads the next element of
// the run it came from, so one element is written per cycle plus one set-up
// cycle per run pair. The paper budgets 3 cycles per element (two reads, a
// compare, a write) for an upper bound of 3*N*log2(N) cycles; this design
// stays below it. Equal MPKIs keep their earlier order (stable sort).
// Interface: pulse start; done pulses one cycle when the sort is finished.
// The merge sort and the key follow the paper; the two-buffer ping-pong, the
// port use and the start/done handshake are this design's own.
module mpki_merge_sorter
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
  output logic         result_in_b,
  output rec_ram_req_t ram_a_req,
  input  rec_ram_rsp_t ram_a_rsp,
  output rec_ram_req_t ram_b_req,
  input  rec_ram_rsp_t ram_b_rsp
);

  localparam int unsigned N  = TILES_X * TILES_Y;
  localparam int unsigned CW = $clog2(N) + 3;
  localparam int unsigned PASSES = merge_passes(N);

  typedef enum logic [1:0] {S_IDLE, S_PAIR, S_MERGE} state_e;
  state_e state;

  logic [CW-1:0] width, base, i, j, k, lend, rend;
  logic          src_b;          // current pass reads B, writes A
  logic [7:0]    pass;

  rec_ram_rsp_t src_rsp;
  rec_ram_req_t src_req, dst_req;
  tile_rec_t    head_l, head_r;
  logic         l_ok, r_ok, take_left;

  assign src_rsp = src_b ? ram_b_rsp : ram_a_rsp;
  assign head_l  = src_rsp.rdata_a;
  assign head_r  = src_rsp.rdata_b;
  assign l_ok    = (i < lend);
  assign r_ok    = (j < rend);
  assign take_left = l_ok && (!r_ok || (head_l.mpki >= head_r.mpki));

  function automatic logic [CW-1:0] cmin(logic [CW-1:0] a, logic [CW-1:0] b);
    return (a < b) ? a : b;
  endfunction

  // Run bounds of the pair that starts at base.
  logic [CW-1:0] nx_lend, nx_rend;
  assign nx_lend = cmin(base + width, CW'(N));
  assign nx_rend = cmin(base + (width << 1), CW'(N));

  always_comb begin
    src_req = '0;
    dst_req = '0;
    unique case (state)
      S_PAIR: begin
        src_req.re_a    = 1'b1;
        src_req.raddr_a = tile_id_t'(base);
        src_req.re_b    = 1'b1;
        src_req.raddr_b = tile_id_t'(nx_lend);
      end
      S_MERGE: begin
        dst_req.we    = 1'b1;
        dst_req.waddr = tile_id_t'(k);
        dst_req.wdata = take_left ? head_l : head_r;
        if (take_left) begin
          src_req.re_a    = 1'b1;
          src_req.raddr_a = tile_id_t'(i + 1'b1);
        end else begin
          src_req.re_b    = 1'b1;
          src_req.raddr_b = tile_id_t'(j + 1'b1);
        end
      end
      default: ;
    endcase
  end

  assign ram_a_req = src_b ? dst_req : src_req;
  assign ram_b_req = src_b ? src_req : dst_req;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      width       <= '0;
      base        <= '0;
      i           <= '0;
      j           <= '0;
      k           <= '0;
      lend        <= '0;
      rend        <= '0;
      src_b       <= 1'b0;
      pass        <= '0;
      done        <= 1'b0;
      result_in_b <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          width <= CW'(1);
          base  <= '0;
          src_b <= 1'b0;
          pass  <= '0;
          if (PASSES == 0) begin
            done        <= 1'b1;
            result_in_b <= 1'b0;
          end else begin
            state <= S_PAIR;
          end
        end
        S_PAIR: begin
          lend  <= nx_lend;
          rend  <= nx_rend;
          i     <= base;
          j     <= nx_lend;
          k     <= base;
          state <= S_MERGE;
        end
        S_MERGE: begin
          k <= k + 1'b1;
          if (take_left) i <= i + 1'b1;
          else           j <= j + 1'b1;
          if (k + 1'b1 == rend) begin
            if (base + (width << 1) >= CW'(N)) begin
              // pass finished
              pass  <= pass + 1'b1;
              src_b <= ~src_b;
              width <= width << 1;
              base  <= '0;
              if (32'(pass) + 1 == PASSES) begin
                state       <= S_IDLE;
                done        <= 1'b1;
                result_in_b <= ~src_b;
              end else begin
                state <= S_PAIR;
              end
            end else begin
              base  <= base + (width << 1);
              state <= S_PAIR;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A merge step always has at least one run with elements left.
  a_merge_has_input: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_MERGE) |-> (l_ok || r_ok));

endmodule
