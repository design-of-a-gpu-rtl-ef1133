// tb_affinity_partitioner: self-checking test of the two-ended, time-balanced
// core-type assignment on the full 60x34 grid. A sorted record list is loaded
// into a buffer, the partitioner runs, and the affinity map it writes is
// compared tile by tile with a reference walk computed here. Also checked:
// every tile written exactly once, the cycle sums, the memory RU receiving a
// prefix of the ranking, and the 2n-cycle budget. Three frames, including an
// all-zero frame (the first frame after reset) that must split evenly.
module tb_affinity_partitioner;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, aff_we;
  tile_id_t aff_idx;
  core_type_e aff_val;
  logic [31:0] mem_cycles, cmp_cycles;
  logic [ID_W:0] mem_tiles, cmp_tiles;
  rec_ram_req_t rd_req, ram_req, tb_req;
  rec_ram_rsp_t rd_rsp;
  logic use_tb;

  always_comb begin
    ram_req = rd_req;
    if (use_tb) ram_req = tb_req;
  end

  affinity_partitioner #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  tile_ram #(.DEPTH(N), .WIDTH(REC_W), .AW(ID_W)) ram (
    .clk, .we(ram_req.we), .waddr(ram_req.waddr), .wdata(ram_req.wdata),
    .re_a(ram_req.re_a), .raddr_a(ram_req.raddr_a), .rdata_a(rd_rsp.rdata_a),
    .re_b(ram_req.re_b), .raddr_b(ram_req.raddr_b), .rdata_b(rd_rsp.rdata_b));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got [N];
  int writes [N];
  always @(posedge clk) if (aff_we) begin
    got[aff_idx] <= int'(aff_val);
    writes[aff_idx] <= writes[aff_idx] + 1;
  end

  task automatic run_frame(int kind);
    tile_rec_t list [N];
    int ids [N];
    int exp_type [N];
    longint ms, cs;
    int mt, ct, top, bot, cyc, bad, badw, last_mem_rank;
    // random permutation of IDs
    foreach (ids[t]) ids[t] = t;
    for (int t = N - 1; t > 0; t--) begin
      int s = $urandom_range(0, t);
      int tmp = ids[t]; ids[t] = ids[s]; ids[s] = tmp;
    end
    for (int t = 0; t < N; t++) begin
      list[t].id = tile_id_t'(ids[t]);
      list[t].mpki = 16'(N - t);
      list[t].ctype = CORE_COMPUTE;
      list[t].cycles = (kind == 0) ? 16'd0 : (kind == 1) ? 16'($urandom_range(0, 65535))
                                         : 16'($urandom_range(0, 300) + ((t < 100) ? 20000 : 0));
    end
    // reference walk
    ms = 0; cs = 0; mt = 0; ct = 0; top = 0; bot = N - 1;
    for (int s = 0; s < N; s++) begin
      if (ms < cs || (ms == cs && mt <= ct)) begin
        exp_type[list[top].id] = 1; ms += list[top].cycles; mt++; top++;
      end else begin
        exp_type[list[bot].id] = 0; cs += list[bot].cycles; ct++; bot--;
      end
    end
    use_tb = 1;
    for (int t = 0; t < N; t++) begin
      tb_req = '0; tb_req.we = 1; tb_req.waddr = tile_id_t'(t); tb_req.wdata = list[t];
      @(posedge clk);
    end
    tb_req = '0;
    foreach (writes[t]) writes[t] = 0;
    @(posedge clk);
    use_tb = 0;
    start = 1; @(posedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    bad = 0; badw = 0;
    for (int t = 0; t < N; t++) begin
      if (got[t] != exp_type[t]) bad++;
      if (writes[t] != 1) badw++;
    end
    checks++; if (bad != 0) begin failures++; $display("FAIL %0d tiles with wrong type", bad); end
    checks++; if (badw != 0) begin failures++; $display("FAIL %0d tiles not written once", badw); end
    checks++; if (mem_cycles != 32'(ms) || cmp_cycles != 32'(cs)) begin
      failures++; $display("FAIL sums %0d/%0d exp %0d/%0d", mem_cycles, cmp_cycles, ms, cs); end
    checks++; if (int'(mem_tiles) != mt || int'(cmp_tiles) != ct) begin
      failures++; $display("FAIL counts"); end
    // memory RU gets a prefix of the ranking
    last_mem_rank = -1; bad = 0;
    for (int t = 0; t < N; t++) if (got[list[t].id] == 1) begin
      if (last_mem_rank != t - 1) bad++;
      last_mem_rank = t;
    end
    checks++; if (bad != 0) begin failures++; $display("FAIL memory set is not a prefix"); end
    checks++; if (cyc > 2 * N + 4) begin failures++; $display("FAIL %0d cycles > 2n", cyc); end
    if (kind == 0) begin
      checks++; if (mt != N / 2 + N % 2) begin failures++; $display("FAIL all-zero split"); end
    end
    $display("frame kind %0d: %0d cycles, mem %0d tiles/%0d cyc, cmp %0d tiles/%0d cyc",
             kind, cyc, mem_tiles, mem_cycles, cmp_tiles, cmp_cycles);
  endtask

  initial begin
    start = 0; use_tb = 1; tb_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(0);
    run_frame(1);
    run_frame(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
