// tb_mpki_merge_sorter: self-checking test of the MPKI merge sort at the full
// 60x34 tile grid. Random records (with many equal MPKIs to exercise
// stability) are loaded into buffer A, the sort is run, and the result is
// checked to be (1) in non-increasing MPKI order, (2) a permutation of the
// input, (3) stable for equal keys, and (4) finished within the
// 3*N*ceil(log2 N)-cycle bound. Two frames are sorted.
module tb_mpki_merge_sorter;
  import khepri_pkg::*;

  localparam int unsigned TX = DEF_TILES_X, TY = DEF_TILES_Y, N = TX * TY;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done, result_in_b;
  rec_ram_req_t a_req, b_req, a_req_s, tb_req;
  rec_ram_rsp_t a_rsp, b_rsp;
  logic use_tb;

  assign a_req = use_tb ? tb_req : a_req_s;

  mpki_merge_sorter #(.TILES_X(TX), .TILES_Y(TY)) dut (
    .clk, .rst_n, .start, .busy, .done, .result_in_b,
    .ram_a_req(a_req_s), .ram_a_rsp(a_rsp), .ram_b_req(b_req), .ram_b_rsp(b_rsp));

  tile_ram #(.DEPTH(N), .WIDTH(REC_W), .AW(ID_W)) ram_a (
    .clk, .we(a_req.we), .waddr(a_req.waddr), .wdata(a_req.wdata),
    .re_a(a_req.re_a), .raddr_a(a_req.raddr_a), .rdata_a(a_rsp.rdata_a),
    .re_b(a_req.re_b), .raddr_b(a_req.raddr_b), .rdata_b(a_rsp.rdata_b));
  tile_ram #(.DEPTH(N), .WIDTH(REC_W), .AW(ID_W)) ram_b (
    .clk, .we(b_req.we), .waddr(b_req.waddr), .wdata(b_req.wdata),
    .re_a(b_req.re_a), .raddr_a(b_req.raddr_a), .rdata_a(b_rsp.rdata_a),
    .re_b(b_req.re_b), .raddr_b(b_req.raddr_b), .rdata_b(b_rsp.rdata_b));

  tile_rec_t orig [N];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int frame);
    int unsigned cyc, bound;
    tile_rec_t r, prev;
    bit seen [N];
    bit ok_order, ok_perm, ok_stable;
    // load
    use_tb = 1;
    tb_req = '0;
    for (int t = 0; t < N; t++) begin
      r.id     = tile_id_t'(t);
      r.ctype  = core_type_e'($urandom_range(0, 1));
      r.cycles = 16'($urandom_range(0, 65535));
      r.mpki   = (frame == 0) ? 16'($urandom_range(0, 40)) : 16'($urandom_range(0, 65535));
      orig[t]  = r;
      tb_req.we = 1; tb_req.waddr = tile_id_t'(t); tb_req.wdata = r;
      @(posedge clk);
    end
    tb_req = '0;
    @(posedge clk);
    use_tb = 0;
    start = 1;
    @(posedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    bound = 3 * N * merge_passes(N);
    checks++;
    if (cyc > bound) begin
      failures++; $display("FAIL cycles %0d > bound %0d", cyc, bound);
    end
    $display("frame %0d: sort took %0d cycles (paper bound %0d)", frame, cyc, bound);
    checks++;
    if (result_in_b != (merge_passes(N) % 2 == 1)) begin
      failures++; $display("FAIL result buffer flag");
    end
    // read back through the backdoor-free port: use the arrays directly
    ok_order = 1; ok_perm = 1; ok_stable = 1;
    foreach (seen[t]) seen[t] = 0;
    for (int t = 0; t < N; t++) begin
      r = result_in_b ? ram_b.mem[t] : ram_a.mem[t];
      if (int'(r.id) >= int'(N) || seen[r.id] || r != orig[r.id]) ok_perm = 0;
      else seen[r.id] = 1;
      if (t > 0) begin
        if (r.mpki > prev.mpki) ok_order = 0;
        if (r.mpki == prev.mpki && r.id < prev.id) ok_stable = 0;
      end
      prev = r;
    end
    checks += 3;
    if (!ok_order)  begin failures++; $display("FAIL order"); end
    if (!ok_perm)   begin failures++; $display("FAIL permutation"); end
    if (!ok_stable) begin failures++; $display("FAIL stability"); end
  endtask

  initial begin
    start = 0; use_tb = 1; tb_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(0);
    run_frame(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
