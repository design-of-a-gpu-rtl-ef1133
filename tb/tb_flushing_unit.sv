// tb_flushing_unit: self-checking test of the Flushing Unit. A Color Buffer
// model here answers the unit's reads one cycle later, like the Blending
// Unit's flush port, and a memory model takes lines with random
// back-pressure. For several tiles (top-left, a middle one, the last tile of
// a row and tiles of the bottom row, whose lower 8 pixel rows are off the
// screen) every written line is checked against the expected address and
// the 16 pixels in it, in order, and the number of lines and the done pulse
// are checked.
module tb_flushing_unit;
  import khepri_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, cb_re, mem_valid, mem_ready;
  tile_id_t tile;
  logic [QIDX_W-1:0] cb_addr;
  rgba8_t [3:0] cb_rdata;
  logic [31:0] mem_addr, lines_written;
  logic [LINE_BYTES*8-1:0] mem_data;

  flushing_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rgba8_t cb [256][4];
  always @(posedge clk) if (cb_re) for (int l = 0; l < 4; l++) cb_rdata[l] <= cb[cb_addr][l];

  always @(negedge clk) mem_ready = ($urandom_range(0, 2) != 0);

  int got_lines, bad, n_done;
  logic [31:0] exp_addr [$];
  logic [LINE_BYTES*8-1:0] exp_data [$];

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (mem_valid && mem_ready) begin
      got_lines++;
      if (exp_addr.size() == 0) bad++;
      else begin
        logic [31:0] ea;
        logic [LINE_BYTES*8-1:0] ed;
        ea = exp_addr.pop_front(); ed = exp_data.pop_front();
        if (ea != mem_addr || ed != mem_data) begin
          if (bad < 5) $display("FAIL line %0d addr %h exp %h data_ok=%0d", got_lines, mem_addr, ea, ed == mem_data);
          bad++;
        end
      end
    end
  end

  task automatic do_tile(int t);
    int tx, ty, nl, cyc;
    logic [31:0] lw0;
    foreach (cb[i, l]) cb[i][l] = rgba8_t'($urandom);
    tx = t % DEF_TILES_X; ty = t / DEF_TILES_X;
    exp_addr.delete(); exp_data.delete();
    nl = 0;
    for (int py = 0; py < 32; py++) begin
      if (ty * 32 + py >= SCREEN_H) break;
      for (int h = 0; h < 2; h++) begin
        logic [LINE_BYTES*8-1:0] d;
        for (int p = 0; p < 16; p++) begin
          int px = h * 16 + p;
          d[p*32 +: 32] = cb[(py / 2) * 16 + px / 2][(py % 2) * 2 + px % 2];
        end
        exp_addr.push_back(32'(((ty * 32 + py) * SCREEN_W + tx * 32 + h * 16) * 4));
        exp_data.push_back(d);
        nl++;
      end
    end
    got_lines = 0; bad = 0; n_done = 0; lw0 = lines_written;
    @(negedge clk); start = 1; tile = tile_id_t'(t);
    @(negedge clk); start = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (bad != 0 || got_lines != nl || exp_addr.size() != 0) begin
      failures++; $display("FAIL tile %0d: %0d lines (exp %0d), %0d bad", t, got_lines, nl, bad);
    end
    checks++;
    if (n_done != 1 || lines_written - lw0 != 32'(nl)) begin
      failures++; $display("FAIL tile %0d: done %0d, counter %0d", t, n_done, lines_written - lw0);
    end
    $display("tile %0d: %0d lines in %0d cycles", t, nl, cyc);
  endtask

  initial begin
    start = 0; tile = '0; n_done = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    do_tile(0);
    do_tile(61);
    do_tile(59);
    do_tile(33 * 60);
    do_tile(2039);
    do_tile(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
