// tb_tile_stats_counter: self-checking test of per-tile statistics. Random
// tiles of random length are driven with random per-cycle fragment-activity,
// instruction and miss counts; the testbench sums them itself and checks the
// emitted record (cycles, MPKI = misses*1000/instructions, core type, tile ID),
// including a tile with no instructions, an MPKI that saturates at 16 bits and
// a tile whose cycle count saturates. Record back-pressure is random.
module tb_tile_stats_counter;
  import khepri_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tile_start, frag_active, tile_end, rec_valid, rec_ready;
  tile_id_t tile_id;
  logic [5:0] instr_cnt;
  logic [3:0] miss_cnt;
  tile_rec_t rec;

  tile_stats_counter #(.CORE_TYPE(CORE_MEMORY)) dut (.*);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int len, int kind);
    longint cyc = 0, ins = 0, mis = 0, exp_mpki;
    tile_id_t id = tile_id_t'($urandom_range(0, 2039));
    int wait_c;
    tile_start = 1; tile_id = id; frag_active = 0; instr_cnt = 0; miss_cnt = 0;
    @(posedge clk);
    tile_start = 0;
    for (int i = 0; i < len; i++) begin
      frag_active = (kind == 3) ? 1'b1 : 1'($urandom_range(0, 1));
      instr_cnt   = (kind == 1) ? 6'd0 : (kind == 2) ? 6'($urandom_range(0, 99) == 0) : 6'($urandom_range(0, 24));
      miss_cnt    = (kind == 2) ? 4'd15 : 4'($urandom_range(0, 3));
      tile_end    = (i == len - 1);
      cyc += frag_active; ins += instr_cnt; mis += miss_cnt;
      @(posedge clk);
    end
    tile_end = 0; frag_active = 0; instr_cnt = 0; miss_cnt = 0;
    if (cyc > 65535) cyc = 65535;
    exp_mpki = (ins == 0) ? 0 : (mis * 1000) / ins;
    if (exp_mpki > 65535) exp_mpki = 65535;
    wait_c = 0;
    forever begin
      @(negedge clk);
      rec_ready = ($urandom_range(0, 2) == 0);
      if (rec_valid && rec_ready) break;
      wait_c++;
      if (wait_c > 5000) begin $display("no record"); break; end
    end
    checks++;
    if (rec.cycles != 16'(cyc) || rec.mpki != 16'(exp_mpki) || rec.id != id || rec.ctype != CORE_MEMORY) begin
      failures++;
      $display("FAIL kind %0d: got cyc=%0d mpki=%0d id=%0d, exp cyc=%0d mpki=%0d id=%0d",
               kind, rec.cycles, rec.mpki, rec.id, cyc, exp_mpki, id);
    end
    @(posedge clk);
    #1 rec_ready = 0;
    @(posedge clk);
  endtask

  initial begin
    tile_start = 0; tile_end = 0; frag_active = 0; instr_cnt = 0; miss_cnt = 0; rec_ready = 0; tile_id = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < 20; k++) run_tile($urandom_range(50, 3000), 0);
    run_tile(200, 1);      // no instructions
    run_tile(3000, 2);     // MPKI saturates
    run_tile(70000, 3);    // cycle count saturates
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
