// tb_early_z_unit: self-checking test of the Early Z-Test. Random quads (some
// flagged bypass) are sent with random output back-pressure; a Z-Buffer model
// here predicts each quad's surviving lanes, and the stream of quads that
// leave the unit must match the prediction in order. The killed-quad and
// killed-fragment counters and the 256-cycle clear are checked too. Two
// tiles are run so the clear between them matters.
module tb_early_z_unit;
  import khepri_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, clearing, in_valid, in_ready, out_valid, out_ready;
  zquad_t in_quad, out_quad;
  logic [31:0] quads_killed, frags_killed;

  // The Late Z-Test port is idle here; it is exercised by tb_late_z_unit and
  // the end-to-end test.
  logic zb_hold = 0, zb_re = 0, zb_we = 0;
  logic [QIDX_W-1:0] zb_raddr = '0, zb_waddr = '0;
  logic [3:0][Z_W-1:0] zb_rdata, zb_wdata = '0;

  early_z_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [Z_W-1:0] zm [256][4];
  zquad_t expq [$];
  int exp_qk = 0, exp_fk = 0, bad = 0, got_n = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      zquad_t e;
      got_n++;
      if (expq.size() == 0) bad++;
      else begin
        e = expq.pop_front();
        if (e != out_quad) bad++;
      end
    end
  end

  task automatic do_tile(int nq);
    int cyc;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    cyc = 1;
    while (clearing) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 257) begin failures++; $display("FAIL clear took %0d cycles", cyc); end
    foreach (zm[i, l]) zm[i][l] = '1;
    for (int n = 0; n < nq; n++) begin
      zquad_t q;
      logic [3:0] pass;
      int qi;
      q.qx = QC_W'($urandom_range(0, 3)); q.qy = QC_W'($urandom_range(0, 3));   // hot spot: reuse
      q.mask = 4'($urandom_range(1, 15));
      q.bypass = ($urandom_range(0, 9) == 0);
      for (int l = 0; l < 4; l++) q.z[l] = Z_W'($urandom_range(0, 1000));
      qi = {q.qy, q.qx};
      for (int l = 0; l < 4; l++) pass[l] = q.mask[l] && (q.bypass || q.z[l] < zm[qi][l]);
      if (!q.bypass) for (int l = 0; l < 4; l++) if (pass[l]) zm[qi][l] = q.z[l];
      for (int l = 0; l < 4; l++) if (q.mask[l] && !pass[l]) exp_fk++;
      if (pass == 0) exp_qk++;
      else begin zquad_t e = q; e.mask = pass; expq.push_back(e); end
      in_valid = 1; in_quad = q;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    repeat (10) @(posedge clk);
  endtask

  always @(negedge clk) out_ready = ($urandom_range(0, 2) != 0);

  initial begin
    clear = 0; in_valid = 0; in_quad = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_tile(400);
    do_tile(400);
    checks++;
    if (bad != 0 || expq.size() != 0) begin failures++; $display("FAIL %0d quads mismatched, %0d missing", bad, expq.size()); end
    checks++;
    if (int'(quads_killed) != exp_qk || int'(frags_killed) != exp_fk) begin
      failures++; $display("FAIL kill counters %0d/%0d vs %0d/%0d", quads_killed, frags_killed, exp_qk, exp_fk);
    end
    checks++;
    if (exp_qk == 0) begin failures++; $display("FAIL no quad was occluded"); end
    $display("%0d quads passed, %0d quads and %0d fragments killed", got_n, quads_killed, frags_killed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
