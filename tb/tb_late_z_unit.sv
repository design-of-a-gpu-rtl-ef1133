// tb_late_z_unit: self-checking test of the Late Z-Test. The Z-Buffer is a
// model here with the same one-cycle read port as the Early Z unit's; it is
// filled with random depths. Random shaded quads, many at the same few
// positions so later quads see earlier writes, are sent with random gaps and
// random output back-pressure. A reference predicts each returned mask and
// the final buffer contents; also checked: the kill counters, the two-cycle
// rate, and that zb_hold covers every buffer access.
module tb_late_z_unit;
  import khepri_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, zb_hold, zb_re, zb_we;
  zquad_t in_quad, out_quad;
  logic [QIDX_W-1:0] zb_raddr, zb_waddr;
  logic [3:0][Z_W-1:0] zb_rdata, zb_wdata;
  logic [31:0] quads_killed, frags_killed;

  late_z_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0][Z_W-1:0] zb [256];
  logic [Z_W-1:0] zm [256][4];
  int hold_bad = 0;
  always @(posedge clk) if (rst_n) begin
    if ((zb_re || zb_we) && !zb_hold) hold_bad++;
    if (zb_re) zb_rdata <= zb[zb_raddr];
    if (zb_we) zb[zb_waddr] <= zb_wdata;
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  zquad_t expq [$];
  int bad = 0, got = 0, exp_qk = 0, exp_fk = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    zquad_t e;
    got++;
    if (expq.size() == 0) bad++;
    else begin
      e = expq.pop_front();
      if (e != out_quad) begin
        if (bad < 5) $display("FAIL quad %0d got mask %b exp %b", got, out_quad.mask, e.mask);
        bad++;
      end
    end
  end

  initial begin
    int nq = 2000, cyc;
    in_valid = 0; in_quad = '0; zb_rdata = '0;
    for (int i = 0; i < 256; i++)
      for (int l = 0; l < 4; l++) begin
        zb[i][l] = Z_W'($urandom_range(100, 900)); zm[i][l] = zb[i][l];
      end
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // rate: back-to-back offers with the output always taken
    for (int n = 0; n < nq; n++) begin
      zquad_t q, e;
      int qi;
      q.qx = QC_W'($urandom_range(0, 15)); q.qy = QC_W'($urandom_range(0, 15));
      if ($urandom_range(0, 1)) begin q.qx[3:1] = 0; q.qy[3:1] = 0; end
      q.mask = 4'($urandom_range(0, 15));
      q.bypass = 1'b1;
      for (int l = 0; l < 4; l++) q.z[l] = Z_W'($urandom_range(0, 1000));
      qi = {q.qy, q.qx};
      e = q; e.bypass = 0;
      for (int l = 0; l < 4; l++) begin
        e.mask[l] = q.mask[l] && (q.z[l] < zm[qi][l]);
        if (e.mask[l]) zm[qi][l] = q.z[l];
        if (q.mask[l] && !e.mask[l]) exp_fk++;
      end
      if (e.mask == 0) exp_qk++;
      expq.push_back(e);
      in_quad = q; in_valid = 1;
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
      if ($urandom_range(0, 2) == 0) @(negedge clk);
    end
    while (expq.size() != 0) @(posedge clk);
    @(negedge clk);
    checks++;
    if (bad != 0 || got != nq) begin failures++; $display("FAIL %0d bad of %0d returned", bad, got); end
    checks++;
    if (quads_killed != 32'(exp_qk) || frags_killed != 32'(exp_fk)) begin
      failures++; $display("FAIL counters %0d/%0d exp %0d/%0d", quads_killed, frags_killed, exp_qk, exp_fk);
    end
    bad = 0;
    for (int i = 0; i < 256; i++) for (int l = 0; l < 4; l++) if (zb[i][l] != zm[i][l]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d Z-Buffer depths wrong", bad); end
    checks++;
    if (hold_bad != 0) begin failures++; $display("FAIL buffer used without zb_hold"); end
    // rate: 40 quads offered back to back, output never blocked
    @(negedge clk); force out_ready = 1'b1;
    cyc = 0;
    fork
      begin
        for (int n = 0; n < 40; n++) begin
          in_quad.qx = QC_W'(n); in_quad.mask = 4'hF; in_valid = 1;
          do @(posedge clk); while (!in_ready);
          #1;
        end
        in_valid = 0;
      end
      begin
        @(posedge clk);
        while (in_valid) begin @(posedge clk); cyc++; end
      end
    join
    release out_ready;
    checks++;
    // one acceptance every second cycle: 40 acceptances span 2*40-1 cycles
    if (cyc != 79) begin failures++; $display("FAIL 40 quads took %0d cycles, expected 79", cyc); end
    $display("late Z: %0d quads, %0d hidden, %0d fragments hidden", nq, exp_qk, exp_fk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
