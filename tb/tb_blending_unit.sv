// tb_blending_unit: self-checking test of the Blending Unit. The Color Buffer
// is cleared to a random colour (the 256-cycle clear is timed), then random
// shaded quads, some lanes blended and some replacing, are written with
// random gaps; a buffer model here applies the same source-over rule with an
// independent integer calculation. At the end every quad word is read back
// through the flush port (one-cycle latency) and compared with the model, and
// the blended-fragment counter is checked. Two tiles are run so the clear
// between them matters.
module tb_blending_unit;
  import khepri_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, clearing, in_valid, in_ready, fl_re;
  rgba8_t clear_color;
  cquad_t in_quad;
  logic [QIDX_W-1:0] fl_addr;
  rgba8_t [3:0] fl_rdata;
  logic [31:0] frags_blended;

  blending_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rgba8_t cm [256][4];
  int exp_frags = 0;

  function automatic int rnd_div(int num);
    // round-half-up division by 255 done by repeated subtraction
    int q = 0;
    num = num + 127;
    while (num >= 255) begin num -= 255; q++; end
    return q;
  endfunction

  task automatic do_tile(int nq);
    int cyc, bad;
    clear_color = rgba8_t'($urandom);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    cyc = 1;
    while (clearing) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 257) begin failures++; $display("FAIL clear took %0d cycles", cyc); end
    foreach (cm[i, l]) cm[i][l] = clear_color;
    for (int n = 0; n < nq; n++) begin
      cquad_t q;
      int qi;
      q.qx = QC_W'($urandom_range(0, 15)); q.qy = QC_W'($urandom_range(0, 15));
      if ($urandom_range(0, 1)) begin q.qx[3:2] = 0; q.qy[3:2] = 0; end  // overdraw
      q.mask  = 4'($urandom_range(0, 15));
      q.blend = 4'($urandom_range(0, 15));
      for (int l = 0; l < 4; l++) begin
        q.color[l] = rgba8_t'($urandom);
        case ($urandom_range(0, 3))
          0: q.color[l].a = 8'd0;
          1: q.color[l].a = 8'd255;
          default: ;
        endcase
      end
      qi = {q.qy, q.qx};
      for (int l = 0; l < 4; l++) if (q.mask[l]) begin
        rgba8_t s, d, o;
        int a;
        s = q.color[l]; d = cm[qi][l]; a = s.a;
        if (q.blend[l]) begin
          o.r = 8'(rnd_div(s.r * a + d.r * (255 - a)));
          o.g = 8'(rnd_div(s.g * a + d.g * (255 - a)));
          o.b = 8'(rnd_div(s.b * a + d.b * (255 - a)));
          o.a = 8'(a + rnd_div(d.a * (255 - a)));
        end else o = s;
        cm[qi][l] = o;
        exp_frags++;
      end
      in_quad = q; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk); in_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    // read back the whole buffer through the flush port
    bad = 0;
    for (int i = 0; i < 256; i++) begin
      fl_re = 1; fl_addr = QIDX_W'(i);
      @(negedge clk); fl_re = 0;
      for (int l = 0; l < 4; l++) if (fl_rdata[l] != cm[i][l]) begin
        if (bad < 5) $display("FAIL quad %0d lane %0d got %h exp %h", i, l, fl_rdata[l], cm[i][l]);
        bad++;
      end
    end
    checks++;
    if (bad != 0) failures++;
    checks++;
    if (frags_blended != 32'(exp_frags)) begin
      failures++; $display("FAIL frags_blended %0d exp %0d", frags_blended, exp_frags);
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; in_quad = '0; fl_re = 0; fl_addr = '0; clear_color = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    do_tile(3000);
    do_tile(1500);
    $display("blended %0d fragments", exp_frags);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
