// early_z_unit: Early Z-Test of one Raster Unit with its tile-sized Z-Buffer.
//
// Quads (2x2 fragments) from the Rasterizer are tested against the depth of
// the closest fragment drawn so far at each pixel of the current tile. A
// covered lane survives when its depth is smaller than the stored one, and
// then its depth is written to the Z-Buffer; a quad with no surviving lane is
// dropped, the others go on to the Fragment Stage with the surviving lanes in
// their mask. A quad flagged bypass (its shader writes depth) passes
// unchanged and leaves the Z-Buffer alone, its visibility being decided after
// shading. The Z-Buffer holds one word of four 24-bit depths per quad
// position (16x16 quads for a 32x32 tile). clear starts a new tile: for
// 256 cycles every entry is set to the farthest depth and in_ready is low.
// Timing: one quad per cycle; the test and the Z-Buffer update happen in the
// cycle the quad is accepted, and the result sits in an output register
// (valid/ready) one cycle later. The zb_* port lets the Late Z-Test read and
// write the same Z-Buffer (one-cycle read); zb_hold stops early tests
// meanwhile.
// The test against a tile-sized on-chip Z-Buffer and the bypass follow the
// paper's description of the pipeline; the quad format, the depth width and
// the LESS comparison are this design's.
module early_z_unit
  import khepri_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  output logic   clearing,
  input  logic   in_valid,
  output logic   in_ready,
  input  zquad_t in_quad,
  output logic   out_valid,
  input  logic   out_ready,
  output zquad_t out_quad,
  output logic [31:0] quads_killed,
  output logic [31:0] frags_killed,
  // Z-Buffer access for the Late Z-Test; while zb_hold is high no new quad is
  // accepted here, so the two tests never touch the buffer in the same cycle
  input  logic        zb_hold,
  input  logic        zb_re,
  input  logic [QIDX_W-1:0] zb_raddr,
  output logic [3:0][Z_W-1:0] zb_rdata,
  input  logic        zb_we,
  input  logic [QIDX_W-1:0] zb_waddr,
  input  logic [3:0][Z_W-1:0] zb_wdata
);

  localparam int unsigned NQ = QUADS_PER_ROW * QUADS_PER_ROW;

  logic [3:0][Z_W-1:0] zbuf [NQ];
  logic [QIDX_W-1:0]   clr_idx;
  logic [QIDX_W-1:0]   qi;
  logic [3:0]          pass;
  logic                accept;

  assign qi       = {in_quad.qy, in_quad.qx};
  assign in_ready = !clearing && !zb_hold && (!out_valid || out_ready);
  assign accept   = in_valid && in_ready;

  always_comb begin
    for (int l = 0; l < 4; l++)
      pass[l] = in_quad.mask[l] && (in_quad.bypass || (in_quad.z[l] < zbuf[qi][l]));
  end

  always_ff @(posedge clk) begin
    if (clearing) begin
      zbuf[clr_idx] <= '1;
    end else if (zb_we) begin
      zbuf[zb_waddr] <= zb_wdata;
    end else if (accept && !in_quad.bypass) begin
      for (int l = 0; l < 4; l++)
        if (pass[l]) zbuf[qi][l] <= in_quad.z[l];
    end
    if (zb_re) zb_rdata <= zbuf[zb_raddr];
  end

  function automatic logic [2:0] ones4(logic [3:0] v);
    return 3'(v[0]) + 3'(v[1]) + 3'(v[2]) + 3'(v[3]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing     <= 1'b0;
      clr_idx      <= '0;
      out_valid    <= 1'b0;
      out_quad     <= '0;
      quads_killed <= '0;
      frags_killed <= '0;
    end else begin
      if (clear) begin
        clearing <= 1'b1;
        clr_idx  <= '0;
      end else if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (32'(clr_idx) == NQ - 1) clearing <= 1'b0;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        frags_killed <= frags_killed + 32'(ones4(in_quad.mask & ~pass));
        if (pass != 4'b0000) begin
          out_valid     <= 1'b1;
          out_quad      <= in_quad;
          out_quad.mask <= pass;
        end else begin
          quads_killed <= quads_killed + 1'b1;
        end
      end
    end
  end

  // A new tile is only started with no quad in flight.
  a_clear_idle: assert property (@(posedge clk) disable iff (!rst_n)
    clear |-> !in_valid);

  // Late Z writes only while it holds the buffer.
  a_late_hold: assert property (@(posedge clk) disable iff (!rst_n)
    zb_we |-> (zb_hold && !clearing));

endmodule
