// blending_unit: Blending Unit of one Raster Unit with its tile-sized Color
// Buffer.
//
// Shaded quads from the Fragment Stage are merged into the Color Buffer at
// their pixel positions. A lane with its blend bit set is combined with the
// stored colour by source-over alpha blending, per channel
//   out = (src * a + dst * (255 - a) + 127) / 255,
//   out_a = a + (dst_a * (255 - a) + 127) / 255;
// a lane without it replaces the stored colour. The Color Buffer holds one
// word of four RGBA8 pixels per quad position (16x16 quads, 32x32 pixels).
// clear starts a new tile: for 256 cycles every entry is set to clear_color
// and in_ready is low. The Flushing Unit reads the buffer through the fl_*
// port (one quad word per request, one-cycle latency).
// Timing: one quad per cycle, read-modify-write in the cycle of acceptance.
// Combining shaded colours with the tile's Color Buffer, considering
// transparency, is the paper's description; the blend equation, the colour
// format and the buffer organisation are this design's.
module blending_unit
  import khepri_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  rgba8_t                    clear_color,
  output logic                      clearing,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  cquad_t                    in_quad,
  input  logic                      fl_re,
  input  logic [QIDX_W-1:0]         fl_addr,
  output rgba8_t [3:0]              fl_rdata,
  output logic [31:0]               frags_blended
);

  localparam int unsigned NQ = QUADS_PER_ROW * QUADS_PER_ROW;

  rgba8_t [3:0]      cbuf [NQ];
  logic [QIDX_W-1:0] clr_idx;
  logic [QIDX_W-1:0] qi;
  rgba8_t [3:0]      blended;
  logic              accept;

  assign qi       = {in_quad.qy, in_quad.qx};
  assign in_ready = !clearing;
  assign accept   = in_valid && in_ready;

  function automatic logic [7:0] mix(logic [7:0] s, logic [7:0] d, logic [7:0] a);
    logic [16:0] acc;
    acc = 17'(s) * 17'(a) + 17'(d) * 17'(8'd255 - a) + 17'd127;
    return 8'(acc / 17'd255);
  endfunction

  function automatic logic [7:0] mix_alpha(logic [7:0] d, logic [7:0] a);
    logic [16:0] acc;
    acc = 17'(d) * 17'(8'd255 - a) + 17'd127;
    return a + 8'(acc / 17'd255);
  endfunction

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      if (in_quad.blend[l]) begin
        blended[l].r = mix(in_quad.color[l].r, cbuf[qi][l].r, in_quad.color[l].a);
        blended[l].g = mix(in_quad.color[l].g, cbuf[qi][l].g, in_quad.color[l].a);
        blended[l].b = mix(in_quad.color[l].b, cbuf[qi][l].b, in_quad.color[l].a);
        blended[l].a = mix_alpha(cbuf[qi][l].a, in_quad.color[l].a);
      end else begin
        blended[l] = in_quad.color[l];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (clearing) begin
      cbuf[clr_idx] <= {4{clear_color}};
    end else if (accept) begin
      for (int l = 0; l < 4; l++)
        if (in_quad.mask[l]) cbuf[qi][l] <= blended[l];
    end
    if (fl_re) fl_rdata <= cbuf[fl_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing      <= 1'b0;
      clr_idx       <= '0;
      frags_blended <= '0;
    end else begin
      if (clear) begin
        clearing <= 1'b1;
        clr_idx  <= '0;
      end else if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (32'(clr_idx) == NQ - 1) clearing <= 1'b0;
      end
      if (accept) frags_blended <= frags_blended + 32'(in_quad.mask[0]) + 32'(in_quad.mask[1])
                                                 + 32'(in_quad.mask[2]) + 32'(in_quad.mask[3]);
    end
  end

endmodule
