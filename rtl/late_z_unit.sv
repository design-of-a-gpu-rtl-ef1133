// late_z_unit: Late Z-Test of one Raster Unit, the visibility test for quads
// whose fragment shader writes depth and that therefore bypassed Early Z.
//
// After shading, the core sends the quad again with its final per-lane
// depths. The unit reads the quad's word of the tile's Z-Buffer (the one
// owned by early_z_unit, through its zb_* port, one-cycle read), keeps the
// covered lanes whose depth is smaller than the stored one (LESS, as Early
// Z), writes their depths back and returns the quad with only the surviving
// lanes in its mask; the core then blends only those. A quad with no survivor
// is still returned (empty mask) so the core can retire it, and is counted.
// One quad is in flight at a time: accept and read in one cycle, test, write
// and register the result in the next, so two cycles per quad. zb_hold is
// high from the moment a quad is offered until its write is done, which
// keeps Early Z off the buffer and so avoids read-modify-write races.
// Interface: in_valid/in_ready/in_quad and out_valid/out_ready/out_quad are
// valid/ready (bypass bit ignored on input, cleared on output).
// Deciding visibility after shading when shaders change depth is the paper's
// description; the shared-buffer port, the two-cycle rate and returning the
// mask to the core are this design's.
module late_z_unit
  import khepri_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  zquad_t in_quad,
  output logic   out_valid,
  input  logic   out_ready,
  output zquad_t out_quad,
  // Z-Buffer port
  output logic                zb_hold,
  output logic                zb_re,
  output logic [QIDX_W-1:0]   zb_raddr,
  input  logic [3:0][Z_W-1:0] zb_rdata,
  output logic                zb_we,
  output logic [QIDX_W-1:0]   zb_waddr,
  output logic [3:0][Z_W-1:0] zb_wdata,
  output logic [31:0]         quads_killed,
  output logic [31:0]         frags_killed
);

  logic   a_valid;     // quad read, Z-Buffer word arrives on zb_rdata
  zquad_t a_quad;
  logic   finish;
  logic [3:0] pass;

  assign in_ready = !a_valid;
  assign zb_re    = in_valid && in_ready;
  assign zb_raddr = {in_quad.qy, in_quad.qx};
  assign zb_hold  = in_valid || a_valid;
  assign finish   = a_valid && (!out_valid || out_ready);

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      pass[l]     = a_quad.mask[l] && (a_quad.z[l] < zb_rdata[l]);
      zb_wdata[l] = pass[l] ? a_quad.z[l] : zb_rdata[l];
    end
  end
  assign zb_we    = finish;
  assign zb_waddr = {a_quad.qy, a_quad.qx};

  function automatic logic [2:0] ones4(logic [3:0] v);
    return 3'(v[0]) + 3'(v[1]) + 3'(v[2]) + 3'(v[3]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid      <= 1'b0;
      a_quad       <= '0;
      out_valid    <= 1'b0;
      out_quad     <= '0;
      quads_killed <= '0;
      frags_killed <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (zb_re) begin
        a_valid <= 1'b1;
        a_quad  <= in_quad;
      end else if (finish) begin
        a_valid         <= 1'b0;
        out_valid       <= 1'b1;
        out_quad        <= a_quad;
        out_quad.mask   <= pass;
        out_quad.bypass <= 1'b0;
        frags_killed    <= frags_killed + 32'(ones4(a_quad.mask & ~pass));
        if (pass == 4'b0000) quads_killed <= quads_killed + 1'b1;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_quad)));

endmodule
