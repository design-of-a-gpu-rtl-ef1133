// khepri_pkg: types and constants shared by the tile-scheduling hardware.
//
// The screen is cut into 32x32-pixel tiles; at 1920x1080 that is a 60x34 grid,
// 2040 tiles, each named by an 11-bit tile ID in scanline order
// (id = y*TILES_X + x). Every tile has a 44-bit statistics record: Fragment
// Stage cycles (16 bits), memory intensity as misses per 1000 instructions
// (16 bits), a core-type bit and the tile ID (11 bits); these widths follow
// the paper. The core-type encoding (0 = compute, Raster Unit 0; 1 = memory,
// Raster Unit 1) is this design's choice.
package khepri_pkg;

  localparam int unsigned TILE_PIX      = 32;     // tile edge in pixels
  localparam int unsigned DEF_TILES_X   = 60;     // 1920 / 32
  localparam int unsigned DEF_TILES_Y   = 34;     // ceil(1080 / 32)
  localparam int unsigned ID_W          = 11;     // tile-ID width
  localparam int unsigned CYC_W         = 16;     // Fragment Stage cycles
  localparam int unsigned MPKI_W        = 16;     // misses per kilo-instruction
  localparam int unsigned DEF_REGION_MIN = 8;     // smallest region kept

  typedef enum logic {
    CORE_COMPUTE = 1'b0,   // Raster Unit 0, compute-specialized cores
    CORE_MEMORY  = 1'b1    // Raster Unit 1, memory-specialized cores
  } core_type_e;

  typedef logic [ID_W-1:0] tile_id_t;

  typedef struct packed {
    logic [CYC_W-1:0]  cycles;   // Fragment Stage cycles in the last frame
    logic [MPKI_W-1:0] mpki;     // L1 misses per 1000 instructions
    core_type_e        ctype;    // core type that executed the tile
    tile_id_t          id;       // tile ID
  } tile_rec_t;                  // 44 bits

  localparam int unsigned REC_W = $bits(tile_rec_t);

  // Request and response bundles of a record buffer (tile_ram of tile_rec_t):
  // one write port and two synchronous read ports.
  typedef struct packed {
    logic      we;
    tile_id_t  waddr;
    tile_rec_t wdata;
    logic      re_a;
    tile_id_t  raddr_a;
    logic      re_b;
    tile_id_t  raddr_b;
  } rec_ram_req_t;

  typedef struct packed {
    tile_rec_t rdata_a;
    tile_rec_t rdata_b;
  } rec_ram_rsp_t;

  // ---- Raster Unit back end (Early Z, Blending, Flushing) ----
  // A tile is handled in 2x2-pixel quads: 16x16 quads of a 32x32 tile. Lane i
  // of a quad is pixel (2*qx + i[0], 2*qy + i[1]). Depth is 24 bits (smaller
  // is closer) and colour is RGBA with 8 bits per channel; both widths are
  // this design's choice.
  localparam int unsigned QUADS_PER_ROW = TILE_PIX / 2;          // 16
  localparam int unsigned QC_W          = $clog2(QUADS_PER_ROW); // 4
  localparam int unsigned QIDX_W        = 2 * QC_W;              // 8
  localparam int unsigned Z_W           = 24;
  localparam int unsigned SCREEN_W      = 1920;
  localparam int unsigned SCREEN_H      = 1080;
  localparam int unsigned LINE_BYTES    = 64;                    // cache line
  localparam int unsigned LINE_PIX      = LINE_BYTES / 4;        // 16 pixels

  typedef struct packed {
    logic [7:0] a, b, g, r;
  } rgba8_t;

  // Quad from the Rasterizer to Early Z, and from Early Z to the shader cores.
  typedef struct packed {
    logic [QC_W-1:0]      qx;
    logic [QC_W-1:0]      qy;
    logic [3:0]           mask;     // covered (or surviving) lanes
    logic [3:0][Z_W-1:0]  z;        // per-lane depth
    logic                 bypass;   // shader writes depth: no early test
  } zquad_t;

  // Shaded quad from the shader cores to the Blending Unit.
  typedef struct packed {
    logic [QC_W-1:0]      qx;
    logic [QC_W-1:0]      qy;
    logic [3:0]           mask;
    logic [3:0]           blend;    // per lane: blend with the buffer (1) or replace (0)
    rgba8_t [3:0]         color;
  } cquad_t;

  // Number of merge passes for n elements: ceil(log2 n).
  function automatic int unsigned merge_passes(int unsigned n);
    return (n > 1) ? $clog2(n) : 0;
  endfunction

endpackage
