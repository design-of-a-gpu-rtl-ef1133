// tile_ram: on-chip per-tile buffer with one write port and two read ports.
//
// Holds one word per tile (DEPTH words of WIDTH bits). Reads are synchronous:
// an address presented with its read enable is returned on the matching
// rdata output one cycle later, and rdata keeps its value while the enable is
// low, so a caller can park a value on the port. A write and a read of the
// same address in one cycle return the old word. Two read ports and one write
// port let the merge sort read both run heads and write one element per
// cycle; the port count and the read latency are this design's choices, the
// 44-bit record width and the 2040-tile depth are the paper's.
module tile_ram #(
  parameter int unsigned DEPTH = 2040,
  parameter int unsigned WIDTH = 44,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re_a) rdata_a <= (32'(raddr_a) < DEPTH) ? mem[raddr_a] : '0;
    if (re_b) rdata_b <= (32'(raddr_b) < DEPTH) ? mem[raddr_b] : '0;
  end

endmodule
