// tb_tile_ram: self-checking test of the one-write, two-read tile buffer.
// Random writes and reads on both ports are compared against a model array:
// read data must appear one cycle after the request, hold while the port's
// enable is low, and return the old word on a same-cycle write to the address.
module tb_tile_ram;
  localparam int unsigned DEPTH = 2040, WIDTH = 44, AW = 11;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re_a, re_b;
  logic [AW-1:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;

  tile_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .AW(AW)) dut (.*);

  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_a, exp_b;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re_a = 0; re_b = 0; waddr = '0; raddr_a = '0; raddr_b = '0; wdata = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk);
    we = 0; re_a = 1; re_b = 1; raddr_a = '0; raddr_b = AW'(DEPTH - 1);
    exp_a = model[0]; exp_b = model[DEPTH - 1];
    for (int k = 0; k < 20000; k++) begin
      @(negedge clk);
      checks++;
      if (rdata_a !== exp_a || rdata_b !== exp_b) begin
        failures++;
        if (failures < 5) $display("FAIL cycle %0d: a=%h exp %h, b=%h exp %h", k, rdata_a, exp_a, rdata_b, exp_b);
      end
      // next operation
      re_a = $urandom_range(0, 1); re_b = $urandom_range(0, 1); we = $urandom_range(0, 1);
      raddr_a = AW'($urandom_range(0, DEPTH - 1)); raddr_b = AW'($urandom_range(0, DEPTH - 1));
      waddr = ($urandom_range(0, 3) == 0) ? raddr_a : AW'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom};
      if (re_a) exp_a = model[raddr_a];
      if (re_b) exp_b = model[raddr_b];
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
