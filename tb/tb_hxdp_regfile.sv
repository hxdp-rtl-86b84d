// tb_hxdp_regfile: self-checking test of the register file: program-start
// state (r1 = context pointer, r10 = frame pointer, others zero),
// write-through reads, four simultaneous writes and the r0..r5 port.
module tb_hxdp_regfile;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0, init = 0;
  logic [3:0]  ra [LANES], rb [LANES], wa [LANES];
  logic [63:0] da [LANES], db [LANES], wd [LANES], args [6];
  logic        we [LANES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hxdp_regfile dut (.clk, .rst_n, .init, .ra, .rb, .da, .db, .we, .wa, .wd, .args);

  task automatic chk(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got=%h exp=%h", what, got, exp); end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) begin ra[l] = 0; rb[l] = 0; wa[l] = 0; wd[l] = 0; we[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    ra[0] = 1; rb[0] = 10; ra[1] = 0; rb[1] = 5;
    #1;
    chk(da[0], 64'h1000_0000, "r1 after init");
    chk(db[0], 64'h3000_0200, "r10 after init");
    chk(da[1], 0, "r0 after init");
    // four writes in one cycle, visible the same cycle (write-through)
    for (int l = 0; l < LANES; l++) begin we[l] = 1; wa[l] = 4'(l + 2); wd[l] = 64'(100 + l); end
    ra[2] = 3; rb[2] = 5; ra[3] = 6;
    #1;
    chk(da[2], 101, "write-through r3");
    chk(db[2], 103, "write-through r5");
    chk(da[3], 0, "r6 untouched");
    @(negedge clk);
    for (int l = 0; l < LANES; l++) we[l] = 0;
    #1;
    chk(da[2], 101, "r3 stored");
    chk(args[2], 100, "arg r2");
    chk(args[5], 103, "arg r5");
    chk(args[1], 64'h1000_0000, "arg r1");
    // init clears registers again
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    #1;
    chk(da[2], 0, "r3 cleared by init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
