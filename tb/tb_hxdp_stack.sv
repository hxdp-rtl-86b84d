// tb_hxdp_stack: self-checking test of the 512-byte stack: unaligned
// little-endian writes of 1, 2, 4, 6 and 8 bytes on all lanes, reads on
// all lanes, the 32-byte helper port and the clear at program start,
// against a byte-array reference model.
module tb_hxdp_stack;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [15:0] raddr [LANES], waddr [LANES], haddr;
  logic [63:0] rdata [LANES], wdata [LANES];
  logic [3:0]  wsize [LANES];
  logic        we [LANES];
  logic [255:0] hdata;
  logic [7:0]  model [512];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hxdp_stack dut (.clk, .rst_n, .clear, .raddr, .rdata, .we, .waddr, .wsize, .wdata, .haddr, .hdata);

  initial begin
    logic [3:0] sizes [5] = '{4'd1, 4'd2, 4'd4, 4'd6, 4'd8};
    for (int i = 0; i < 512; i++) model[i] = 0;
    for (int l = 0; l < LANES; l++) begin raddr[l] = 0; waddr[l] = 0; wdata[l] = 0; wsize[l] = 1; we[l] = 0; end
    haddr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        we[l]    = 1;
        waddr[l] = 16'(l * 128 + ($urandom % 120));
        wsize[l] = sizes[$urandom % 5];
        wdata[l] = {$urandom, $urandom};
        for (int b = 0; b < 8; b++) if (b < wsize[l]) model[waddr[l] + b] = wdata[l][8*b +: 8];
      end
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin we[l] = 0; raddr[l] = 16'($urandom % 504); end
      haddr = 16'($urandom % 480);
      #1;
      for (int l = 0; l < LANES; l++) begin
        logic [63:0] e;
        for (int b = 0; b < 8; b++) e[8*b +: 8] = model[raddr[l] + b];
        checks++;
        if (rdata[l] !== e) begin failures++; $display("FAIL lane %0d @%0d %h exp %h", l, raddr[l], rdata[l], e); end
      end
      begin
        logic [255:0] e;
        for (int b = 0; b < 32; b++) e[8*b +: 8] = model[haddr + b];
        checks++;
        if (hdata !== e) begin failures++; $display("FAIL helper read @%0d", haddr); end
      end
    end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    haddr = 0; raddr[0] = 100;
    #1;
    checks++;
    if (hdata !== '0 || rdata[0] !== '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
