// tb_hxdp_piq: self-checking test of the Programmable Input Queue.
// Packets of several lengths are written as 32-byte frames; the head
// packet's length and port are checked, its frames are read back in
// reverse order (out of reception order) and compared with what was sent,
// then it is popped. A small queue is also filled until in_ready drops.
module tb_hxdp_piq;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0, pop = 0;
  logic [FRAME_W-1:0] in_data = '0, rd_frame;
  logic [5:0]  in_bytes = 0;
  logic [1:0]  in_port = 0, pkt_port;
  logic        pkt_avail;
  logic [15:0] pkt_len, rd_idx = 0;
  logic [FRAME_W-1:0] sent [3][8];
  int lens [3] = '{70, 32, 200};
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hxdp_piq #(.FRAMES(16), .DESCS(4)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last,
    .in_bytes, .in_port, .pkt_avail, .pkt_len, .pkt_port, .rd_idx, .rd_frame, .pop);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input int p, input int len);
    int nf = (len + 31) / 32;
    for (int f = 0; f < nf; f++) begin
      @(negedge clk);
      in_valid = 1;
      for (int w = 0; w < 8; w++) in_data[32*w +: 32] = $urandom;
      sent[p][f] = in_data;
      in_last  = (f == nf - 1);
      in_bytes = 6'((f == nf - 1) ? len - 32 * f : 32);
      in_port  = 2'(p);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 3; p++) send(p, lens[p]);
    for (int p = 0; p < 3; p++) begin
      @(negedge clk);
      chk(pkt_avail, "packet available");
      chk(pkt_len == 16'(lens[p]), $sformatf("len pkt %0d = %0d", p, pkt_len));
      chk(pkt_port == 2'(p), "port");
      for (int f = (lens[p] + 31) / 32 - 1; f >= 0; f--) begin
        rd_idx = 16'(f); #1;
        chk(rd_frame == sent[p][f], $sformatf("frame %0d of pkt %0d", f, p));
      end
      @(negedge clk) pop = 1;
      @(negedge clk) pop = 0;
    end
    chk(!pkt_avail, $sformatf("queue empty %0d", dut.dcount));
    // fill: 16 frames fit, the 17th is refused
    for (int i = 0; i < 2; i++) send(0, 256);
    @(negedge clk);
    in_valid = 1; in_last = 0;
    #1 chk(!in_ready, "in_ready low when full");
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
