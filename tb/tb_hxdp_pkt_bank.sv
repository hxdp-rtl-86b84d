// tb_hxdp_pkt_bank: self-checking test of one APS packet bank.
// A 70-byte packet is loaded frame by frame; a read of a frame not yet
// loaded must raise rd_pending. Random writes of 1..8 bytes go to the
// difference buffer and random reads on all four lanes are compared with a
// byte-array model of the packet. xdp_adjust_head(-20) opens scratch bytes
// in front of the packet, which are written and read back; reads past
// data_end return zero and set oob; xdp_adjust_tail shrinks the window;
// the 32-byte emission port is checked against the model.
module tb_hxdp_pkt_bank;
  import hxdp_pkg::*;

  localparam int SCR = 64;
  logic clk = 0, rst_n = 0, start = 0, ld_we = 0;
  logic [15:0] start_len = 0, ld_idx = 0, len, rx_count, data_off, end_off, em_off = 0;
  logic [FRAME_W-1:0] ld_data = '0, em_data;
  logic loaded, rd_pending, adj_head = 0, adj_tail = 0, adj_ok, oob;
  logic signed [31:0] adj_delta = 0;
  logic [15:0] rd_off [LANES], wr_off [LANES];
  logic [3:0]  rd_size [LANES], wr_size [LANES];
  logic        rd_en [LANES], wr_en [LANES];
  logic [63:0] rd_data [LANES], wr_data [LANES];
  logic [7:0]  model [SCR + 1536];
  int checks = 0, failures = 0;
  int lo, hi;

  always #5 clk = ~clk;

  hxdp_pkt_bank dut (.clk, .rst_n, .start, .start_len, .ld_we, .ld_idx, .ld_data, .len, .loaded,
    .rx_count, .rd_off, .rd_size, .rd_en, .rd_data, .rd_pending, .wr_en, .wr_off, .wr_size,
    .wr_data, .adj_head, .adj_tail, .adj_delta, .adj_ok, .data_off, .end_off, .oob, .em_off, .em_data);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] mread(input int off, input int size);
    logic [63:0] v = '0;
    for (int b = 0; b < size; b++) if (off + b >= lo && off + b < hi) v[8*b +: 8] = model[off + b];
    return v;
  endfunction

  task automatic rd_check(input int n);
    for (int i = 0; i < n; i++) begin
      logic [3:0] sz [5] = '{4'd1, 4'd2, 4'd4, 4'd6, 4'd8};
      for (int l = 0; l < LANES; l++) begin
        rd_en[l] = 1; rd_size[l] = sz[$urandom % 5]; rd_off[l] = 16'(lo + ($urandom % (hi - lo - 8)));
      end
      #1;
      for (int l = 0; l < LANES; l++)
        chk(rd_data[l] == mread(rd_off[l], rd_size[l]), $sformatf("read @%0d size %0d", rd_off[l], rd_size[l]));
      for (int l = 0; l < LANES; l++) rd_en[l] = 0;
    end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) begin
      rd_off[l] = 0; rd_size[l] = 1; rd_en[l] = 0; wr_off[l] = 0; wr_size[l] = 1; wr_en[l] = 0; wr_data[l] = 0;
    end
    for (int i = 0; i < SCR + 1536; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1; start_len = 70;
    @(negedge clk) start = 0;
    lo = SCR; hi = SCR + 70;
    for (int f = 0; f < 2; f++) begin
      ld_we = 1; ld_idx = 16'(f);
      for (int w = 0; w < 8; w++) ld_data[32*w +: 32] = $urandom;
      for (int b = 0; b < 32; b++) model[SCR + 32*f + b] = ld_data[8*b +: 8];
      @(negedge clk);
    end
    ld_we = 0;
    rd_en[0] = 1; rd_off[0] = 16'(SCR + 66); rd_size[0] = 4; #1;
    chk(rd_pending, "pending for frame not loaded");
    rd_off[0] = 16'(SCR + 10); #1;
    chk(!rd_pending, "no pending for loaded frame");
    chk(!loaded, "not loaded yet");
    rd_en[0] = 0;
    @(negedge clk);
    ld_we = 1; ld_idx = 2;
    for (int w = 0; w < 8; w++) ld_data[32*w +: 32] = $urandom;
    for (int b = 0; b < 32; b++) model[SCR + 64 + b] = ld_data[8*b +: 8];
    @(negedge clk) ld_we = 0;
    chk(loaded, "loaded");
    chk(data_off == 16'(SCR) && end_off == 16'(SCR + 70), "window");
    rd_check(20);
    // writes into the packet
    for (int i = 0; i < 20; i++) begin
      logic [3:0] sz [5] = '{4'd1, 4'd2, 4'd4, 4'd6, 4'd8};
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        wr_en[l] = 1; wr_size[l] = sz[$urandom % 5]; wr_off[l] = 16'(lo + l * 16 + ($urandom % 8));
        wr_data[l] = {$urandom, $urandom};
        for (int b = 0; b < wr_size[l]; b++) model[wr_off[l] + b] = wr_data[l][8*b +: 8];
      end
      @(negedge clk);
      for (int l = 0; l < LANES; l++) wr_en[l] = 0;
      rd_check(2);
    end
    // adjust head by -20 and write the new header bytes in scratch memory
    adj_head = 1; adj_delta = -20; #1;
    chk(adj_ok, "adjust head accepted");
    @(negedge clk) adj_head = 0;
    lo = SCR - 20;
    chk(data_off == 16'(SCR - 20), "data moved");
    wr_en[0] = 1; wr_off[0] = 16'(SCR - 20); wr_size[0] = 8; wr_data[0] = 64'h0807_0605_0403_0201;
    for (int b = 0; b < 8; b++) model[SCR - 20 + b] = 8'(b + 1);
    @(negedge clk) wr_en[0] = 0;
    rd_check(10);
    adj_head = 1; adj_delta = -100; #1;
    chk(!adj_ok, "adjust head beyond scratch refused");
    @(negedge clk) adj_head = 0;
    // read beyond data_end
    chk(!oob, "no oob yet");
    rd_en[1] = 1; rd_off[1] = 16'(SCR + 68); rd_size[1] = 4; #1;
    chk(rd_data[1] == mread(SCR + 68, 4) && rd_data[1][31:16] == 16'd0, "oob bytes read as zero");
    @(negedge clk) rd_en[1] = 0;
    chk(oob, "oob flagged");
    // tail adjustment
    adj_tail = 1; adj_delta = -10; #1;
    chk(adj_ok, "adjust tail");
    @(negedge clk) adj_tail = 0;
    hi = SCR + 60;
    chk(end_off == 16'(SCR + 60), "end moved");
    // emission
    for (int e = 0; e < 3; e++) begin
      logic [255:0] exp;
      em_off = 16'(lo + 32 * e); #1;
      for (int b = 0; b < 32; b++) exp[8*b +: 8] = (lo + 32*e + b < hi) ? model[lo + 32*e + b] : 8'd0;
      chk(em_data == exp, $sformatf("emission frame %0d", e));
    end
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
