// tb_hxdp_aps: self-checking test of the Active Packet Selector.
// A behavioural input queue holds four packets (100, 64, 70 and 200 bytes,
// random contents) and serves their frames by index. A behavioural core
// answers `start`: it reads data/data_end/ingress port from the context
// over lane 0 of the data bus, checks them, touches the packet and exits:
//   p0: byte 95 read at once (waits while pending, i.e. until that frame
//       has arrived: early start), byte 3 written, a read past data_end returns 0, exit PASS;
//   p1: exit DROP (no output);
//   p2: xdp_adjust_head(-4), 4 new bytes written at the new head, exit TX;
//   p3: reads byte 190, xdp_adjust_tail(-10), REDIRECT port 9.
// The packet region starts with the 64-byte scratch area, so the first
// packet's data begins at PKT_BASE + 64.
// The output side must show p0, p2, p3 in order with the expected bytes,
// lengths, actions and ports. Every frame on the output is accepted, with
// random back-pressure on out_ready.
module tb_hxdp_aps;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic q_avail, q_pop, start, running = 0, exit_valid = 0, pending, adj_ok;
  logic [15:0] q_len, q_idx;
  logic [1:0] q_port;
  logic [FRAME_W-1:0] q_frame, out_data;
  logic [2:0] exit_action = 0, out_action;
  rd_req_t dbus_rd [LANES];
  wr_req_t dbus_wr [LANES];
  logic [63:0] rdata [LANES];
  logic adj_head = 0, adj_tail = 0, redir_valid = 0;
  logic signed [31:0] adj_delta = 0;
  logic [31:0] redir_port = 0, out_port;
  logic out_valid, out_ready = 1, out_last, oob_seen;
  logic [5:0] out_bytes;

  int lens [4] = '{100, 64, 70, 200};
  logic [7:0] pk [4][256];
  int qh = 0;
  int checks = 0, failures = 0, n_pend = 0;
  logic [7:0] got [3][300];
  int got_len [3];
  logic [2:0] got_act [3];
  logic [31:0] got_port [3];
  int n_out = 0, opos = 0;

  always #5 clk = ~clk;

  hxdp_aps dut (.clk, .rst_n, .q_avail, .q_len, .q_port, .q_idx, .q_frame, .q_pop, .start, .running,
    .exit_valid, .exit_action, .dbus_rd, .dbus_wr, .rdata, .pending, .adj_head, .adj_tail, .adj_delta,
    .adj_ok, .redir_valid, .redir_port, .out_valid, .out_ready, .out_data, .out_last, .out_bytes,
    .out_action, .out_port, .oob_seen);

  // input queue model
  assign q_avail = rst_n && qh < 4;
  assign q_len   = (qh < 4) ? 16'(lens[qh]) : 16'd0;
  assign q_port  = (qh < 4) ? 2'(qh) : 2'd0;
  always_comb for (int b = 0; b < 32; b++)
    q_frame[8*b +: 8] = (qh < 4 && 32 * int'(q_idx) + b < 256) ? pk[qh][32 * int'(q_idx) + b] : 8'd0;

  always @(posedge clk) begin
    if (q_pop) qh <= qh + 1;
    n_pend += int'(pending);
    out_ready <= ($urandom % 4) != 0;
    if (out_valid && out_ready && n_out < 3) begin
      for (int b = 0; b < 32; b++) if (opos + b < 300) got[n_out][opos + b] = out_data[8*b +: 8];
      opos += out_last ? int'(out_bytes) : 32;
      if (out_last) begin
        got_len[n_out] = opos; got_act[n_out] = out_action; got_port[n_out] = out_port;
        n_out++; opos = 0;
      end
    end
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic rd(input logic [31:0] a, input logic [3:0] sz, output logic [63:0] v);
    dbus_rd[0] = '{valid: 1'b1, addr: a, size: sz};
    #1;
    while (pending) begin @(negedge clk); #1; end
    v = load_le(rdata[0], sz);
    @(negedge clk);
    dbus_rd[0] = '0;
  endtask

  task automatic wr(input logic [31:0] a, input logic [3:0] sz, input logic [63:0] d);
    dbus_wr[0] = '{valid: 1'b1, addr: a, size: sz, data: d};
    @(negedge clk);
    dbus_wr[0] = '0;
  endtask

  task automatic adjust(input logic head, input int delta);
    adj_head = head; adj_tail = !head; adj_delta = delta;
    #1 chk(adj_ok, "adjustment accepted");
    @(negedge clk);
    adj_head = 0; adj_tail = 0;
  endtask

  task automatic finish_prog(input logic [2:0] act);
    exit_valid = 1; exit_action = act;
    @(negedge clk);
    exit_valid = 0; running = 0;
  endtask

  // behavioural core
  initial begin
    logic [63:0] d, de, v;
    for (int l = 0; l < LANES; l++) begin dbus_rd[l] = '0; dbus_wr[l] = '0; end
    for (int p = 0; p < 4; p++) for (int b = 0; b < 256; b++) pk[p][b] = 8'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      @(posedge clk iff start);
      @(negedge clk);
      running = 1;
      if (p == 0) begin
        int n0;
        n0 = n_pend;
        rd(PKT_BASE + 32'd64 + 32'd95, 1, v);
        chk(v == 64'(pk[0][95]), "p0 byte 95 read at start");
        chk(n_pend > n0, "p0 waited for a pending frame (early start)");
      end
      rd(CTX_BASE, 4, d);
      rd(CTX_BASE + 4, 4, de);
      chk(de - d == 64'(lens[p]), $sformatf("p%0d data_end - data = %0d", p, de - d));
      chk(d[31:28] == RGN_PKT, "data points to the packet region");
      rd(CTX_BASE + 12, 4, v);
      chk(v == 64'(p), "ingress port");
      case (p)
        0: begin
          rd(32'(d) + 8, 8, v);
          chk(v == {pk[0][15], pk[0][14], pk[0][13], pk[0][12], pk[0][11], pk[0][10], pk[0][9], pk[0][8]},
              "p0 packet load");
          wr(32'(d) + 3, 1, 64'h5A);
          rd(32'(de) + 2, 4, v);
          chk(v == 0, "read past data_end returns 0");
          finish_prog(XDP_PASS);
        end
        1: finish_prog(XDP_DROP);
        2: begin
          adjust(1, -4);
          rd(CTX_BASE, 4, d);
          chk(de - d == 64'(lens[p] + 4), "data moved by adjust_head");
          wr(32'(d), 4, 64'hDEADBEEF);
          finish_prog(XDP_TX);
        end
        default: begin
          rd(32'(d) + 190, 1, v);
          chk(v == 64'(pk[3][190]), "p3 last-frame byte");
          adjust(0, -10);
          redir_valid = 1; redir_port = 9;
          finish_prog(XDP_REDIRECT);
          redir_valid = 0;
        end
      endcase
    end
    begin
      int t = 0;
      while (n_out < 3 && t < 5000) begin @(posedge clk); t++; end
      repeat (50) @(posedge clk);
    end
    chk(n_out == 3, $sformatf("three packets out (%0d)", n_out));
    begin
      int bad;
      chk(got_len[0] == 100 && got_act[0] == XDP_PASS && got_port[0] == 0, "p0 header");
      bad = 0;
      for (int b = 0; b < 100; b++) if (got[0][b] != ((b == 3) ? 8'h5A : pk[0][b])) bad++;
      chk(bad == 0, $sformatf("p0 bytes (%0d wrong)", bad));
      chk(got_len[1] == 74 && got_act[1] == XDP_TX && got_port[1] == 2, "p2 header");
      bad = 0;
      for (int b = 0; b < 74; b++)
        if (got[1][b] != ((b < 4) ? 8'(32'hDEADBEEF >> (8*b)) : pk[2][b - 4])) bad++;
      chk(bad == 0, $sformatf("p2 bytes (%0d wrong)", bad));
      chk(got_len[2] == 190 && got_act[2] == XDP_REDIRECT && got_port[2] == 9, "p3 header");
      bad = 0;
      for (int b = 0; b < 190; b++) if (got[2][b] != pk[3][b]) bad++;
      chk(bad == 0, $sformatf("p3 bytes (%0d wrong)", bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
