// tb_hxdp_top: end-to-end test of the hXDP core at its default (full) size.
// The program is loaded through the instruction-memory port, then four
// 960-byte packets are sent through the NIC input bus. The program reads
// data/data_end from the xdp_md context, loads packet bytes 12 and 900 and
// branches on them:
//   byte12 = 8            -> write 0xAA to byte 0, exit with r0 = PASS
//   byte12 = 9 or
//   byte900 = 0x77         -> call bpf_redirect(5), exit with its r0
//   otherwise             -> parametrised exit-only row: DROP (early exit)
// Packet A takes two branches in one row (multi-branch priority: lane 0
// wins), B is dropped by the early exit, C and D are redirected through the
// helper. The load of byte 900 comes before that frame has arrived (the
// program starts after the first frame), so each packet also stalls on a
// pending packet read. The output queue side must show A, C, D in order,
// with their bytes, lengths, actions and ports. Each mechanism (stall,
// forwarding, branch, multi-branch priority, early exit, helper stall,
// packet-pending stall) is counted from the event outputs and a mechanism
// that never happened counts as a failure. No parameter is overridden.
module tb_hxdp_top;
  import hxdp_pkg::*;

  localparam int PLEN = 960;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [FRAME_W-1:0] in_data = '0;
  logic [5:0] in_bytes = 0;
  logic [1:0] in_port = 0;
  logic out_valid, out_ready = 1, out_last;
  logic [FRAME_W-1:0] out_data;
  logic [5:0] out_bytes;
  logic [2:0] out_action;
  logic [31:0] out_port;
  logic imem_we = 0;
  logic [15:0] imem_addr = 0;
  logic [ROW_W-1:0] imem_data = '0;
  logic [63:0] host_rdata;
  logic prog_exit, oob_seen;
  logic [2:0] prog_action;
  logic ev_fwd, ev_branch, ev_multi_branch, ev_early_exit, ev_stall_pkt, ev_stall_hf;

  int checks = 0, failures = 0;
  int n_stall = 0, n_fwd = 0, n_br = 0, n_multi = 0, n_early = 0, n_spkt = 0, n_shf = 0, n_exit = 0;
  logic [7:0] pkts [4][PLEN];
  logic [7:0] got [4][PLEN + 64];
  int got_len [4];
  logic [2:0] got_act [4];
  logic [31:0] got_port [4];
  int n_out = 0, opos = 0;

  always #5 clk = ~clk;

  hxdp_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last, .in_bytes, .in_port,
    .out_valid, .out_ready, .out_data, .out_last, .out_bytes, .out_action, .out_port,
    .imem_we, .imem_addr, .imem_data,
    .cfg_we(1'b0), .cfg_id(8'd0), .cfg_hash(1'b0), .cfg_key_size(6'd0), .cfg_val_size(7'd0),
    .cfg_entries(16'd0), .cfg_base_row(16'd0), .host_we(1'b0), .host_addr(16'd0),
    .host_wdata(64'd0), .host_rdata, .host_valid_we(1'b0), .host_valid_row(16'd0),
    .host_valid_val(1'b0), .prog_exit, .prog_action, .oob_seen,
    .ev_fwd, .ev_branch, .ev_multi_branch, .ev_early_exit, .ev_stall_pkt, .ev_stall_hf);

  always @(posedge clk) if (rst_n) begin
    n_stall += int'(ev_stall_pkt || ev_stall_hf);
    n_fwd   += int'(ev_fwd);
    n_br    += int'(ev_branch);
    n_multi += int'(ev_multi_branch);
    n_early += int'(ev_early_exit);
    n_spkt  += int'(ev_stall_pkt);
    n_shf   += int'(ev_stall_hf);
    n_exit  += int'(prog_exit);
    if (out_valid && out_ready && n_out < 4) begin
      int nb;
      nb = (out_bytes == 6'd0) ? 32 : int'(out_bytes);
      for (int b = 0; b < nb; b++) if (opos + b < PLEN + 64) got[n_out][opos + b] = out_data[8*b +: 8];
      opos += nb;
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

  function automatic logic [ROW_W-1:0] r4(input logic [63:0] s0, s1 = 0, s2 = 0, s3 = 0);
    return {s3, s2, s1, s0};
  endfunction

  task automatic load_row(input int a, input logic [ROW_W-1:0] d);
    @(negedge clk);
    imem_we = 1; imem_addr = 16'(a); imem_data = d;
    @(negedge clk) imem_we = 0;
  endtask

  task automatic send(input int p);
    for (int f = 0; f < PLEN / 32; f++) begin
      @(negedge clk);
      in_valid = 1;
      for (int b = 0; b < 32; b++) in_data[8*b +: 8] = pkts[p][32*f + b];
      in_last  = (f == PLEN / 32 - 1);
      in_bytes = 6'd0;
      in_port  = 2'(p);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0; in_last = 0;
  endtask

  initial begin
    logic [ROW_W-1:0] prog [24];
    for (int i = 0; i < 24; i++) prog[i] = '0;
    prog[0]  = r4(enc(8'h61, 2, 1, 0, 0), enc(8'h61, 3, 1, 4, 0));
    prog[3]  = r4(enc(8'h71, 4, 2, 12, 0), enc(8'h71, 5, 2, 900, 0));
    prog[4]  = r4(enc(8'h15, 4, 0, 5, 8), enc(8'h15, 5, 0, 9, 32'h77));
    prog[5]  = r4(enc(8'h15, 4, 0, 8, 9));
    prog[9]  = r4(enc(8'h95, 0, 1, 0, 32'(XDP_DROP)));
    prog[10] = r4(enc(8'h72, 2, 0, 0, 32'hAA), enc(8'hb7, 0, 0, 0, 32'(XDP_PASS)));
    prog[13] = r4(enc(8'h95, 0, 0, 0, 0));
    prog[14] = r4(enc(8'hb7, 1, 0, 0, 5));
    prog[18] = r4(enc(8'h85, 0, 0, 0, HF_REDIRECT));
    prog[22] = r4(enc(8'h95, 0, 0, 0, 0));
    for (int p = 0; p < 4; p++) for (int b = 0; b < PLEN; b++) pkts[p][b] = 8'($urandom);
    pkts[0][12] = 8; pkts[0][900] = 8'h77;
    pkts[1][12] = 0; pkts[1][900] = 0;
    pkts[2][12] = 9; pkts[2][900] = 0;
    pkts[3][12] = 0; pkts[3][900] = 8'h77;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) load_row(i, prog[i]);
    for (int p = 0; p < 4; p++) send(p);
    begin
      int t = 0;
      while (n_out < 3 && t < 20000) begin @(posedge clk); t++; end
      repeat (200) @(posedge clk);
    end
    chk(n_exit == 4, $sformatf("four programs ran (%0d)", n_exit));
    chk(n_out == 3, $sformatf("three packets emitted (%0d)", n_out));
    begin
      int exp_p [3] = '{0, 2, 3};
      logic [2:0] exp_a [3] = '{XDP_PASS, XDP_REDIRECT, XDP_REDIRECT};
      for (int i = 0; i < 3; i++) begin
        int p, bad;
        p = exp_p[i];
        bad = 0;
        chk(got_len[i] == PLEN, $sformatf("packet %0d length %0d", p, got_len[i]));
        chk(got_act[i] == exp_a[i], $sformatf("packet %0d action %0d", p, got_act[i]));
        if (exp_a[i] == XDP_REDIRECT) chk(got_port[i] == 5, $sformatf("packet %0d port %0d", p, got_port[i]));
        for (int b = 0; b < PLEN; b++) begin
          logic [7:0] e;
          e = (p == 0 && b == 0) ? 8'hAA : pkts[p][b];
          if (got[i][b] != e) bad++;
        end
        chk(bad == 0, $sformatf("packet %0d bytes (%0d wrong)", p, bad));
      end
    end
    chk(!oob_seen, "no out-of-bounds access");
    chk(n_stall > 0, "mechanism stall");
    chk(n_fwd > 0, "mechanism forwarding");
    chk(n_br > 0, "mechanism branch");
    chk(n_multi > 0, "mechanism multi-branch priority");
    chk(n_early > 0, "mechanism early exit");
    chk(n_shf > 0, "mechanism helper stall");
    chk(n_spkt > 0, "mechanism packet-pending stall");
    $display("events: stall=%0d fwd=%0d br=%0d multi=%0d early=%0d hf=%0d pkt=%0d",
             n_stall, n_fwd, n_br, n_multi, n_early, n_shf, n_spkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
