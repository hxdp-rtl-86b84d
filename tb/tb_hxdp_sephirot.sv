// tb_hxdp_sephirot: self-checking test of the Sephirot VLIW core.
// The core runs small hand-assembled programs. The testbench models the
// instruction memory (an array of rows), the APS data (context and packet
// bytes in one byte array, with a settable limit of arrived packet bytes
// that raises aps_pending), the maps read port, and a helper model that
// answers five cycles after a request with r0 = r1 + r2.
// Results are checked through the stores the programs make and the exit
// action. Programs cover: ALU with immediate and register, the
// three-operand form, 64-bit immediate load, 6-byte load and store,
// same-lane forwarding, a three-row cross-lane dependency, a loop with a
// backward branch, parallel branches with lane priority and the two-row
// flush, early exit (and waiting for an older store), exit through the
// pipeline with action from r0 or imm, a helper call stall, a
// packet-pending stall, atomic add, the stack and the self-reset (r1, r10
// and a cleared stack at start). Each mechanism's event pulse is counted
// and a mechanism that never happened counts as a failure.
module tb_hxdp_sephirot;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, running;
  logic [15:0] pc;
  logic [ROW_W-1:0] row;
  rd_req_t dbus_rd [LANES];
  wr_req_t dbus_wr [LANES];
  logic [63:0] aps_rdata [LANES], map_rdata [LANES];
  logic aps_pending;
  hf_req_t hf_req;
  hf_rsp_t hf_rsp;
  logic [255:0] hf_st_data;
  logic exit_valid;
  logic [2:0] exit_action;
  logic ev_fwd, ev_branch, ev_multi_branch, ev_early_exit, ev_stall_pkt, ev_stall_hf;

  logic [ROW_W-1:0] prog [64];
  logic [7:0] pm [4096];
  int pkt_limit = 4096;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_br = 0, n_multi = 0, n_early = 0, n_spkt = 0, n_shf = 0, n_calls = 0;
  int cycles = 0;
  logic [2:0] last_action;

  always #5 clk = ~clk;

  hxdp_sephirot dut (.clk, .rst_n, .start, .running, .pc, .row, .dbus_rd, .dbus_wr, .aps_rdata,
    .aps_pending, .map_rdata, .hf_req, .hf_rsp, .hf_st_addr(16'd0), .hf_st_data, .exit_valid,
    .exit_action, .ev_fwd, .ev_branch, .ev_multi_branch, .ev_early_exit, .ev_stall_pkt, .ev_stall_hf);

  function automatic int idx(input logic [31:0] a);
    return int'({a[28], a[10:0]});
  endfunction

  assign row = (pc < 64) ? prog[pc[5:0]] : '0;

  always_comb begin
    aps_pending = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      for (int b = 0; b < 8; b++) aps_rdata[l][8*b +: 8] = pm[(idx(dbus_rd[l].addr) + b) % 4096];
      map_rdata[l] = '0;
      if (dbus_rd[l].valid && dbus_rd[l].addr[31:28] == RGN_PKT &&
          int'(dbus_rd[l].addr[11:0]) + int'(dbus_rd[l].size) > pkt_limit) aps_pending = 1'b1;
    end
  end

  always @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      if (dbus_wr[l].valid && dbus_wr[l].addr[31:28] inside {RGN_CTX, RGN_PKT})
        for (int b = 0; b < int'(dbus_wr[l].size); b++)
          pm[(idx(dbus_wr[l].addr) + b) % 4096] <= dbus_wr[l].data[8*b +: 8];
    n_fwd   += int'(ev_fwd);
    n_br    += int'(ev_branch);
    n_multi += int'(ev_multi_branch);
    n_early += int'(ev_early_exit);
    n_spkt  += int'(ev_stall_pkt);
    n_shf   += int'(ev_stall_hf);
    cycles++;
  end

  // helper model: r0 = r1 + r2, answered five cycles after the request
  initial begin
    hf_rsp = '0;
    forever begin
      @(posedge clk);
      if (hf_req.valid) begin
        logic [63:0] r;
        r = hf_req.r1 + hf_req.r2;
        n_calls++;
        repeat (4) @(posedge clk);
        #1 hf_rsp = '{done: 1'b1, r0: r};
        @(posedge clk);
        #1 hf_rsp = '0;
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

  function automatic logic [63:0] rd64(input int a);
    logic [63:0] v;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = pm[a + b];
    return v;
  endfunction

  task automatic clear_all();
    for (int i = 0; i < 64; i++) prog[i] = '0;
    for (int i = 0; i < 4096; i++) pm[i] = 8'd0;
  endtask

  task automatic run(input string name, output int ncyc);
    int c0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    c0 = cycles;
    while (!exit_valid) begin
      @(negedge clk);
      if (cycles - c0 > 500) begin chk(0, {name, " did not exit"}); break; end
    end
    last_action = exit_action;
    ncyc = cycles - c0;
    @(negedge clk);
    chk(!running, {name, " stopped"});
    repeat (3) @(negedge clk);
  endtask

  localparam logic [15:0] M8 = 16'hfff8;

  initial begin
    int nc, e0;
    logic [63:0] v;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- program 1: ALU, three-operand, lddw, 6-byte access, forwarding
    clear_all();
    for (int b = 0; b < 4; b++) pm[2048 + 4 + b] = 8'(32'hCAFEBABE >> (8*b));
    prog[0]  = r4(enc(8'hb7, 2, 0, 0, 5), enc(8'hb7, 3, 0, 0, 7), enc(8'h18, 4, 0, 0, 32'h11223344),
                  enc(8'h00, 0, 0, 0, 32'h55667788));
    prog[1]  = r4(enc(8'h07, 2, 0, 0, 10), enc(8'h27, 3, 0, 0, 3), enc(8'h18, 9, 0, 0, PKT_BASE), 0);
    prog[2]  = r4(enc(8'h07, 2, 0, 0, 1), enc(8'hb7, 0, 0, 0, 3));
    prog[4]  = r4(enc(8'h0f, 5, 3, 16'h8004, 0));
    prog[5]  = r4(enc(8'h7b, 9, 5, 0, 0), enc(8'h7b, 9, 2, 8, 0), enc(8'hE3, 9, 4, 16, 0),
                  enc(8'h61, 8, 1, 4, 0));
    prog[8]  = r4(0, 0, enc(8'hE1, 7, 9, 16, 0), enc(8'h63, 9, 8, 24, 0));
    prog[11] = r4(0, 0, enc(8'h7b, 9, 7, 32, 0));
    prog[12] = r4(enc(8'h95, 0, 0, 0, 0));
    e0 = n_fwd;
    run("p1", nc);
    chk(last_action == XDP_TX, "p1 exit action from r0");
    chk(rd64(0) == 64'h5566778811223344 + 64'd21, "p1 three-operand add (lddw + mul)");
    chk(rd64(8) == 64'd16, "p1 same-lane forwarding chain");
    chk(rd64(16) == 64'h0000_7788_1122_3344, "p1 6-byte store");
    chk(rd64(24) == 64'hCAFEBABE, "p1 context load and word store");
    chk(rd64(32) == 64'h0000_7788_1122_3344, "p1 6-byte load");
    chk(n_fwd > e0, "p1 forwarding used");

    // ---- program 2: parallel branches, lane priority, flush
    clear_all();
    prog[0]  = r4(enc(8'hb7, 2, 0, 0, 1), enc(8'hb7, 3, 0, 0, 2), enc(8'h18, 9, 0, 0, PKT_BASE), 0);
    prog[4]  = r4(enc(8'h15, 2, 0, 7, 5), enc(8'h15, 3, 0, 3, 2), enc(8'h55, 2, 0, 5, 0));
    prog[5]  = r4(enc(8'h72, 9, 0, 0, 32'hEE));
    prog[6]  = r4(enc(8'h72, 9, 0, 1, 32'hEE));
    prog[7]  = r4(enc(8'h72, 9, 0, 5, 32'hEE));
    prog[8]  = r4(enc(8'h72, 9, 0, 2, 32'h11));
    prog[9]  = r4(enc(8'h05, 0, 0, 1, 0));
    prog[10] = r4(enc(8'h72, 9, 0, 3, 32'hEE));
    prog[11] = r4(enc(8'h72, 9, 0, 4, 32'h22), enc(8'h95, 0, 1, 0, 1));
    e0 = n_multi;
    run("p2", nc);
    chk(last_action == XDP_DROP, "p2 parametrised exit through the pipeline");
    chk(pm[0] == 0 && pm[1] == 0, "p2 two rows after a taken branch flushed");
    chk(pm[5] == 0 && pm[3] == 0, "p2 skipped rows not executed");
    chk(pm[2] == 8'h11, "p2 lowest lane branch wins");
    chk(pm[4] == 8'h22, "p2 unconditional jump target");
    chk(n_multi > e0, "p2 multi-branch event");

    // ---- program 3: loop with a backward branch
    clear_all();
    prog[0] = r4(enc(8'hb7, 2, 0, 0, 0), enc(8'h18, 9, 0, 0, PKT_BASE), 0);
    prog[1] = r4(enc(8'h07, 2, 0, 0, 1));
    prog[2] = r4(enc(8'h55, 2, 0, 16'hfffe, 4));
    prog[5] = r4(enc(8'h7b, 9, 2, 8, 0));
    prog[6] = r4(enc(8'h95, 0, 1, 0, 2));
    e0 = n_br;
    run("p3", nc);
    chk(rd64(8) == 64'd4, "p3 loop ran four times");
    chk(n_br - e0 == 3, "p3 three taken branches");
    chk(last_action == XDP_PASS, "p3 exit after the older store");

    // ---- program 4: early exit
    clear_all();
    prog[0] = r4(enc(8'hb7, 2, 0, 0, 1), enc(8'h18, 9, 0, 0, PKT_BASE), 0);
    prog[1] = r4(enc(8'h95, 0, 1, 0, 3));
    prog[2] = r4(enc(8'h72, 9, 0, 6, 32'hEE));
    e0 = n_early;
    run("p4", nc);
    chk(n_early == e0 + 1, "p4 early exit fired");
    chk(nc <= 3, $sformatf("p4 early exit fast (%0d cycles)", nc));
    chk(last_action == XDP_TX, "p4 early exit action");
    chk(pm[6] == 0, "p4 row after exit not executed");

    // ---- program 5: helper call, packet-pending stall, atomic add, stack
    clear_all();
    pm[100] = 8'h5A;
    for (int b = 0; b < 8; b++) pm[16 + b] = (b == 0) ? 8'd100 : 8'd0;
    prog[0]  = r4(enc(8'hb7, 1, 0, 0, 7), enc(8'hb7, 2, 0, 0, 8), enc(8'h18, 9, 0, 0, PKT_BASE), 0);
    prog[3]  = r4(enc(8'h7b, 10, 1, M8, 0));
    prog[4]  = r4(enc(8'h85, 0, 0, 0, 1));
    prog[8]  = r4(enc(8'h7b, 9, 0, 0, 0));
    prog[9]  = r4(enc(8'h71, 4, 9, 100, 0));
    prog[12] = r4(enc(8'h73, 9, 4, 40, 0), enc(8'h79, 6, 10, M8, 0));
    prog[13] = r4(enc(8'hdb, 9, 2, 16, 0));
    prog[15] = r4(0, enc(8'h7b, 9, 6, 24, 0));
    prog[16] = r4(enc(8'hb7, 0, 0, 0, 2));
    prog[17] = r4(enc(8'h95, 0, 0, 0, 0));
    pkt_limit = 64;
    fork
      begin
        @(posedge clk iff aps_pending);
        repeat (6) @(posedge clk);
        pkt_limit = 4096;
      end
    join_none
    e0 = n_calls;
    begin
      int s0, s1;
      s0 = n_shf; s1 = n_spkt;
      run("p5", nc);
      chk(n_shf - s0 >= 4, "p5 helper stall");
      chk(n_spkt - s1 >= 5, "p5 packet-pending stall");
    end
    chk(n_calls == e0 + 1, "p5 one helper request");
    chk(rd64(0) == 64'd15, "p5 helper result in r0");
    chk(pm[40] == 8'h5A, "p5 load after packet arrived");
    chk(rd64(16) == 64'd108, "p5 atomic add");
    chk(rd64(24) == 64'd7, "p5 stack store and load");
    chk(last_action == XDP_PASS, "p5 exit action");

    // ---- program 6: self-reset of registers and stack
    clear_all();
    prog[0] = r4(enc(8'h7b, 1, 10, 0, 0), 0, enc(8'h79, 3, 10, M8, 0));
    prog[4] = r4(0, 0, enc(8'h7b, 1, 3, 16, 0));
    prog[5] = r4(enc(8'h95, 0, 1, 0, 1));
    run("p6", nc);
    v = 0;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = pm[2048 + b];
    chk(v == 64'(STACK_BASE + 32'd512), "p6 r10 = frame pointer");
    v = 0;
    for (int b = 0; b < 8; b++) v[8*b +: 8] = pm[2048 + 16 + b];
    chk(v == 64'd0, "p6 stack cleared at start");

    chk(n_fwd > 0, "mechanism forwarding seen");
    chk(n_br > 0, "mechanism branch seen");
    chk(n_multi > 0, "mechanism multi-branch seen");
    chk(n_early > 0, "mechanism early exit seen");
    chk(n_shf > 0, "mechanism helper stall seen");
    chk(n_spkt > 0, "mechanism packet stall seen");
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
