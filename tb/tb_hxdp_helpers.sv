// tb_hxdp_helpers: self-checking test of the helper functions sub-module.
// The module is connected to a maps subsystem and to a byte-array model of
// the stack. Each call is issued on the helper bus and must answer in the
// fourth cycle. Checked: map update/lookup/delete of a hash map with keys
// and values read from the stack, redirect and redirect_map (devmap as an
// array map) with the chosen port, csum_diff against a reference one's
// complement sum, xdp_adjust_head accepted and refused by the APS side,
// an unknown helper, and the redirect state cleared at program start.
module tb_hxdp_helpers;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  hf_req_t req;
  hf_rsp_t rsp;
  logic [15:0] st_addr;
  logic [255:0] st_data, hp_key, hp_val;
  logic [1:0] hp_op;
  logic [7:0] hp_map;
  logic [31:0] hp_ptr, redir_port;
  logic [63:0] hp_ret, hp_rdval, host_rdata;
  logic adj_head, adj_tail, adj_ok, redir_valid, busy;
  logic signed [31:0] adj_delta;
  logic [7:0] stk [512];
  logic cfg_we = 0;
  logic [7:0] cfg_id = 0;
  logic cfg_hash = 0;
  logic [5:0] cfg_key_size = 0;
  logic [6:0] cfg_val_size = 0;
  logic [15:0] cfg_entries = 0, cfg_base_row = 0;
  logic [15:0] l_off [LANES];
  logic [3:0]  l_size [LANES];
  logic        l_we [LANES];
  logic [63:0] l_rd [LANES], l_wd [LANES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  always_comb for (int b = 0; b < 32; b++) st_data[8*b +: 8] = stk[(st_addr + 16'(b)) % 512];
  assign adj_ok = (adj_head || adj_tail) && adj_delta >= -64;

  hxdp_helpers dut (.clk, .rst_n, .start, .req, .rsp, .st_addr, .st_data, .hp_op, .hp_map, .hp_key,
    .hp_val, .hp_ptr, .hp_ret, .hp_rdval, .adj_head, .adj_tail, .adj_delta, .adj_ok,
    .redir_valid, .redir_port, .busy);

  hxdp_maps u_maps (.clk, .rst_n, .cfg_we, .cfg_id, .cfg_hash, .cfg_key_size, .cfg_val_size,
    .cfg_entries, .cfg_base_row, .host_we(1'b0), .host_addr(16'd0), .host_wdata(64'd0), .host_rdata,
    .host_valid_we(1'b0), .host_valid_row(16'd0), .host_valid_val(1'b0),
    .rd_off(l_off), .rd_size(l_size), .rd_data(l_rd), .wr_en(l_we), .wr_off(l_off), .wr_size(l_size),
    .wr_data(l_wd), .hp_op, .hp_map, .hp_key, .hp_val, .hp_ptr, .hp_ret, .hp_rdval);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic call(input logic [31:0] id, input logic [63:0] a1, a2, a3, a4, a5, output logic [63:0] r0);
    int n = 0;
    @(negedge clk);
    req = '{valid: 1'b1, id: id, r1: a1, r2: a2, r3: a3, r4: a4, r5: a5};
    @(negedge clk);
    req.valid = 0;
    n = 1;
    while (!rsp.done) begin @(negedge clk); n++; end
    r0 = rsp.r0;
    chk(n == 4, $sformatf("helper %0d answered after %0d cycles", id, n));
  endtask

  function automatic logic [31:0] ref_csum(input logic [31:0] f, input logic [31:0] t, input logic [31:0] seed);
    logic [63:0] s;
    logic [31:0] nf;
    nf = ~f;
    s = 64'(seed) + 64'(nf) + 64'(t);
    while (s[63:32] != 0) s = 64'(s[31:0]) + 64'(s[63:32]);
    return s[31:0];
  endfunction

  initial begin
    logic [63:0] r0, ptr;
    for (int l = 0; l < LANES; l++) begin l_off[l] = 0; l_size[l] = 1; l_we[l] = 0; l_wd[l] = 0; end
    for (int i = 0; i < 512; i++) stk[i] = 0;
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_id = 2; cfg_hash = 1; cfg_key_size = 8; cfg_val_size = 8; cfg_entries = 32; cfg_base_row = 0;
    @(negedge clk);
    cfg_id = 3; cfg_hash = 0; cfg_key_size = 4; cfg_val_size = 4; cfg_entries = 4; cfg_base_row = 40;
    @(negedge clk) cfg_we = 0;
    // key at stack offset 0x100, value at 0x120
    for (int b = 0; b < 8; b++) begin stk[256 + b] = 8'(8'hA0 + b); stk[288 + b] = 8'(b + 1); end
    call(HF_MAP_LOOKUP, 2, {32'd0, STACK_BASE + 32'h100}, 0, 0, 0, r0);
    chk(r0 == 0, "lookup before insert misses");
    call(HF_MAP_UPDATE, 2, {32'd0, STACK_BASE + 32'h100}, {32'd0, STACK_BASE + 32'h120}, 0, 0, r0);
    chk(r0 == 0, "update returns 0");
    call(HF_MAP_LOOKUP, 2, {32'd0, STACK_BASE + 32'h100}, 0, 0, 0, ptr);
    chk(ptr[31:28] == 4'h4, "lookup returns a maps pointer");
    l_off[0] = 16'(ptr[31:0] - MAP_BASE); l_size[0] = 8; #1;
    chk(l_rd[0] == 64'h0807_0605_0403_0201, "value stored from the stack");
    call(HF_MAP_DELETE, 2, {32'd0, STACK_BASE + 32'h100}, 0, 0, 0, r0);
    chk(r0 == 0, "delete");
    call(HF_MAP_LOOKUP, 2, {32'd0, STACK_BASE + 32'h100}, 0, 0, 0, r0);
    chk(r0 == 0, "lookup after delete misses");
    // redirect
    call(HF_REDIRECT, 3, 0, 0, 0, 0, r0);
    chk(r0 == 64'(XDP_REDIRECT) && redir_valid && redir_port == 3, "redirect");
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    chk(!redir_valid, "start clears redirect");
    // redirect_map: devmap entry 2 -> port 7
    for (int b = 0; b < 4; b++) stk[320 + b] = (b == 0) ? 8'd7 : 8'd0;
    stk[352] = 8'd2;
    call(HF_MAP_UPDATE, 3, {32'd0, STACK_BASE + 32'h160}, {32'd0, STACK_BASE + 32'h140}, 0, 0, r0);
    chk(r0 == 0, "devmap update");
    call(HF_REDIRECT_MAP, 3, 2, 0, 0, 0, r0);
    chk(r0 == 64'(XDP_REDIRECT) && redir_valid && redir_port == 7, "redirect_map");
    call(HF_REDIRECT_MAP, 3, 9, 64'(XDP_PASS), 0, 0, r0);
    chk(r0 == 64'(XDP_PASS), "redirect_map miss returns flags action");
    // csum_diff over one 4-byte word
    for (int t = 0; t < 5; t++) begin
      logic [31:0] f, n, sd;
      f = $urandom; n = $urandom; sd = $urandom;
      for (int b = 0; b < 4; b++) begin stk[64 + b] = f[8*b +: 8]; stk[96 + b] = n[8*b +: 8]; end
      call(HF_CSUM_DIFF, {32'd0, STACK_BASE + 32'd64}, 4, {32'd0, STACK_BASE + 32'd96}, 4, 64'(sd), r0);
      chk(r0[31:0] == ref_csum(f, n, sd), "csum_diff");
    end
    call(HF_CSUM_DIFF, {32'd0, STACK_BASE + 32'd64}, 40, {32'd0, STACK_BASE + 32'd96}, 4, 0, r0);
    chk(r0 == '1, "csum_diff size over 32 refused");
    // packet adjustment
    call(HF_ADJUST_HEAD, 0, -64'sd20, 0, 0, 0, r0);
    chk(r0 == 0, "adjust_head ok");
    call(HF_ADJUST_HEAD, 0, -64'sd200, 0, 0, 0, r0);
    chk(r0 == '1, "adjust_head refused");
    call(32'd999, 0, 0, 0, 0, 0, r0);
    chk(r0 == '1, "unknown helper");
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
