// tb_hxdp_maps: self-checking test of the maps subsystem.
// Two maps are configured: a 16-entry hash map (13-byte keys) and an
// 8-entry array map placed after it. Hash updates, lookups (the returned
// pointer is checked against the row computed by a reference hash), value
// reads over the lane ports, deletes, a collision and array accesses in and
// out of range are checked, as are lane writes and the host port.
module tb_hxdp_maps;
  import hxdp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_hash = 0, host_we = 0, host_valid_we = 0, host_valid_val = 0;
  logic [7:0] cfg_id = 0, hp_map = 0;
  logic [5:0] cfg_key_size = 0;
  logic [6:0] cfg_val_size = 0;
  logic [15:0] cfg_entries = 0, cfg_base_row = 0, host_addr = 0, host_valid_row = 0;
  logic [63:0] host_wdata = 0, host_rdata, hp_ret, hp_rdval;
  logic [15:0] rd_off [LANES], wr_off [LANES];
  logic [3:0]  rd_size [LANES], wr_size [LANES];
  logic        wr_en [LANES];
  logic [63:0] rd_data [LANES], wr_data [LANES];
  logic [1:0]  hp_op = 0;
  logic [255:0] hp_key = '0, hp_val = '0;
  logic [31:0] hp_ptr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hxdp_maps dut (.clk, .rst_n, .cfg_we, .cfg_id, .cfg_hash, .cfg_key_size, .cfg_val_size,
    .cfg_entries, .cfg_base_row, .host_we, .host_addr, .host_wdata, .host_rdata, .host_valid_we,
    .host_valid_row, .host_valid_val, .rd_off, .rd_size, .rd_data, .wr_en, .wr_off, .wr_size,
    .wr_data, .hp_op, .hp_map, .hp_key, .hp_val, .hp_ptr, .hp_ret, .hp_rdval);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference hash: xor of the key's 32-bit words, then two shift-xor mixes
  function automatic int unsigned ref_row(input logic [255:0] k, input int entries);
    logic [31:0] h = 0;
    for (int w = 0; w < 8; w++) h = h ^ k[32*w +: 32];
    h = h ^ (h >> 16);
    h = h ^ (h >> 7);
    return h % entries;
  endfunction

  function automatic logic [255:0] mkkey(input int seed);
    logic [255:0] k = '0;
    for (int b = 0; b < 13; b++) k[8*b +: 8] = 8'(seed * 7 + b * 13 + 1);
    return k;
  endfunction

  task automatic op(input logic [1:0] o, input logic [7:0] m, input logic [255:0] k, input logic [255:0] v);
    @(negedge clk);
    hp_op = o; hp_map = m; hp_key = k; hp_val = v;
    #1;
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) begin rd_off[l] = 0; rd_size[l] = 8; wr_off[l] = 0; wr_size[l] = 8; wr_en[l] = 0; wr_data[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_id = 0; cfg_hash = 1; cfg_key_size = 13; cfg_val_size = 8; cfg_entries = 16; cfg_base_row = 0;
    @(negedge clk);
    cfg_id = 1; cfg_hash = 0; cfg_key_size = 4; cfg_val_size = 8; cfg_entries = 8; cfg_base_row = 16;
    @(negedge clk) cfg_we = 0;
    // clear the used rows of the memory through the host port
    for (int a = 0; a < 24 * 64; a += 8) begin
      @(negedge clk) host_we = 1; host_addr = 16'(a); host_wdata = 0;
    end
    @(negedge clk) host_we = 0;
    // hash: insert keys with distinct rows, look them up
    begin
      int used [16];
      int ins [$];
      int coll = -1;
      for (int i = 0; i < 16; i++) used[i] = -1;
      for (int s = 0; s < 40; s++) begin
        int r;
        r = ref_row(mkkey(s), 16);
        if (used[r] < 0 && ins.size() < 6) begin
          used[r] = s; ins.push_back(s);
          op(2, 0, mkkey(s), 256'(64'(1000 + s)));
          chk(hp_ret == 0, "update ok");
        end else if (used[r] >= 0 && coll < 0) coll = s;
      end
      op(0, 0, '0, '0);
      foreach (ins[i]) begin
        int r;
        r = ref_row(mkkey(ins[i]), 16);
        op(1, 0, mkkey(ins[i]), '0);
        chk(hp_ptr == MAP_BASE + 32'(r * 64 + 32), $sformatf("lookup ptr key %0d", ins[i]));
        chk(hp_rdval == 64'(1000 + ins[i]), "lookup value");
        rd_off[0] = 16'(hp_ptr - MAP_BASE); #1;
        chk(rd_data[0] == 64'(1000 + ins[i]), "value over lane port");
      end
      op(1, 0, mkkey(1000), '0);
      chk(hp_ptr == 0, "miss");
      if (coll >= 0 && used[ref_row(mkkey(coll), 16)] != coll) begin
        op(2, 0, mkkey(coll), '0);
        chk(hp_ret == '1, "collision refused");
      end
      op(3, 0, mkkey(ins[0]), '0);
      chk(hp_ret == 0, "delete ok");
      op(1, 0, mkkey(ins[0]), '0);
      chk(hp_ptr == 0, "deleted key misses");
      op(3, 0, mkkey(ins[0]), '0);
      chk(hp_ret == '1, "second delete fails");
    end
    // array map
    op(2, 1, 256'(3), 256'(64'hdead_beef));
    chk(hp_ret == 0, "array update");
    op(1, 1, 256'(3), '0);
    chk(hp_ptr == MAP_BASE + 32'(19 * 64), "array ptr");
    chk(hp_rdval == 64'hdead_beef, "array value");
    op(1, 1, 256'(9), '0);
    chk(hp_ptr == 0, "array out of range");
    op(0, 0, '0, '0);
    // lane writes (unaligned) and host read
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      wr_en[l] = 1; wr_off[l] = 16'(20 * 64 + 16 * l + 3); wr_size[l] = 4; wr_data[l] = 64'(32'h1111_1111 * (l + 1));
    end
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin wr_en[l] = 0; rd_off[l] = wr_off[l]; rd_size[l] = 4; end
    #1;
    for (int l = 0; l < LANES; l++) chk(rd_data[l][31:0] == 32'h1111_1111 * (l + 1), "lane write/read");
    host_addr = 16'(20 * 64); #1;
    chk(host_rdata == 64'h0011_1111_1100_0000, "host read");
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
