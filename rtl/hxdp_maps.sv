// hxdp_maps: the maps subsystem (maps memory and configurator).
//
// All eBPF maps of a program share one memory of ROWS rows of ROW_BYTES
// bytes. The configurator is a small table, written when a program is
// loaded, that carves the memory into maps: per map id it holds the type
// (array or hash), key and value sizes, number of entries and first row.
// One entry occupies one row. An array entry keeps its value from byte 0; a
// hash entry keeps the key in bytes 0..31 and the value from byte 32, plus a
// valid bit per row.
//
// Two kinds of access are offered:
//   * unstructured access from Sephirot's lanes through the data bus:
//     four lanes read 1..8 bytes (combinational) and write 1..8 bytes at any
//     byte offset of the memory, e.g. through a pointer returned by a lookup;
//   * structured access from the helper functions: lookup, update and
//     delete of a key of up to 32 bytes, answered combinationally (update
//     and delete take effect at the clock edge). The hash is an xor fold of
//     the key's 32-bit words, mixed by shifts, masked to the (power-of-two)
//     number of entries; a hash map is direct-mapped, so an update whose
//     slot holds another key fails (returns -1).
// A host port reads and writes the memory 8 bytes at a time and sets row
// valid bits, for user-space access to maps.
// The shared memory, its configurator and the four lane ports follow the
// paper; the row layout, hash function and collision policy are this
// design's choice.
module hxdp_maps
  import hxdp_pkg::*;
#(
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned ROW_BYTES = 64,
  parameter int unsigned NMAPS     = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // configurator
  input  logic        cfg_we,
  input  logic [7:0]  cfg_id,
  input  logic        cfg_hash,
  input  logic [5:0]  cfg_key_size,
  input  logic [6:0]  cfg_val_size,
  input  logic [15:0] cfg_entries,
  input  logic [15:0] cfg_base_row,
  // host access
  input  logic        host_we,
  input  logic [15:0] host_addr,
  input  logic [63:0] host_wdata,
  output logic [63:0] host_rdata,
  input  logic        host_valid_we,
  input  logic [15:0] host_valid_row,
  input  logic        host_valid_val,
  // data bus lanes (offset from MAP_BASE)
  input  logic [15:0] rd_off  [LANES],
  input  logic [3:0]  rd_size [LANES],
  output logic [63:0] rd_data [LANES],
  input  logic        wr_en   [LANES],
  input  logic [15:0] wr_off  [LANES],
  input  logic [3:0]  wr_size [LANES],
  input  logic [63:0] wr_data [LANES],
  // structured access from the helper functions
  input  logic [1:0]  hp_op,        // 0 none, 1 lookup, 2 update, 3 delete
  input  logic [7:0]  hp_map,
  input  logic [255:0] hp_key,
  input  logic [255:0] hp_val,
  output logic [31:0] hp_ptr,       // lookup: address of the value, 0 on miss
  output logic [63:0] hp_ret,       // update/delete: 0 or -1
  output logic [63:0] hp_rdval      // lookup: first 8 bytes of the value
);

  localparam int unsigned BYTES = ROWS * ROW_BYTES;
  localparam int unsigned AW    = $clog2(BYTES);
  localparam int unsigned RW    = $clog2(ROWS);
  localparam int unsigned KEY_OFF = 32;

  typedef struct packed {
    logic        valid;
    logic        hash;
    logic [5:0]  key_size;
    logic [6:0]  val_size;
    logic [15:0] entries;
    logic [15:0] base_row;
  } map_cfg_t;

  logic [7:0] mem    [BYTES];
  logic       rvalid [ROWS];
  map_cfg_t   cfg    [NMAPS];

  map_cfg_t     mc;
  logic [255:0] key_m, row_key;
  logic [31:0]  h, idx;
  logic [15:0]  row;
  logic         in_range, hit, do_wr, do_del;

  function automatic logic [255:0] byte_mask(input logic [6:0] n);
    logic [255:0] m;
    for (int b = 0; b < 32; b++) m[8*b +: 8] = (7'(b) < n) ? 8'hff : 8'h00;
    return m;
  endfunction

  always_comb begin
    mc       = (32'(hp_map) < NMAPS) ? cfg[hp_map[$clog2(NMAPS)-1:0]] : '0;
    key_m    = hp_key & byte_mask({1'b0, mc.key_size});
    h        = '0;
    for (int w = 0; w < 8; w++) h ^= key_m[32*w +: 32];
    h       ^= (h >> 16);
    h       ^= (h >> 7);
    idx      = mc.hash ? (h & (32'(mc.entries) - 32'd1)) : key_m[31:0];
    in_range = mc.valid && (idx < 32'(mc.entries));
    row      = mc.base_row + 16'(idx);
    for (int b = 0; b < 32; b++) row_key[8*b +: 8] = mem[AW'(32'(row) * ROW_BYTES + b)];
    row_key &= byte_mask({1'b0, mc.key_size});
    hit      = in_range && (mc.hash ? (rvalid[RW'(row)] && row_key == key_m) : 1'b1);
    hp_ptr   = '0;
    hp_ret   = '1;
    do_wr    = 1'b0;
    do_del   = 1'b0;
    unique case (hp_op)
      2'd1: if (hit) hp_ptr = MAP_BASE + 32'(row) * ROW_BYTES + (mc.hash ? KEY_OFF : 0);
      2'd2: if (in_range && (!mc.hash || !rvalid[RW'(row)] || hit)) begin
              do_wr  = 1'b1;
              hp_ret = '0;
            end
      2'd3: if (hit && mc.hash) begin
              do_del = 1'b1;
              hp_ret = '0;
            end
      default: ;
    endcase
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int b = 0; b < 8; b++) rd_data[l][8*b +: 8] = mem[AW'(rd_off[l] + 16'(b))];
    for (int b = 0; b < 8; b++) host_rdata[8*b +: 8] = mem[AW'(host_addr + 16'(b))];
    for (int b = 0; b < 8; b++) hp_rdval[8*b +: 8] = mem[AW'(hp_ptr + 32'(b))];
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++)
      if (wr_en[l])
        for (int b = 0; b < 8; b++)
          if (size_mask(wr_size[l])[b]) mem[AW'(wr_off[l] + 16'(b))] <= wr_data[l][8*b +: 8];
    if (do_wr) begin
      if (mc.hash) begin
        for (int b = 0; b < 32; b++) mem[AW'(32'(row) * ROW_BYTES + b)] <= key_m[8*b +: 8];
        for (int b = 0; b < 32; b++)
          if (7'(b) < mc.val_size) mem[AW'(32'(row) * ROW_BYTES + KEY_OFF + b)] <= hp_val[8*b +: 8];
      end else begin
        for (int b = 0; b < 32; b++)
          if (7'(b) < mc.val_size) mem[AW'(32'(row) * ROW_BYTES + b)] <= hp_val[8*b +: 8];
      end
    end
    if (host_we)
      for (int b = 0; b < 8; b++) mem[AW'(host_addr + 16'(b))] <= host_wdata[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) rvalid[r] <= 1'b0;
      for (int m = 0; m < NMAPS; m++) cfg[m] <= '0;
    end else begin
      if (cfg_we && 32'(cfg_id) < NMAPS)
        cfg[cfg_id[$clog2(NMAPS)-1:0]] <= '{valid: 1'b1, hash: cfg_hash, key_size: cfg_key_size,
                                             val_size: cfg_val_size, entries: cfg_entries,
                                             base_row: cfg_base_row};
      if (do_wr && mc.hash) rvalid[RW'(row)] <= 1'b1;
      if (do_del)           rvalid[RW'(row)] <= 1'b0;
      if (host_valid_we)    rvalid[RW'(host_valid_row)] <= host_valid_val;
    end
  end

endmodule
