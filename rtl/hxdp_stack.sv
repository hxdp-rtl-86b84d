// hxdp_stack: the 512-byte eBPF program stack inside Sephirot.
//
// Byte-addressed little-endian memory with one read and one write port per
// lane. A lane reads 1, 2, 4, 6 or 8 bytes at any byte offset in the ID
// stage (combinational, the value is registered by the pipeline) and writes
// in the commit stage. The helper functions read up to 32 consecutive bytes
// in one cycle through a wide port (map keys and values live on the stack).
// Offsets are taken modulo the stack size; callers pass the offset from the
// stack base. Asserting `clear` at program start zeroes the whole stack in
// one cycle, which lets the compiler drop zero-initialisation code.
// The size and the self-reset follow the paper; the port structure and the
// register implementation are this design's choice.
module hxdp_stack
  import hxdp_pkg::*;
#(
  parameter int unsigned BYTES = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [15:0] raddr [LANES],
  output logic [63:0] rdata [LANES],
  input  logic        we    [LANES],
  input  logic [15:0] waddr [LANES],
  input  logic [3:0]  wsize [LANES],
  input  logic [63:0] wdata [LANES],
  input  logic [15:0] haddr,
  output logic [8*HELPER_BYTES-1:0] hdata
);

  localparam int unsigned AW = $clog2(BYTES);

  logic [7:0] mem [BYTES];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int b = 0; b < 8; b++)
        rdata[l][8*b +: 8] = mem[AW'(raddr[l] + 16'(b))];
    for (int b = 0; b < HELPER_BYTES; b++)
      hdata[8*b +: 8] = mem[AW'(haddr + 16'(b))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BYTES; i++) mem[i] <= 8'd0;
    end else if (clear) begin
      for (int i = 0; i < BYTES; i++) mem[i] <= 8'd0;
    end else begin
      for (int l = 0; l < LANES; l++)
        if (we[l])
          for (int b = 0; b < 8; b++)
            if (size_mask(wsize[l])[b]) mem[AW'(waddr[l] + 16'(b))] <= wdata[l][8*b +: 8];
    end
  end

endmodule
