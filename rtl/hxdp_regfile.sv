// hxdp_regfile: the eleven 64-bit eBPF registers r0..r10 of Sephirot.
//
// Each of the four lanes reads two registers (ports A and B) in the IF stage
// and writes one register in the commit stage. The helper bus reads r1..r5
// as call arguments, and the exit logic reads r0 (port args, r0..r5).
// Reads are combinational and write-through: a value
// written in the current cycle is seen by the reads of the same cycle, so a
// row three or more rows younger than its producer always reads the new
// value. When two lanes write the same register in one cycle the
// higher-numbered lane wins (the compiler's register assignment prevents
// this case). On `init` (program start) all registers are cleared, except
// r1, which points at the xdp_md context, and r10, the frame pointer at the
// top of the 512-byte stack; this is the core's self-reset.
// Register count and width follow eBPF; the port structure is this design's.
module hxdp_regfile
  import hxdp_pkg::*;
#(
  parameter int unsigned STACK_BYTES = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              init,
  input  logic [3:0]        ra   [LANES],
  input  logic [3:0]        rb   [LANES],
  output logic [63:0]       da   [LANES],
  output logic [63:0]       db   [LANES],
  input  logic              we   [LANES],
  input  logic [3:0]        wa   [LANES],
  input  logic [63:0]       wd   [LANES],
  output logic [63:0]       args [6]       // r0..r5
);

  logic [63:0] regs [NREGS];
  logic [63:0] cur  [NREGS];   // registers with this cycle's writes applied

  always_comb begin
    for (int r = 0; r < NREGS; r++) begin
      cur[r] = regs[r];
      for (int l = 0; l < LANES; l++)
        if (we[l] && wa[l] == 4'(r)) cur[r] = wd[l];
    end
    for (int l = 0; l < LANES; l++) begin
      da[l] = (ra[l] < 4'(NREGS)) ? cur[ra[l]] : 64'd0;
      db[l] = (rb[l] < 4'(NREGS)) ? cur[rb[l]] : 64'd0;
    end
    for (int i = 0; i < 6; i++) args[i] = cur[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= 64'd0;
    end else if (init) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= 64'd0;
      regs[1]  <= {32'd0, CTX_BASE};
      regs[10] <= {32'd0, STACK_BASE + 32'(STACK_BYTES)};
    end else begin
      for (int r = 0; r < NREGS; r++) regs[r] <= cur[r];
    end
  end

endmodule
