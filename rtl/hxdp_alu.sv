// hxdp_alu: the arithmetic and logic sub-unit of one Sephirot lane.
//
// Implements every eBPF ALU and ALU64 operation on two operand values. The
// hXDP three-operand form needs no special hardware here: the lane selects
// operand A from any register (not only dst) and writes the result to dst.
// ALU32 operations work on the low 32 bits and zero-extend the result.
// Division and modulo by zero follow eBPF: x/0 = 0 and x%0 = x.
// END converts byte order: to little endian truncates (the core is little
// endian), to big endian swaps the 16, 32 or 64 low bits (imm gives width).
// Purely combinational; the result is used in the IE stage.
// The operation set follows eBPF; doing divisions in one cycle is this
// design's choice.
module hxdp_alu
  import hxdp_pkg::*;
(
  input  alu_op_e     op,
  input  logic        alu64,
  input  logic        swap_be,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);

  logic [63:0] r64;
  logic [31:0] r32;
  logic [31:0] a32, b32;

  assign a32 = a[31:0];
  assign b32 = b[31:0];

  function automatic logic [63:0] bswap(input logic [63:0] v, input logic [63:0] w);
    logic [63:0] o;
    unique case (w[6:0])
      7'd16:   o = {48'd0, v[7:0], v[15:8]};
      7'd32:   o = {32'd0, v[7:0], v[15:8], v[23:16], v[31:24]};
      default: o = {v[7:0], v[15:8], v[23:16], v[31:24], v[39:32], v[47:40], v[55:48], v[63:56]};
    endcase
    return o;
  endfunction

  function automatic logic [63:0] trunc(input logic [63:0] v, input logic [63:0] w);
    unique case (w[6:0])
      7'd16:   return {48'd0, v[15:0]};
      7'd32:   return {32'd0, v[31:0]};
      default: return v;
    endcase
  endfunction

  always_comb begin
    unique case (op)
      ALU_ADD:  r64 = a + b;
      ALU_SUB:  r64 = a - b;
      ALU_MUL:  r64 = a * b;
      ALU_DIV:  r64 = (b == 64'd0) ? 64'd0 : a / b;
      ALU_OR:   r64 = a | b;
      ALU_AND:  r64 = a & b;
      ALU_LSH:  r64 = a << b[5:0];
      ALU_RSH:  r64 = a >> b[5:0];
      ALU_NEG:  r64 = -a;
      ALU_MOD:  r64 = (b == 64'd0) ? a : a % b;
      ALU_XOR:  r64 = a ^ b;
      ALU_MOV:  r64 = b;
      ALU_ARSH: r64 = 64'($signed(a) >>> b[5:0]);
      ALU_END:  r64 = swap_be ? bswap(a, b) : trunc(a, b);
      default:  r64 = a;
    endcase
    unique case (op)
      ALU_ADD:  r32 = a32 + b32;
      ALU_SUB:  r32 = a32 - b32;
      ALU_MUL:  r32 = a32 * b32;
      ALU_DIV:  r32 = (b32 == 32'd0) ? 32'd0 : a32 / b32;
      ALU_OR:   r32 = a32 | b32;
      ALU_AND:  r32 = a32 & b32;
      ALU_LSH:  r32 = a32 << b32[4:0];
      ALU_RSH:  r32 = a32 >> b32[4:0];
      ALU_NEG:  r32 = -a32;
      ALU_MOD:  r32 = (b32 == 32'd0) ? a32 : a32 % b32;
      ALU_XOR:  r32 = a32 ^ b32;
      ALU_MOV:  r32 = b32;
      ALU_ARSH: r32 = 32'($signed(a32) >>> b32[4:0]);
      default:  r32 = a32;
    endcase
    if (alu64 || op == ALU_END) y = r64;
    else                        y = {32'd0, r32};
  end

endmodule
