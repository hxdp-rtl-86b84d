// hxdp_pkg: constants, types and helper functions shared by the hXDP core.
//
// The core executes an extended eBPF instruction set on a 4-lane VLIW
// processor. A VLIW row holds four standard 64-bit eBPF slots (opcode[7:0],
// dst[11:8], src[15:12], off[31:16], imm[63:32]). The extensions described
// for the core are encoded as follows (the encodings are this design's
// choice, the extensions themselves follow the hXDP instruction set):
//   * three-operand ALU: off[15]=1 selects register off[3:0] as the first
//     operand, the result goes to dst (dst = off_reg OP src/imm);
//   * 6-byte load/store: addressing mode 3'b111 (opcodes 0xE1, 0xE2, 0xE3);
//   * parametrised exit: exit (0x95) with src=1 returns imm as the action;
//   * slot opcode 0x00 is an empty slot (NOP).
// Branch offsets count VLIW rows: target = row + 1 + off.
//
// Address map of the data bus (bits [31:28] select the region; upper 32 bits
// of a pointer are ignored):
//   0x1 xdp_md context, 0x2 packet (scratch area then packet buffer),
//   0x3 stack, 0x4 maps memory.
package hxdp_pkg;

  localparam int unsigned LANES       = 4;     // VLIW lanes
  localparam int unsigned NREGS       = 11;    // r0..r10
  localparam int unsigned FRAME_BYTES = 32;    // NIC frame size
  localparam int unsigned FRAME_W     = FRAME_BYTES * 8;
  localparam int unsigned SLOT_W      = 64;
  localparam int unsigned ROW_W       = LANES * SLOT_W;
  localparam int unsigned HELPER_BYTES = 32;   // width of the helper wide read

  // Regions
  localparam logic [3:0] RGN_CTX   = 4'h1;
  localparam logic [3:0] RGN_PKT   = 4'h2;
  localparam logic [3:0] RGN_STACK = 4'h3;
  localparam logic [3:0] RGN_MAP   = 4'h4;
  localparam logic [31:0] CTX_BASE   = 32'h1000_0000;
  localparam logic [31:0] PKT_BASE   = 32'h2000_0000;
  localparam logic [31:0] STACK_BASE = 32'h3000_0000;
  localparam logic [31:0] MAP_BASE   = 32'h4000_0000;

  // XDP actions
  localparam logic [2:0] XDP_ABORTED  = 3'd0;
  localparam logic [2:0] XDP_DROP     = 3'd1;
  localparam logic [2:0] XDP_PASS     = 3'd2;
  localparam logic [2:0] XDP_TX       = 3'd3;
  localparam logic [2:0] XDP_REDIRECT = 3'd4;

  // eBPF instruction classes
  localparam logic [2:0] CLS_LD = 3'd0, CLS_LDX = 3'd1, CLS_ST = 3'd2, CLS_STX = 3'd3,
                         CLS_ALU = 3'd4, CLS_JMP = 3'd5, CLS_JMP32 = 3'd6, CLS_ALU64 = 3'd7;

  typedef enum logic [3:0] {
    ALU_ADD = 4'h0, ALU_SUB = 4'h1, ALU_MUL = 4'h2, ALU_DIV = 4'h3,
    ALU_OR  = 4'h4, ALU_AND = 4'h5, ALU_LSH = 4'h6, ALU_RSH = 4'h7,
    ALU_NEG = 4'h8, ALU_MOD = 4'h9, ALU_XOR = 4'ha, ALU_MOV = 4'hb,
    ALU_ARSH = 4'hc, ALU_END = 4'hd, ALU_RSV1 = 4'he, ALU_RSV2 = 4'hf
  } alu_op_e;

  typedef enum logic [3:0] {
    J_JA = 4'h0, J_JEQ = 4'h1, J_JGT = 4'h2, J_JGE = 4'h3, J_JSET = 4'h4,
    J_JNE = 4'h5, J_JSGT = 4'h6, J_JSGE = 4'h7, J_CALL = 4'h8, J_EXIT = 4'h9,
    J_JLT = 4'ha, J_JLE = 4'hb, J_JSLT = 4'hc, J_JSLE = 4'hd, J_RSV1 = 4'he, J_RSV2 = 4'hf
  } jmp_op_e;

  // Helper function identifiers (Linux numbering)
  localparam logic [31:0] HF_MAP_LOOKUP   = 32'd1;
  localparam logic [31:0] HF_MAP_UPDATE   = 32'd2;
  localparam logic [31:0] HF_MAP_DELETE   = 32'd3;
  localparam logic [31:0] HF_REDIRECT     = 32'd23;
  localparam logic [31:0] HF_CSUM_DIFF    = 32'd28;
  localparam logic [31:0] HF_ADJUST_HEAD  = 32'd44;
  localparam logic [31:0] HF_REDIRECT_MAP = 32'd51;
  localparam logic [31:0] HF_ADJUST_TAIL  = 32'd65;

  // Decoded slot
  typedef struct packed {
    logic        valid;      // slot holds an instruction
    logic        is_alu;
    logic        alu64;
    alu_op_e     aop;
    logic        use_imm;    // second operand is imm
    logic        swap_be;    // END: convert to big endian (byte swap)
    logic        is_ldimm;   // 64-bit immediate load (uses next slot's imm)
    logic        is_load;
    logic        is_store;   // ST or STX (incl. atomic add)
    logic        st_imm;     // ST: data is imm
    logic        is_xadd;
    logic [3:0]  msize;      // access size in bytes: 1,2,4,6,8
    logic        is_jmp;     // conditional or unconditional jump
    logic        jmp32;
    jmp_op_e     jop;
    logic        is_call;
    logic        is_exit;
    logic        exit_param;
    logic        wr_rd;      // writes register rd
    logic [3:0]  rd;
    logic [3:0]  ra;         // register read on port A
    logic [3:0]  rb;         // register read on port B
    logic [15:0] off;
    logic [63:0] imm;        // sign-extended imm (or full 64-bit for ldimm)
  } dec_t;

  // Data-bus request of one lane
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    logic [3:0]  size;
  } rd_req_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    logic [3:0]  size;
    logic [63:0] data;
  } wr_req_t;

  // Helper bus: request from Sephirot, response to Sephirot
  typedef struct packed {
    logic        valid;
    logic [31:0] id;
    logic [63:0] r1, r2, r3, r4, r5;
  } hf_req_t;

  typedef struct packed {
    logic        done;
    logic [63:0] r0;
  } hf_rsp_t;

  function automatic logic [3:0] mem_size(input logic [7:0] opc);
    if (opc[7:5] == 3'b111) return 4'd6;
    unique case (opc[4:3])
      2'b00:   return 4'd4;
      2'b01:   return 4'd2;
      2'b10:   return 4'd1;
      default: return 4'd8;
    endcase
  endfunction

  // Decode one 64-bit slot. next_imm is the imm of the following slot,
  // used as the high word of a 64-bit immediate load.
  function automatic dec_t decode(input logic [63:0] s, input logic [31:0] next_imm);
    dec_t d;
    logic [7:0] opc;
    logic [2:0] cls;
    opc = s[7:0];
    cls = opc[2:0];
    d = '0;
    d.rd  = s[11:8];
    d.rb  = s[15:12];
    d.off = s[31:16];
    d.imm = {{32{s[63]}}, s[63:32]};
    d.ra  = s[11:8];
    d.valid = (opc != 8'h00);
    d.msize = mem_size(opc);
    unique case (cls)
      CLS_ALU, CLS_ALU64: begin
        d.is_alu  = 1'b1;
        d.alu64   = (cls == CLS_ALU64);
        d.aop     = alu_op_e'(opc[7:4]);
        d.use_imm = ~opc[3];
        d.wr_rd   = 1'b1;
        if (s[31]) d.ra = s[19:16];  // three-operand form
        if (opc[7:4] == ALU_END) begin
          d.use_imm = 1'b1;
          d.swap_be = opc[3];
        end
      end
      CLS_LD: begin
        if (opc == 8'h18) begin
          d.is_ldimm = 1'b1;
          d.wr_rd    = 1'b1;
          d.imm      = {next_imm, s[63:32]};
        end
      end
      CLS_LDX: begin
        d.is_load = 1'b1;
        d.wr_rd   = 1'b1;
        d.ra      = s[15:12];        // base register
      end
      CLS_ST: begin
        d.is_store = 1'b1;
        d.st_imm   = 1'b1;
      end
      CLS_STX: begin
        d.is_store = 1'b1;
        if (opc[7:5] == 3'b110) begin
          d.is_xadd = 1'b1;          // atomic add: read, add, write back
          d.is_load = 1'b1;
        end
      end
      default: begin                 // JMP, JMP32
        d.jmp32   = (cls == CLS_JMP32);
        d.jop     = jmp_op_e'(opc[7:4]);
        d.use_imm = ~opc[3];
        if (opc[7:4] == J_CALL) d.is_call = 1'b1;
        else if (opc[7:4] == J_EXIT) begin
          d.is_exit    = 1'b1;
          d.exit_param = (s[15:12] == 4'd1);
        end else d.is_jmp = 1'b1;
      end
    endcase
    return d;
  endfunction

  // Slot encoders, used to build programs
  function automatic logic [63:0] enc(input logic [7:0] opc, input logic [3:0] dst,
                                      input logic [3:0] src, input logic [15:0] off,
                                      input logic [31:0] imm);
    return {imm, off, src, dst, opc};
  endfunction

  function automatic logic [63:0] load_le(input logic [63:0] raw, input logic [3:0] size);
    unique case (size)
      4'd1:    return {56'd0, raw[7:0]};
      4'd2:    return {48'd0, raw[15:0]};
      4'd4:    return {32'd0, raw[31:0]};
      4'd6:    return {16'd0, raw[47:0]};
      default: return raw;
    endcase
  endfunction

  function automatic logic [7:0] size_mask(input logic [3:0] size);
    unique case (size)
      4'd1:    return 8'h01;
      4'd2:    return 8'h03;
      4'd4:    return 8'h0f;
      4'd6:    return 8'h3f;
      default: return 8'hff;
    endcase
  endfunction

endpackage
