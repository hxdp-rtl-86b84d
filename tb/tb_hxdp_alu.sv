// tb_hxdp_alu: self-checking test of the eBPF ALU.
// Fixed vectors with hand-computed results cover every operation in 32- and
// 64-bit form, the eBPF division/modulo-by-zero rules, arithmetic shift and
// the byte-order conversions; random vectors check add/sub/xor against
// plain SystemVerilog arithmetic, including the 32-bit zero extension.
module tb_hxdp_alu;
  import hxdp_pkg::*;

  alu_op_e     op;
  logic        alu64, swap_be;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  hxdp_alu dut (.op, .alu64, .swap_be, .a, .b, .y);

  task automatic chk(input alu_op_e o, input logic w, input logic be, input logic [63:0] x,
                     input logic [63:0] z, input logic [63:0] exp);
    op = o; alu64 = w; swap_be = be; a = x; b = z;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL op=%s w=%0d a=%h b=%h y=%h exp=%h", o.name(), w, x, z, y, exp);
    end
  endtask

  initial begin
    chk(ALU_ADD, 1, 0, 64'd40, 64'd2, 64'd42);
    chk(ALU_ADD, 0, 0, 64'h1_ffff_ffff, 64'd1, 64'd0);
    chk(ALU_SUB, 1, 0, 64'd1, 64'd2, 64'hffff_ffff_ffff_ffff);
    chk(ALU_SUB, 0, 0, 64'd1, 64'd2, 64'h0000_0000_ffff_ffff);
    chk(ALU_MUL, 1, 0, 64'd7, 64'd6, 64'd42);
    chk(ALU_DIV, 1, 0, 64'd100, 64'd7, 64'd14);
    chk(ALU_DIV, 1, 0, 64'd100, 64'd0, 64'd0);
    chk(ALU_MOD, 1, 0, 64'd100, 64'd7, 64'd2);
    chk(ALU_MOD, 1, 0, 64'd100, 64'd0, 64'd100);
    chk(ALU_OR,  1, 0, 64'hf0, 64'h0f, 64'hff);
    chk(ALU_AND, 1, 0, 64'hf0, 64'h3c, 64'h30);
    chk(ALU_XOR, 1, 0, 64'hff, 64'h0f, 64'hf0);
    chk(ALU_LSH, 1, 0, 64'd1, 64'd40, 64'h100_0000_0000);
    chk(ALU_LSH, 0, 0, 64'd1, 64'd31, 64'h8000_0000);
    chk(ALU_RSH, 1, 0, 64'h8000_0000_0000_0000, 64'd63, 64'd1);
    chk(ALU_ARSH, 1, 0, 64'h8000_0000_0000_0000, 64'd4, 64'hf800_0000_0000_0000);
    chk(ALU_ARSH, 0, 0, 64'h8000_0000, 64'd4, 64'h0000_0000_f800_0000);
    chk(ALU_NEG, 1, 0, 64'd1, 64'd0, 64'hffff_ffff_ffff_ffff);
    chk(ALU_MOV, 1, 0, 64'd5, 64'd9, 64'd9);
    chk(ALU_MOV, 0, 0, 64'd5, 64'hffff_ffff_ffff_ffff, 64'h0000_0000_ffff_ffff);
    chk(ALU_END, 0, 1, 64'h1122_3344_5566_7788, 64'd16, 64'h8877);
    chk(ALU_END, 0, 1, 64'h1122_3344_5566_7788, 64'd32, 64'h8877_6655);
    chk(ALU_END, 0, 1, 64'h1122_3344_5566_7788, 64'd64, 64'h8877_6655_4433_2211);
    chk(ALU_END, 0, 0, 64'h1122_3344_5566_7788, 64'd16, 64'h7788);
    for (int i = 0; i < 200; i++) begin
      logic [63:0] x, z;
      x = {$urandom, $urandom}; z = {$urandom, $urandom};
      chk(ALU_ADD, 1, 0, x, z, x + z);
      chk(ALU_SUB, 0, 0, x, z, {32'd0, x[31:0] - z[31:0]});
      chk(ALU_XOR, 1, 0, x, z, x ^ z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
