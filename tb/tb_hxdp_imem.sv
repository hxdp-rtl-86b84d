// tb_hxdp_imem: self-checking test of the instruction memory: rows loaded
// through the load port read back at the program counter, and addresses
// beyond the memory read as empty rows.
module tb_hxdp_imem;
  import hxdp_pkg::*;

  logic clk = 0, load_we = 0;
  logic [15:0] load_addr = 0, pc = 0;
  logic [ROW_W-1:0] load_data = '0, row;
  logic [ROW_W-1:0] model [64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hxdp_imem #(.ROWS(64)) dut (.clk, .load_we, .load_addr, .load_data, .pc, .row);

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      load_we = 1; load_addr = 16'(i);
      for (int w = 0; w < ROW_W / 32; w++) load_data[32*w +: 32] = $urandom;
      model[i] = load_data;
    end
    @(negedge clk) load_we = 0;
    for (int i = 63; i >= 0; i--) begin
      pc = 16'(i); #1;
      checks++;
      if (row !== model[i]) begin failures++; $display("FAIL row %0d", i); end
    end
    pc = 16'd64; #1;
    checks++;
    if (row !== '0) begin failures++; $display("FAIL out of range row not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
