// hxdp_imem: Sephirot's instruction memory.
//
// Holds the compiled program as VLIW rows of four 64-bit extended-eBPF slots
// (lane 0 in bits [63:0]). The host writes one row per cycle through the load
// port when a program is loaded; Sephirot reads the row addressed by its
// program counter combinationally in the IF stage. Addresses beyond the
// memory read as an empty row. The paper gives the memory's role; the depth
// (1024 rows, about the 7.7 block RAMs reported for it) and the load port
// are this design's choice.
module hxdp_imem
  import hxdp_pkg::*;
#(
  parameter int unsigned ROWS = 1024
) (
  input  logic             clk,
  input  logic             load_we,
  input  logic [15:0]      load_addr,
  input  logic [ROW_W-1:0] load_data,
  input  logic [15:0]      pc,
  output logic [ROW_W-1:0] row
);

  localparam int unsigned AW = $clog2(ROWS);

  logic [ROW_W-1:0] mem [ROWS];

  assign row = (pc < 16'(ROWS)) ? mem[AW'(pc)] : '0;

  always_ff @(posedge clk)
    if (load_we && load_addr < 16'(ROWS)) mem[AW'(load_addr)] <= load_data;

endmodule
