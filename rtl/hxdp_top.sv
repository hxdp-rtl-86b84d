// hxdp_top: the hXDP packet-processing core.
//
// Runs XDP programs, compiled to an extended-eBPF VLIW instruction set, on
// every packet received from the NIC. Packets enter the Programmable Input
// Queue as 32-byte frames; the Active Packet Selector copies the oldest one
// into a packet bank and starts the Sephirot core after the first frame.
// Sephirot (four VLIW lanes, four pipeline stages) runs the program from
// the instruction memory, reading and writing the packet, the xdp_md
// context and the maps memory over the data bus, and calling the helper
// functions over the helper bus. The helper functions reach the maps
// memory directly for structured (hash/array) access and the APS for
// head/tail adjustment. When the program exits, the APS drops the packet
// or emits the modified packet, with its action and port, to the output
// queue, while the next packet is already being read and processed.
// Everything runs in one clock domain (156.25 MHz on the paper's board).
// The host side is reduced to plain ports: instruction memory load, maps
// configurator, host map access. The output queue belongs to the NIC and is
// reached through a valid/ready frame port. Event outputs are one-cycle
// pulses for performance counters.
// The block structure and connections follow the paper's architecture; the
// port protocols are this design's choice.
module hxdp_top
  import hxdp_pkg::*;
#(
  parameter int unsigned PIQ_FRAMES  = 512,
  parameter int unsigned BUF_FRAMES  = 48,
  parameter int unsigned SCRATCH     = 64,
  parameter int unsigned IMEM_ROWS   = 1024,
  parameter int unsigned STACK_BYTES = 512,
  parameter int unsigned MAP_ROWS    = 1024,
  parameter int unsigned MAP_ROW_B   = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // NIC input bus
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [FRAME_W-1:0] in_data,
  input  logic               in_last,
  input  logic [5:0]         in_bytes,
  input  logic [1:0]         in_port,
  // output queue
  output logic               out_valid,
  input  logic               out_ready,
  output logic [FRAME_W-1:0] out_data,
  output logic               out_last,
  output logic [5:0]         out_bytes,
  output logic [2:0]         out_action,
  output logic [31:0]        out_port,
  // program load
  input  logic               imem_we,
  input  logic [15:0]        imem_addr,
  input  logic [ROW_W-1:0]   imem_data,
  // maps configurator and host map access
  input  logic               cfg_we,
  input  logic [7:0]         cfg_id,
  input  logic               cfg_hash,
  input  logic [5:0]         cfg_key_size,
  input  logic [6:0]         cfg_val_size,
  input  logic [15:0]        cfg_entries,
  input  logic [15:0]        cfg_base_row,
  input  logic               host_we,
  input  logic [15:0]        host_addr,
  input  logic [63:0]        host_wdata,
  output logic [63:0]        host_rdata,
  input  logic               host_valid_we,
  input  logic [15:0]        host_valid_row,
  input  logic               host_valid_val,
  // status and events
  output logic               prog_exit,
  output logic [2:0]         prog_action,
  output logic               oob_seen,
  output logic               ev_fwd,
  output logic               ev_branch,
  output logic               ev_multi_branch,
  output logic               ev_early_exit,
  output logic               ev_stall_pkt,
  output logic               ev_stall_hf
);

  // PIQ <-> APS
  logic               q_avail, q_pop;
  logic [15:0]        q_len, q_idx;
  logic [1:0]         q_port;
  logic [FRAME_W-1:0] q_frame;
  // APS <-> Sephirot
  logic               start, running, exit_valid, pending;
  logic [2:0]         exit_action;
  rd_req_t            dbus_rd [LANES];
  wr_req_t            dbus_wr [LANES];
  logic [63:0]        aps_rdata [LANES], map_rdata [LANES];
  // imem
  logic [15:0]        pc;
  logic [ROW_W-1:0]   row;
  // helpers
  hf_req_t            hf_req;
  hf_rsp_t            hf_rsp;
  logic [15:0]        hf_st_addr;
  logic [255:0]       hf_st_data, hp_key, hp_val;
  logic [1:0]         hp_op;
  logic [7:0]         hp_map;
  logic [31:0]        hp_ptr, redir_port;
  logic [63:0]        hp_ret, hp_rdval;
  logic               adj_head, adj_tail, adj_ok, redir_valid, hf_busy;
  logic signed [31:0] adj_delta;
  // maps lanes
  logic [15:0]        m_rd_off [LANES], m_wr_off [LANES];
  logic [3:0]         m_rd_size [LANES], m_wr_size [LANES];
  logic               m_wr_en [LANES];
  logic [63:0]        m_wr_data [LANES];

  hxdp_piq #(.FRAMES(PIQ_FRAMES)) u_piq (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last, .in_bytes, .in_port,
    .pkt_avail(q_avail), .pkt_len(q_len), .pkt_port(q_port),
    .rd_idx(q_idx), .rd_frame(q_frame), .pop(q_pop)
  );

  hxdp_aps #(.BUF_FRAMES(BUF_FRAMES), .SCRATCH(SCRATCH)) u_aps (
    .clk, .rst_n,
    .q_avail, .q_len, .q_port, .q_idx, .q_frame, .q_pop,
    .start, .running, .exit_valid, .exit_action,
    .dbus_rd, .dbus_wr, .rdata(aps_rdata), .pending,
    .adj_head, .adj_tail, .adj_delta, .adj_ok, .redir_valid, .redir_port,
    .out_valid, .out_ready, .out_data, .out_last, .out_bytes, .out_action, .out_port,
    .oob_seen
  );

  hxdp_imem #(.ROWS(IMEM_ROWS)) u_imem (
    .clk, .load_we(imem_we), .load_addr(imem_addr), .load_data(imem_data), .pc, .row
  );

  hxdp_sephirot #(.STACK_BYTES(STACK_BYTES)) u_seph (
    .clk, .rst_n, .start, .running, .pc, .row,
    .dbus_rd, .dbus_wr, .aps_rdata, .aps_pending(pending), .map_rdata,
    .hf_req, .hf_rsp, .hf_st_addr, .hf_st_data,
    .exit_valid, .exit_action,
    .ev_fwd, .ev_branch, .ev_multi_branch, .ev_early_exit, .ev_stall_pkt, .ev_stall_hf
  );

  hxdp_helpers u_hf (
    .clk, .rst_n, .start, .req(hf_req), .rsp(hf_rsp),
    .st_addr(hf_st_addr), .st_data(hf_st_data),
    .hp_op, .hp_map, .hp_key, .hp_val, .hp_ptr, .hp_ret, .hp_rdval,
    .adj_head, .adj_tail, .adj_delta, .adj_ok,
    .redir_valid, .redir_port, .busy(hf_busy)
  );

  always_comb
    for (int l = 0; l < LANES; l++) begin
      m_rd_off[l]  = 16'(dbus_rd[l].addr - MAP_BASE);
      m_rd_size[l] = dbus_rd[l].size;
      m_wr_en[l]   = dbus_wr[l].valid && dbus_wr[l].addr[31:28] == RGN_MAP;
      m_wr_off[l]  = 16'(dbus_wr[l].addr - MAP_BASE);
      m_wr_size[l] = dbus_wr[l].size;
      m_wr_data[l] = dbus_wr[l].data;
    end

  hxdp_maps #(.ROWS(MAP_ROWS), .ROW_BYTES(MAP_ROW_B)) u_maps (
    .clk, .rst_n,
    .cfg_we, .cfg_id, .cfg_hash, .cfg_key_size, .cfg_val_size, .cfg_entries, .cfg_base_row,
    .host_we, .host_addr, .host_wdata, .host_rdata, .host_valid_we, .host_valid_row, .host_valid_val,
    .rd_off(m_rd_off), .rd_size(m_rd_size), .rd_data(map_rdata),
    .wr_en(m_wr_en), .wr_off(m_wr_off), .wr_size(m_wr_size), .wr_data(m_wr_data),
    .hp_op, .hp_map, .hp_key, .hp_val, .hp_ptr, .hp_ret, .hp_rdval
  );

  assign prog_exit   = exit_valid;
  assign prog_action = exit_action;

endmodule
