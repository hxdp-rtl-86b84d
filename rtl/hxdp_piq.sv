// hxdp_piq: Programmable Input Queue, the interface to the NIC input bus.
//
// Packets arrive as 32-byte frames, one per cycle (in_valid/in_ready
// handshake, in_last on the final frame, in_bytes = valid bytes of the last
// frame, in_port = ingress port). Frames are written into a circular frame
// memory; when the last frame of a packet is accepted a descriptor (first
// frame, frame count, length, port) is pushed into a descriptor FIFO. The
// head frame pointer is the first frame of the oldest packet: the Active
// Packet Selector sees the head packet's descriptor and reads any of its
// frames by index (rd_idx, combinational rd_frame), in any order, then pops
// it, which frees its frames. A frame is refused (in_ready low) when the
// frame memory or descriptor FIFO is full.
// Frame size and the head-pointer organisation follow the paper; the depths
// (512 frames, from the 6.5 block RAMs reported for the queue, and 64
// descriptors) and the handshake are this design's choice.
// Lint reports rst_n as both synchronous and asynchronous: the
// asynchronous use is the flip-flop reset, the other is only the
// `disable iff` of the concurrent assertion below, so the logic is unaffected.
module hxdp_piq
  import hxdp_pkg::*;
#(
  parameter int unsigned FRAMES = 512,
  parameter int unsigned DESCS  = 64
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
  // head packet towards the APS
  output logic               pkt_avail,
  output logic [15:0]        pkt_len,
  output logic [1:0]         pkt_port,
  input  logic [15:0]        rd_idx,
  output logic [FRAME_W-1:0] rd_frame,
  input  logic               pop
);

  localparam int unsigned FW = $clog2(FRAMES);
  localparam int unsigned DW = $clog2(DESCS);

  typedef struct packed {
    logic [FW-1:0] first;
    logic [15:0]   nframes;
    logic [15:0]   len;
    logic [1:0]    port;
  } desc_t;

  logic [FRAME_W-1:0] fmem [FRAMES];
  desc_t              dq   [DESCS];
  logic [FW-1:0]      head, wr_ptr, cur_first;
  logic [FW:0]        used;
  logic [DW:0]        dcount;
  logic [DW-1:0]      drd, dwr;
  logic [15:0]        cur_frames;
  logic               acc;
  desc_t              hd;

  assign in_ready  = (used < (FW+1)'(FRAMES)) && (dcount < (DW+1)'(DESCS));
  assign acc       = in_valid && in_ready;
  assign hd        = dq[drd];
  assign pkt_avail = (dcount != '0);
  assign pkt_len   = hd.len;
  assign pkt_port  = hd.port;
  assign rd_frame  = fmem[FW'(hd.first + FW'(rd_idx))];

  always_ff @(posedge clk) if (acc) fmem[wr_ptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; wr_ptr <= '0; used <= '0; dcount <= '0; drd <= '0; dwr <= '0;
      cur_frames <= '0; cur_first <= '0;
    end else begin
      if (acc) begin
        wr_ptr <= wr_ptr + 1'b1;
        if (cur_frames == 16'd0) cur_first <= wr_ptr;
        if (in_last) begin
          dq[dwr] <= '{first:   (cur_frames == 16'd0) ? wr_ptr : cur_first,
                       nframes: cur_frames + 16'd1,
                       len:     16'(cur_frames * FRAME_BYTES) + ((in_bytes == 6'd0) ? 16'd32 : 16'(in_bytes)),
                       port:    in_port};
          dwr        <= dwr + 1'b1;
          cur_frames <= '0;
        end else cur_frames <= cur_frames + 16'd1;
      end
      used   <= used + (FW+1)'(acc) - ((pop && pkt_avail) ? (FW+1)'(hd.nframes) : '0);
      dcount <= dcount + (DW+1)'(acc && in_last) - (DW+1)'(pop && pkt_avail);
      if (pop && pkt_avail) begin
        drd  <= drd + 1'b1;
        head <= hd.first + FW'(hd.nframes);
      end
    end
  end

  // A pop is only meaningful when a packet is present.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> pkt_avail);

endmodule
