// hxdp_pkt_bank: one packet store of the Active Packet Selector.
//
// It combines three memories into one byte-addressed packet region:
//   * the packet buffer, organised in 32-byte frames and written one frame
//     per cycle by the APS read logic while the packet is transferred from
//     the input queue;
//   * the difference buffer, a byte-addressed copy of every byte a program
//     writes (with a valid bit per byte); writes never touch the frames, so
//     no read-modify-write of a frame is needed;
//   * the scratch memory, SCRATCH bytes placed in front of the packet's
//     first byte, which holds data written before the original head after
//     an xdp_adjust_head with a negative delta.
// Region offset p (address - PKT_BASE) maps to scratch byte p when
// p < SCRATCH and to packet byte p-SCRATCH otherwise; a read returns the
// difference-buffer byte if it was written and the frame byte if not.
//
// Four lane ports read 1..8 bytes (combinational, ID stage) and write
// 1..8 bytes (commit stage) at any byte offset. The hardware boundary check
// replaces the eBPF program's own checks: bytes outside the current
// [data, data_end) window read as zero and are not written, and `oob` is
// set until the next packet. A read of bytes inside the packet that have
// not arrived yet raises `rd_pending` (early processor start). The emission
// port returns 32 merged bytes starting at any offset. `start` (a new packet
// is about to be loaded) clears the difference buffer, scratch memory and
// head/tail adjustments.
// The three memories and their merge follow the paper; the sizes (48 frames
// = 1536 bytes, 64 scratch bytes), the window check and the port timing are
// this design's choice.
module hxdp_pkt_bank
  import hxdp_pkg::*;
#(
  parameter int unsigned BUF_FRAMES = 48,
  parameter int unsigned SCRATCH    = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [15:0]        start_len,
  // frame loading
  input  logic               ld_we,
  input  logic [15:0]        ld_idx,
  input  logic [FRAME_W-1:0] ld_data,
  output logic [15:0]        len,
  output logic               loaded,      // all frames present
  output logic [15:0]        rx_count,    // frames present
  // lane ports (offsets relative to PKT_BASE)
  input  logic [15:0]        rd_off   [LANES],
  input  logic [3:0]         rd_size  [LANES],
  input  logic               rd_en    [LANES],
  output logic [63:0]        rd_data  [LANES],
  output logic               rd_pending,
  input  logic               wr_en    [LANES],
  input  logic [15:0]        wr_off   [LANES],
  input  logic [3:0]         wr_size  [LANES],
  input  logic [63:0]        wr_data  [LANES],
  // head/tail adjustment (helpers)
  input  logic               adj_head,
  input  logic               adj_tail,
  input  logic signed [31:0] adj_delta,
  output logic               adj_ok,
  // window, as offsets relative to PKT_BASE
  output logic [15:0]        data_off,
  output logic [15:0]        end_off,
  output logic               oob,
  // emission
  input  logic [15:0]        em_off,
  output logic [FRAME_W-1:0] em_data
);

  localparam int unsigned BUF_BYTES = BUF_FRAMES * FRAME_BYTES;
  localparam int unsigned TOTAL     = SCRATCH + BUF_BYTES;
  localparam logic signed [17:0] SCR_S = 18'(SCRATCH);

  logic [FRAME_W-1:0] frames [BUF_FRAMES];
  logic [7:0]         diff   [BUF_BYTES];
  logic               dvalid [BUF_BYTES];
  logic [7:0]         scr    [SCRATCH];
  logic [15:0]        rx_frames;
  logic signed [17:0] head_adj, tail_adj;
  logic signed [17:0] win_lo, win_hi;

  assign win_lo   = SCR_S + head_adj;
  assign win_hi   = SCR_S + $signed({2'b00, len}) + tail_adj;
  assign data_off = 16'(win_lo);
  assign end_off  = 16'(win_hi);
  assign rx_count = rx_frames;
  assign loaded   = (32'(rx_frames) * FRAME_BYTES >= 32'(len));

  function automatic logic [7:0] byte_at(input logic [15:0] p);
    logic [15:0] i;
    logic [7:0]  v;
    if (32'(p) < SCRATCH) v = scr[p];
    else if (32'(p) < TOTAL) begin
      i = p - 16'(SCRATCH);
      v = dvalid[i] ? diff[i] : frames[i / 16'(FRAME_BYTES)][8*(i % 16'(FRAME_BYTES)) +: 8];
    end else v = 8'd0;
    return v;
  endfunction

  function automatic logic in_win(input logic [15:0] p);
    return ($signed({2'b00, p}) >= win_lo) && ($signed({2'b00, p}) < win_hi);
  endfunction

  always_comb begin
    rd_pending = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      rd_data[l] = '0;
      for (int b = 0; b < 8; b++) begin
        logic [15:0] p;
        p = rd_off[l] + 16'(b);
        if (size_mask(rd_size[l])[b] && in_win(p)) begin
          rd_data[l][8*b +: 8] = byte_at(p);
          if (rd_en[l] && 32'(p) >= SCRATCH && 32'(p - 16'(SCRATCH)) < 32'(len) &&
              32'(p - 16'(SCRATCH)) >= 32'(rx_frames) * FRAME_BYTES)
            rd_pending = 1'b1;
        end
      end
    end
    for (int b = 0; b < FRAME_BYTES; b++) begin
      logic [15:0] p;
      p = em_off + 16'(b);
      em_data[8*b +: 8] = in_win(p) ? byte_at(p) : 8'd0;
    end
  end

  always_comb begin
    logic signed [17:0] nh, nt;
    nh = head_adj + 18'(adj_delta);
    nt = tail_adj + 18'(adj_delta);
    adj_ok = 1'b0;
    if (adj_head) adj_ok = (nh >= -SCR_S) && (nh < $signed({2'b00, len}) + tail_adj);
    if (adj_tail) adj_ok = (nt <= 18'sd0) && ($signed({2'b00, len}) + nt > head_adj);
  end

  always_ff @(posedge clk) if (ld_we && 32'(ld_idx) < BUF_FRAMES) frames[ld_idx] <= ld_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_frames <= '0; head_adj <= '0; tail_adj <= '0; oob <= 1'b0; len <= '0;
      for (int i = 0; i < BUF_BYTES; i++) begin dvalid[i] <= 1'b0; diff[i] <= '0; end
      for (int i = 0; i < SCRATCH; i++) scr[i] <= '0;
    end else if (start) begin
      rx_frames <= '0; head_adj <= '0; tail_adj <= '0; oob <= 1'b0; len <= start_len;
      for (int i = 0; i < BUF_BYTES; i++) dvalid[i] <= 1'b0;
      for (int i = 0; i < SCRATCH; i++) scr[i] <= '0;
    end else begin
      if (ld_we) rx_frames <= rx_frames + 16'd1;
      if (adj_head && adj_ok) head_adj <= head_adj + 18'(adj_delta);
      if (adj_tail && adj_ok) tail_adj <= tail_adj + 18'(adj_delta);
      for (int l = 0; l < LANES; l++) begin
        if (rd_en[l])
          for (int b = 0; b < 8; b++)
            if (size_mask(rd_size[l])[b] && !in_win(rd_off[l] + 16'(b))) oob <= 1'b1;
        if (wr_en[l])
          for (int b = 0; b < 8; b++) begin
            logic [15:0] p;
            p = wr_off[l] + 16'(b);
            if (size_mask(wr_size[l])[b]) begin
              if (!in_win(p)) oob <= 1'b1;
              else if (32'(p) < SCRATCH) scr[p] <= wr_data[l][8*b +: 8];
              else if (32'(p) < TOTAL) begin
                diff[p - 16'(SCRATCH)]   <= wr_data[l][8*b +: 8];
                dvalid[p - 16'(SCRATCH)] <= 1'b1;
              end
            end
          end
      end
    end
  end

endmodule
