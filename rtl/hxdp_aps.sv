// hxdp_aps: Active Packet Selector.
//
// The APS sits between the input queue, the Sephirot core and the output
// queue. It owns two packet banks (hxdp_pkt_bank), so that one packet can
// be processed while the previous one is emitted and the next one is read.
//   Packet select logic: packets are taken from the input queue in FIFO
//     order; each is given a sequence number.
//   Read logic: when a bank is free and a packet waits, the bank is cleared
//     and the packet's frames are copied one per cycle from the queue into
//     the bank's packet buffer; the packet is then popped from the queue.
//   Start: as soon as the oldest waiting packet has its first frame in the
//     bank (early processor start) and the core is idle, the bank becomes
//     the active one and `start` is pulsed.
//   Data bus: the core's loads and stores to the packet region go to the
//     active bank; loads from the context region return the xdp_md fields
//     data (+0), data_end (+4), data_meta (+8, equal to data),
//     ingress_ifindex (+12) and rx_queue_index (+16, always 0).
//   Exit: on the core's exit the active bank is freed (ABORTED, DROP) or
//     handed to the emitter with its action (PASS, TX, REDIRECT) and the
//     redirect port chosen by the helpers.
//   Write logic (emission): a state machine sends the bank's window
//     [data, data_end) as merged 32-byte frames, one per cycle when out_ready
//     is high, once all frames of the packet have arrived, then frees it.
// Output frames carry the action and the port (the ingress port for TX and
// PASS, the redirect target for REDIRECT). The buffer organisation, the
// early start and the emission in parallel with reading the next packet
// follow the paper; the two banks, the sequence numbers and the output
// handshake are this design's choice.
// Lint reports rst_n as both synchronous and asynchronous: the
// asynchronous use is the flip-flop reset, the other is only the
// `disable iff` of the concurrent assertion below, so the logic is unaffected.
module hxdp_aps
  import hxdp_pkg::*;
#(
  parameter int unsigned BUF_FRAMES = 48,
  parameter int unsigned SCRATCH    = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // input queue
  input  logic               q_avail,
  input  logic [15:0]        q_len,
  input  logic [1:0]         q_port,
  output logic [15:0]        q_idx,
  input  logic [FRAME_W-1:0] q_frame,
  output logic               q_pop,
  // Sephirot control
  output logic               start,
  input  logic               running,
  input  logic               exit_valid,
  input  logic [2:0]         exit_action,
  // data bus
  input  rd_req_t            dbus_rd   [LANES],
  input  wr_req_t            dbus_wr   [LANES],
  output logic [63:0]        rdata     [LANES],
  output logic               pending,
  // helpers
  input  logic               adj_head,
  input  logic               adj_tail,
  input  logic signed [31:0] adj_delta,
  output logic               adj_ok,
  input  logic               redir_valid,
  input  logic [31:0]        redir_port,
  // output queue
  output logic               out_valid,
  input  logic               out_ready,
  output logic [FRAME_W-1:0] out_data,
  output logic               out_last,
  output logic [5:0]         out_bytes,
  output logic [2:0]         out_action,
  output logic [31:0]        out_port,
  output logic               oob_seen      // boundary check fired on the last packet
);

  localparam int unsigned NB = 2;

  typedef enum logic [1:0] {B_FREE, B_QUEUED, B_RUN, B_EMIT} bstate_e;

  bstate_e     bst  [NB];
  logic [15:0] bseq [NB];
  logic [2:0]  bact [NB];
  logic [31:0] bport[NB];
  logic [1:0]  bin  [NB];

  // bank wires
  logic               b_start [NB];
  logic               b_ldwe  [NB];
  logic [15:0]        b_len   [NB], b_rx [NB], b_doff [NB], b_eoff [NB];
  logic               b_loaded[NB], b_pend [NB], b_adjok [NB], b_oob [NB];
  logic [63:0]        b_rdata [NB][LANES];
  logic [FRAME_W-1:0] b_em    [NB];
  logic               b_rden  [NB][LANES];
  logic               b_wren  [NB][LANES];
  logic               b_adjh  [NB], b_adjt [NB];
  logic [15:0]        rd_off  [LANES], wr_off [LANES];
  logic [3:0]         rd_size [LANES], wr_size [LANES];
  logic [63:0]        wr_data [LANES];
  logic [15:0]        em_off;

  // loader
  logic        ld_busy, ld_bank;
  logic [15:0] ld_idx, ld_nfr, seq_next;
  // active bank
  logic        act_bank, has_act;
  // emitter
  logic        em_busy, em_bank;
  logic [15:0] em_pos, em_end;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    hxdp_pkt_bank #(.BUF_FRAMES(BUF_FRAMES), .SCRATCH(SCRATCH)) u_bank (
      .clk, .rst_n,
      .start(b_start[b]), .start_len(q_len),
      .ld_we(b_ldwe[b]), .ld_idx(ld_idx), .ld_data(q_frame),
      .len(b_len[b]), .loaded(b_loaded[b]), .rx_count(b_rx[b]),
      .rd_off(rd_off), .rd_size(rd_size), .rd_en(b_rden[b]), .rd_data(b_rdata[b]),
      .rd_pending(b_pend[b]),
      .wr_en(b_wren[b]), .wr_off(wr_off), .wr_size(wr_size), .wr_data(wr_data),
      .adj_head(b_adjh[b]), .adj_tail(b_adjt[b]), .adj_delta(adj_delta), .adj_ok(b_adjok[b]),
      .data_off(b_doff[b]), .end_off(b_eoff[b]), .oob(b_oob[b]),
      .em_off(em_off), .em_data(b_em[b])
    );
  end

  // ---------------- selection of free bank / next bank to run ----------------
  logic free_ok, free_bank, run_ok, run_bank;
  always_comb begin
    free_ok = 1'b0; free_bank = 1'b0;
    for (int b = NB-1; b >= 0; b--)
      if (bst[b] == B_FREE) begin free_ok = 1'b1; free_bank = 1'(b); end
    run_ok = 1'b0; run_bank = 1'b0;
    for (int b = 0; b < NB; b++)
      if (bst[b] == B_QUEUED && b_rx[b] != 16'd0 &&
          (!run_ok || $signed(bseq[b] - bseq[run_bank]) < 0)) begin
        run_ok = 1'b1; run_bank = 1'(b);
      end
    // the oldest queued packet must be first in line
    for (int b = 0; b < NB; b++)
      if (bst[b] == B_QUEUED && b_rx[b] == 16'd0 && run_ok && $signed(bseq[b] - bseq[run_bank]) < 0)
        run_ok = 1'b0;
  end

  assign start = run_ok && !has_act && !running;

  // ---------------- data bus routing ----------------
  always_comb begin
    pending = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      rd_off[l]  = 16'(dbus_rd[l].addr - PKT_BASE);
      rd_size[l] = dbus_rd[l].size;
      wr_off[l]  = 16'(dbus_wr[l].addr - PKT_BASE);
      wr_size[l] = dbus_wr[l].size;
      wr_data[l] = dbus_wr[l].data;
      for (int b = 0; b < NB; b++) begin
        b_rden[b][l] = has_act && act_bank == 1'(b) && dbus_rd[l].valid && dbus_rd[l].addr[31:28] == RGN_PKT;
        b_wren[b][l] = has_act && act_bank == 1'(b) && dbus_wr[l].valid && dbus_wr[l].addr[31:28] == RGN_PKT;
      end
      if (dbus_rd[l].addr[31:28] == RGN_CTX) begin
        unique case (dbus_rd[l].addr[7:0])
          8'd0, 8'd8: rdata[l] = {32'd0, PKT_BASE + 32'(b_doff[act_bank])};
          8'd4:       rdata[l] = {32'd0, PKT_BASE + 32'(b_eoff[act_bank])};
          8'd12:      rdata[l] = {62'd0, bin[act_bank]};
          default:    rdata[l] = '0;
        endcase
        rdata[l] = load_le(rdata[l], dbus_rd[l].size);
      end else rdata[l] = b_rdata[act_bank][l];
    end
    for (int b = 0; b < NB; b++) begin
      if (has_act && act_bank == 1'(b) && b_pend[b]) pending = 1'b1;
      b_adjh[b] = has_act && act_bank == 1'(b) && adj_head;
      b_adjt[b] = has_act && act_bank == 1'(b) && adj_tail;
      b_start[b] = !ld_busy && q_avail && free_ok && free_bank == 1'(b);
      b_ldwe[b]  = ld_busy && ld_bank == 1'(b);
    end
    adj_ok = b_adjok[act_bank];
  end

  assign q_idx = ld_idx;
  assign q_pop = ld_busy && (ld_idx == ld_nfr - 16'd1);

  // ---------------- emission ----------------
  assign em_off     = em_pos;
  assign out_valid  = em_busy && b_loaded[em_bank];
  assign out_data   = b_em[em_bank];
  assign out_last   = (em_end - em_pos) <= 16'(FRAME_BYTES);
  assign out_bytes  = out_last ? 6'(em_end - em_pos) : 6'(FRAME_BYTES);
  assign out_action = bact[em_bank];
  assign out_port   = bport[em_bank];
  assign oob_seen   = b_oob[act_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NB; b++) begin
        bst[b] <= B_FREE; bseq[b] <= '0; bact[b] <= '0; bport[b] <= '0; bin[b] <= '0;
      end
      ld_busy <= 1'b0; ld_bank <= 1'b0; ld_idx <= '0; ld_nfr <= '0; seq_next <= '0;
      act_bank <= 1'b0; has_act <= 1'b0;
      em_busy <= 1'b0; em_bank <= 1'b0; em_pos <= '0; em_end <= '0;
    end else begin
      // read logic
      if (!ld_busy && q_avail && free_ok) begin
        ld_busy        <= 1'b1;
        ld_bank        <= free_bank;
        ld_idx         <= '0;
        ld_nfr         <= (q_len + 16'(FRAME_BYTES - 1)) / 16'(FRAME_BYTES);
        bst[free_bank] <= B_QUEUED;
        bseq[free_bank] <= seq_next;
        bin[free_bank]  <= q_port;
        seq_next       <= seq_next + 16'd1;
      end else if (ld_busy) begin
        ld_idx <= ld_idx + 16'd1;
        if (q_pop) ld_busy <= 1'b0;
      end
      // start / exit
      if (start) begin
        has_act       <= 1'b1;
        act_bank      <= run_bank;
        bst[run_bank] <= B_RUN;
      end
      if (exit_valid && has_act) begin
        has_act <= 1'b0;
        if (exit_action inside {XDP_PASS, XDP_TX, XDP_REDIRECT}) begin
          bst[act_bank]   <= B_EMIT;
          bact[act_bank]  <= exit_action;
          bport[act_bank] <= (exit_action == XDP_REDIRECT && redir_valid) ? redir_port
                                                                        : {30'd0, bin[act_bank]};
        end else bst[act_bank] <= B_FREE;
      end
      // write logic
      if (!em_busy) begin
        for (int b = 0; b < NB; b++)
          if (bst[b] == B_EMIT) begin
            em_busy <= 1'b1;
            em_bank <= 1'(b);
            em_pos  <= b_doff[b];
            em_end  <= b_eoff[b];
          end
      end else if (out_valid && out_ready) begin
        em_pos <= em_pos + 16'(FRAME_BYTES);
        if (out_last) begin
          em_busy      <= 1'b0;
          bst[em_bank] <= B_FREE;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) exit_valid |-> has_act);

endmodule
