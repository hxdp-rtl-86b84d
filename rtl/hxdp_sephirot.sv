// hxdp_sephirot: the Sephirot VLIW core executing extended eBPF.
//
// Four lanes execute the four slots of a VLIW row in a four-stage pipeline:
//   IF      the row at the program counter is read from the instruction
//           memory, each slot is decoded for its lane and its register
//           operands are read from the register file (write-through);
//   ID      load addresses are computed and memory is pre-fetched through
//           the data bus (stack, packet/xdp_md in the APS, maps memory);
//   IE      the ALU, memory access unit and control unit work on the
//           pre-fetched values: results, store data, branch decisions and
//           helper calls are produced;
//   commit  results are written to the register file and stores to memory.
// There is no hazard detection. A result is forwarded to the next two rows
// only within the same lane (into the ID stage, from IE and commit), so the
// compiler must keep back-to-back dependent instructions on one lane and
// dependencies across lanes at least three rows apart; a row that is three
// rows younger reads the register file after the write.
// Branches are resolved in IE. All branches of a row are evaluated in
// parallel; if several are taken, the lowest-numbered lane wins (parallel
// branching). A taken branch discards the two younger rows and continues
// at row pc+1+off. A helper call (one per row) freezes IF, ID and IE until
// the helper functions answer; r0 gets the return value. A load of packet
// bytes that have not yet arrived (the program starts after the first
// frame) freezes the same stages until they arrive.
// Exit: an exit is recognised in IF. An exit-only row with a parametrised
// exit (action in imm) ends the program at once, without going through the
// pipeline, as soon as no older row still holds a store, branch or call
// (early exit). Any other exit row is sent down the pipeline, fetching
// stops, and the program ends when the row commits, with action = imm or
// r0. exit_valid is a one-cycle pulse carrying the action.
// start (from the APS) clears the registers (r1 = context, r10 = frame
// pointer) and the stack and begins at row 0 (self-reset).
// The stages, lane count, per-lane forwarding, branch priority, early exit
// and self-reset follow the paper; stage contents at the cycle level, the
// lane priority order and the branch offset unit are this design's choice.
// Lint reports rst_n as both synchronous and asynchronous: the
// asynchronous use is the flip-flop reset, the other is only the
// `disable iff` of the concurrent assertion below, so the logic is unaffected.
module hxdp_sephirot
  import hxdp_pkg::*;
#(
  parameter int unsigned STACK_BYTES = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             running,
  // instruction memory
  output logic [15:0]      pc,
  input  logic [ROW_W-1:0] row,
  // data bus
  output rd_req_t          dbus_rd   [LANES],
  output wr_req_t          dbus_wr   [LANES],
  input  logic [63:0]      aps_rdata [LANES],
  input  logic             aps_pending,
  input  logic [63:0]      map_rdata [LANES],
  // helper bus
  output hf_req_t          hf_req,
  input  hf_rsp_t          hf_rsp,
  input  logic [15:0]      hf_st_addr,
  output logic [255:0]     hf_st_data,
  // exit
  output logic             exit_valid,
  output logic [2:0]       exit_action,
  // events (one-cycle pulses) for performance counting
  output logic             ev_fwd,
  output logic             ev_branch,
  output logic             ev_multi_branch,
  output logic             ev_early_exit,
  output logic             ev_stall_pkt,
  output logic             ev_stall_hf
);

  // ---------------- pipeline registers ----------------
  logic        id_v, ie_v, cm_v;
  logic [15:0] id_pc, ie_pc;
  dec_t        id_dec [LANES];
  dec_t        ie_dec [LANES];
  dec_t        cm_dec [LANES];
  logic [63:0] id_a [LANES], id_b [LANES];
  logic [63:0] ie_a [LANES], ie_b [LANES], ie_md [LANES];
  logic [31:0] ie_addr [LANES];
  logic [63:0] cm_res [LANES], cm_sdata [LANES];
  logic [31:0] cm_addr [LANES];
  logic        fetch_halt, hf_issued, hf_got;
  logic [63:0] hf_res;

  function automatic logic wr_reg(input dec_t d);
    return d.valid && (d.wr_rd || d.is_call);
  endfunction
  function automatic logic [3:0] dst_reg(input dec_t d);
    return d.is_call ? 4'd0 : d.rd;
  endfunction
  function automatic logic side_effect(input dec_t d);
    return d.valid && (d.is_store || d.is_jmp || d.is_call);
  endfunction

  // ---------------- IF ----------------
  dec_t        if_dec [LANES];
  logic [3:0]  rf_ra [LANES], rf_rb [LANES], rf_wa [LANES];
  logic [63:0] rf_da [LANES], rf_db [LANES], rf_wd [LANES], rf_args [6];
  logic        rf_we [LANES];
  logic        if_exit, if_exit_only, if_exit_param, older_side, early_fire;
  logic [2:0]  if_exit_act;

  always_comb begin
    if_exit = 1'b0; if_exit_only = 1'b1; if_exit_param = 1'b0; if_exit_act = '0;
    for (int l = 0; l < LANES; l++) begin
      if_dec[l] = decode(row[64*l +: 64], (l < LANES-1) ? row[64*(l+1)+32 +: 32] : 32'd0);
      rf_ra[l]  = if_dec[l].ra;
      rf_rb[l]  = if_dec[l].rb;
      if (if_dec[l].is_exit) begin
        if_exit       = 1'b1;
        if_exit_param = if_dec[l].exit_param;
        if_exit_act   = if_dec[l].imm[2:0];
      end else if (if_dec[l].valid) if_exit_only = 1'b0;
    end
    older_side = 1'b0;
    for (int l = 0; l < LANES; l++)
      older_side |= (id_v && side_effect(id_dec[l])) || (ie_v && side_effect(ie_dec[l])) ||
                    (cm_v && side_effect(cm_dec[l]));
  end

  hxdp_regfile #(.STACK_BYTES(STACK_BYTES)) u_rf (
    .clk, .rst_n, .init(start && !running),
    .ra(rf_ra), .rb(rf_rb), .da(rf_da), .db(rf_db),
    .we(rf_we), .wa(rf_wa), .wd(rf_wd), .args(rf_args)
  );

  // ---------------- ID ----------------
  logic [63:0] a_f [LANES], b_f [LANES], ie_res [LANES];
  logic [31:0] id_addr [LANES];
  logic [15:0] st_raddr [LANES];
  logic [63:0] st_rdata [LANES], id_md [LANES];
  logic        stall_pkt, fwd_any;

  function automatic logic [63:0] fwd(input logic [3:0] r, input logic [63:0] v, input int l);
    logic [63:0] o;
    o = v;
    if (cm_v && wr_reg(cm_dec[l]) && dst_reg(cm_dec[l]) == r) o = cm_res[l];
    if (ie_v && wr_reg(ie_dec[l]) && dst_reg(ie_dec[l]) == r) o = ie_res[l];
    return o;
  endfunction

  always_comb begin
    fwd_any = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      a_f[l] = fwd(id_dec[l].ra, id_a[l], l);
      b_f[l] = fwd(id_dec[l].rb, id_b[l], l);
      if (id_v && id_dec[l].valid && (a_f[l] != id_a[l] || b_f[l] != id_b[l])) fwd_any = 1'b1;
      id_addr[l]    = a_f[l][31:0] + {{16{id_dec[l].off[15]}}, id_dec[l].off};
      st_raddr[l]   = 16'(id_addr[l] - STACK_BASE);
      dbus_rd[l].valid = id_v && id_dec[l].valid && id_dec[l].is_load;
      dbus_rd[l].addr  = id_addr[l];
      dbus_rd[l].size  = id_dec[l].msize;
    end
    stall_pkt = id_v && aps_pending;
  end

  // pre-fetched memory value, selected by address region
  always_comb
    for (int l = 0; l < LANES; l++)
      unique case (id_addr[l][31:28])
        RGN_STACK:        id_md[l] = st_rdata[l];
        RGN_CTX, RGN_PKT: id_md[l] = aps_rdata[l];
        RGN_MAP:          id_md[l] = map_rdata[l];
        default:          id_md[l] = '0;
      endcase

  // ---------------- IE ----------------
  logic [63:0] opb [LANES], alu_y [LANES], ie_sdata [LANES];
  logic        taken [LANES];
  logic        br_taken, has_call, stall_hf, stall;
  logic [15:0] br_target;
  logic [2:0]  n_taken;

  for (genvar l = 0; l < LANES; l++) begin : g_alu
    hxdp_alu u_alu (.op(ie_dec[l].aop), .alu64(ie_dec[l].alu64), .swap_be(ie_dec[l].swap_be),
                    .a(ie_a[l]), .b(opb[l]), .y(alu_y[l]));
  end

  function automatic logic cond(input jmp_op_e op, input logic [63:0] x, input logic [63:0] y);
    unique case (op)
      J_JA:   return 1'b1;
      J_JEQ:  return x == y;
      J_JGT:  return x > y;
      J_JGE:  return x >= y;
      J_JSET: return (x & y) != 0;
      J_JNE:  return x != y;
      J_JSGT: return $signed(x) > $signed(y);
      J_JSGE: return $signed(x) >= $signed(y);
      J_JLT:  return x < y;
      J_JLE:  return x <= y;
      J_JSLT: return $signed(x) < $signed(y);
      J_JSLE: return $signed(x) <= $signed(y);
      default: return 1'b0;
    endcase
  endfunction

  always_comb begin
    br_taken = 1'b0; br_target = '0; has_call = 1'b0; n_taken = '0;
    for (int l = LANES-1; l >= 0; l--) begin
      logic [63:0] x, y, ld;
      opb[l] = ie_dec[l].use_imm ? ie_dec[l].imm : ie_b[l];
      ld     = load_le(ie_md[l], ie_dec[l].msize);
      if (ie_dec[l].is_ldimm)     ie_res[l] = ie_dec[l].imm;
      else if (ie_dec[l].is_call) ie_res[l] = hf_rsp.done ? hf_rsp.r0 : hf_res;
      else if (ie_dec[l].is_load) ie_res[l] = ld;
      else                        ie_res[l] = alu_y[l];
      if (ie_dec[l].is_xadd) ie_sdata[l] = ld + ie_b[l];
      else                   ie_sdata[l] = ie_dec[l].st_imm ? ie_dec[l].imm : ie_b[l];
      x = ie_dec[l].jmp32 ? {32'd0, ie_a[l][31:0]} : ie_a[l];
      y = ie_dec[l].jmp32 ? {32'd0, opb[l][31:0]}  : opb[l];
      if (ie_dec[l].jmp32 && ie_dec[l].jop inside {J_JSGT, J_JSGE, J_JSLT, J_JSLE}) begin
        x = {{32{ie_a[l][31]}}, ie_a[l][31:0]};
        y = {{32{opb[l][31]}}, opb[l][31:0]};
      end
      taken[l] = ie_v && ie_dec[l].valid && ie_dec[l].is_jmp && cond(ie_dec[l].jop, x, y);
      if (taken[l]) begin                 // lowest lane overwrites: highest priority
        br_taken  = 1'b1;
        br_target = ie_pc + 16'd1 + ie_dec[l].off;
        n_taken   = n_taken + 3'd1;
      end
      if (ie_v && ie_dec[l].valid && ie_dec[l].is_call) has_call = 1'b1;
    end
    stall_hf = has_call && !(hf_got || hf_rsp.done);
    stall    = running && (stall_pkt || stall_hf);
    hf_req.valid = running && has_call && !hf_issued;
    hf_req.id    = '0;
    for (int l = 0; l < LANES; l++) if (ie_dec[l].is_call) hf_req.id = ie_dec[l].imm[31:0];
    hf_req.r1 = rf_args[1]; hf_req.r2 = rf_args[2]; hf_req.r3 = rf_args[3];
    hf_req.r4 = rf_args[4]; hf_req.r5 = rf_args[5];
  end

  // ---------------- commit ----------------
  logic [15:0] st_waddr [LANES];
  logic [3:0]  cm_wsize [LANES];
  logic        st_we [LANES];
  logic        cm_exit, cm_exit_param;
  logic [2:0]  cm_exit_act;

  always_comb begin
    cm_exit = 1'b0; cm_exit_param = 1'b0; cm_exit_act = '0;
    for (int l = 0; l < LANES; l++) begin
      rf_we[l] = cm_v && wr_reg(cm_dec[l]);
      rf_wa[l] = dst_reg(cm_dec[l]);
      rf_wd[l] = cm_res[l];
      dbus_wr[l].valid = cm_v && cm_dec[l].valid && cm_dec[l].is_store;
      dbus_wr[l].addr  = cm_addr[l];
      dbus_wr[l].size  = cm_dec[l].msize;
      dbus_wr[l].data  = cm_sdata[l];
      st_we[l]    = dbus_wr[l].valid && cm_addr[l][31:28] == RGN_STACK;
      st_waddr[l] = 16'(cm_addr[l] - STACK_BASE);
      if (cm_v && cm_dec[l].is_exit) begin
        cm_exit       = 1'b1;
        cm_exit_param = cm_dec[l].exit_param;
        cm_exit_act   = cm_dec[l].imm[2:0];
      end
    end
  end

  hxdp_stack #(.BYTES(STACK_BYTES)) u_stack (
    .clk, .rst_n, .clear(start && !running),
    .raddr(st_raddr), .rdata(st_rdata),
    .we(st_we), .waddr(st_waddr), .wsize(cm_wsize), .wdata(cm_sdata),
    .haddr(hf_st_addr), .hdata(hf_st_data)
  );

  always_comb for (int l = 0; l < LANES; l++) cm_wsize[l] = cm_dec[l].msize;

  // exit decision
  assign early_fire  = running && !stall && !br_taken && !fetch_halt && if_exit && if_exit_only &&
                       if_exit_param && !older_side;
  assign exit_valid  = early_fire || (running && cm_exit);
  assign exit_action = early_fire ? if_exit_act
                     : (cm_exit_param ? cm_exit_act : rf_args[0][2:0]);

  assign ev_fwd          = running && !stall && fwd_any;
  assign ev_branch       = running && !stall && br_taken;
  assign ev_multi_branch = running && !stall && (n_taken > 3'd1);
  assign ev_early_exit   = early_fire;
  assign ev_stall_pkt    = running && stall_pkt;
  assign ev_stall_hf     = running && stall_hf;

  // ---------------- sequential ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; pc <= '0; id_v <= 1'b0; ie_v <= 1'b0; cm_v <= 1'b0;
      fetch_halt <= 1'b0; hf_issued <= 1'b0; hf_got <= 1'b0; hf_res <= '0;
      id_pc <= '0; ie_pc <= '0;
      for (int l = 0; l < LANES; l++) begin
        id_dec[l] <= '0; ie_dec[l] <= '0; cm_dec[l] <= '0;
        id_a[l] <= '0; id_b[l] <= '0; ie_a[l] <= '0; ie_b[l] <= '0; ie_md[l] <= '0;
        ie_addr[l] <= '0; cm_res[l] <= '0; cm_sdata[l] <= '0; cm_addr[l] <= '0;
      end
    end else if (!running) begin
      id_v <= 1'b0; ie_v <= 1'b0; cm_v <= 1'b0; fetch_halt <= 1'b0;
      hf_issued <= 1'b0; hf_got <= 1'b0;
      if (start) begin
        running <= 1'b1;
        pc      <= '0;
      end
    end else if (exit_valid) begin
      running <= 1'b0;
      id_v <= 1'b0; ie_v <= 1'b0; cm_v <= 1'b0;
    end else begin
      // helper call bookkeeping
      if (hf_req.valid) hf_issued <= 1'b1;
      if (hf_rsp.done) begin hf_got <= 1'b1; hf_res <= hf_rsp.r0; end
      if (stall) begin
        cm_v <= 1'b0;
        for (int l = 0; l < LANES; l++) begin id_a[l] <= a_f[l]; id_b[l] <= b_f[l]; end
      end else begin
        hf_issued <= 1'b0;
        hf_got    <= 1'b0;
        // commit <= IE
        cm_v <= ie_v;
        for (int l = 0; l < LANES; l++) begin
          cm_dec[l]   <= ie_dec[l];
          cm_res[l]   <= ie_res[l];
          cm_sdata[l] <= ie_sdata[l];
          cm_addr[l]  <= ie_addr[l];
        end
        // IE <= ID
        ie_v  <= id_v && !br_taken;
        ie_pc <= id_pc;
        for (int l = 0; l < LANES; l++) begin
          ie_dec[l]  <= id_dec[l];
          ie_a[l]    <= a_f[l];
          ie_b[l]    <= b_f[l];
          ie_md[l]   <= id_md[l];
          ie_addr[l] <= id_addr[l];
        end
        // ID <= IF
        if (br_taken) begin
          pc         <= br_target;
          id_v       <= 1'b0;
          fetch_halt <= 1'b0;
        end else if (fetch_halt || (if_exit && if_exit_only && if_exit_param)) begin
          id_v <= 1'b0;                    // bubble: halted, or early exit waiting
        end else begin
          id_v  <= 1'b1;
          id_pc <= pc;
          pc    <= pc + 16'd1;
          if (if_exit) fetch_halt <= 1'b1;
          for (int l = 0; l < LANES; l++) begin
            id_dec[l] <= if_dec[l];
            id_a[l]   <= rf_da[l];
            id_b[l]   <= rf_db[l];
          end
        end
      end
    end
  end

  // Only one helper call per VLIW row (compiler constraint).
  assert property (@(posedge clk) disable iff (!rst_n)
    ie_v |-> $countones({ie_dec[0].is_call, ie_dec[1].is_call, ie_dec[2].is_call, ie_dec[3].is_call}) <= 1);

endmodule
