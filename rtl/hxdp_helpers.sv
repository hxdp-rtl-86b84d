// hxdp_helpers: the helper functions sub-module.
//
// Sephirot calls a helper by placing the function id and r1..r5 on the
// helper bus (req.valid for one cycle); the module answers with rsp.done
// for one cycle and the return value for r0. Only one call can be in
// flight, which is why only one lane per VLIW row may call a helper.
// A call runs through a short state machine:
//   ARG1  read 32 bytes at the first pointer argument from the stack
//         (map key, or the csum_diff "from" buffer),
//   ARG2  read 32 bytes at the second pointer (update value, "to" buffer),
//   EXEC  do the operation: structured map access via the maps module,
//         checksum arithmetic, packet head/tail adjustment via the APS,
//         redirect port selection, and register r0 and done.
// rsp.done is high in the fourth cycle after the request, whatever the key
// size (up to 32 bytes), matching the constant map access time the paper
// reports for keys up to 32 bytes.
// Supported functions (Linux numbering): map_lookup_elem(1),
// map_update_elem(2), map_delete_elem(3), redirect(23), csum_diff(28),
// xdp_adjust_head(44), redirect_map(51), xdp_adjust_tail(65). Others
// return -1. The redirect target is held until the next program start.
// Pointer arguments must point into the stack; sizes above 32 bytes are
// refused. The set of functions, the calling convention and the direct
// maps connection follow the paper; the state machine and the choice of
// functions are this design's.
// Lint reports rst_n as both synchronous and asynchronous: the
// asynchronous use is the flip-flop reset, the other is only the
// `disable iff` of the concurrent assertion below, so the logic is unaffected.
module hxdp_helpers
  import hxdp_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,        // program start: clear redirect state
  input  hf_req_t       req,
  output hf_rsp_t       rsp,
  // stack wide read
  output logic [15:0]   st_addr,
  input  logic [255:0]  st_data,
  // maps structured access
  output logic [1:0]    hp_op,
  output logic [7:0]    hp_map,
  output logic [255:0]  hp_key,
  output logic [255:0]  hp_val,
  input  logic [31:0]   hp_ptr,
  input  logic [63:0]   hp_ret,
  input  logic [63:0]   hp_rdval,
  // packet adjustment in the APS
  output logic          adj_head,
  output logic          adj_tail,
  output logic signed [31:0] adj_delta,
  input  logic          adj_ok,
  // redirect decision
  output logic          redir_valid,
  output logic [31:0]   redir_port,
  output logic          busy
);

  typedef enum logic [1:0] {S_IDLE, S_ARG1, S_ARG2, S_EXEC} state_e;

  state_e       st;
  hf_req_t      a;
  logic [255:0] buf1, buf2;
  logic [63:0]  res;
  logic [63:0]  csum;

  assign busy = (st != S_IDLE);

  function automatic logic [15:0] soff(input logic [63:0] p);
    return 16'(p[31:0] - STACK_BASE);
  endfunction

  always_comb begin
    st_addr = (st == S_ARG1) ? soff((a.id == HF_CSUM_DIFF) ? a.r1 : a.r2)
                             : soff(a.r3);
    hp_map = a.r1[7:0];
    hp_key = buf1;
    hp_val = buf2;
    hp_op  = 2'd0;
    if (st == S_EXEC)
      unique case (a.id)
        HF_MAP_LOOKUP, HF_REDIRECT_MAP: hp_op = 2'd1;
        HF_MAP_UPDATE:                  hp_op = 2'd2;
        HF_MAP_DELETE:                  hp_op = 2'd3;
        default:                        hp_op = 2'd0;
      endcase
    // redirect_map's key is the u32 in r2, not a pointer
    if (a.id == HF_REDIRECT_MAP) hp_key = {224'd0, a.r2[31:0]};
    adj_head  = (st == S_EXEC) && (a.id == HF_ADJUST_HEAD);
    adj_tail  = (st == S_EXEC) && (a.id == HF_ADJUST_TAIL);
    adj_delta = a.r2[31:0];
    // csum_diff: one's complement sum of ~from words, to words and the seed
    begin
      logic [63:0] s;
      s = {32'd0, a.r5[31:0]};
      for (int w = 0; w < 8; w++) begin
        if (32'(w) < a.r2[31:0] / 4) s += {32'd0, ~buf1[32*w +: 32]};
        if (32'(w) < a.r4[31:0] / 4) s += {32'd0, buf2[32*w +: 32]};
      end
      s    = {32'd0, s[31:0]} + {32'd0, s[63:32]};
      s    = {32'd0, s[31:0]} + {32'd0, s[63:32]};
      csum = {32'd0, s[31:0]};
    end
    unique case (a.id)
      HF_MAP_LOOKUP:                res = {32'd0, hp_ptr};
      HF_MAP_UPDATE, HF_MAP_DELETE: res = hp_ret;
      HF_REDIRECT:                  res = 64'(XDP_REDIRECT);
      HF_REDIRECT_MAP:              res = (hp_ptr != 32'd0) ? 64'(XDP_REDIRECT) : {61'd0, a.r3[2:0]};
      HF_CSUM_DIFF:
        res = (a.r2 > 64'd32 || a.r4 > 64'd32 || a.r2[1:0] != 2'd0 || a.r4[1:0] != 2'd0) ? '1 : csum;
      HF_ADJUST_HEAD, HF_ADJUST_TAIL: res = adj_ok ? 64'd0 : '1;
      default:                      res = '1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; a <= '0; buf1 <= '0; buf2 <= '0;
      rsp <= '0; redir_valid <= 1'b0; redir_port <= '0;
    end else begin
      rsp.done <= 1'b0;
      if (start) begin
        redir_valid <= 1'b0;
        redir_port  <= '0;
      end
      unique case (st)
        S_IDLE: if (req.valid) begin
          a  <= req;
          st <= S_ARG1;
        end
        S_ARG1: begin buf1 <= st_data; st <= S_ARG2; end
        S_ARG2: begin buf2 <= st_data; st <= S_EXEC; end
        S_EXEC: begin
          rsp.done <= 1'b1;
          rsp.r0   <= res;
          if (a.id == HF_REDIRECT || (a.id == HF_REDIRECT_MAP && hp_ptr != 32'd0)) begin
            redir_valid <= 1'b1;
            redir_port  <= (a.id == HF_REDIRECT) ? a.r1[31:0] : hp_rdval[31:0];
          end
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) req.valid |-> st == S_IDLE);

endmodule
