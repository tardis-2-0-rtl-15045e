// llc_slice: one bank of the shared last-level cache (LLC) in a Tardis tile.
//
// The LLC is the home of every line whose address mod N_TILES equals this
// tile's id. A line here is either shared (S: the LLC copy is the master and
// its rts is the end of every lease handed out) or owned (exclusive or
// modified in the L1 of `owner`). Tardis keeps no sharer list: a write never
// waits for readers, it is simply ordered after the largest rts.
// Each line also holds an E-bit (line is probably private) and the lease
// predictor's current lease. Requests are served one at a time:
//   REQ_SH    shared line: E-bit set -> exclusive copy (RSP_EX) and the
//             requester becomes owner; else rts = max(rts, lts + lease),
//             RSP_SH with data, wts, rts and lease.
//   REQ_RENEW same wts as the LLC copy -> rts extended, RSP_RENEW only;
//             otherwise the newer version is sent as RSP_SH.
//   REQ_CHECK same wts -> RSP_CHECK, rts untouched; otherwise RSP_SH.
//   REQ_EX    ownership returns at once with data, wts, rts (no
//             invalidation); the lease drops to its minimum.
//   REQ_WB    from the owner: data and timestamps written back, line shared,
//             E-bit set; from anyone else (ownership has moved): only acked.
// If another L1 owns the line, a FWD_SH (downgrade; rts extended to
// lts + lease) or FWD_EX (give up) is sent to it first and its UP_DATA
// answer updates the line.
// Misses pick an invalid way, else a way not owned by an L1, else recall the
// owned victim with FWD_EX. An evicted line's rts is folded into the memory
// timestamp mts, and a line filled from memory starts with wts = rts = mts
// and the E-bit set, so no old lease can overlap a version stored in memory.
//
// Interface: request input and up (forward answers) input, down output, all
// valid/ready with msg_t; a memory port (mem_req valid/ready, mem_resp_valid
// one cycle) to the memory controller. Timing: a hit takes LOOKUP, PROC and
// one cycle in the down register, so the answer leaves 3 cycles after the
// request is taken.
//
// From the paper: timestamps per line, leases from the lease predictor,
// no invalidations, E-bit set on memory fill and on writeback and cleared
// when a load caches the line, forward/downgrade extending rts (Figs. 1, 2).
// Own choices: blocking one-request bank, round-robin victim avoiding owned
// lines, recall of owned victims, the memory timestamp mts (taken from the
// original Tardis protocol), and E granted only on REQ_SH.
module llc_slice
  import tardis_pkg::*;
#(
  parameter int unsigned N_TILES = 64,
  parameter int unsigned SETS    = 512,   // 256 KB / 64 B / 8 ways
  parameter int unsigned WAYS    = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  node_t    node_id,
  input  logic     req_in_valid,
  input  msg_t     req_in,
  output logic     req_in_ready,
  input  logic     up_in_valid,
  input  msg_t     up_in,
  output logic     up_in_ready,
  output logic     down_out_valid,
  output msg_t     down_out,
  input  logic     down_out_ready,
  output logic     mem_req_valid,
  output mem_req_t mem_req,
  input  logic     mem_req_ready,
  input  logic     mem_resp_valid,
  input  line_t    mem_resp_data,
  output logic     ev_e_grant,
  output logic     ev_fwd,
  output logic     ev_lease_double,
  output logic     ev_fill,
  output logic     ev_recall
);
  localparam int unsigned SB    = $clog2(SETS);
  localparam int unsigned NB    = $clog2(N_TILES);
  localparam int unsigned WB    = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - SB - NB;

  typedef logic [SB-1:0]    set_t;
  typedef logic [WB-1:0]    way_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef struct packed {
    tag_t   tag;
    node_t  owner;
    ts_t    wts;
    ts_t    rts;
    lease_t lease;
    line_t  data;
  } llc_line_t;

  function automatic set_t set_of(laddr_t a);
    return set_t'(a >> NB);
  endfunction
  function automatic tag_t tag_of(laddr_t a);
    return tag_t'(a >> (NB + SB));
  endfunction
  function automatic laddr_t laddr_of(tag_t t, set_t s);
    return (laddr_t'(t) << (NB + SB)) | (laddr_t'(s) << NB) | laddr_t'(node_id);
  endfunction

  logic      vld_q  [SETS][WAYS];
  logic      own_q  [SETS][WAYS];
  logic      ebit_q [SETS][WAYS];
  logic      dirty_q[SETS][WAYS];
  llc_line_t ln_q   [SETS][WAYS];
  way_t      rr_q   [SETS];
  ts_t       mts;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_PROC, S_SEND, S_FWD_WAIT, S_RECALL_WAIT,
    S_MEM_WR, S_MEM_RD, S_MEM_WAIT
  } state_e;
  state_e state, after_send;
  msg_t   rq;          // request being served
  way_t   way;         // its way
  msg_t   dq;          // down message being sent

  set_t   r_set;
  assign  r_set = set_of(rq.laddr);

  // ---- lookup and victim choice ---------------------------------------------
  logic hit;
  way_t hit_way, victim;
  logic found;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (vld_q[r_set][w] && ln_q[r_set][w].tag == tag_of(rq.laddr)) begin
        hit = 1'b1; hit_way = way_t'(w);
      end
    // Invalid way first, else the first unowned way from the round-robin
    // pointer on, else the pointer's way.
    victim = rr_q[r_set];
    found  = 1'b0;
    for (int unsigned k = 0; k < WAYS; k++) begin
      way_t w;
      w = way_t'(rr_q[r_set] + way_t'(k));
      if (!found && !own_q[r_set][w]) begin victim = w; found = 1'b1; end
    end
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (!vld_q[r_set][w]) victim = way_t'(w);
  end

  // ---- lease predictor ------------------------------------------------------
  lp_req_e   lp_type;
  lease_t    lp_new;
  ts_t       lp_ticks;
  logic      lp_doubled;
  llc_line_t cur;
  assign cur = ln_q[r_set][way];
  always_comb begin
    case (rq.mtype)
      REQ_EX:    lp_type = LP_WRITE;
      REQ_RENEW: lp_type = LP_RENEW;
      default:   lp_type = LP_READ;
    endcase
  end
  lease_predictor u_lp (
    .req_type(lp_type), .req_lease(rq.lease), .cur_lease(cur.lease),
    .new_lease(lp_new), .lease_ticks(lp_ticks), .doubled(lp_doubled)
  );

  // ---- control ---------------------------------------------------------------
  assign req_in_ready   = (state == S_IDLE);
  assign up_in_ready    = (state == S_FWD_WAIT) || (state == S_RECALL_WAIT);
  assign down_out_valid = (state == S_SEND);
  assign down_out       = dq;
  always_comb begin
    mem_req_valid = (state == S_MEM_WR) || (state == S_MEM_RD);
    mem_req.we    = (state == S_MEM_WR);
    mem_req.laddr = (state == S_MEM_WR) ? laddr_of(cur.tag, r_set) : rq.laddr;
    mem_req.data  = cur.data;
  end

  function automatic msg_t reply(msg_type_e t, node_t from, msg_t r, llc_line_t l);
    msg_t m;
    m = '0;
    m.mtype = t;
    m.src   = from;
    m.dst   = r.src;
    m.laddr = r.laddr;
    m.wts   = l.wts;
    m.rts   = l.rts;
    m.lease = l.lease;
    m.data  = l.data;
    return m;
  endfunction

  // Line update and next message, computed for S_PROC and the two wait states.
  llc_line_t nl;
  logic      n_own, n_ebit, n_dirty, n_wr;
  msg_t      n_msg;
  state_e    n_state, n_after;
  logic      owned_other;
  ts_t       want_rts;

  always_comb begin
    nl = cur; n_own = own_q[r_set][way]; n_ebit = ebit_q[r_set][way];
    n_dirty = dirty_q[r_set][way]; n_wr = 1'b0;
    n_msg = '0; n_state = state; n_after = S_IDLE;
    ev_e_grant = 1'b0; ev_fwd = 1'b0; ev_lease_double = 1'b0;
    owned_other = own_q[r_set][way] && (cur.owner != rq.src);
    want_rts = rq.ts + lp_ticks;
    if (state == S_PROC) begin
      n_wr = 1'b1;
      n_state = S_SEND;
      if (rq.mtype == REQ_WB) begin
        if (own_q[r_set][way] && cur.owner == rq.src) begin
          nl.data = rq.data; nl.wts = rq.wts; nl.rts = ts_max(cur.rts, rq.rts);
          n_dirty = dirty_q[r_set][way] | rq.dirty;
          n_own = 1'b0; n_ebit = 1'b1;
        end
        n_msg = reply(RSP_WB_ACK, node_id, rq, nl);
      end else if (owned_other) begin
        // Ask the owner first.
        if (rq.mtype != REQ_EX) begin
          nl.lease = lp_new;
          ev_lease_double = lp_doubled;
        end
        n_msg = reply((rq.mtype == REQ_EX) ? FWD_EX : FWD_SH, node_id, rq, cur);
        n_msg.dst = cur.owner;
        n_msg.ts  = want_rts;
        n_after = S_FWD_WAIT;
        ev_fwd = 1'b1;
      end else begin
        nl.lease = lp_new;
        ev_lease_double = lp_doubled;
        case (rq.mtype)
          REQ_EX: begin
            n_own = 1'b1; nl.owner = rq.src; n_ebit = 1'b0;
            n_msg = reply(RSP_EX, node_id, rq, nl);
          end
          REQ_SH: begin
            if (ebit_q[r_set][way] && !own_q[r_set][way]) begin
              n_own = 1'b1; nl.owner = rq.src; n_ebit = 1'b0;
              n_msg = reply(RSP_EX, node_id, rq, nl);
              ev_e_grant = 1'b1;
            end else begin
              nl.rts = ts_max(cur.rts, want_rts); n_ebit = 1'b0;
              n_msg = reply(RSP_SH, node_id, rq, nl);
            end
          end
          REQ_RENEW: begin
            nl.rts = ts_max(cur.rts, want_rts); n_ebit = 1'b0;
            n_msg = reply((rq.wts == cur.wts) ? RSP_RENEW : RSP_SH, node_id, rq, nl);
          end
          default: begin   // REQ_CHECK
            if (rq.wts == cur.wts) begin
              nl.lease = cur.lease;
              ev_lease_double = 1'b0;
              n_msg = reply(RSP_CHECK, node_id, rq, cur);
            end else begin
              nl.rts = ts_max(cur.rts, want_rts); n_ebit = 1'b0;
              n_msg = reply(RSP_SH, node_id, rq, nl);
            end
          end
        endcase
      end
    end else if (state == S_FWD_WAIT && up_in_valid) begin
      n_wr = 1'b1;
      n_state = S_SEND;
      if (up_in.mtype == UP_DATA) begin
        nl.data = up_in.data; nl.wts = up_in.wts; nl.rts = ts_max(cur.rts, up_in.rts);
        n_dirty = dirty_q[r_set][way] | up_in.dirty;
      end
      n_own = 1'b0;
      if (rq.mtype == REQ_EX) begin
        n_own = 1'b1; nl.owner = rq.src; n_ebit = 1'b0; nl.lease = LEASE_MIN_CODE;
        n_msg = reply(RSP_EX, node_id, rq, nl);
      end else begin
        nl.rts = ts_max(nl.rts, rq.ts + lease_value(cur.lease));
        n_ebit = 1'b0;
        n_msg = reply(RSP_SH, node_id, rq, nl);
      end
    end else if (state == S_RECALL_WAIT && up_in_valid) begin
      n_wr = 1'b1;
      if (up_in.mtype == UP_DATA) begin
        nl.data = up_in.data; nl.wts = up_in.wts; nl.rts = ts_max(cur.rts, up_in.rts);
        n_dirty = dirty_q[r_set][way] | up_in.dirty;
      end
      n_own = 1'b0;
      n_state = n_dirty ? S_MEM_WR : S_MEM_RD;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; after_send <= S_IDLE;
      rq <= '0; way <= '0; dq <= '0; mts <= '0;
      ev_fill <= 1'b0; ev_recall <= 1'b0;
      for (int unsigned s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int unsigned w = 0; w < WAYS; w++) begin
          vld_q[s][w] <= 1'b0; own_q[s][w] <= 1'b0;
          ebit_q[s][w] <= 1'b0; dirty_q[s][w] <= 1'b0;
        end
      end
    end else begin
      ev_fill <= 1'b0; ev_recall <= 1'b0;
      if (n_wr) begin
        own_q[r_set][way] <= n_own;
        ebit_q[r_set][way] <= n_ebit;
        dirty_q[r_set][way] <= n_dirty;
      end
      if (state == S_RECALL_WAIT && up_in_valid) mts <= ts_max(mts, nl.rts);
      case (state)
        S_IDLE: if (req_in_valid) begin rq <= req_in; state <= S_LOOKUP; end
        S_LOOKUP: begin
          if (hit) begin
            way <= hit_way; state <= S_PROC;
          end else if (rq.mtype == REQ_WB) begin
            dq <= reply(RSP_WB_ACK, node_id, rq, ln_q[r_set][0]);
            after_send <= S_IDLE; state <= S_SEND;
          end else begin
            way <= victim;
            rr_q[r_set] <= victim + 1'b1;
            if (vld_q[r_set][victim] && own_q[r_set][victim]) begin
              dq <= '0;
              dq.mtype <= FWD_EX;
              dq.src   <= node_id;
              dq.dst   <= ln_q[r_set][victim].owner;
              dq.laddr <= laddr_of(ln_q[r_set][victim].tag, r_set);
              after_send <= S_RECALL_WAIT; state <= S_SEND;
              ev_recall <= 1'b1;
            end else if (vld_q[r_set][victim]) begin
              mts <= ts_max(mts, ln_q[r_set][victim].rts);
              state <= dirty_q[r_set][victim] ? S_MEM_WR : S_MEM_RD;
            end else begin
              state <= S_MEM_RD;
            end
          end
        end
        S_PROC, S_FWD_WAIT: if (n_state == S_SEND) begin
          dq <= n_msg; after_send <= n_after; state <= S_SEND;
        end
        S_RECALL_WAIT: if (up_in_valid) state <= n_state;
        S_SEND: if (down_out_ready) state <= after_send;
        S_MEM_WR: if (mem_req_ready) state <= S_MEM_RD;
        S_MEM_RD: if (mem_req_ready) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_resp_valid) begin
          vld_q[r_set][way] <= 1'b1; own_q[r_set][way] <= 1'b0;
          ebit_q[r_set][way] <= 1'b1; dirty_q[r_set][way] <= 1'b0;
          ev_fill <= 1'b1;
          state <= S_PROC;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (n_wr) ln_q[r_set][way] <= nl;
    if (state == S_MEM_WAIT && mem_resp_valid) begin
      ln_q[r_set][way].tag   <= tag_of(rq.laddr);
      ln_q[r_set][way].owner <= '0;
      ln_q[r_set][way].wts   <= mts;
      ln_q[r_set][way].rts   <= mts;
      ln_q[r_set][way].lease <= LEASE_MIN_CODE;
      ln_q[r_set][way].data  <= mem_resp_data;
    end
  end

  // The bank never answers a request it has not taken.
  assert property (@(posedge clk) disable iff (!rst_n)
    down_out_valid |-> (dq.mtype inside {RSP_SH, RSP_EX, RSP_RENEW, RSP_CHECK,
                                         RSP_WB_ACK, FWD_SH, FWD_EX}));
endmodule
