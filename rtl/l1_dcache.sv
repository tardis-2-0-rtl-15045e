// l1_dcache: private L1 data cache of one Tardis tile, TSO + MESI.
//
// Every line carries, besides its tag and data, a state (I, S, E, M), a write
// timestamp wts, a read timestamp rts and a 2-bit lease code. A shared (S)
// copy is valid only for logical times wts..rts; instead of being invalidated
// by writers, it simply expires once the core's lts moves past rts.
//
// Loads (core lts given by the timestamp manager):
//   M (dirty)  hit; under TSO the load may commit below wts, lts unchanged.
//   E          hit; lts = max(lts, wts); if lts > rts the line's rts is raised
//              to lts locally (an exclusive line never expires).
//   S          lts' = max(lts, wts). If lts' <= rts the load hits, after
//              asking the livelock detector; if it asks for a check, a
//              REQ_CHECK is sent and the load waits for the answer. If
//              lts' > rts the copy expired and a REQ_RENEW (carrying wts and
//              the copy's lease) is sent.
//   miss       REQ_SH with lts; the answer is RSP_SH or, for likely-private
//              data, RSP_EX (E state).
// Stores (from the store buffer) need E or M; otherwise REQ_EX is sent and
// ownership returns at once (no invalidations in Tardis). The store commits at
// ts = max(sts, lts, rts + 1), after every lease handed out on the old
// version; then wts = rts = ts, the line becomes M and sts = ts.
// Replacing an E/M line moves it to a one-entry writeback buffer and sends
// REQ_WB; the entry stays until RSP_WB_ACK so that a forwarded request that
// crosses the writeback is still answered with data. S lines are dropped
// silently. Forwarded requests from the LLC (FWD_SH: extend rts to the given
// timestamp, go to S, send data; FWD_EX: send data, go to I) are served in any
// state, which keeps the protocol free of deadlock while a miss is pending.
//
// Interface: core side valid/ready in, one resp_valid pulse per request out,
// one request at a time. Three network ports (valid/ready): requests out,
// down (responses and forwards from the LLC) in, up (answers to forwards)
// out. Home LLC slice of a line = line address mod N_TILES.
// Timing: a hit completes in one cycle after acceptance (resp_valid is
// registered); a miss adds the network round trip.
//
// From the paper: the timestamps per line, the TSO load/store rules, the
// dirty-line rule, MESI with exclusive lines never expiring, renew and check
// requests, lease sent with renewals, downgrade extending rts (Figs. 1, 2).
// Own choices: blocking cache with one miss, no speculative load past an
// expired line (the renewal is waited for), round-robin replacement, the
// writeback buffer, single-flit messages.
module l1_dcache
  import tardis_pkg::*;
#(
  parameter int unsigned N_TILES = 64,
  parameter int unsigned SETS    = 128,   // 32 KB / 64 B / 4 ways
  parameter int unsigned WAYS    = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  node_t   node_id,
  // core side (from the load/store unit)
  input  logic    req_valid,
  input  mem_op_e req_op,
  input  waddr_t  req_addr,
  input  word_t   req_wdata,
  output logic    req_ready,
  output logic    resp_valid,
  output word_t   resp_rdata,
  // timestamps
  input  ts_t     lts,
  input  ts_t     sts,
  output logic    ld_upd,
  output ts_t     ld_lts,
  output logic    st_upd,
  output ts_t     st_ts,
  // livelock detector
  output logic    ll_query_valid,
  output laddr_t  ll_query_laddr,
  input  logic    ll_check,
  output logic    ll_resp_valid,
  output logic    ll_resp_updated,
  // network
  output logic    req_out_valid,
  output msg_t    req_out,
  input  logic    req_out_ready,
  input  logic    down_in_valid,
  input  msg_t    down_in,
  output logic    down_in_ready,
  output logic    up_out_valid,
  output msg_t    up_out,
  input  logic    up_out_ready,
  // events
  output logic    ev_renew,
  output logic    ev_check,
  output logic    ev_check_upd,
  output logic    ev_renew_fail,
  output logic    ev_writeback
);
  localparam int unsigned SB = $clog2(SETS);
  localparam int unsigned WB = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = LADDR_W - SB;

  typedef logic [SB-1:0]    set_t;
  typedef logic [WB-1:0]    way_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef struct packed {
    tag_t   tag;
    ts_t    wts;
    ts_t    rts;
    lease_t lease;
    line_t  data;
  } l1_line_t;

  // ---- storage ----------------------------------------------------------------
  l1_state_e st_q  [SETS][WAYS];
  l1_line_t  ln_q  [SETS][WAYS];
  way_t      rr_q  [SETS];

  function automatic set_t set_of(laddr_t a);
    return a[SB-1:0];
  endfunction
  function automatic tag_t tag_of(laddr_t a);
    return a[LADDR_W-1:SB];
  endfunction
  function automatic node_t home_of(laddr_t a);
    return node_t'(a % LADDR_W'(N_TILES));
  endfunction
  function automatic line_t put_word(line_t l, logic [WOFF_W-1:0] w, word_t d);
    line_t r;
    r = l;
    r[w*WORD_BITS +: WORD_BITS] = d;
    return r;
  endfunction
  function automatic word_t get_word(line_t l, logic [WOFF_W-1:0] w);
    return l[w*WORD_BITS +: WORD_BITS];
  endfunction

  // ---- pending request ------------------------------------------------------
  typedef enum logic [2:0] {S_IDLE, S_EVICT, S_SEND, S_WAIT} state_e;
  state_e            state;
  mem_op_e           p_op;
  laddr_t            p_laddr;
  logic [WOFF_W-1:0] p_word;
  word_t             p_wdata;
  way_t              p_way;
  msg_type_e         p_kind;
  ts_t               p_ts;      // lts the request was made at
  ts_t               p_wts;
  lease_t            p_lease;

  // ---- writeback buffer -----------------------------------------------------
  logic   wb_valid, wb_sent, wb_answered, wb_dirty;
  laddr_t wb_laddr;
  ts_t    wb_wts, wb_rts;
  line_t  wb_data;

  // ---- up output register ---------------------------------------------------
  logic up_valid_q;
  msg_t up_q;
  assign up_out_valid = up_valid_q;
  assign up_out       = up_q;

  // ---- lookups --------------------------------------------------------------
  laddr_t            c_laddr;
  logic [WOFF_W-1:0] c_word;
  set_t              c_set;
  logic              c_hit;
  way_t              c_way;
  l1_state_e         c_st;
  l1_line_t          c_ln;
  way_t              c_victim;

  set_t              d_set;
  logic              d_hit;
  way_t              d_way;
  l1_state_e         d_st;
  l1_line_t          d_ln;

  always_comb begin
    c_laddr = req_addr[WADDR_W-1:WOFF_W];
    c_word  = req_addr[WOFF_W-1:0];
    c_set   = set_of(c_laddr);
    c_hit = 1'b0; c_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (st_q[c_set][w] != L1_I && ln_q[c_set][w].tag == tag_of(c_laddr)) begin
        c_hit = 1'b1; c_way = way_t'(w);
      end
    c_st = st_q[c_set][c_way];
    c_ln = ln_q[c_set][c_way];
    c_victim = rr_q[c_set];
    for (int w = int'(WAYS) - 1; w >= 0; w--)
      if (st_q[c_set][w] == L1_I) c_victim = way_t'(w);

    d_set = set_of(down_in.laddr);
    d_hit = 1'b0; d_way = '0;
    for (int unsigned w = 0; w < WAYS; w++)
      if (st_q[d_set][w] != L1_I && ln_q[d_set][w].tag == tag_of(down_in.laddr)) begin
        d_hit = 1'b1; d_way = way_t'(w);
      end
    d_st = st_q[d_set][d_way];
    d_ln = ln_q[d_set][d_way];
  end

  // ---- request message --------------------------------------------------------
  always_comb begin
    req_out = '0;
    req_out.src = node_id;
    if (wb_valid && !wb_sent) begin
      req_out.mtype = REQ_WB;
      req_out.dst   = home_of(wb_laddr);
      req_out.laddr = wb_laddr;
      req_out.wts   = wb_wts;
      req_out.rts   = wb_rts;
      req_out.dirty = wb_dirty;
      req_out.data  = wb_data;
    end else begin
      req_out.mtype = p_kind;
      req_out.dst   = home_of(p_laddr);
      req_out.laddr = p_laddr;
      req_out.ts    = p_ts;
      req_out.wts   = p_wts;
      req_out.lease = p_lease;
    end
    req_out_valid = (wb_valid && !wb_sent) || (state == S_SEND);
  end

  // ---- down messages ------------------------------------------------------------
  wire d_is_fwd = (down_in.mtype == FWD_SH) || (down_in.mtype == FWD_EX);
  wire d_is_ack = (down_in.mtype == RSP_WB_ACK);
  always_comb begin
    if (d_is_fwd)      down_in_ready = !up_valid_q;
    else if (d_is_ack) down_in_ready = 1'b1;
    else               down_in_ready = (state == S_WAIT);
  end
  wire d_fire = down_in_valid && down_in_ready;
  wire d_wb_match = wb_valid && !wb_answered && (wb_laddr == down_in.laddr);

  assign req_ready = (state == S_IDLE) && !down_in_valid;
  wire c_fire = req_valid && req_ready;

  // Livelock detector query: a load hitting a valid S line (kept apart from the
  // main control block so that the detector's combinational answer does not
  // form a loop through it).
  assign ll_query_valid = c_fire && req_op == OP_LD && c_hit && c_st == L1_S &&
                          ts_max(lts, c_ln.wts) <= c_ln.rts;
  assign ll_query_laddr = c_laddr;

  // ---- main control ---------------------------------------------------------
  // Single write port into the line arrays, used by exactly one action per cycle.
  logic      wr_en;
  set_t      wr_set;
  way_t      wr_way;
  l1_state_e wr_st;
  l1_line_t  wr_ln;
  logic      rr_bump;

  state_e            state_n;
  logic              resp_n;
  word_t             rdata_n;
  logic              up_load;
  msg_t              up_n;
  logic              wb_load, wb_clear;
  logic              ld_pend;   // capture a new pending request

  ts_t       nl, sts_new;
  l1_line_t  tmp;

  always_comb begin
    state_n = state;
    wr_en = 1'b0; wr_set = c_set; wr_way = c_way; wr_st = c_st; wr_ln = c_ln;
    rr_bump = 1'b0;
    resp_n = 1'b0; rdata_n = '0;
    up_load = 1'b0; up_n = '0;
    wb_load = 1'b0; wb_clear = 1'b0;
    ld_pend = 1'b0;
    ld_upd = 1'b0; ld_lts = lts;
    st_upd = 1'b0; st_ts = sts;
    ll_resp_valid = 1'b0; ll_resp_updated = 1'b0;
    ev_renew = 1'b0; ev_check = 1'b0; ev_check_upd = 1'b0; ev_renew_fail = 1'b0;
    ev_writeback = 1'b0;
    nl = lts; sts_new = sts; tmp = c_ln;

    if (d_fire && d_is_ack) begin
      wb_clear = 1'b1;
    end else if (d_fire && d_is_fwd) begin
      // Answer a forwarded request from the line or from the writeback buffer.
      up_load = 1'b1;
      up_n.src = node_id;
      up_n.dst = down_in.src;
      up_n.laddr = down_in.laddr;
      if (d_hit && (d_st == L1_E || d_st == L1_M)) begin
        up_n.mtype = UP_DATA;
        up_n.wts   = d_ln.wts;
        up_n.rts   = (down_in.mtype == FWD_SH) ? ts_max(d_ln.rts, down_in.ts) : d_ln.rts;
        up_n.dirty = (d_st == L1_M);
        up_n.data  = d_ln.data;
        wr_en = 1'b1; wr_set = d_set; wr_way = d_way; wr_ln = d_ln;
        wr_ln.rts = up_n.rts;
        wr_st = (down_in.mtype == FWD_SH) ? L1_S : L1_I;
      end else if (d_wb_match) begin
        up_n.mtype = UP_DATA;
        up_n.wts   = wb_wts;
        up_n.rts   = (down_in.mtype == FWD_SH) ? ts_max(wb_rts, down_in.ts) : wb_rts;
        up_n.dirty = wb_dirty;
        up_n.data  = wb_data;
      end else begin
        up_n.mtype = UP_NODATA;
      end
    end else if (d_fire) begin
      // Response to the pending request (state is S_WAIT).
      wr_en = 1'b1; wr_set = set_of(p_laddr); wr_way = p_way;
      tmp = ln_q[set_of(p_laddr)][p_way];
      state_n = S_IDLE;
      resp_n = 1'b1;
      case (down_in.mtype)
        RSP_SH, RSP_EX: begin
          tmp.tag   = tag_of(p_laddr);
          tmp.wts   = down_in.wts;
          tmp.rts   = down_in.rts;
          tmp.lease = (down_in.mtype == RSP_SH) ? down_in.lease : LEASE_MIN_CODE;
          tmp.data  = down_in.data;
          wr_st = (down_in.mtype == RSP_SH) ? L1_S : L1_E;
          if (down_in.mtype == RSP_SH && p_kind == REQ_CHECK) begin
            ll_resp_valid = 1'b1; ll_resp_updated = 1'b1; ev_check_upd = 1'b1;
          end
          if (down_in.mtype == RSP_SH && p_kind == REQ_RENEW) ev_renew_fail = 1'b1;
          if (st_q[set_of(p_laddr)][p_way] == L1_I) rr_bump = 1'b1;
        end
        RSP_RENEW: begin
          tmp.rts   = down_in.rts;
          tmp.lease = down_in.lease;
          wr_st = L1_S;
        end
        default: begin   // RSP_CHECK: version unchanged
          wr_st = L1_S;
          ll_resp_valid = 1'b1; ll_resp_updated = 1'b0;
        end
      endcase
      if (p_op == OP_ST) begin
        // Exclusive copy arrived: perform the store after every lease.
        sts_new   = ts_max(ts_max(sts, lts), tmp.rts + ts_t'(1));
        tmp.wts   = sts_new;
        tmp.rts   = sts_new;
        tmp.data  = put_word(tmp.data, p_word, p_wdata);
        wr_st     = L1_M;
        st_upd    = 1'b1; st_ts = sts_new;
      end else begin
        nl = ts_max(lts, tmp.wts);
        ld_upd = 1'b1; ld_lts = nl;
        if (wr_st == L1_E) tmp.rts = ts_max(tmp.rts, nl);
        rdata_n = get_word(tmp.data, p_word);
      end
      wr_ln = tmp;
    end else begin
      case (state)
        S_IDLE: if (c_fire) begin
          ld_pend = 1'b1;
          if (req_op == OP_LD) begin
            if (c_hit && c_st == L1_M) begin
              resp_n = 1'b1; rdata_n = get_word(c_ln.data, c_word);
            end else if (c_hit && c_st == L1_E) begin
              nl = ts_max(lts, c_ln.wts);
              ld_upd = 1'b1; ld_lts = nl;
              wr_en = 1'b1; wr_ln = c_ln; wr_ln.rts = ts_max(c_ln.rts, nl); wr_st = L1_E;
              resp_n = 1'b1; rdata_n = get_word(c_ln.data, c_word);
            end else if (c_hit && c_st == L1_S) begin
              nl = ts_max(lts, c_ln.wts);
              if (nl <= c_ln.rts) begin
                if (ll_check) begin
                  state_n = S_SEND; ev_check = 1'b1;
                end else begin
                  ld_upd = 1'b1; ld_lts = nl;
                  resp_n = 1'b1; rdata_n = get_word(c_ln.data, c_word);
                end
              end else begin
                state_n = S_SEND; ev_renew = 1'b1;
              end
            end else begin
              state_n = (st_q[c_set][c_victim] == L1_E || st_q[c_set][c_victim] == L1_M)
                        ? S_EVICT : S_SEND;
              if (st_q[c_set][c_victim] == L1_S) begin   // silent drop
                wr_en = 1'b1; wr_way = c_victim; wr_ln = ln_q[c_set][c_victim]; wr_st = L1_I;
              end
            end
          end else begin  // OP_ST
            if (c_hit && (c_st == L1_E || c_st == L1_M)) begin
              sts_new = ts_max(ts_max(sts, lts), c_ln.rts + ts_t'(1));
              wr_en = 1'b1; wr_ln = c_ln; wr_st = L1_M;
              wr_ln.wts = sts_new; wr_ln.rts = sts_new;
              wr_ln.data = put_word(c_ln.data, c_word, req_wdata);
              st_upd = 1'b1; st_ts = sts_new;
              resp_n = 1'b1;
            end else if (c_hit) begin
              state_n = S_SEND;
            end else begin
              state_n = (st_q[c_set][c_victim] == L1_E || st_q[c_set][c_victim] == L1_M)
                        ? S_EVICT : S_SEND;
              if (st_q[c_set][c_victim] == L1_S) begin
                wr_en = 1'b1; wr_way = c_victim; wr_ln = ln_q[c_set][c_victim]; wr_st = L1_I;
              end
            end
          end
        end
        S_EVICT: if (!wb_valid && !down_in_valid) begin
          // The victim may have been downgraded or taken by a forward meanwhile.
          wr_en = 1'b1; wr_set = set_of(p_laddr); wr_way = p_way;
          wr_ln = ln_q[set_of(p_laddr)][p_way]; wr_st = L1_I;
          if (st_q[set_of(p_laddr)][p_way] == L1_E || st_q[set_of(p_laddr)][p_way] == L1_M) begin
            wb_load = 1'b1; ev_writeback = 1'b1;
          end
          state_n = S_SEND;
        end
        default: ;
      endcase
    end
    // The request leaves in S_SEND whatever else this cycle does (a forward
    // served in the same cycle must not cause it to be sent twice).
    if (state == S_SEND && req_out_ready && !(wb_valid && !wb_sent)) state_n = S_WAIT;
  end

  // Capture of the pending request when a core request is accepted.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      p_op <= OP_LD; p_laddr <= '0; p_word <= '0; p_wdata <= '0; p_way <= '0;
      p_kind <= REQ_SH; p_ts <= '0; p_wts <= '0; p_lease <= '0;
      wb_valid <= 1'b0; wb_sent <= 1'b0; wb_answered <= 1'b0; wb_dirty <= 1'b0;
      wb_laddr <= '0; wb_wts <= '0; wb_rts <= '0; wb_data <= '0;
      up_valid_q <= 1'b0; up_q <= '0;
      resp_valid <= 1'b0; resp_rdata <= '0;
      for (int unsigned s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int unsigned w = 0; w < WAYS; w++) st_q[s][w] <= L1_I;
      end
    end else begin
      state <= state_n;
      resp_valid <= resp_n;
      if (resp_n) resp_rdata <= rdata_n;
      if (ld_pend) begin
        p_op    <= req_op;
        p_laddr <= c_laddr;
        p_word  <= c_word;
        p_wdata <= req_wdata;
        p_way   <= c_hit ? c_way : c_victim;
        p_ts    <= c_hit ? ts_max(lts, c_ln.wts) : lts;
        p_wts   <= c_ln.wts;
        p_lease <= c_hit ? c_ln.lease : LEASE_MIN_CODE;
        if (req_op == OP_ST)                    p_kind <= REQ_EX;
        else if (!c_hit)                        p_kind <= REQ_SH;
        else if (ts_max(lts, c_ln.wts) > c_ln.rts) p_kind <= REQ_RENEW;
        else                                    p_kind <= REQ_CHECK;
      end
      if (up_load) begin
        up_valid_q <= 1'b1; up_q <= up_n;
      end else if (up_out_ready) begin
        up_valid_q <= 1'b0;
      end
      if (wb_load) begin
        wb_valid <= 1'b1; wb_sent <= 1'b0; wb_answered <= 1'b0;
        wb_laddr <= {ln_q[set_of(p_laddr)][p_way].tag, set_of(p_laddr)};
        wb_wts   <= ln_q[set_of(p_laddr)][p_way].wts;
        wb_rts   <= ln_q[set_of(p_laddr)][p_way].rts;
        wb_data  <= ln_q[set_of(p_laddr)][p_way].data;
        wb_dirty <= (st_q[set_of(p_laddr)][p_way] == L1_M);
      end else begin
        if (wb_clear) wb_valid <= 1'b0;
        if (wb_valid && !wb_sent && req_out_ready) wb_sent <= 1'b1;
        if (d_fire && d_is_fwd && !(d_hit && (d_st == L1_E || d_st == L1_M)) && d_wb_match)
          wb_answered <= 1'b1;
      end
      if (wr_en) st_q[wr_set][wr_way] <= wr_st;
      if (rr_bump) rr_q[set_of(p_laddr)] <= p_way + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) ln_q[wr_set][wr_way] <= wr_ln;
  end

  // A response only arrives while a request is pending.
  assert property (@(posedge clk) disable iff (!rst_n)
    (down_in_valid && !d_is_fwd && !d_is_ack) |-> state == S_WAIT || state == S_SEND);
  // ... and it is for the pending line.
  assert property (@(posedge clk) disable iff (!rst_n)
    (d_fire && !d_is_fwd && !d_is_ack) |-> down_in.laddr == p_laddr);
endmodule
