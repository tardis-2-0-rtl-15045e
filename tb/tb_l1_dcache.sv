// tb_l1_dcache: the L1 against a scripted LLC. The first steps replay core 0
// of the TSO example in the paper's Fig. 2 (lines A and B shared with rts 5
// and 10; store to B commits at 11; the load of B returns the dirty value
// without moving lts; the load of A hits at lts 0). Then: renewal of an
// expired line, a forwarded downgrade extending rts, check requests asked for
// by the livelock detector (unchanged and changed data), an exclusive grant on
// a load with local rts extension and a private store, a silent S eviction,
// and an M eviction whose writeback crosses a forwarded request.
// Expected messages and timestamps are written out by hand from the rules.
module tb_l1_dcache;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  node_t node_id = '0;
  logic req_valid = 0, req_ready, resp_valid;
  mem_op_e req_op = OP_LD;
  waddr_t req_addr = '0;
  word_t req_wdata = '0, resp_rdata;
  ts_t lts = '0, sts = '0, ld_lts, st_ts;
  logic ld_upd, st_upd;
  logic ll_query_valid, ll_check = 0, ll_resp_valid, ll_resp_updated;
  laddr_t ll_query_laddr;
  logic req_out_valid, req_out_ready = 1, down_in_valid = 0, down_in_ready;
  logic up_out_valid, up_out_ready = 1;
  msg_t req_out, down_in = '0, up_out;
  logic ev_renew, ev_check, ev_check_upd, ev_renew_fail, ev_writeback;
  int checks = 0, failures = 0;
  int n_llresp = 0, n_llupd = 0, n_ldupd = 0, n_wb = 0;
  ts_t last_st;

  l1_dcache #(.N_TILES(1), .SETS(2), .WAYS(2)) dut (.*);
  always #5 clk = ~clk;

  // timestamp manager stand-in
  always @(posedge clk) begin
    if (ld_upd) begin n_ldupd++; if (ld_lts > lts) lts <= ld_lts; end
    if (st_upd) begin last_st = st_ts; if (st_ts > sts) sts <= st_ts; end
    if (ll_resp_valid) begin n_llresp++; if (ll_resp_updated) n_llupd++; end
    if (ev_writeback) n_wb++;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  function automatic line_t mk_line(word_t w0);
    line_t l; l = '0; l[63:0] = w0; return l;
  endfunction

  task automatic core(mem_op_e o, int la, word_t d, output word_t r);
    @(negedge clk);
    req_valid = 1; req_op = o; req_addr = waddr_t'({la, 3'b000}); req_wdata = d;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (!resp_valid) @(posedge clk) #1;
    r = resp_rdata;
  endtask

  task automatic get_req(output msg_t m);
    do @(posedge clk); while (!req_out_valid);
    m = req_out;
  endtask

  task automatic get_up(output msg_t m);
    do @(posedge clk); while (!up_out_valid);
    m = up_out;
  endtask

  task automatic send(msg_type_e t, int la, ts_t w, ts_t r, lease_t ls, word_t d0, ts_t ts = '0);
    @(negedge clk);
    down_in = '0; down_in.mtype = t; down_in.laddr = laddr_t'(la);
    down_in.wts = w; down_in.rts = r; down_in.lease = ls; down_in.data = mk_line(d0);
    down_in.ts = ts;
    down_in_valid = 1;
    do @(posedge clk); while (!down_in_ready);
    #1 down_in_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t r; msg_t m;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- Fig. 2, core 0 ------------------------------------------------------
    fork core(OP_LD, 0, 0, r);
         begin get_req(m); chk("A miss is REQ_SH", m.mtype, REQ_SH); chk("A req lts", m.ts, 0);
               chk("A req lease min", m.lease, 0);
               send(RSP_SH, 0, 0, 5, 0, 0); end
    join
    chk("A value", r, 0);
    fork core(OP_LD, 1, 0, r);
         begin get_req(m); chk("B miss", m.mtype, REQ_SH); send(RSP_SH, 1, 0, 10, 0, 0); end
    join
    fork core(OP_ST, 1, 1, r);
         begin get_req(m); chk("store to S asks REQ_EX", m.mtype, REQ_EX);
               send(RSP_EX, 1, 0, 10, 0, 0); end
    join
    @(negedge clk);
    chk("store B commits at rts+1 = 11", last_st, 11);
    chk("sts = 11", sts, 11);
    chk("lts stays 0 after store", lts, 0);
    core(OP_LD, 1, 0, r);
    chk("r1 = 1 from dirty B", r, 1);
    chk("dirty load leaves lts", lts, 0);
    core(OP_LD, 0, 0, r);
    chk("r2 = 0 from A", r, 0);
    chk("lts still 0", lts, 0);
    // ---- renewal of an expired line ----------------------------------------
    @(negedge clk); lts = 6;
    fork core(OP_LD, 0, 0, r);
         begin get_req(m); chk("expired A renews", m.mtype, REQ_RENEW); chk("renew wts", m.wts, 0);
               chk("renew ts", m.ts, 6); chk("renew carries lease", m.lease, 0);
               send(RSP_RENEW, 0, 0, 14, 1, 0); end
    join
    chk("renewed value", r, 0);
    core(OP_LD, 0, 0, r);     // now a plain hit
    chk("hit after renew", r, 0);
    // ---- forwarded downgrade of dirty B ---------------------------------------
    fork send(FWD_SH, 1, 0, 0, 0, 0, 20);
         begin get_up(m); chk("fwd answer", m.mtype, UP_DATA); chk("fwd wts", m.wts, 11);
               chk("fwd rts extended", m.rts, 20); chk("fwd dirty", m.dirty, 1);
               chk("fwd data", m.data[63:0], 1); end
    join
    core(OP_LD, 1, 0, r);
    chk("B shared after downgrade", r, 1);
    @(negedge clk);
    chk("lts jumps to wts 11", lts, 11);
    // ---- livelock check ----------------------------------------------------------
    @(negedge clk); ll_check = 1;
    fork core(OP_LD, 0, 0, r);
         begin get_req(m); ll_check = 0; chk("check request", m.mtype, REQ_CHECK); chk("check wts", m.wts, 0);
               send(RSP_CHECK, 0, 0, 0, 0, 0); end
    join
    chk("unchanged check value", r, 0);
    @(negedge clk); ll_check = 1;
    fork core(OP_LD, 0, 0, r);
         begin get_req(m); ll_check = 0; chk("check request 2", m.mtype, REQ_CHECK);
               send(RSP_SH, 0, 12, 20, 0, 5); end
    join
    chk("check brings new value", r, 5);
    @(negedge clk);
    chk("detector told twice", n_llresp, 2);
    chk("detector told of update once", n_llupd, 1);
    chk("lts to new wts 12", lts, 12);
    // ---- exclusive grant on a load, private store ------------------------------
    fork core(OP_LD, 2, 0, r);
         begin get_req(m); chk("C miss", m.mtype, REQ_SH); send(RSP_EX, 2, 3, 3, 0, 9); end
    join
    chk("C value", r, 9);
    fork core(OP_ST, 2, 77, r);
         begin repeat (6) @(posedge clk); chk("no request for E store", req_out_valid, 0); end
    join
    @(negedge clk);
    chk("E store at max(sts,lts,rts+1): rts raised to lts 12, so 13", last_st, 13);
    // ---- evictions in set 0 (A shared in way 0, C modified in way 1) ---------
    fork core(OP_LD, 4, 0, r);
         begin get_req(m); chk("S victim dropped silently, D miss", m.mtype, REQ_SH);
               chk("D addr", m.laddr, 4); send(RSP_SH, 4, 0, 30, 0, 44); end
    join
    chk("D value", r, 44);
    fork core(OP_LD, 6, 0, r);
         begin
           get_req(m); chk("M victim written back", m.mtype, REQ_WB); chk("wb addr", m.laddr, 2);
           chk("wb data", m.data[63:0], 77); chk("wb dirty", m.dirty, 1); chk("wb wts", m.wts, 13);
           get_req(m); chk("then the miss", m.mtype, REQ_SH); chk("miss addr", m.laddr, 6);
           // a forward that crossed the writeback is served from the buffer
           fork send(FWD_EX, 2, 0, 0, 0, 0, 0);
                begin get_up(m); chk("crossing fwd answered", m.mtype, UP_DATA);
                      chk("crossing fwd data", m.data[63:0], 77); end
           join
           send(RSP_WB_ACK, 2, 0, 0, 0, 0);
           send(RSP_SH, 6, 0, 30, 0, 66);
         end
    join
    chk("E value", r, 66);
    chk("one writeback", n_wb, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
