// tb_llc_slice: one LLC bank (2 sets x 2 ways) with scripted L1 requests and
// a behavioural memory. The sequence follows one line through exclusive
// ownership, a forwarded downgrade (rts extended to lts + lease, as in the
// paper's Fig. 1 step 4), shared loads, a renewal that doubles the lease, a
// renewal with another lease, checks with the same and an older version, a
// write that resets the lease, writebacks from the owner and from a former
// owner, an E grant on a load, and two recalls of owned victims (one dirty,
// written to memory, one clean), with lines refilled at the memory timestamp.
// Every expected value is computed by hand from the protocol rules.
module tb_llc_slice;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  node_t node_id = '0;
  logic req_in_valid = 0, req_in_ready, up_in_valid = 0, up_in_ready;
  logic down_out_valid, down_out_ready = 1;
  msg_t req_in = '0, up_in = '0, down_out;
  logic mem_req_valid, mem_req_ready = 1, mem_resp_valid = 0;
  mem_req_t mem_req;
  line_t mem_resp_data = '0;
  logic ev_e_grant, ev_fwd, ev_lease_double, ev_fill, ev_recall;
  int checks = 0, failures = 0;
  int n_grant = 0, n_fwd = 0, n_dbl = 0, n_fill = 0, n_recall = 0, n_memwr = 0;

  llc_slice #(.N_TILES(1), .SETS(2), .WAYS(2)) dut (.*);
  always #5 clk = ~clk;

  // behavioural memory: word 0 of line a is 100*a until written
  line_t mem [16];
  initial for (int a = 0; a < 16; a++) begin mem[a] = '0; mem[a][63:0] = 64'(100 * a); end
  always @(posedge clk) begin
    mem_resp_valid <= 0;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) begin mem[mem_req.laddr[3:0]] <= mem_req.data; n_memwr++; end
      else begin
        mem_resp_data <= mem[mem_req.laddr[3:0]];
        mem_resp_valid <= 1;
      end
    end
    if (rst_n && ev_e_grant) n_grant++;
    if (ev_fwd) n_fwd++;
    if (ev_lease_double) n_dbl++;
    if (rst_n && ev_fill) n_fill++;
    if (rst_n && ev_recall) n_recall++;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic req(msg_type_e t, int src, int la, ts_t ts, ts_t w = 0, lease_t ls = 0,
                     word_t d0 = 0, logic dirty = 0);
    @(negedge clk);
    req_in = '0; req_in.mtype = t; req_in.src = node_t'(src); req_in.laddr = laddr_t'(la);
    req_in.ts = ts; req_in.wts = w; req_in.rts = w; req_in.lease = ls;
    req_in.data[63:0] = d0; req_in.dirty = dirty;
    req_in_valid = 1;
    do @(posedge clk); while (!req_in_ready);
    #1 req_in_valid = 0;
  endtask

  task automatic get(output msg_t m);
    do @(posedge clk); while (!down_out_valid);
    m = down_out;
  endtask

  task automatic answer(int src, int la, ts_t w, ts_t r, word_t d0, logic dirty);
    @(negedge clk);
    up_in = '0; up_in.mtype = UP_DATA; up_in.src = node_t'(src); up_in.laddr = laddr_t'(la);
    up_in.wts = w; up_in.rts = r; up_in.data[63:0] = d0; up_in.dirty = dirty;
    up_in_valid = 1;
    do @(posedge clk); while (!up_in_ready);
    #1 up_in_valid = 0;
  endtask

  task automatic expect_msg(string tag, msg_t m, msg_type_e t, int dst, ts_t w, ts_t r, word_t d0);
    chk({tag, " type"}, m.mtype, t);
    chk({tag, " dst"}, m.dst, dst);
    if (t != RSP_CHECK && t != RSP_WB_ACK && t != FWD_EX) begin
      chk({tag, " wts"}, m.wts, w);
      chk({tag, " rts"}, m.rts, r);
    end
    if (t == RSP_SH || t == RSP_EX) chk({tag, " data"}, m.data[63:0], d0);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    msg_t m;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1. core 0 writes A: filled from memory, ownership returned at once.
    req(REQ_EX, 0, 0, 0); get(m); expect_msg("1", m, RSP_EX, 0, 0, 0, 0);
    // 2. core 1 loads A at lts 12: downgrade forwarded with rts target 12 + 8.
    req(REQ_SH, 1, 0, 12); get(m);
    chk("2 fwd type", m.mtype, FWD_SH); chk("2 fwd dst", m.dst, 0); chk("2 fwd ts", m.ts, 20);
    answer(0, 0, 1, 20, 1, 1);
    get(m); expect_msg("2", m, RSP_SH, 1, 1, 20, 1); chk("2 lease", m.lease, 0);
    // 3. core 2 loads at lts 3: rts stays 20.
    req(REQ_SH, 2, 0, 3); get(m); expect_msg("3", m, RSP_SH, 2, 1, 20, 1);
    // 4. renewal with the current lease doubles it: rts = 25 + 16.
    req(REQ_RENEW, 1, 0, 25, 1, 0); get(m); expect_msg("4", m, RSP_RENEW, 1, 1, 41, 0);
    chk("4 lease code", m.lease, 1);
    // 5. renewal with another lease keeps 16: rts = 50 + 16.
    req(REQ_RENEW, 1, 0, 50, 1, 0); get(m); expect_msg("5", m, RSP_RENEW, 1, 1, 66, 0);
    chk("5 lease code", m.lease, 1);
    // 6. check of the current version: no data, rts untouched.
    req(REQ_CHECK, 1, 0, 70, 1); get(m); expect_msg("6", m, RSP_CHECK, 1, 0, 0, 0);
    // 7. check of an older version: data with rts = 70 + 16.
    req(REQ_CHECK, 1, 0, 70, 0); get(m); expect_msg("7", m, RSP_SH, 1, 1, 86, 1);
    // 8. core 3 writes: ownership at once, no invalidations.
    req(REQ_EX, 3, 0, 0); get(m); expect_msg("8", m, RSP_EX, 3, 1, 86, 1);
    // 9. core 3 writes back its version.
    req(REQ_WB, 3, 0, 0, 87, 0, 7, 1); get(m); expect_msg("9", m, RSP_WB_ACK, 3, 0, 0, 0);
    // 10. the E-bit is set after the writeback: core 4's load gets E.
    req(REQ_SH, 4, 0, 0); get(m); expect_msg("10", m, RSP_EX, 4, 87, 87, 7);
    // 11. a writeback from a core that is not the owner is only acknowledged.
    req(REQ_WB, 5, 0, 0, 99, 0, 55, 1); get(m); expect_msg("11", m, RSP_WB_ACK, 5, 0, 0, 0);
    // 12. C (same set) filled; E-bit gives core 5 an exclusive copy.
    req(REQ_SH, 5, 2, 0); get(m); expect_msg("12", m, RSP_EX, 5, 0, 0, 200);
    // 13. line 4: both ways owned -> recall A from core 4 (dirty, rts 90).
    req(REQ_SH, 6, 4, 0); get(m);
    chk("13 recall", m.mtype, FWD_EX); chk("13 recall dst", m.dst, 4); chk("13 recall addr", m.laddr, 0);
    answer(4, 0, 87, 90, 8, 1);
    get(m); expect_msg("13", m, RSP_EX, 6, 90, 90, 400);
    chk("13 A written to memory", mem[0][63:0], 8);
    // 14. A again: recall C from core 5 (clean), refill A from memory at mts.
    req(REQ_SH, 7, 0, 0); get(m);
    chk("14 recall", m.mtype, FWD_EX); chk("14 recall dst", m.dst, 5); chk("14 recall addr", m.laddr, 2);
    answer(5, 2, 0, 0, 200, 0);
    get(m); expect_msg("14", m, RSP_EX, 7, 90, 90, 8);
    chk("memory writes", n_memwr, 1);
    chk("fills", n_fill, 4);
    chk("recalls", n_recall, 2);
    chk("e grants", n_grant, 4);
    chk("lease doublings", n_dbl, 1);
    chk("forwards", n_fwd, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
