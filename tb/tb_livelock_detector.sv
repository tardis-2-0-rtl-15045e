// tb_livelock_detector: random query/response/reset traffic over a few
// addresses against a list-based model of the address history buffer (most
// recently used first) and of the adaptive threshold. Small thresholds keep
// the run short; one directed spin checks when the first check fires.
module tb_livelock_detector;
  import tardis_pkg::*;
  localparam int E = 3, MINT = 4, MAXT = 16, CT = 2;
  logic clk = 0, rst_n = 0;
  logic query_valid = 0, reset_counts = 0, resp_valid = 0, resp_updated = 0;
  laddr_t query_laddr = '0;
  logic check;
  logic [15:0] thresh_count;
  int checks = 0, failures = 0;
  int checks_fired = 0;

  livelock_detector #(.AHB_ENTRIES(E), .MIN_THRESH(MINT), .MAX_THRESH(MAXT),
                      .CHECK_THRESH(CT)) dut (.*);
  always #5 clk = ~clk;

  // model
  laddr_t m_addr[$]; int m_cnt[$];
  int m_thresh = MINT, m_cc = 0;

  function automatic logic model_query(laddr_t a);
    int idx = -1; logic chk = 0; int c;
    foreach (m_addr[i]) if (m_addr[i] == a) idx = i;
    if (idx >= 0) begin
      c = m_cnt[idx] + 1;
      chk = (c >= m_thresh);
      if (chk) c = 0;
      m_addr.delete(idx); m_cnt.delete(idx);
      m_addr.push_front(a); m_cnt.push_front(c);
    end else begin
      m_addr.push_front(a); m_cnt.push_front(0);
      if (m_addr.size() > E) begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
    end
    return chk;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic step(logic q, laddr_t a, logic rc, logic rv, logic ru);
    logic exp;
    @(negedge clk);
    query_valid = q; query_laddr = a; reset_counts = rc; resp_valid = rv; resp_updated = ru;
    #1;
    exp = 0;
    if (q) exp = model_query(a);
    checks++;
    if (check != exp) begin failures++; $display("FAIL check addr %0d got %0b exp %0b", a, check, exp); end
    if (check) checks_fired++;
    if (rc) foreach (m_cnt[i]) m_cnt[i] = 0;
    if (rv) begin
      if (ru) begin m_thresh = MINT; m_cc = 0; end
      else if (m_cc == CT - 1) begin m_cc = 0; if (m_thresh < MAXT) m_thresh *= 2; end
      else m_cc++;
    end
    @(posedge clk); #1;
    checks++;
    if (int'(thresh_count) != m_thresh) begin
      failures++; $display("FAIL thresh got %0d exp %0d", thresh_count, m_thresh);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // Directed: spinning on one address fires a check on the MINT-th repeat.
    step(1, 42, 0, 0, 0);                      // allocate
    for (int k = 1; k < MINT; k++) step(1, 42, 0, 0, 0);
    checks++; if (checks_fired != 0) begin failures++; $display("FAIL early check"); end
    step(1, 42, 0, 0, 0);
    checks++; if (checks_fired != 1) begin failures++; $display("FAIL no check after %0d", MINT); end
    // Two useless checks double the threshold.
    step(0, 0, 0, 1, 0); step(0, 0, 0, 1, 0);
    checks++; if (thresh_count != 2 * MINT) begin failures++; $display("FAIL no doubling"); end
    // Random traffic.
    for (int cyc = 0; cyc < 4000; cyc++)
      step($urandom_range(0, 3) != 0, laddr_t'($urandom_range(0, 4)),
           $urandom_range(0, 40) == 0, $urandom_range(0, 6) == 0, $urandom_range(0, 3) == 0);
    checks++; if (checks_fired < 10) begin failures++; $display("FAIL too few checks fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
