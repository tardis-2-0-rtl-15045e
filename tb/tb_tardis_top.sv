// tb_tardis_top: end-to-end test of a 2 x 2 Tardis system with tiny caches
// (so that evictions, writebacks and recalls are frequent), a behavioural
// memory and four programs running at once:
//   * message passing by spinning (core 1 writes data, then a flag; core 0
//     spins on the flag, then must read the new data: TSO keeps store->store
//     and load->load order);
//   * per-location coherence: each core repeatedly writes growing values to
//     its own word of a shared line while the others read all of them; no
//     reader may ever see a location's value go backwards, and in the end
//     every reader sees every final value (writes propagate);
//   * the lease case study loop (both cores read A, increment B, fence);
//   * private random work checked against a per-core model.
// Every mechanism of the design is counted through the tiles' event pulses
// and must occur at least once. Run with +trace to print core 3's operations
// and the L1 messages of tile 3. Sizes are reduced (see the parameter list)
// so that the run takes well under a second; the protocol is the same as at
// the default sizes.
module tb_tardis_top;
  import tardis_pkg::*;
  localparam int MX = 2, MY = 2, N = MX * MY;
  logic clk = 0, rst_n = 0;
  logic     core_req_valid [N];
  mem_op_e  core_req_op    [N];
  waddr_t   core_req_addr  [N];
  word_t    core_req_wdata [N];
  logic     core_req_ready [N];
  logic     core_resp_valid[N];
  word_t    core_resp_rdata[N];
  logic     mem_req_valid  [N];
  mem_req_t mem_req        [N];
  logic     mem_req_ready  [N];
  logic     mem_resp_valid [N];
  line_t    mem_resp_data  [N];
  ts_t      lts [N], sts [N];
  tile_ev_t ev  [N];
  int checks = 0, failures = 0;

  tardis_top #(.MESH_X(MX), .MESH_Y(MY), .L1_SETS(2), .L1_WAYS(2), .LLC_SETS(2),
               .LLC_WAYS(2), .SB_DEPTH(4), .SELF_INC_PERIOD(50), .MIN_THRESH(4),
               .MAX_THRESH(32), .CHECK_THRESH(2)) dut (.*);
  always #5 clk = ~clk;

  // ---- behavioural memory (all controllers share one store) ----------------
  line_t  memory   [256];
  int     mem_lat  [N];
  laddr_t mem_pend [N];
  logic   mem_busy [N];
  initial for (int a = 0; a < 256; a++) memory[a] = '0;
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      mem_resp_valid[i] <= 0;
      if (!rst_n) mem_busy[i] <= 0;
      else if (mem_busy[i]) begin
        if (mem_lat[i] == 0) begin
          mem_busy[i] <= 0; mem_resp_valid[i] <= 1;
          mem_resp_data[i] <= memory[mem_pend[i][7:0]];
        end else mem_lat[i] <= mem_lat[i] - 1;
      end else if (mem_req_valid[i]) begin
        if (mem_req[i].we) memory[mem_req[i].laddr[7:0]] <= mem_req[i].data;
        else begin
          mem_busy[i] <= 1; mem_pend[i] <= mem_req[i].laddr;
          mem_lat[i] <= $urandom_range(2, 10);
        end
      end
    end
  end
  always_comb for (int i = 0; i < N; i++) mem_req_ready[i] = rst_n && !mem_busy[i];

  // ---- mechanism counters (bit order follows tile_ev_t, MSB first) ---------
  localparam int NEV = $bits(tile_ev_t);
  int    evcnt  [NEV];
  string evname [NEV] = '{"renew", "check", "check_updated", "self_inc", "sb_forward",
                          "sb_full_stall", "fence", "l1_writeback", "e_grant", "fwd_sent",
                          "lease_double", "renew_fail", "llc_fill", "llc_recall"};
  initial for (int k = 0; k < NEV; k++) evcnt[k] = 0;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < N; i++)
      for (int k = 0; k < NEV; k++) if (ev[i][NEV-1-k]) evcnt[k]++;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // one memory operation of core c on word w of line la; returns load data
  task automatic op(int c, mem_op_e o, int la, int w, word_t d, output word_t r);
    @(negedge clk);
    core_req_valid[c] = 1; core_req_op[c] = o;
    core_req_addr[c] = waddr_t'({la[41:0], 3'(w)}); core_req_wdata[c] = d;
    do @(posedge clk); while (!core_req_ready[c]);
    #1 core_req_valid[c] = 0;
    while (!core_resp_valid[c]) begin @(posedge clk); #1; end
    r = core_resp_rdata[c];
    if ($test$plusargs("trace") && c == 3) $display("%0t core%0d %s la=%0d w=%0d d=%0d r=%0d", $time, c, o.name(), la, w, d, r);
  endtask

  // debug trace
  always @(posedge clk) if ($test$plusargs("trace")) begin
    if (dut.g_tile[3].u_tile.u_l1.req_out_valid && dut.g_tile[3].u_tile.u_l1.req_out_ready)
      $display("%0t L1.3 REQ %s la=%0d dst=%0d", $time, dut.g_tile[3].u_tile.u_l1.req_out.mtype.name(), dut.g_tile[3].u_tile.u_l1.req_out.laddr, dut.g_tile[3].u_tile.u_l1.req_out.dst);
    if (dut.g_tile[3].u_tile.u_l1.down_in_valid && dut.g_tile[3].u_tile.u_l1.down_in_ready)
      $display("%0t L1.3 DOWN %s la=%0d src=%0d w3=%0d", $time, dut.g_tile[3].u_tile.u_l1.down_in.mtype.name(), dut.g_tile[3].u_tile.u_l1.down_in.laddr, dut.g_tile[3].u_tile.u_l1.down_in.src, dut.g_tile[3].u_tile.u_l1.down_in.data[255:192]);
  end
  // ---- programs ------------------------------------------------------------
  localparam int FLAG = 1, DATA = 2, XLINE = 5, LA = 9, LB = 10, PRIV = 16;
  localparam int ROUNDS = 30;

  task automatic message_passing(int c);
    word_t r;
    int spins;
    if (c == 1) begin
      repeat (40) @(posedge clk);
      op(c, OP_ST, DATA, 0, 64'hD00D, r);
      op(c, OP_ST, DATA, 1, 64'hBEEF, r);
      op(c, OP_ST, FLAG, 0, 64'd1, r);
      op(c, OP_FENCE, 0, 0, 0, r);
    end else if (c == 0) begin
      spins = 0;
      do begin op(c, OP_LD, FLAG, 0, 0, r); spins++; end while (r != 1 && spins < 100000);
      chk("flag seen", r, 1);
      op(c, OP_LD, DATA, 0, 0, r); chk("data word 0 after flag", r, 64'hD00D);
      op(c, OP_LD, DATA, 1, 0, r); chk("data word 1 after flag", r, 64'hBEEF);
      $display("core 0 spun %0d times on the flag", spins);
    end
  endtask

  task automatic coherence(int c);
    word_t r;
    word_t last [N];
    int spins;
    for (int k = 0; k < N; k++) last[k] = 0;
    for (int k = 1; k <= ROUNDS; k++) begin
      op(c, OP_ST, XLINE, c, 64'(k), r);
      for (int j = 0; j < N; j++) begin
        op(c, OP_LD, XLINE, j, 0, r);
        checks++;
        if (r < last[j] || r > ROUNDS) begin
          failures++;
          $display("FAIL core %0d location %0d went from %0d to %0d", c, j, last[j], r);
        end
        last[j] = r;
      end
    end
    op(c, OP_FENCE, 0, 0, 0, r);
    for (int j = 0; j < N; j++) begin
      spins = 0;
      do begin op(c, OP_LD, XLINE, j, 0, r); spins++; end
      while (r != ROUNDS && spins < 100000);
      chk("final value visible", r, ROUNDS);
    end
  endtask

  task automatic lease_loop(int c);
    word_t r, b;
    for (int k = 0; k < 12; k++) begin
      op(c, OP_LD, LA, 0, 0, r);
      op(c, OP_LD, LB, c, 0, b);
      op(c, OP_ST, LB, c, b + 1, r);
      op(c, OP_FENCE, 0, 0, 0, r);
    end
    op(c, OP_LD, LB, c, 0, b);
    chk("own counter in shared line", b, 12);
  endtask

  word_t pmodel [N][8];   // expected contents of each core's private words
  initial for (int i = 0; i < N; i++) for (int k = 0; k < 8; k++) pmodel[i][k] = 0;

  task automatic private_work(int c, int n);
    word_t r;
    int a;
    for (int k = 0; k < n; k++) begin
      a = $urandom_range(0, 7);
      if ($urandom_range(0, 2) == 0) begin
        op(c, OP_LD, PRIV + 8 * c + a, c, 0, r);
        checks++;
        if (r != pmodel[c][a]) begin
          failures++; $display("FAIL private core %0d line %0d: %0d vs %0d", c, a, r, pmodel[c][a]);
        end
      end else begin
        op(c, OP_ST, PRIV + 8 * c + a, c, 64'(1000 * c + k + 1), r);
        pmodel[c][a] = 64'(1000 * c + k + 1);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      core_req_valid[i] = 0; core_req_op[i] = OP_LD;
      core_req_addr[i] = '0; core_req_wdata[i] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N; c++)
      fork
        automatic int cc = c;
        begin
          message_passing(cc);
          private_work(cc, 60);
          coherence(cc);
          if (cc < 2) lease_loop(cc);
          private_work(cc, 60);
        end
      join_none
    wait fork;
    for (int k = 0; k < NEV; k++) begin
      $display("event %-14s %0d", evname[k], evcnt[k]);
      checks++;
      if (evcnt[k] == 0) begin failures++; $display("FAIL mechanism %s never happened", evname[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
