// tb_ts_manager: directed test of the lts/sts rules, the fence and the
// periodic self increment (period shortened to 4 accesses).
module tb_ts_manager;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ld_upd = 0, st_upd = 0, fence = 0, mem_access = 0;
  ts_t  ld_lts = '0, st_ts = '0, lts, sts;
  logic lts_bumped, self_inc;
  int checks = 0, failures = 0;

  ts_manager #(.SELF_INC_PERIOD(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset lts", lts, 0); chk("reset sts", sts, 0);
    // load at 5
    ld_upd = 1; ld_lts = 5; #1; chk("bumped on load", lts_bumped, 1);
    @(negedge clk); ld_upd = 0; chk("lts after load", lts, 5);
    // an older load timestamp never lowers lts
    ld_upd = 1; ld_lts = 3; #1; chk("no bump", lts_bumped, 0);
    @(negedge clk); ld_upd = 0; chk("lts monotonic", lts, 5);
    // store at 11: sts moves, lts stays (no Store->Load order in TSO)
    st_upd = 1; st_ts = 11; @(negedge clk); st_upd = 0;
    chk("sts after store", sts, 11); chk("lts unchanged by store", lts, 5);
    st_upd = 1; st_ts = 7; @(negedge clk); st_upd = 0;
    chk("sts monotonic", sts, 11);
    // fence: lts = max(lts, sts)
    fence = 1; #1; chk("fence bumps", lts_bumped, 1);
    @(negedge clk); fence = 0; chk("lts after fence", lts, 11);
    // fence together with a store in the same cycle sees the new sts
    st_upd = 1; st_ts = 20; fence = 1; @(negedge clk); st_upd = 0; fence = 0;
    chk("fence with store", lts, 20);
    // self increment: every 4th access adds one
    for (int k = 1; k <= 8; k++) begin
      mem_access = 1; #1;
      chk("self_inc pulse", self_inc, (k % 4 == 0));
      chk("no bump from self inc", lts_bumped, 0);
      @(negedge clk);
    end
    mem_access = 0;
    chk("lts after 8 accesses", lts, 22);
    chk("sts untouched", sts, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
