// ts_manager: the per-core logical clocks of Tardis under TSO.
//
// A TSO core keeps two timestamps instead of the single program timestamp of
// sequential consistency: lts, the commit timestamp of the last load, and sts,
// the commit timestamp of the last store. Both only move forward. Loads report
// the timestamp they committed at (ld_upd/ld_lts) and lts becomes the larger of
// the two; stores report theirs (st_upd/st_ts) and sts does the same. A fence
// joins the two clocks, lts = max(lts, sts). To guarantee that a core spinning
// on a stale line eventually sees a newer version, lts is also raised by one
// every SELF_INC_PERIOD memory accesses (1000 in the optimized configuration
// with the livelock detector).
//
// lts_bumped pulses in a cycle where a load or a fence raised lts; the livelock
// detector clears its access counters on it. self_inc pulses on a periodic
// increment. All updates take effect at the next rising clock edge; lts and
// sts are registered outputs that reset to 0.
//
// From the paper: the two clocks, the load/store/fence rules and the period.
// Own choices: several updates in one cycle are merged (load first, then
// fence, then the periodic increment); counting every core memory operation
// (load, store, fence) as an access.
module ts_manager
  import tardis_pkg::*;
#(
  parameter int unsigned SELF_INC_PERIOD = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ld_upd,        // a load committed at ld_lts
  input  ts_t  ld_lts,
  input  logic st_upd,        // a store committed at st_ts
  input  ts_t  st_ts,
  input  logic fence,         // a fence commits (store buffer already drained)
  input  logic mem_access,    // one core memory operation finished
  output ts_t  lts,
  output ts_t  sts,
  output logic lts_bumped,
  output logic self_inc
);
  localparam int unsigned CW = $clog2(SELF_INC_PERIOD + 1);
  logic [CW-1:0] acc_cnt;
  ts_t lts_n, sts_n, lts_mem;

  always_comb begin
    sts_n   = st_upd ? ts_max(sts, st_ts) : sts;
    lts_mem = ld_upd ? ts_max(lts, ld_lts) : lts;
    if (fence) lts_mem = ts_max(lts_mem, sts_n);
    self_inc = mem_access && (acc_cnt == CW'(SELF_INC_PERIOD - 1));
    lts_n    = self_inc ? lts_mem + ts_t'(1) : lts_mem;
    lts_bumped = (lts_mem != lts);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lts <= '0;
      sts <= '0;
      acc_cnt <= '0;
    end else begin
      lts <= lts_n;
      sts <= sts_n;
      if (mem_access) acc_cnt <= self_inc ? '0 : acc_cnt + 1'b1;
    end
  end
endmodule
