// tardis_tile: one tile of the Tardis multicore memory system.
//
// A tile holds the memory side of one core: the load/store unit with its
// store buffer, the timestamp manager (lts, sts), the livelock detector, the
// private L1 data cache, and this tile's bank of the shared LLC with its lease
// predictor. The core itself and the memory controller are outside: the core
// connects to core_req/core_resp, the LLC bank to mem_req/mem_resp.
// The tile has an injection and an ejection port on each of the three
// networks:
//   req  : L1 -> LLC requests (REQ_*)          L1 injects, LLC ejects
//   down : LLC -> L1 responses and forwards    LLC injects, L1 ejects
//   up   : L1 -> LLC answers to forwards       L1 injects, LLC ejects
// ev reports one-cycle event pulses for performance counting; lts and sts are
// exported for observation.
module tardis_tile
  import tardis_pkg::*;
#(
  parameter int unsigned N_TILES         = 64,
  parameter int unsigned L1_SETS         = 128,
  parameter int unsigned L1_WAYS         = 4,
  parameter int unsigned LLC_SETS        = 512,
  parameter int unsigned LLC_WAYS        = 8,
  parameter int unsigned SB_DEPTH        = 8,
  parameter int unsigned SELF_INC_PERIOD = 1000,
  parameter int unsigned AHB_ENTRIES     = 8,
  parameter int unsigned MIN_THRESH      = 100,
  parameter int unsigned MAX_THRESH      = 800,
  parameter int unsigned CHECK_THRESH    = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  node_t    node_id,
  // core
  input  logic     core_req_valid,
  input  mem_op_e  core_req_op,
  input  waddr_t   core_req_addr,
  input  word_t    core_req_wdata,
  output logic     core_req_ready,
  output logic     core_resp_valid,
  output word_t    core_resp_rdata,
  // networks
  output logic     req_inj_valid,
  output msg_t     req_inj_msg,
  input  logic     req_inj_ready,
  input  logic     req_ej_valid,
  input  msg_t     req_ej_msg,
  output logic     req_ej_ready,
  output logic     down_inj_valid,
  output msg_t     down_inj_msg,
  input  logic     down_inj_ready,
  input  logic     down_ej_valid,
  input  msg_t     down_ej_msg,
  output logic     down_ej_ready,
  output logic     up_inj_valid,
  output msg_t     up_inj_msg,
  input  logic     up_inj_ready,
  input  logic     up_ej_valid,
  input  msg_t     up_ej_msg,
  output logic     up_ej_ready,
  // memory controller
  output logic     mem_req_valid,
  output mem_req_t mem_req,
  input  logic     mem_req_ready,
  input  logic     mem_resp_valid,
  input  line_t    mem_resp_data,
  // observation
  output ts_t      lts,
  output ts_t      sts,
  output tile_ev_t ev
);
  logic    l1_req_valid, l1_req_ready, l1_resp_valid;
  mem_op_e l1_req_op;
  waddr_t  l1_req_addr;
  word_t   l1_req_wdata, l1_resp_rdata;
  logic    fence, mem_access;
  logic    ld_upd, st_upd, lts_bumped, self_inc;
  ts_t     ld_lts, st_ts;
  logic    ll_q_valid, ll_check, ll_r_valid, ll_r_upd;
  laddr_t  ll_q_laddr;
  logic [15:0] thresh_count;

  lsu #(.SB_DEPTH(SB_DEPTH)) u_lsu (
    .clk, .rst_n,
    .core_req_valid, .core_req_op, .core_req_addr, .core_req_wdata, .core_req_ready,
    .core_resp_valid, .core_resp_rdata,
    .l1_req_valid, .l1_req_op, .l1_req_addr, .l1_req_wdata, .l1_req_ready,
    .l1_resp_valid, .l1_resp_rdata,
    .fence, .mem_access, .ev_forward(ev.sb_forward), .ev_full_stall(ev.sb_full_stall)
  );

  ts_manager #(.SELF_INC_PERIOD(SELF_INC_PERIOD)) u_ts (
    .clk, .rst_n, .ld_upd, .ld_lts, .st_upd, .st_ts, .fence, .mem_access,
    .lts, .sts, .lts_bumped, .self_inc
  );
  assign ev.self_inc = self_inc;
  assign ev.fence    = fence;

  livelock_detector #(.AHB_ENTRIES(AHB_ENTRIES), .MIN_THRESH(MIN_THRESH),
                      .MAX_THRESH(MAX_THRESH), .CHECK_THRESH(CHECK_THRESH)) u_ll (
    .clk, .rst_n, .query_valid(ll_q_valid), .query_laddr(ll_q_laddr), .check(ll_check),
    .reset_counts(lts_bumped), .resp_valid(ll_r_valid), .resp_updated(ll_r_upd),
    .thresh_count
  );

  l1_dcache #(.N_TILES(N_TILES), .SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1 (
    .clk, .rst_n, .node_id,
    .req_valid(l1_req_valid), .req_op(l1_req_op), .req_addr(l1_req_addr),
    .req_wdata(l1_req_wdata), .req_ready(l1_req_ready),
    .resp_valid(l1_resp_valid), .resp_rdata(l1_resp_rdata),
    .lts, .sts, .ld_upd, .ld_lts, .st_upd, .st_ts,
    .ll_query_valid(ll_q_valid), .ll_query_laddr(ll_q_laddr), .ll_check,
    .ll_resp_valid(ll_r_valid), .ll_resp_updated(ll_r_upd),
    .req_out_valid(req_inj_valid), .req_out(req_inj_msg), .req_out_ready(req_inj_ready),
    .down_in_valid(down_ej_valid), .down_in(down_ej_msg), .down_in_ready(down_ej_ready),
    .up_out_valid(up_inj_valid), .up_out(up_inj_msg), .up_out_ready(up_inj_ready),
    .ev_renew(ev.renew_req), .ev_check(ev.check_req), .ev_check_upd(ev.check_updated),
    .ev_renew_fail(ev.renew_fail), .ev_writeback(ev.l1_writeback)
  );

  llc_slice #(.N_TILES(N_TILES), .SETS(LLC_SETS), .WAYS(LLC_WAYS)) u_llc (
    .clk, .rst_n, .node_id,
    .req_in_valid(req_ej_valid), .req_in(req_ej_msg), .req_in_ready(req_ej_ready),
    .up_in_valid(up_ej_valid), .up_in(up_ej_msg), .up_in_ready(up_ej_ready),
    .down_out_valid(down_inj_valid), .down_out(down_inj_msg), .down_out_ready(down_inj_ready),
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_resp_valid, .mem_resp_data,
    .ev_e_grant(ev.e_grant), .ev_fwd(ev.fwd_sent), .ev_lease_double(ev.lease_double),
    .ev_fill(ev.llc_fill), .ev_recall(ev.llc_recall)
  );
endmodule
