// tardis_top: a Tardis 2.0 shared-memory system of MESH_X x MESH_Y tiles.
//
// Each tile (tardis_tile) holds one core's TSO load/store unit, timestamp
// manager, livelock detector and private L1, plus one bank of the shared LLC.
// Three 2-D meshes with XY routing connect the tiles: requests from L1s to
// LLC banks, responses and forwards from LLC banks to L1s, and answers to
// forwards from L1s to LLC banks. A line's home bank is its line address mod
// the number of tiles.
//
// Ports: for tile i, core_* is the memory interface of core i (valid/ready
// request with op LD/ST/FENCE, a word address and store data; one
// core_resp_valid pulse per request, with load data), mem_* is the port of
// bank i to a memory controller (request valid/ready, response valid one
// cycle), lts/sts are core i's clocks, and ev[i] carries event pulses.
//
// Defaults are the evaluated system: 64 tiles (8 x 8), 32 KB 4-way L1s,
// 256 KB 8-way LLC banks, 64-byte lines, 20-bit timestamps.
module tardis_top
  import tardis_pkg::*;
#(
  parameter int unsigned MESH_X          = 8,
  parameter int unsigned MESH_Y          = 8,
  parameter int unsigned L1_SETS         = 128,
  parameter int unsigned L1_WAYS         = 4,
  parameter int unsigned LLC_SETS        = 512,
  parameter int unsigned LLC_WAYS        = 8,
  parameter int unsigned SB_DEPTH        = 8,
  parameter int unsigned SELF_INC_PERIOD = 1000,
  parameter int unsigned AHB_ENTRIES     = 8,
  parameter int unsigned MIN_THRESH      = 100,
  parameter int unsigned MAX_THRESH      = 800,
  parameter int unsigned CHECK_THRESH    = 10,
  localparam int unsigned N = MESH_X * MESH_Y
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     core_req_valid  [N],
  input  mem_op_e  core_req_op     [N],
  input  waddr_t   core_req_addr   [N],
  input  word_t    core_req_wdata  [N],
  output logic     core_req_ready  [N],
  output logic     core_resp_valid [N],
  output word_t    core_resp_rdata [N],
  output logic     mem_req_valid   [N],
  output mem_req_t mem_req         [N],
  input  logic     mem_req_ready   [N],
  input  logic     mem_resp_valid  [N],
  input  line_t    mem_resp_data   [N],
  output ts_t      lts             [N],
  output ts_t      sts             [N],
  output tile_ev_t ev              [N]
);
  logic rq_iv[N], rq_ir[N], rq_ev[N], rq_er[N];
  msg_t rq_im[N], rq_em[N];
  logic dn_iv[N], dn_ir[N], dn_ev[N], dn_er[N];
  msg_t dn_im[N], dn_em[N];
  logic up_iv[N], up_ir[N], up_ev[N], up_er[N];
  msg_t up_im[N], up_em[N];

  mesh_net #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_req_net (
    .clk, .rst_n, .inj_valid(rq_iv), .inj_msg(rq_im), .inj_ready(rq_ir),
    .ej_valid(rq_ev), .ej_msg(rq_em), .ej_ready(rq_er));
  mesh_net #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_down_net (
    .clk, .rst_n, .inj_valid(dn_iv), .inj_msg(dn_im), .inj_ready(dn_ir),
    .ej_valid(dn_ev), .ej_msg(dn_em), .ej_ready(dn_er));
  mesh_net #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_up_net (
    .clk, .rst_n, .inj_valid(up_iv), .inj_msg(up_im), .inj_ready(up_ir),
    .ej_valid(up_ev), .ej_msg(up_em), .ej_ready(up_er));

  for (genvar i = 0; i < N; i++) begin : g_tile
    tardis_tile #(
      .N_TILES(N), .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS),
      .LLC_SETS(LLC_SETS), .LLC_WAYS(LLC_WAYS), .SB_DEPTH(SB_DEPTH),
      .SELF_INC_PERIOD(SELF_INC_PERIOD), .AHB_ENTRIES(AHB_ENTRIES),
      .MIN_THRESH(MIN_THRESH), .MAX_THRESH(MAX_THRESH), .CHECK_THRESH(CHECK_THRESH)
    ) u_tile (
      .clk, .rst_n, .node_id(node_t'(i)),
      .core_req_valid(core_req_valid[i]), .core_req_op(core_req_op[i]),
      .core_req_addr(core_req_addr[i]), .core_req_wdata(core_req_wdata[i]),
      .core_req_ready(core_req_ready[i]), .core_resp_valid(core_resp_valid[i]),
      .core_resp_rdata(core_resp_rdata[i]),
      .req_inj_valid(rq_iv[i]), .req_inj_msg(rq_im[i]), .req_inj_ready(rq_ir[i]),
      .req_ej_valid(rq_ev[i]), .req_ej_msg(rq_em[i]), .req_ej_ready(rq_er[i]),
      .down_inj_valid(dn_iv[i]), .down_inj_msg(dn_im[i]), .down_inj_ready(dn_ir[i]),
      .down_ej_valid(dn_ev[i]), .down_ej_msg(dn_em[i]), .down_ej_ready(dn_er[i]),
      .up_inj_valid(up_iv[i]), .up_inj_msg(up_im[i]), .up_inj_ready(up_ir[i]),
      .up_ej_valid(up_ev[i]), .up_ej_msg(up_em[i]), .up_ej_ready(up_er[i]),
      .mem_req_valid(mem_req_valid[i]), .mem_req(mem_req[i]), .mem_req_ready(mem_req_ready[i]),
      .mem_resp_valid(mem_resp_valid[i]), .mem_resp_data(mem_resp_data[i]),
      .lts(lts[i]), .sts(sts[i]), .ev(ev[i])
    );
  end
endmodule
