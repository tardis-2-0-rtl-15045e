// tb_tardis_tile: a single tile whose three network ports are looped back
// (its L1 talks to its own LLC bank), with a behavioural memory. A short
// program checks store buffering and forwarding, the fence, a store's commit
// timestamp after an exclusive miss, an exclusive grant for private data, the
// periodic lts increment, and that every load returns the last stored value.
module tb_tardis_tile;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic core_req_valid = 0, core_req_ready, core_resp_valid;
  mem_op_e core_req_op = OP_LD;
  waddr_t core_req_addr = '0;
  word_t core_req_wdata = '0, core_resp_rdata;
  logic rqv, rqr, dnv, dnr, upv, upr;
  msg_t rqm, dnm, upm;
  logic mem_req_valid, mem_resp_valid = 0;
  mem_req_t mem_req;
  line_t mem_resp_data = '0;
  ts_t lts, sts;
  tile_ev_t ev;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_fence = 0, n_inc = 0, n_grant = 0;

  tardis_tile #(.N_TILES(1), .L1_SETS(4), .L1_WAYS(2), .LLC_SETS(4), .LLC_WAYS(2),
                .SELF_INC_PERIOD(8)) dut (
    .clk, .rst_n, .node_id('0),
    .core_req_valid, .core_req_op, .core_req_addr, .core_req_wdata, .core_req_ready,
    .core_resp_valid, .core_resp_rdata,
    .req_inj_valid(rqv), .req_inj_msg(rqm), .req_inj_ready(rqr),
    .req_ej_valid(rqv), .req_ej_msg(rqm), .req_ej_ready(rqr),
    .down_inj_valid(dnv), .down_inj_msg(dnm), .down_inj_ready(dnr),
    .down_ej_valid(dnv), .down_ej_msg(dnm), .down_ej_ready(dnr),
    .up_inj_valid(upv), .up_inj_msg(upm), .up_inj_ready(upr),
    .up_ej_valid(upv), .up_ej_msg(upm), .up_ej_ready(upr),
    .mem_req_valid, .mem_req, .mem_req_ready(1'b1), .mem_resp_valid, .mem_resp_data,
    .lts, .sts, .ev
  );
  always #5 clk = ~clk;

  line_t mem [64];
  initial for (int a = 0; a < 64; a++) begin mem[a] = '0; mem[a][63:0] = 64'(1000 + a); end
  always @(posedge clk) begin
    mem_resp_valid <= 0;
    if (mem_req_valid) begin
      if (mem_req.we) mem[mem_req.laddr[5:0]] <= mem_req.data;
      else begin mem_resp_data <= mem[mem_req.laddr[5:0]]; mem_resp_valid <= 1; end
    end
    if (rst_n) begin
      if (ev.sb_forward) n_fwd++;
      if (ev.fence) n_fence++;
      if (ev.self_inc) n_inc++;
      if (ev.e_grant) n_grant++;
    end
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic op(mem_op_e o, int la, word_t d, output word_t r);
    @(negedge clk);
    core_req_valid = 1; core_req_op = o; core_req_addr = waddr_t'({la, 3'b000}); core_req_wdata = d;
    do @(posedge clk); while (!core_req_ready);
    #1 core_req_valid = 0;
    while (!core_resp_valid) @(posedge clk) #1;
    r = core_resp_rdata;
  endtask

  word_t model [64];
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t r;
    for (int a = 0; a < 64; a++) model[a] = 64'(1000 + a);
    repeat (2) @(posedge clk); rst_n = 1;
    op(OP_ST, 3, 11, r);
    op(OP_LD, 3, 0, r);  chk("forwarded from store buffer", r, 11);
    chk("forward counted", n_fwd, 1);
    op(OP_FENCE, 0, 0, r);
    // A's first store: exclusive fill at mts 0, commit at rts + 1 = 1.
    chk("sts after first store", sts, 1);
    chk("fence joins lts to sts", lts, 1);
    op(OP_LD, 3, 0, r);  chk("load from L1", r, 11);
    op(OP_LD, 5, 0, r);  chk("load from memory", r, 1005);
    chk("private line granted E", n_grant, 1);
    model[3] = 11;
    // random single-core program: every load sees the last store
    for (int k = 0; k < 400; k++) begin
      int a; a = $urandom_range(0, 15);
      case ($urandom_range(0, 5))
        0, 1: begin op(OP_ST, a, 64'(k), r); model[a] = 64'(k); end
        2, 3, 4: begin op(OP_LD, a, 0, r); chk("load value", r, model[a]); end
        default: op(OP_FENCE, 0, 0, r);
      endcase
    end
    op(OP_FENCE, 0, 0, r);
    chk("lts >= sts after fence", lts >= sts, 1);
    checks++; if (n_inc == 0) begin failures++; $display("FAIL no self increment"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
