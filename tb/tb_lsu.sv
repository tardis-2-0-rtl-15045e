// tb_lsu: the load/store unit against a behavioural L1 with random latency.
// A random single-core program of loads, stores and fences to a few words is
// checked against a plain memory model (one core sees its own stores in
// program order). Also checked: stores complete without waiting for the L1,
// loads are forwarded from the store buffer, loads overtake buffered stores,
// a fence returns only after every buffered store reached the L1, and the L1
// sees the stores in program order.
module tb_lsu;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic core_req_valid = 0, core_req_ready, core_resp_valid;
  mem_op_e core_req_op = OP_LD;
  waddr_t core_req_addr = '0;
  word_t core_req_wdata = '0, core_resp_rdata;
  logic l1_req_valid, l1_req_ready, l1_resp_valid;
  mem_op_e l1_req_op;
  waddr_t l1_req_addr;
  word_t l1_req_wdata, l1_resp_rdata;
  logic fence, mem_access, ev_forward, ev_full_stall;
  int checks = 0, failures = 0;
  int n_forward = 0, n_stall = 0, n_bypass = 0;

  lsu #(.SB_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  // behavioural L1
  word_t l1mem [16];
  logic  busy = 0; int lat = 0; word_t rd;
  word_t st_order[$];   // data of stores in the order the L1 saw them
  assign l1_req_ready = !busy;
  always @(posedge clk) begin
    l1_resp_valid <= 0;
    if (l1_req_valid && l1_req_ready) begin
      busy <= 1; lat <= $urandom_range(1, 6);
      if (l1_req_op == OP_ST) begin l1mem[l1_req_addr[3:0]] <= l1_req_wdata; st_order.push_back(l1_req_wdata); end
      else begin
        rd <= l1mem[l1_req_addr[3:0]];
        if (!dut.u_sb.empty) n_bypass++;
      end
    end else if (busy) begin
      if (lat == 0) begin busy <= 0; l1_resp_valid <= 1; l1_resp_rdata <= rd; end
      else lat <= lat - 1;
    end
  end
  always @(posedge clk) begin
    if (ev_forward) n_forward++;
    if (ev_full_stall) n_stall++;
  end

  word_t model [16];
  word_t issued[$];
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic op(mem_op_e o, int a, word_t d, output word_t r, output int cyc);
    @(negedge clk);
    core_req_valid = 1; core_req_op = o; core_req_addr = waddr_t'(a); core_req_wdata = d;
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!core_req_ready);
    @(negedge clk); core_req_valid = 0;
    while (!core_resp_valid) begin @(posedge clk); #1; cyc++; end
    r = core_resp_rdata;
  endtask

  initial begin
    word_t r; int cyc;
    for (int i = 0; i < 16; i++) begin l1mem[i] = '0; model[i] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int a, kind;
      a = $urandom_range(0, 7);
      kind = $urandom_range(0, 9);
      if (kind < 5) begin
        word_t d; d = {32'(k), $urandom};
        op(OP_ST, a, d, r, cyc);
        model[a] = d; issued.push_back(d);
        checks++;
      end else if (kind < 9) begin
        op(OP_LD, a, '0, r, cyc);
        checks++;
        if (r != model[a]) begin failures++; $display("FAIL load %0d got %h exp %h", a, r, model[a]); end
      end else begin
        op(OP_FENCE, 0, '0, r, cyc);
        checks++;
        if (st_order.size() != issued.size() || !dut.u_sb.empty) begin
          failures++; $display("FAIL fence returned with stores pending");
        end
      end
    end
    op(OP_FENCE, 0, '0, r, cyc);
    checks++;
    if (st_order.size() != issued.size()) begin failures++; $display("FAIL store count"); end
    else foreach (issued[i]) if (issued[i] != st_order[i]) begin
      failures++; $display("FAIL store order at %0d", i); break;
    end
    checks++; if (n_forward == 0) begin failures++; $display("FAIL no forwarding"); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no full-buffer stall"); end
    checks++; if (n_bypass == 0)  begin failures++; $display("FAIL no load passed a store"); end
    $display("forward=%0d stall=%0d bypass=%0d", n_forward, n_stall, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
