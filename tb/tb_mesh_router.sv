// tb_mesh_router: one router at (1,1) of a 3 x 3 mesh. Random messages enter
// on all five inputs towards all nine nodes, with random back-pressure on the
// outputs. Each must leave on the XY output port (computed here from the
// destination), exactly once, in order per input/output pair; an unloaded
// message must leave two cycles after it is offered.
module tb_mesh_router;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid[5], in_ready[5], out_valid[5], out_ready[5];
  msg_t in_msg[5], out_msg[5];
  int checks = 0, failures = 0;

  mesh_router #(.MESH_X(3), .X(1), .Y(1)) dut (.*);
  always #5 clk = ~clk;

  function automatic int exp_port(int dst);
    int dx = dst % 3, dy = dst / 3;
    if (dx > 1) return 1; if (dx < 1) return 2;
    if (dy > 1) return 3; if (dy < 1) return 4;
    return 0;
  endfunction

  int expq[5][5][$];   // [in][out] queue of sequence numbers
  int sent = 0, recv = 0;
  logic acc[5] = '{default: 1'b0};

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) begin
        int i, seq;
        i = int'(out_msg[o].ts[19:17]);
        seq = int'(out_msg[o].ts[16:0]);
        checks++; recv++;
        if (exp_port(int'(out_msg[o].dst)) != o) begin
          failures++; $display("FAIL dst %0d left on port %0d", out_msg[o].dst, o);
        end else if (expq[i][o].size() == 0 || expq[i][o][0] != seq) begin
          failures++; $display("FAIL order in %0d out %0d", i, o);
        end else void'(expq[i][o].pop_front());
      end
  end

  initial begin
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; in_msg[i] = '0; out_ready[i] = 1; end
    repeat (2) @(posedge clk); rst_n = 1;
    // Latency of one message through an idle router.
    @(negedge clk);
    in_valid[2] = 1; in_msg[2] = '0; in_msg[2].dst = 8'd5; in_msg[2].ts = {3'd2, 17'd0};
    expq[2][1].push_back(0); sent++;
    @(negedge clk); in_valid[2] = 0;
    checks++; if (out_valid[1]) begin failures++; $display("FAIL too fast"); end
    @(negedge clk);
    checks++; if (!out_valid[1]) begin failures++; $display("FAIL not out after 2 cycles"); end
    @(negedge clk);
    // Random traffic with back-pressure.
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || acc[i]) begin
          in_valid[i] = ($urandom_range(0, 1) == 1);
          if (in_valid[i]) begin
            in_msg[i] = '0;
            in_msg[i].dst = node_t'($urandom_range(0, 8));
            in_msg[i].ts  = {3'(i), 17'(cyc + 1)};
          end
        end
        out_ready[i] = ($urandom_range(0, 3) != 0);
      end
      #1;
      for (int i = 0; i < 5; i++) begin
        acc[i] = in_valid[i] && in_ready[i];
        if (acc[i]) begin
          expq[i][exp_port(int'(in_msg[i].dst))].push_back(int'(in_msg[i].ts[16:0])); sent++;
        end
      end
    end
    @(negedge clk);
    for (int i = 0; i < 5; i++) begin in_valid[i] = 0; out_ready[i] = 1; end
    repeat (50) @(posedge clk);
    checks++;
    if (sent != recv) begin failures++; $display("FAIL sent %0d received %0d", sent, recv); end
    $display("sent=%0d", sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
