// tb_store_buffer: random pushes, pops and lookups against a queue model;
// checks order, full/empty and youngest-match forwarding.
module tb_store_buffer;
  import tardis_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, pop = 0;
  waddr_t push_addr = '0, lookup_addr = '0, head_addr;
  word_t push_data = '0, head_data, fwd_data;
  logic full, empty, head_valid, fwd_hit;
  int checks = 0, failures = 0;
  waddr_t qa[$]; word_t qd[$];

  store_buffer #(.DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      push_valid = ($urandom_range(0, 2) != 0);
      push_addr  = waddr_t'($urandom_range(0, 5));
      push_data  = {$urandom, $urandom};
      pop        = ($urandom_range(0, 2) == 0);
      lookup_addr = waddr_t'($urandom_range(0, 5));
      #1;
      checks++;
      if (full != (qa.size() == 4) || empty != (qa.size() == 0)) begin
        failures++; $display("FAIL full/empty size=%0d", qa.size());
      end
      if (qa.size() > 0) begin
        checks++;
        if (head_addr != qa[0] || head_data != qd[0]) begin failures++; $display("FAIL head"); end
      end
      begin
        logic h; word_t d; h = 0; d = '0;
        foreach (qa[i]) if (qa[i] == lookup_addr) begin h = 1; d = qd[i]; end
        checks++;
        if (fwd_hit != h || (h && fwd_data != d)) begin
          failures++; $display("FAIL forward addr %0d", lookup_addr);
        end
      end
      begin
        logic acc, dp;
        acc = push_valid && qa.size() < 4;
        dp  = pop && qa.size() > 0;
        @(posedge clk); #1;
        if (dp) begin void'(qa.pop_front()); void'(qd.pop_front()); end
        if (acc) begin qa.push_back(push_addr); qd.push_back(push_data); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
