// tb_lease_predictor: every combination of request kind, request lease and
// current lease against the prediction rule written out independently.
module tb_lease_predictor;
  import tardis_pkg::*;
  lp_req_e req_type;
  lease_t  req_lease, cur_lease, new_lease;
  ts_t     lease_ticks;
  logic    doubled;
  int checks = 0, failures = 0;

  lease_predictor dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++)
      for (int r = 0; r < 4; r++)
        for (int c = 0; c < 4; c++) begin
          int cur_val, req_val, exp_val;
          req_type = lp_req_e'(t); req_lease = lease_t'(r); cur_lease = lease_t'(c);
          #1;
          cur_val = 8 << c; req_val = 8 << r;
          if (t == 1) exp_val = 8;
          else if (t == 2 && req_val == cur_val && cur_val < 64) exp_val = cur_val * 2;
          else exp_val = cur_val;
          checks++;
          if (int'(lease_ticks) != exp_val || (8 << new_lease) != exp_val ||
              doubled != (exp_val == 2 * cur_val)) begin
            failures++;
            $display("FAIL type %0d req %0d cur %0d: got %0d exp %0d", t, req_val, cur_val,
                     lease_ticks, exp_val);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
