// lease_predictor: chooses the lease an LLC line is handed out with.
//
// Lines that keep being renewed are probably read-mostly, so they earn longer
// leases; a write suggests the line is write-intensive and drops its lease to
// the minimum, because a long lease on a written line makes the writer's
// store timestamp jump far ahead and expires many other lines. Every LLC line
// stores its current lease (cur_lease) as a 2-bit code c meaning MIN_LEASE<<c,
// i.e. 8, 16, 32 or 64. Per request:
//   WRITE                                        -> cur_lease = minimum
//   RENEW with req_lease == cur_lease, below max -> cur_lease doubles
//   otherwise (READ, or a renew with another lease) cur_lease unchanged
// and the returned lease is the new cur_lease. Purely combinational; the LLC
// writes new_lease back into the line in the same cycle it answers.
//
// The rule, the minimum and maximum leases (8 and 64) and the 2-bit code come
// from the paper; encoding the lease as a shift amount is this design's choice.
module lease_predictor
  import tardis_pkg::*;
(
  input  lp_req_e req_type,
  input  lease_t  req_lease,    // lease of the L1's copy (renew only)
  input  lease_t  cur_lease,    // lease stored with the LLC line
  output lease_t  new_lease,    // lease to store and return
  output ts_t     lease_ticks,  // new_lease as a timestamp increment
  output logic    doubled
);
  always_comb begin
    new_lease = cur_lease;
    doubled   = 1'b0;
    if (req_type == LP_WRITE) begin
      new_lease = LEASE_MIN_CODE;
    end else if (req_type == LP_RENEW && req_lease == cur_lease &&
                 cur_lease < LEASE_MAX_CODE) begin
      new_lease = cur_lease + 2'd1;
      doubled   = 1'b1;
    end
    lease_ticks = lease_value(new_lease);
  end
endmodule
