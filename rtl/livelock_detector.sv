// livelock_detector: notices a core spinning on a stale shared line and asks
// for a check of that line's freshness.
//
// In Tardis a writer never notifies readers, so a core that keeps reading a
// shared copy at a small lts would never see the new value. Spinning loads hit
// a handful of addresses over and over without lts advancing; this unit
// detects that pattern. An Address History Buffer (AHB) of AHB_ENTRIES entries
// holds recently loaded line addresses with an access counter each. Every load
// that hits a valid shared L1 line queries the detector (query_valid):
//   * address in the AHB: its counter counts up; when it reaches thresh_count
//     the counter clears and check is raised: the L1 sends a check request
//     instead of using its copy;
//   * otherwise the address replaces the least recently used entry, count 0.
// All counters clear when lts rises through a load or fence (reset_counts),
// as the core is then making progress.
// thresh_count adapts on every check response (resp_valid): newer data found
// (resp_updated) -> thresh_count = MIN_THRESH and the run of useless checks
// restarts; otherwise the run grows and after CHECK_THRESH useless checks in a
// row thresh_count doubles, up to MAX_THRESH.
//
// Timing: check is combinational from the query and the registered state;
// all state changes at the next rising edge.
//
// From the paper: the AHB, LRU replacement, the counter rules, 8 entries,
// thresholds 100..800 and 10 checks, 2-byte counters. Own choices: a check
// fires when the incremented counter reaches or passes thresh_count (the
// paper's algorithm uses equality; "reaches or passes" also covers a counter
// left above a threshold that has just fallen to its minimum), and the run of
// useless checks restarts after each doubling.
module livelock_detector
  import tardis_pkg::*;
#(
  parameter int unsigned AHB_ENTRIES  = 8,
  parameter int unsigned CNT_W        = 16,
  parameter int unsigned MIN_THRESH   = 100,
  parameter int unsigned MAX_THRESH   = 800,
  parameter int unsigned CHECK_THRESH = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             query_valid,
  input  laddr_t           query_laddr,
  output logic             check,
  input  logic             reset_counts,
  input  logic             resp_valid,
  input  logic             resp_updated,
  output logic [CNT_W-1:0] thresh_count
);
  localparam int unsigned AW = $clog2(AHB_ENTRIES);
  localparam int unsigned CCW = $clog2(CHECK_THRESH + 1);

  logic             vld   [AHB_ENTRIES];
  laddr_t           tag   [AHB_ENTRIES];
  logic [CNT_W-1:0] cnt   [AHB_ENTRIES];
  logic [AW-1:0]    age   [AHB_ENTRIES];   // 0 = most recently used
  logic [CCW-1:0]   check_count;

  logic          hit;
  logic [AW-1:0] hit_idx, victim, touch;
  logic [CNT_W-1:0] cnt_inc;

  always_comb begin
    hit = 1'b0; hit_idx = '0;
    for (int unsigned i = 0; i < AHB_ENTRIES; i++)
      if (vld[i] && tag[i] == query_laddr) begin hit = 1'b1; hit_idx = AW'(i); end
    victim = '0;
    for (int unsigned i = 0; i < AHB_ENTRIES; i++)
      if (age[i] == AW'(AHB_ENTRIES - 1)) victim = AW'(i);
    touch   = hit ? hit_idx : victim;
    cnt_inc = cnt[hit_idx] + 1'b1;
    check   = query_valid && hit && (cnt_inc >= thresh_count);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < AHB_ENTRIES; i++) begin
        vld[i] <= 1'b0;
        tag[i] <= '0;
        cnt[i] <= '0;
        age[i] <= AW'(i);
      end
      thresh_count <= CNT_W'(MIN_THRESH);
      check_count  <= '0;
    end else begin
      if (query_valid) begin
        // LRU ages: entries younger than the touched one grow older.
        for (int unsigned i = 0; i < AHB_ENTRIES; i++)
          if (age[i] < age[touch]) age[i] <= age[i] + 1'b1;
        age[touch] <= '0;
        if (hit) begin
          cnt[hit_idx] <= check ? '0 : cnt_inc;
        end else begin
          vld[victim] <= 1'b1;
          tag[victim] <= query_laddr;
          cnt[victim] <= '0;
        end
      end
      if (reset_counts)
        for (int unsigned i = 0; i < AHB_ENTRIES; i++) cnt[i] <= '0;
      if (resp_valid) begin
        if (resp_updated) begin
          thresh_count <= CNT_W'(MIN_THRESH);
          check_count  <= '0;
        end else if (check_count == CCW'(CHECK_THRESH - 1)) begin
          check_count <= '0;
          if (thresh_count < CNT_W'(MAX_THRESH)) thresh_count <= thresh_count << 1;
        end else begin
          check_count <= check_count + 1'b1;
        end
      end
    end
  end
endmodule
