// store_buffer: FIFO of retired stores waiting to be performed in the L1.
//
// Under TSO a store leaves the core as soon as it retires and waits here, so
// later loads do not wait for it. A load whose word is in the buffer takes the
// value of the youngest matching store (store-to-load forwarding); this is
// legal under TSO even though that store has not yet received a commit
// timestamp. Stores leave in program order, which keeps Store->Store order.
//
// Interface: push (push_valid & !full) appends at the tail; the head is
// presented on head_*, and pop removes it. The lookup port is combinational:
// fwd_hit/fwd_data answer for lookup_addr in the same cycle. Push and pop may
// happen in the same cycle.
//
// The buffer and forwarding follow the paper; its depth is not given there and
// DEPTH = 8 is this design's choice.
module store_buffer
  import tardis_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  input  waddr_t push_addr,
  input  word_t  push_data,
  output logic   full,
  output logic   empty,
  output logic   head_valid,
  output waddr_t head_addr,
  output word_t  head_data,
  input  logic   pop,
  input  waddr_t lookup_addr,
  output logic   fwd_hit,
  output word_t  fwd_data
);
  localparam int unsigned PW = $clog2(DEPTH);
  waddr_t addr_q [DEPTH];
  word_t  data_q [DEPTH];
  logic [PW-1:0] head, tail;
  logic [PW:0]   count;

  assign full       = (count == (PW+1)'(DEPTH));
  assign empty      = (count == '0);
  assign head_valid = !empty;
  assign head_addr  = addr_q[head];
  assign head_data  = data_q[head];

  // Youngest match wins: scan from oldest to youngest, keep the last hit.
  always_comb begin
    fwd_hit  = 1'b0;
    fwd_data = '0;
    for (int unsigned i = 0; i < DEPTH; i++) begin
      logic [PW-1:0] idx;
      idx = head + PW'(i);
      if ((PW+1)'(i) < count && addr_q[idx] == lookup_addr) begin
        fwd_hit  = 1'b1;
        fwd_data = data_q[idx];
      end
    end
  end

  wire do_push = push_valid && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; count <= '0;
    end else begin
      if (do_push) tail <= tail + 1'b1;
      if (do_pop)  head <= head + 1'b1;
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) begin
      addr_q[tail] <= push_addr;
      data_q[tail] <= push_data;
    end
  end
endmodule
