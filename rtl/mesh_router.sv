// mesh_router: one router of a 2-D mesh with dimension-ordered (XY) routing.
//
// Five ports: 0 local, 1 east (x+1), 2 west (x-1), 3 north (y+1), 4 south
// (y-1). Each input has a FIFO_DEPTH-entry queue; each output has one
// register that drives the link. A message first travels along X until its
// column matches, then along Y, then leaves through the local port; XY
// routing on a mesh cannot deadlock. Each output picks among the inputs whose
// head message wants it with a round-robin pointer.
//
// Timing: a message written into an input queue at one edge can be in the
// output register at the next, and in the neighbour's input queue one edge
// later: two cycles per hop, one in the router and one on the link, as in the
// evaluated system. Messages between the same two nodes stay in order.
// Interface: valid/ready on every port; in_ready depends only on the queue
// fill, so there is no combinational path through a router.
//
// From the paper: 2-D mesh, XY routing, 2-cycle hops. Own choices: every
// coherence message is a single (wide) flit rather than 128-bit flits, queue
// depth, round-robin arbitration.
module mesh_router
  import tardis_pkg::*;
#(
  parameter int unsigned MESH_X     = 8,
  parameter int unsigned X          = 0,
  parameter int unsigned Y          = 0,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid  [5],
  input  msg_t in_msg    [5],
  output logic in_ready  [5],
  output logic out_valid [5],
  output msg_t out_msg   [5],
  input  logic out_ready [5]
);
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  msg_t          q     [5][FIFO_DEPTH];
  logic [PW-1:0] q_head[5], q_tail[5];
  logic [PW:0]   q_cnt [5];
  logic [2:0]    route [5];
  logic          grant [5];        // input i's head moves this cycle
  logic [2:0]    rr    [5];        // per-output round-robin start
  logic          load  [5];        // output o loads a message
  logic [2:0]    src   [5];        // ... from this input

  function automatic logic [2:0] xy_route(node_t dst);
    int unsigned dx, dy;
    dx = int'(dst) % MESH_X;
    dy = int'(dst) / MESH_X;
    if (dx > X)      return 3'd1;
    else if (dx < X) return 3'd2;
    else if (dy > Y) return 3'd3;
    else if (dy < Y) return 3'd4;
    else             return 3'd0;
  endfunction

  logic [2:0] ci;
  always_comb begin
    ci = '0;
    for (int i = 0; i < 5; i++) begin
      in_ready[i] = (q_cnt[i] != (PW+1)'(FIFO_DEPTH));
      route[i]    = xy_route(q[i][q_head[i]].dst);
      grant[i]    = 1'b0;
    end
    for (int o = 0; o < 5; o++) begin
      load[o] = 1'b0;
      src[o]  = '0;
      if (!out_valid[o] || out_ready[o]) begin
        for (int k = 0; k < 5; k++) begin
          ci = 3'((int'(rr[o]) + k) % 5);
          if (!load[o] && q_cnt[ci] != '0 && route[ci] == 3'(o)) begin
            load[o] = 1'b1;
            src[o]  = ci;
          end
        end
      end
      if (load[o]) grant[src[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        q_head[i] <= '0; q_tail[i] <= '0; q_cnt[i] <= '0;
        out_valid[i] <= 1'b0; rr[i] <= '0;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        if (push)     q_tail[i] <= (q_tail[i] == PW'(FIFO_DEPTH - 1)) ? '0 : q_tail[i] + 1'b1;
        if (grant[i]) q_head[i] <= (q_head[i] == PW'(FIFO_DEPTH - 1)) ? '0 : q_head[i] + 1'b1;
        q_cnt[i] <= q_cnt[i] + (PW+1)'(push) - (PW+1)'(grant[i]);
      end
      for (int o = 0; o < 5; o++) begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          rr[o] <= (src[o] == 3'd4) ? 3'd0 : src[o] + 3'd1;
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 5; i++)
      if (in_valid[i] && in_ready[i]) q[i][q_tail[i]] <= in_msg[i];
    for (int o = 0; o < 5; o++)
      if (load[o]) out_msg[o] <= q[src[o]][q_head[src[o]]];
  end
endmodule
