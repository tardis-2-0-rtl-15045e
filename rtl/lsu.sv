// lsu: the core's load/store unit in front of the L1 under TSO.
//
// It takes one memory operation at a time from the core:
//   store  - retires into the store buffer and completes the next cycle
//            (stalls only while the buffer is full);
//   load   - served from the store buffer when it holds the word (youngest
//            store wins), otherwise sent to the L1; a load goes to the L1
//            ahead of buffered stores, so loads bypass pending stores;
//   fence  - waits until the store buffer is empty and the last store has
//            been performed, then pulses fence so that lts catches up with
//            sts, and completes.
// Buffered stores drain to the L1 in order whenever the L1 is free and no
// load is waiting for it.
//
// Interface: core_req_* is a valid/ready handshake; core_resp_valid is a
// one-cycle pulse (with core_resp_rdata for loads), one per request. The L1
// port is also valid/ready, and the L1 answers each request with one
// l1_resp_valid pulse; one request is outstanding at a time.
//
// From the paper: the store buffer with forwarding, loads passing stores,
// fence draining the buffer. Own choices: one core operation in flight, and
// load-over-store priority at the L1 port.
module lsu
  import tardis_pkg::*;
#(
  parameter int unsigned SB_DEPTH = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  // core side
  input  logic    core_req_valid,
  input  mem_op_e core_req_op,
  input  waddr_t  core_req_addr,
  input  word_t   core_req_wdata,
  output logic    core_req_ready,
  output logic    core_resp_valid,
  output word_t   core_resp_rdata,
  // L1 side
  output logic    l1_req_valid,
  output mem_op_e l1_req_op,
  output waddr_t  l1_req_addr,
  output word_t   l1_req_wdata,
  input  logic    l1_req_ready,
  input  logic    l1_resp_valid,
  input  word_t   l1_resp_rdata,
  // timestamp manager and events
  output logic    fence,
  output logic    mem_access,
  output logic    ev_forward,
  output logic    ev_full_stall
);
  typedef enum logic [1:0] {S_IDLE, S_LD, S_LD_WAIT, S_FENCE} state_e;
  state_e state;
  waddr_t ld_addr;
  logic   busy;        // an L1 request is outstanding
  logic   busy_store;  // ... and it is a store

  logic   sb_full, sb_empty, sb_head_valid, sb_fwd_hit;
  waddr_t sb_head_addr;
  word_t  sb_head_data, sb_fwd_data;
  logic   sb_push, sb_pop;

  store_buffer #(.DEPTH(SB_DEPTH)) u_sb (
    .clk, .rst_n,
    .push_valid (sb_push), .push_addr(core_req_addr), .push_data(core_req_wdata),
    .full(sb_full), .empty(sb_empty),
    .head_valid(sb_head_valid), .head_addr(sb_head_addr), .head_data(sb_head_data),
    .pop(sb_pop),
    .lookup_addr(core_req_addr), .fwd_hit(sb_fwd_hit), .fwd_data(sb_fwd_data)
  );

  wire idle_acc = (state == S_IDLE) && core_req_valid;
  always_comb begin
    core_req_ready = 1'b0;
    if (state == S_IDLE)
      core_req_ready = (core_req_op == OP_ST) ? !sb_full : 1'b1;
    sb_push       = idle_acc && core_req_op == OP_ST && !sb_full;
    ev_full_stall = idle_acc && core_req_op == OP_ST && sb_full;
    ev_forward    = idle_acc && core_req_op == OP_LD && sb_fwd_hit;

    // L1 port: a waiting load first, otherwise the oldest buffered store.
    l1_req_valid = 1'b0;
    l1_req_op    = OP_LD;
    l1_req_addr  = ld_addr;
    l1_req_wdata = sb_head_data;
    sb_pop       = 1'b0;
    if (!busy) begin
      if (state == S_LD) begin
        l1_req_valid = 1'b1;
      end else if (sb_head_valid) begin
        l1_req_valid = 1'b1;
        l1_req_op    = OP_ST;
        l1_req_addr  = sb_head_addr;
        sb_pop       = l1_req_ready;
      end
    end
    fence = (state == S_FENCE) && sb_empty && !busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ld_addr <= '0;
      busy <= 1'b0;
      busy_store <= 1'b0;
      core_resp_valid <= 1'b0;
      core_resp_rdata <= '0;
      mem_access <= 1'b0;
    end else begin
      core_resp_valid <= 1'b0;
      mem_access <= 1'b0;
      if (l1_req_valid && l1_req_ready) begin
        busy <= 1'b1;
        busy_store <= (l1_req_op == OP_ST);
      end else if (l1_resp_valid) begin
        busy <= 1'b0;
      end
      case (state)
        S_IDLE: if (core_req_valid && core_req_ready) begin
          case (core_req_op)
            OP_ST: begin core_resp_valid <= 1'b1; mem_access <= 1'b1; end
            OP_LD: if (sb_fwd_hit) begin
                core_resp_valid <= 1'b1;
                core_resp_rdata <= sb_fwd_data;
                mem_access <= 1'b1;
              end else begin
                ld_addr <= core_req_addr;
                state <= S_LD;
              end
            default: state <= S_FENCE;
          endcase
        end
        S_LD: if (!busy && l1_req_ready) state <= S_LD_WAIT;
        S_LD_WAIT: if (l1_resp_valid && !busy_store) begin
          core_resp_valid <= 1'b1;
          core_resp_rdata <= l1_resp_rdata;
          mem_access <= 1'b1;
          state <= S_IDLE;
        end
        S_FENCE: if (fence) begin
          core_resp_valid <= 1'b1;
          mem_access <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
