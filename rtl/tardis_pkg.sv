// tardis_pkg: types and constants shared by the Tardis memory system.
//
// Tardis orders memory operations by logical timestamps instead of physical
// time, so a cacheline carries a write timestamp (wts) and a read timestamp
// (rts) and every core keeps a load timestamp (lts) and a store timestamp
// (sts). This package holds the widths of those timestamps, the cacheline
// format, the 2-bit lease code used by the lease predictor, and the single
// message format carried by the three on-chip networks.
//
// Taken from the paper: 20-bit timestamps, 64-byte lines, a 48-bit address
// space, leases 8/16/32/64 coded in 2 bits, and the request kinds (shared,
// exclusive, renew, check, writeback). Design choices: a message travels as a
// single wide flit, the opcode encoding, and 64-bit core words.
package tardis_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned TS_W      = 20;   // logical timestamp width
  localparam int unsigned ADDR_W    = 48;   // byte address width
  localparam int unsigned LINE_BYTES= 64;
  localparam int unsigned LINE_BITS = LINE_BYTES * 8;
  localparam int unsigned WORD_BITS = 64;   // core load/store width
  localparam int unsigned WORDS     = LINE_BITS / WORD_BITS;
  localparam int unsigned WOFF_W    = $clog2(WORDS);
  localparam int unsigned LOFF_W    = $clog2(LINE_BYTES);
  localparam int unsigned LADDR_W   = ADDR_W - LOFF_W;   // line address
  localparam int unsigned NODE_W    = 8;    // tile id, up to 256 tiles
  localparam int unsigned WADDR_W   = ADDR_W - $clog2(WORD_BITS/8);  // word address

  // ---- leases -------------------------------------------------------------
  // Lease value = MIN_LEASE << code; codes 0..3 give 8, 16, 32, 64.
  localparam int unsigned MIN_LEASE = 8;
  localparam int unsigned MAX_LEASE = 64;
  localparam logic [1:0]  LEASE_MIN_CODE = 2'd0;
  localparam logic [1:0]  LEASE_MAX_CODE = 2'd3;

  typedef logic [TS_W-1:0]      ts_t;
  typedef logic [LADDR_W-1:0]   laddr_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [NODE_W-1:0]    node_t;
  typedef logic [1:0]           lease_t;
  typedef logic [WADDR_W-1:0]   waddr_t;

  function automatic ts_t lease_value(lease_t code);
    return ts_t'(MIN_LEASE) << code;
  endfunction

  function automatic ts_t ts_max(ts_t a, ts_t b);
    return (a > b) ? a : b;
  endfunction

  // ---- core memory operations ----------------------------------------------
  typedef enum logic [1:0] {OP_LD = 2'd0, OP_ST = 2'd1, OP_FENCE = 2'd2} mem_op_e;

  // ---- private cache states (MESI; M means modified and dirty) -------------
  typedef enum logic [1:0] {L1_I = 2'd0, L1_S = 2'd1, L1_E = 2'd2, L1_M = 2'd3} l1_state_e;

  // ---- lease predictor request kinds -----------------------------------------
  typedef enum logic [1:0] {LP_READ = 2'd0, LP_WRITE = 2'd1, LP_RENEW = 2'd2} lp_req_e;

  // ---- coherence messages ------------------------------------------------
  typedef enum logic [3:0] {
    // L1 -> LLC, request network
    REQ_SH     = 4'd0,   // load miss: shared copy, ts = requester lts
    REQ_EX     = 4'd1,   // store: exclusive ownership
    REQ_RENEW  = 4'd2,   // extend rts of the cached version (wts, lease sent)
    REQ_CHECK  = 4'd3,   // is the cached version (wts) still the latest?
    REQ_WB     = 4'd4,   // eviction of an E/M line, with data and timestamps
    // LLC -> L1, down network
    RSP_SH     = 4'd5,   // shared copy: data, wts, rts, lease
    RSP_EX     = 4'd6,   // exclusive copy: data, wts, rts
    RSP_RENEW  = 4'd7,   // renewal succeeded: new rts, lease
    RSP_CHECK  = 4'd8,   // check: version unchanged, rts not extended
    RSP_WB_ACK = 4'd9,   // writeback done
    FWD_SH     = 4'd10,  // owner: downgrade to S, extend rts to ts, write back
    FWD_EX     = 4'd11,  // owner: give up the line, write back
    // L1 -> LLC, response network
    UP_DATA    = 4'd12,  // owner's answer to FWD_*: data, wts, rts, dirty
    UP_NODATA  = 4'd13   // owner no longer holds the line
  } msg_type_e;

  typedef struct packed {
    msg_type_e mtype;
    node_t     src;
    node_t     dst;
    laddr_t    laddr;
    ts_t       ts;      // requester lts, or rts target of a FWD_SH
    ts_t       wts;
    ts_t       rts;
    lease_t    lease;
    logic      dirty;
    line_t     data;
  } msg_t;

  // ---- memory (DRAM controller) port of an LLC slice ------------------------
  typedef struct packed {
    logic   we;
    laddr_t laddr;
    line_t  data;
  } mem_req_t;

  // ---- per-tile event pulses (performance counters) -------------------------
  typedef struct packed {
    logic renew_req;      // L1 sent a renew
    logic check_req;      // livelock detector fired, check sent
    logic check_updated;  // check found newer data
    logic self_inc;       // lts self increment
    logic sb_forward;     // load served from the store buffer
    logic sb_full_stall;  // store stalled on a full store buffer
    logic fence;          // fence completed
    logic l1_writeback;   // L1 evicted an E/M line
    logic e_grant;        // LLC granted E on a load
    logic fwd_sent;       // LLC forwarded a request to an owner
    logic lease_double;   // lease predictor doubled a lease
    logic renew_fail;     // renew found a newer version
    logic llc_fill;       // LLC filled a line from memory
    logic llc_recall;     // LLC recalled an owned victim
  } tile_ev_t;

endpackage
