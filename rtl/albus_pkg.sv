// albus_pkg -- types and constants shared by the ALBUS burst monitor.
//
// ALBUS keeps an indexed array of cells. Each cell holds one leaky bucket
// (LB: flow ID, timestamp, count) that monitors one flow exactly, and one
// background counter (BC: flow ID, count) that looks for the dominant flow
// among the other flows hashed to the same cell. This package fixes the field
// widths of those records, the request broadcast to the cells for every
// packet, the run-time configuration, and the event codes that name the case
// of the algorithm a packet took.
//
// Field widths follow the paper's memory budget of 16 bytes per LB-BC pair:
// a 3-byte flow ID, a 4-byte LB timestamp, a 2-byte LB count and a 2-byte BC
// count. The 96-bit digest with its 10-bit cell index is the paper's as well.
// This design's own choices: the 104-bit flow key (an IPv4 five-tuple), the
// 16-bit packet size, the stored flow ID being 24 digest bits above the
// index, the timestamp being kept in drain units (bytes drained at rate
// gamma, see drain_timebase), and the valid/infinite-time flag bits.
package albus_pkg;

  // ---- widths ----
  localparam int unsigned KEY_W    = 104;  // flow key, IPv4 five-tuple
  localparam int unsigned HKEY_W   = 128;  // secret key of the keyed hash
  localparam int unsigned DIGEST_W = 96;   // hash digest
  localparam int unsigned FID_W    = 24;   // stored flow ID (3 bytes)
  localparam int unsigned TS_W     = 32;   // LB timestamp (4 bytes)
  localparam int unsigned LBC_W    = 16;   // LB count (2 bytes)
  localparam int unsigned BCC_W    = 16;   // BC count (2 bytes)
  localparam int unsigned SIZE_W   = 16;   // packet size in bytes
  localparam int unsigned GAMMA_W  = 32;   // rate in bytes/ns, unsigned Q0.32

  // ---- defaults of the paper's base configuration ----
  // gamma = 1 Mbit/s = 125000 B/s = 1.25e-4 B/ns -> 1.25e-4 * 2^32 = 536871
  localparam logic [GAMMA_W-1:0] GAMMA_1MBPS = 32'd536871;
  localparam logic [LBC_W-1:0]   BETA_50KB   = 16'd50000;  // 50 KB
  localparam logic [BCC_W-1:0]   PUSH_T_10KB = 16'd10000;  // 10 KB

  // ---- leaky bucket record ----
  typedef struct packed {
    logic              valid;  // LB holds a flow
    logic [FID_W-1:0]  fid;    // flow ID
    logic [TS_W-1:0]   t;      // time of last update, drain units
    logic              tinf;   // timestamp is -infinity (flow pulled from BC)
    logic [LBC_W-1:0]  c;      // bucket count, bytes
  } lb_t;

  // ---- background counter record ----
  typedef struct packed {
    logic              valid;
    logic [FID_W-1:0]  fid;
    logic [BCC_W-1:0]  c;
  } bc_t;

  // ---- per-packet request broadcast to all cells ----
  typedef struct packed {
    logic [FID_W-1:0]  fid;    // flow ID of the packet
    logic [SIZE_W-1:0] size;   // packet size, bytes
    logic [TS_W-1:0]   t;      // packet time, drain units
    logic              decay;  // this packet may decay a foreign BC (prob 0.1^r)
  } cell_req_t;

  // ---- run-time configuration ----
  typedef struct packed {
    logic [LBC_W-1:0]  beta;     // burstiness allowance, bytes
    logic [BCC_W-1:0]  push_t;   // push threshold T, bytes
    logic [TS_W-1:0]   timeout;  // LB time-out, drain units (beta/gamma in time)
  } albus_cfg_t;

  // ---- what a packet did in its cell (numbers follow Fig. 4 where given) ----
  typedef enum logic [3:0] {
    EV_NONE       = 4'd0,
    EV_LB_ASSIGN  = 4'd1,   // (0) empty LB: assign flow to LB
    EV_REPORT     = 4'd2,   // (1) flow in LB exceeds beta: report, pull
    EV_LB_KEEP    = 4'd3,   // (2) flow in LB, net inflow positive: keep
    EV_LB_EVICT   = 4'd4,   // (3) flow in LB, net inflow not positive: evict, pull
    EV_BC_ASSIGN  = 4'd5,   // (4) occupied LB, empty BC: assign flow to BC
    EV_BC_INC     = 4'd6,   // (5) occupied LB, flow in BC: increase BC count
    EV_BC_DECAY   = 4'd7,   // (6) occupied LB, foreign BC: decrease BC count
    EV_BC_REPLACE = 4'd8,   // (6) foreign BC count below 0: replace BC flow
    EV_BC_SKIP    = 4'd9,   // (6) foreign BC, decay not drawn this packet
    EV_PUSH       = 4'd10,  // (7) BC count above T: swap LB and BC flows
    EV_TIMEOUT    = 4'd11   // LB time-out: evict LB flow, pull from BC
  } albus_event_e;

endpackage
