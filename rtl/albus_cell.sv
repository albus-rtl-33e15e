// albus_cell -- one ALBUS cell: a leaky bucket (LB), its background counter
// (BC) and the decision logic that applies one packet to them.
//
// A packet is hashed to exactly one cell; that cell sees sel=1 for one clock
// with the packet in req and updates its LB and BC at the clock edge. All
// other cells hold their state. The case distinction is the one of the ALBUS
// algorithm:
//   LB empty                              -> assign the flow to the LB (t, s)
//   LB holds the flow: c' = max(c-d,0)+s with d = t - LB.t
//       c' > beta                         -> report, pull the BC flow into LB
//       else s > d                        -> keep, LB <= (t, c')
//       else                              -> evict, pull the BC flow into LB
//   LB holds another flow:
//       LB older than the time-out        -> evict LB flow, pull BC flow
//       BC empty                          -> BC <= (f, s)
//       BC holds the flow, c+s > T        -> push: LB <= (f, t, s),
//                                            BC <= (old LB flow, old LB count)
//       BC holds the flow                 -> BC.c += s
//       BC holds another flow, decay drawn-> BC.c -= s, replaced by (f, s) if < 0
// A pulled flow enters the LB with count 0 and a timestamp of -infinity
// (flag tinf), so its first packet is counted as s with no drain, and the
// BC is cleared. The LB timestamp keeps the pull time for the time-out check.
//
// Timing: combinational from (sel, req, cfg, state) to ok/ev; state updates
// at the rising clock edge when sel is high. Back-to-back packets to the same
// cell are handled because the next packet sees the updated registers.
//
// Interface: ok is high unless this cell reports the current packet's flow;
// the top ANDs the ok of all cells. ev names the case taken (EV_NONE when not
// selected). lb_o/bc_o expose the state for observation.
//
// The drain volume d is a plain subtraction because timestamps arrive in drain
// units (bytes at rate gamma). c - d + s is formed by a carry-save adder and
// a final ripple adder, following the paper's description of the cell as
// ripple-carry adders, a carry-save adder and decision logic.
//
// Choices of this design where the paper is silent: the first packet of a
// pulled flow is kept (counted as s) instead of being tested against an
// infinite drain; on a time-out the current packet is applied to the cell as
// it is after the pull; the push test is made only when the BC count grows;
// counts saturate at their field width; the decay amount is the packet size.
module albus_cell
  import albus_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sel,    // one-hot select bit for this cell
  input  cell_req_t  req,
  input  albus_cfg_t cfg,
  output logic       ok,     // low when this cell reports the current flow
  output logic [3:0] ev,     // albus_event_e of the case taken
  output lb_t        lb_o,
  output bc_t        bc_o
);

  lb_t lb_q, lb_d;
  bc_t bc_q, bc_d;
  albus_event_e ev_d;
  logic report;

  // carry-save addition of three operands followed by a ripple-carry adder
  localparam int unsigned CW = LBC_W + 2;
  function automatic logic [CW-1:0] add3(input logic [CW-1:0] a, b, c, input logic cin);
    logic [CW-1:0] s, k;
    s = a ^ b ^ c;
    k = ((a & b) | (a & c) | (b & c)) << 1;
    return s + k + CW'(cin);
  endfunction

  // drain since the last update (wraps modulo 2^TS_W like the timestamps)
  logic [TS_W-1:0] d_full;
  logic [TS_W-1:0] age;
  logic            d_lt_c;      // bucket not emptied by the drain
  logic            s_gt_d;      // net inflow positive
  logic [CW-1:0]   c_raw;
  logic [LBC_W-1:0] c_new;
  logic [BCC_W:0]  bc_sum;
  logic [BCC_W-1:0] bc_inc;

  always_comb begin
    d_full = req.t - lb_q.t;
    age    = d_full;
    d_lt_c = d_full < TS_W'(lb_q.c);
    s_gt_d = TS_W'(req.size) > d_full;
    // c - d + s = c + s + ~d + 1, valid when d < c (d then fits LBC_W bits)
    c_raw  = add3(CW'(lb_q.c), CW'(req.size), ~CW'(d_full[LBC_W-1:0]), 1'b1);
    if (lb_q.tinf || !d_lt_c) c_raw = CW'(req.size);
    c_new  = (c_raw > CW'({LBC_W{1'b1}})) ? {LBC_W{1'b1}} : c_raw[LBC_W-1:0];
    bc_sum = {1'b0, bc_q.c} + (BCC_W+1)'(req.size);
    bc_inc = bc_sum[BCC_W] ? {BCC_W{1'b1}} : bc_sum[BCC_W-1:0];
  end

  always_comb begin
    lb_d   = lb_q;
    bc_d   = bc_q;
    ev_d   = EV_NONE;
    report = 1'b0;
    if (sel) begin
      if (!lb_q.valid) begin
        // (0) empty LB
        lb_d = '{valid: 1'b1, fid: req.fid, t: req.t, tinf: 1'b0, c: req.size};
        ev_d = EV_LB_ASSIGN;
      end else if (lb_q.fid == req.fid) begin
        if (c_new > cfg.beta || (!lb_q.tinf && !s_gt_d)) begin
          // (1) report or (3) evict: pull the BC flow into the LB
          report = c_new > cfg.beta;
          ev_d   = report ? EV_REPORT : EV_LB_EVICT;
          if (bc_q.valid)
            lb_d = '{valid: 1'b1, fid: bc_q.fid, t: req.t, tinf: 1'b1, c: '0};
          else
            lb_d = '0;
          bc_d = '0;
        end else begin
          // (2) keep the flow in the LB
          lb_d = '{valid: 1'b1, fid: req.fid, t: req.t, tinf: 1'b0, c: c_new};
          ev_d = EV_LB_KEEP;
        end
      end else if (age > cfg.timeout) begin
        // time-out safeguard: LB flow inactive, pull the BC flow; the current
        // packet then meets the cell as it is after the pull
        ev_d = EV_TIMEOUT;
        if (bc_q.valid && bc_q.fid != req.fid) begin
          lb_d = '{valid: 1'b1, fid: bc_q.fid, t: req.t, tinf: 1'b1, c: '0};
          bc_d = '{valid: 1'b1, fid: req.fid, c: req.size};
        end else begin
          lb_d = '{valid: 1'b1, fid: req.fid, t: req.t, tinf: 1'b0, c: req.size};
          bc_d = '0;
        end
      end else if (!bc_q.valid) begin
        // (4) empty BC
        bc_d = '{valid: 1'b1, fid: req.fid, c: req.size};
        ev_d = EV_BC_ASSIGN;
      end else if (bc_q.fid == req.fid) begin
        if (bc_sum > (BCC_W+1)'(cfg.push_t)) begin
          // (7) push: swap LB and BC flows, BC adopts the LB count
          lb_d = '{valid: 1'b1, fid: req.fid, t: req.t, tinf: 1'b0, c: req.size};
          bc_d = '{valid: 1'b1, fid: lb_q.fid, c: lb_q.c};
          ev_d = EV_PUSH;
        end else begin
          // (5) increase BC count
          bc_d.c = bc_inc;
          ev_d   = EV_BC_INC;
        end
      end else if (req.decay) begin
        // (6) probabilistic decay of a foreign BC flow
        if (bc_q.c < BCC_W'(req.size)) begin
          bc_d = '{valid: 1'b1, fid: req.fid, c: req.size};
          ev_d = EV_BC_REPLACE;
        end else begin
          bc_d.c = bc_q.c - BCC_W'(req.size);
          ev_d   = EV_BC_DECAY;
        end
      end else begin
        ev_d = EV_BC_SKIP;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lb_q <= '0;
      bc_q <= '0;
    end else if (sel) begin
      lb_q <= lb_d;
      bc_q <= bc_d;
    end
  end

  assign ok   = !report;
  assign ev   = ev_d;
  assign lb_o = lb_q;
  assign bc_o = bc_q;

endmodule
