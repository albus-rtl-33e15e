// tb_albus_cell -- self-checking testbench of one ALBUS cell.
//
// Drives the cell directly with packet requests: first a directed sequence
// that walks through every case of the algorithm (assign, report, keep,
// evict, BC assign, increase, decay, replace, skip, push, time-out), then
// random traffic of four flows with random sizes, gaps and decay draws.
// After every packet the event code, the ok line and the full LB and BC
// state are compared with the reference model in albus_ref_pkg. Each case
// must occur at least once. Idle clocks (sel low) must leave the state alone.
module tb_albus_cell;
  import albus_pkg::*;
  import albus_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic sel = 1'b0;
  cell_req_t req = '0;
  albus_cfg_t cfg;
  logic ok;
  logic [3:0] ev;
  lb_t lb;
  bc_t bc;

  int checks = 0, failures = 0;
  int seen [12];
  ref_cell_t m;
  longint now = 0;

  localparam int BETA = 6000, PUSHT = 2500;

  albus_cell dut (.clk, .rst_n, .sel, .req, .cfg, .ok, .ev, .lb_o(lb), .bc_o(bc));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (t=%0d)", what, got, exp, now);
    end
  endtask

  task automatic compare_state();
    check("lb.valid", lb.valid, m.lb_v);
    if (m.lb_v) begin
      check("lb.fid", lb.fid, m.lb_f);
      check("lb.t", lb.t, m.lb_t);
      check("lb.tinf", lb.tinf, m.lb_inf);
      check("lb.c", lb.c, m.lb_c);
    end
    check("bc.valid", bc.valid, m.bc_v);
    if (m.bc_v) begin
      check("bc.fid", bc.fid, m.bc_f);
      check("bc.c", bc.c, m.bc_c);
    end
  endtask

  task automatic pkt(int f, int s, longint gap, bit dcy);
    int e; bit rep;
    now = (now + gap) & 64'hFFFF_FFFF;
    @(negedge clk);
    sel = 1'b1;
    req = '{fid: FID_W'(f), size: SIZE_W'(s), t: TS_W'(now), decay: dcy};
    e = cell_step(m, f, s, now, dcy, BETA, PUSHT, rep);
    #1;
    check("event", ev, e);
    check("ok", ok, !rep);
    seen[e]++;
    @(posedge clk);
    #1;
    sel = 1'b0;
    compare_state();
  endtask

  initial begin
    m = '{default: 0};
    cfg = '{beta: BETA, push_t: PUSHT, timeout: BETA};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    compare_state();
    // directed walk through the cases
    pkt(1, 1000, 0, 1);     // (0) assign A to LB
    pkt(2, 800, 10, 1);     // (4) B to BC
    pkt(2, 800, 10, 1);     // (5) B count 1600
    pkt(3, 1000, 10, 1);    // (6) decay B to 600
    pkt(3, 1000, 10, 1);    // (6) replace B by C (600-1000<0)
    pkt(4, 500, 10, 0);     // (6) no decay drawn
    pkt(3, 1000, 10, 1);    // (5) C 2000
    pkt(3, 1000, 10, 1);    // (7) push: C into LB, A into BC
    pkt(3, 3000, 10, 1);    // (2) keep
    pkt(3, 3000, 10, 1);    // (1) report, pull A with -inf
    pkt(1, 500, 10, 1);     // (2) pulled flow kept, first packet counted
    pkt(1, 200, 5000, 1);   // (3) drained: evict, BC empty -> LB empty
    pkt(2, 300, 10, 1);     // (0) assign B
    pkt(4, 300, 10, 1);     // (4) D to BC
    pkt(1, 300, 7000, 1);   // time-out: D pulled into LB, A into BC
    // idle clocks leave the state alone
    repeat (3) begin
      @(negedge clk);
      req = '{fid: 24'd1, size: 16'd9999, t: '1, decay: 1'b1};
      #1;
      check("idle event", ev, 0);
      check("idle ok", ok, 1);
      @(posedge clk); #1;
      compare_state();
    end
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      int f, s; longint g;
      f = 1 + ($urandom % 4);
      s = 40 + ($urandom % 2400);
      g = ($urandom % 8 == 0) ? ($urandom % 9000) : ($urandom % 800);
      pkt(f, s, g, ($urandom % 3) != 0);
    end
    for (int e = 1; e <= 11; e++) begin
      checks++;
      if (seen[e] == 0) begin
        failures++;
        $display("FAIL case %0d never happened", e);
      end
    end
    $display("cases seen: assign=%0d report=%0d keep=%0d evict=%0d bc_assign=%0d inc=%0d decay=%0d replace=%0d skip=%0d push=%0d timeout=%0d",
             seen[1], seen[2], seen[3], seen[4], seen[5], seen[6], seen[7], seen[8], seen[9], seen[10], seen[11]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
