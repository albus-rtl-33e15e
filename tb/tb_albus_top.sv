// tb_albus_top -- end-to-end testbench of the ALBUS monitor at its default
// size (1024 cells, 12-round hash, rigidity 0).
//
// Configuration is the paper's base setting: gamma = 1 Mbit/s, beta = 50 KB,
// push threshold T = 10 KB (time-out beta/gamma = 0.4 s). The stimulus mixes
//   - 16 "contending" flows, four per cell in four cells, whose keys the
//     testbench finds by searching random keys with the reference hash, so that
//     LBs and BCs are shared and every case of the algorithm occurs;
//   - background flows with random keys spread over all cells;
//   - a final burst phase in which each cell's burster sends at 5.6 Gbit/s.
// Gaps between packets are drawn from 0 ns (back-to-back clocks) to 0.6 s, so
// that buckets fill up, drain, time out and report. A reference model (hash,
// drain clock, one model cell per index) predicts, for every packet, the cell
// index, the case taken and the report bit; the checker compares each output
// and checks that it appears exactly NROUNDS+2 = 14 clocks after the packet
// entered, one packet per clock. Every mechanism of the design must occur at
// least once: each case of Fig. 4 (except the no-decay draw, which cannot
// happen at rigidity 0), the time-out, a report, and two packets to one cell in
// consecutive clocks.
module tb_albus_top;
  timeunit 1ns;
  timeprecision 1ps;
  import albus_pkg::*;
  import albus_ref_pkg::*;

  localparam int unsigned NR  = 12;
  localparam int unsigned LAT = NR + 2;
  localparam int NRAND = 20000;
  localparam int NPKT  = NRAND + 4 * 120;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [KEY_W-1:0] in_key = '0;
  logic [SIZE_W-1:0] in_size = '0;
  logic [31:0] in_ts_ns = '0;
  logic [HKEY_W-1:0] cfg_hash_key;
  logic [GAMMA_W-1:0] cfg_gamma;
  logic [LBC_W-1:0] cfg_beta;
  logic [BCC_W-1:0] cfg_push_t;
  logic out_valid;
  logic [KEY_W-1:0] out_key;
  logic [9:0] out_idx;
  logic [3:0] out_event;
  logic out_report;

  albus_top dut (
    .clk, .rst_n, .in_valid, .in_key, .in_size, .in_ts_ns,
    .cfg_hash_key, .cfg_gamma, .cfg_beta, .cfg_push_t,
    .out_valid, .out_key, .out_idx, .out_event, .out_report
  );

  always #2.5 clk = ~clk;   // 5 ns clock, 200 Mpackets/s

  typedef struct {
    logic [KEY_W-1:0] key;
    int idx;
    int ev;
    bit rep;
    int cyc;
  } exp_t;

  int checks = 0, failures = 0;
  int cyc = 0;
  exp_t expq [$];
  ref_cell_t cells [1024];
  tb_time_t tm;
  int seen [12];
  int n_reports = 0, n_b2b_same = 0, n_out = 0, n_b2b = 0;
  logic [KEY_W-1:0] flows [16];
  int last_idx = -1;
  bit last_valid = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output checker ----------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL output without packet");
      end else begin
        exp_t e;
        e = expq.pop_front();
        checks += 5;
        if (out_key !== e.key) begin failures++; if (failures < 20) $display("FAIL key"); end
        if (out_idx !== 10'(e.idx)) begin failures++; if (failures < 20) $display("FAIL idx %0d exp %0d", out_idx, e.idx); end
        if (out_event !== 4'(e.ev)) begin
          failures++;
          if (failures < 20) $display("FAIL event %0d exp %0d at cell %0d", out_event, e.ev, e.idx);
        end
        if (out_report !== e.rep) begin failures++; if (failures < 20) $display("FAIL report %0d exp %0d", out_report, e.rep); end
        if (cyc - e.cyc != LAT) begin
          failures++;
          if (failures < 20) $display("FAIL latency %0d expected %0d", cyc - e.cyc, LAT);
        end
        if (out_report) n_reports++;
      end
    end
  end

  // ---------------- stimulus ----------------
  longint unsigned now_ns = 0;

  task automatic send(logic [KEY_W-1:0] k, int s, longint unsigned gap_ns);
    logic [95:0] dg;
    exp_t e;
    bit rep;
    int idx, fid;
    longint unsigned td;
    int idle;
    // a gap of g ns is g/5 clocks; long gaps are shortened to a few idle
    // clocks because the design only sees the timestamps
    idle = (gap_ns < 5) ? 0 : ((gap_ns / 5 > 3) ? 3 : int'(gap_ns / 5));
    now_ns = (now_ns + gap_ns) & 64'hFFFF_FFFF;
    if (idle > 0) begin
      @(negedge clk);
      in_valid = 1'b0;
      repeat (idle - 1) @(negedge clk);
      last_valid = 0;
    end
    @(negedge clk);
    in_valid = 1'b1;
    in_key   = k;
    in_size  = SIZE_W'(s);
    in_ts_ns = now_ns[31:0];
    dg  = hash_ref(k, cfg_hash_key, NR);
    idx = int'(dg[9:0]);
    fid = int'(dg[33:10]);
    td  = drain_step(tm, now_ns, cfg_gamma);
    e.key = k;
    e.idx = idx;
    e.ev  = cell_step(cells[idx], fid, s, longint'(td), 1'b1, int'(cfg_beta), int'(cfg_push_t), rep);
    e.rep = rep;
    e.cyc = cyc;
    seen[e.ev]++;
    if (last_valid) n_b2b++;
    if (last_valid && last_idx == idx) n_b2b_same++;
    last_valid = 1;
    last_idx = idx;
    expq.push_back(e);
  endtask

  function automatic logic [KEY_W-1:0] rand_key();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    cfg_hash_key = 128'h6A09_E667_BB67_AE85_3C6E_F372_A54F_F53A;
    cfg_gamma    = GAMMA_1MBPS;
    cfg_beta     = BETA_50KB;
    cfg_push_t   = PUSH_T_10KB;
    tm = '{default: 0};
    foreach (cells[i]) cells[i] = '{default: 0};
    // four flows in each of the cells 3, 200, 517 and 1000
    begin
      int tgt [4] = '{3, 200, 517, 1000};
      int nf [4] = '{0, 0, 0, 0};
      int found = 0;
      while (found < 16) begin
        logic [KEY_W-1:0] k;
        logic [95:0] dg;
        k = rand_key();
        dg = hash_ref(k, cfg_hash_key, NR);
        for (int c = 0; c < 4; c++)
          if (int'(dg[9:0]) == tgt[c] && nf[c] < 4) begin
            flows[4*c + nf[c]] = k;
            nf[c]++;
            found++;
          end
      end
    end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    for (int i = 0; i < NRAND; i++) begin
      logic [KEY_W-1:0] k;
      int s, r;
      longint unsigned g;
      r = $urandom % 100;
      if (r < 75) begin
        // contending flows: flow 4c+0 of each cell is the heavy burster
        int c, j;
        c = $urandom % 4;
        j = ($urandom % 3 == 0) ? 0 : ($urandom % 4);
        k = flows[4*c + j];
        s = (j == 0) ? 1000 + ($urandom % 500) : 64 + ($urandom % 1400);
      end else begin
        k = rand_key();
        s = 64 + ($urandom % 1436);
      end
      r = $urandom % 1000;
      if (r < 500)      g = 0;
      else if (r < 800) g = $urandom % 20_000;
      else if (r < 990) g = $urandom % 20_000_000;
      else              g = 300_000_000 + ($urandom % 300_000_000);
      send(k, s, g);
    end
    // burst phase: in each contending cell the burster sends 1400-byte
    // packets every 2 us (5.6 Gbit/s), interleaved with the cell's other flows;
    // it is pushed into the LB past T and reported once its bucket passes beta
    for (int c = 0; c < 4; c++)
      for (int i = 0; i < 120; i++) begin
        if (i % 4 == 3) send(flows[4*c + 1 + ($urandom % 3)], 64 + ($urandom % 200), 0);
        else            send(flows[4*c], 1400, 2000);
      end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(posedge clk);

    checks++;
    if (expq.size() != 0 || n_out != NPKT) begin
      failures++;
      $display("FAIL %0d packets in, %0d results out", NPKT, n_out);
    end
    // every mechanism must have happened
    for (int e = 1; e <= 11; e++) begin
      if (e == E_BC_SKIP) continue;
      checks++;
      if (seen[e] == 0) begin
        failures++;
        $display("FAIL case %0d never happened", e);
      end
    end
    checks += 2;
    if (n_reports == 0)  begin failures++; $display("FAIL no report"); end
    if (n_b2b_same == 0) begin failures++; $display("FAIL no back-to-back packets to one cell"); end
    $display("packets=%0d back_to_back=%0d same_cell_back_to_back=%0d reports=%0d", NPKT, n_b2b, n_b2b_same, n_reports);
    $display("cases: assign=%0d report=%0d keep=%0d evict=%0d bc_assign=%0d inc=%0d decay=%0d replace=%0d push=%0d timeout=%0d",
             seen[1], seen[2], seen[3], seen[4], seen[5], seen[6], seen[7], seen[8], seen[10], seen[11]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
