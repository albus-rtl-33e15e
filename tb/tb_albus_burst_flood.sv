// tb_albus_burst_flood -- burst-flood workload on the full-size ALBUS monitor.
//
// Replays a synthetic version of the base evaluation scenario through the
// default albus_top (1024 cells, 12 hash rounds, rigidity 0) with the base
// flow specification gamma = 1 Mbit/s, beta = 50 KB and push threshold
// T = 10 KB, over an observation interval of 5 s:
//   - attack: bursts of overuse ratio 1.2 and width 200 ms, i.e. 1000-byte
//     packets at 3.4 Mbit/s (one every 2.353 ms, 85 KB per burst), each burst
//     from its own flow, starting uniformly at random in the interval;
//   - background: short flows of 1..20 packets of 64..1500 bytes with gaps of
//     10 us .. 50 ms. None can exceed beta (at most 30 KB per flow), so none
//     may ever be reported.
// The evaluated monitor held 300 KB (18,750 cells) on a 10 Gbit/s link with
// 38,000 bursts. This design has 1024 cells, so traffic is scaled by
// 1024/18,750: about 2,075 bursts (~0.28 Gbit/s of attack) and ~0.55 Gbit/s
// of background. The scaling and the background flow shapes are this
// testbench's choice; the rates, widths and configuration are the paper's.
//
// All packets are sorted by time and fed one per clock (the design sees only
// timestamps, so idle time between packets is not simulated). Every output is
// compared with the reference model (hash, drain clock, cell algorithm).
// The testbench prints recall (share of bursts whose flow was reported) and
// counts a failure for any reported background flow (the algorithm never
// reports a compliant flow), for zero recall, and for any case of the
// algorithm other than the no-decay draw that never occurred.
module tb_albus_burst_flood;
  timeunit 1ns;
  timeprecision 1ps;
  import albus_pkg::*;
  import albus_ref_pkg::*;

  localparam int unsigned NR  = 12;
  localparam int unsigned LAT = NR + 2;
  localparam longint OBS_NS    = 64'd5_000_000_000;
  localparam longint WIDTH_NS  = 200_000_000;
  localparam longint APKT_GAP  = 2_352_941;       // 1000 B at 3.4 Mbit/s
  localparam int     NBURST    = 2075;            // 38,000 * 1024 / 18,750
  localparam longint BG_BYTES  = 64'd341_000_000;    // 10 Gbit/s * 5 s * 1024 / 18,750

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

  always #2.5 clk = ~clk;

  typedef struct {
    longint t;
    int     tag;    // >= 0: attack burst number, < 0: background flow -tag-1
    int     size;
  } pkt_t;

  typedef struct {
    int idx;
    int ev;
    bit rep;
    int tag;
    int cyc;
  } exp_t;

  pkt_t pk [$];
  exp_t expq [$];
  logic [KEY_W-1:0] akey [NBURST];
  logic [KEY_W-1:0] bkey [$];
  ref_cell_t cells [1024];
  tb_time_t tm;
  bit burst_hit [NBURST];
  int seen [12];
  int checks = 0, failures = 0, cyc = 0, n_out = 0, n_fp = 0, n_rep = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [KEY_W-1:0] rand_key();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  function automatic logic [KEY_W-1:0] key_of(int tag);
    return (tag >= 0) ? akey[tag] : bkey[-tag-1];
  endfunction

  // ---------------- output checker ----------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      n_out++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL output without packet");
      end else begin
        e = expq.pop_front();
        checks += 5;
        if (out_key !== key_of(e.tag)) begin failures++; if (failures < 20) $display("FAIL key"); end
        if (out_idx !== 10'(e.idx)) begin failures++; if (failures < 20) $display("FAIL idx"); end
        if (out_event !== 4'(e.ev)) begin failures++; if (failures < 20) $display("FAIL event %0d exp %0d", out_event, e.ev); end
        if (out_report !== e.rep) begin failures++; if (failures < 20) $display("FAIL report"); end
        if (cyc - e.cyc != LAT) begin failures++; if (failures < 20) $display("FAIL latency %0d", cyc - e.cyc); end
        if (out_report) begin
          n_rep++;
          if (e.tag >= 0) burst_hit[e.tag] = 1'b1;
          else n_fp++;
        end
      end
    end
  end

  initial begin
    longint bg;
    int nhit;
    bg = 0;
    cfg_hash_key = 128'h510E_527F_9B05_688C_1F83_D9AB_5BE0_CD19;
    cfg_gamma    = GAMMA_1MBPS;
    cfg_beta     = BETA_50KB;
    cfg_push_t   = PUSH_T_10KB;
    tm = '{default: 0};
    foreach (cells[i]) cells[i] = '{default: 0};

    // attack bursts
    for (int b = 0; b < NBURST; b++) begin
      longint t0;
      akey[b] = rand_key();
      t0 = longint'($urandom % 4800) * 1_000_000 + longint'($urandom % 1_000_000);
      for (longint t = t0; t < t0 + WIDTH_NS; t += APKT_GAP)
        pk.push_back('{t: t, tag: b, size: 1000});
    end
    // background flows
    while (bg < BG_BYTES) begin
      int n, f;
      longint t;
      f = bkey.size();
      bkey.push_back(rand_key());
      n = 1 + ($urandom % 20);
      t = longint'($urandom % 5000) * 1_000_000 + longint'($urandom % 1_000_000);
      for (int i = 0; i < n && t < OBS_NS; i++) begin
        int s;
        s = 64 + ($urandom % 1437);
        pk.push_back('{t: t, tag: -f-1, size: s});
        bg += s;
        t += 10_000 + longint'($urandom % 50_000_000);
      end
    end
    pk.sort(x) with (x.t);
    $display("%0d packets: %0d bursts, %0d background flows", pk.size(), NBURST, bkey.size());

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    foreach (pk[i]) begin
      exp_t e;
      logic [95:0] dg;
      longint unsigned ts;
      bit rep;
      logic [KEY_W-1:0] k;
      @(negedge clk);
      k  = key_of(pk[i].tag);
      ts = longint'(pk[i].t) & 64'hFFFF_FFFF;
      in_valid = 1'b1;
      in_key   = k;
      in_size  = SIZE_W'(pk[i].size);
      in_ts_ns = ts[31:0];
      dg = hash_ref(k, cfg_hash_key, NR);
      e.idx = int'(dg[9:0]);
      e.ev  = cell_step(cells[e.idx], int'(dg[33:10]), pk[i].size,
                        longint'(drain_step(tm, ts, cfg_gamma)), 1'b1,
                        int'(cfg_beta), int'(cfg_push_t), rep);
      e.rep = rep;
      e.tag = pk[i].tag;
      e.cyc = cyc;
      seen[e.ev]++;
      expq.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LAT + 4) @(posedge clk);

    checks++;
    if (expq.size() != 0 || n_out != pk.size()) begin
      failures++;
      $display("FAIL %0d packets in, %0d results out", pk.size(), n_out);
    end
    nhit = 0;
    foreach (burst_hit[b]) nhit += burst_hit[b];
    checks += 2;
    if (n_fp != 0) begin failures++; $display("FAIL %0d reports of compliant background flows", n_fp); end
    if (nhit == 0) begin failures++; $display("FAIL no burst detected"); end
    for (int e = 1; e <= 11; e++) begin
      if (e == E_BC_SKIP) continue;
      checks++;
      if (seen[e] == 0) begin failures++; $display("FAIL case %0d never happened", e); end
    end
    $display("reports=%0d detected_bursts=%0d of %0d recall=%0.3f false_positives=%0d",
             n_rep, nhit, NBURST, real'(nhit) / NBURST, n_fp);
    $display("cases: assign=%0d report=%0d keep=%0d evict=%0d bc_assign=%0d inc=%0d decay=%0d replace=%0d push=%0d timeout=%0d",
             seen[1], seen[2], seen[3], seen[4], seen[5], seen[6], seen[7], seen[8], seen[10], seen[11]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
