// tb_drain_timebase -- self-checking testbench of the drain clock.
//
// Sends packets with random nanosecond gaps (including gaps across the 32-bit
// timestamp wrap and a change of gamma) and checks each drain-clock value,
// one clock after its packet, against a 64-bit integer model. Directed checks
// at the start: with gamma = 1/8 byte per ns (2^29), gaps of 8 ns advance the
// clock by exactly one byte; the 1 Mbit/s setting drains 125 bytes per ms.
module tb_drain_timebase;
  import albus_pkg::*;
  import albus_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [31:0] ts_ns = '0;
  logic [GAMMA_W-1:0] gamma = 32'h2000_0000;
  logic out_valid;
  logic [TS_W-1:0] t_drain;

  int checks = 0, failures = 0;
  tb_time_t st;
  longint unsigned now = 0;

  drain_timebase dut (.clk, .rst_n, .in_valid, .ts_ns, .gamma, .out_valid, .t_drain);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d expected %0d", w, got, exp);
    end
  endtask

  task automatic pkt(longint unsigned gap, bit v);
    longint unsigned e;
    @(negedge clk);
    in_valid = v;
    if (v) begin
      now = (now + gap) & 64'hFFFF_FFFF;
      ts_ns = now[31:0];
      e = drain_step(st, now, gamma);
    end
    @(posedge clk); #1;
    chk("valid", out_valid, v);
    if (v) chk("t_drain", t_drain, e);
  endtask

  initial begin
    st = '{default: 0};
    now = 64'd4_000_000_000;   // start close to the ns wrap
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    pkt(0, 1);
    chk("first packet starts at 0", t_drain, 0);
    pkt(8, 1);
    chk("8 ns at 1/8 B/ns", t_drain, 1);
    pkt(800, 1);
    chk("808 ns at 1/8 B/ns", t_drain, 101);
    pkt(0, 0);
    pkt(400_000_000, 1);       // crosses the 2^32 ns wrap
    chk("after wrap", t_drain, 101 + 50_000_000);
    gamma = GAMMA_1MBPS;
    for (int i = 0; i < 2000; i++) begin
      longint unsigned g;
      case ($urandom % 4)
        0: g = 0;
        1: g = $urandom % 100;
        2: g = $urandom % 100_000;
        default: g = $urandom % 200_000_000;
      endcase
      pkt(g, ($urandom % 6) != 0);
    end
    // 1 ms at 1 Mbit/s drains 125 bytes
    begin
      longint unsigned t_prev;
      pkt(0, 1);
      t_prev = t_drain;
      pkt(1_000_000, 1);
      chk("1 ms at 1 Mbit/s", (t_drain - t_prev) & 64'hFFFF_FFFF, 125);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
