// tb_decay_rng -- self-checking testbench of the decay draw.
//
// Instantiates the draw for rigidity 0 and 1. With r = 0 every packet must
// decay. With r = 1 the share of decaying packets over 20000 draws must be
// 10 % within +-1 %; the exact sequence is checked against an LFSR model, and
// the LFSR must hold while no packet arrives.
module tb_decay_rng;
  logic clk = 1'b0, rst_n = 1'b0;
  logic v = 1'b0;
  logic d0, d1;
  int checks = 0, failures = 0;
  int n1 = 0, total = 0;
  logic [31:0] lfsr;

  decay_rng #(.RIGIDITY(0)) u0 (.clk, .rst_n, .in_valid(v), .decay(d0));
  decay_rng #(.RIGIDITY(1)) u1 (.clk, .rst_n, .in_valid(v), .decay(d1));

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lfsr = 32'hACE1_2468;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 24000; i++) begin
      bit e;
      @(negedge clk);
      v = (i % 6) != 5;
      if (v) begin
        e = lfsr[15:0] < 16'd6554;
        lfsr = lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
      end
      @(posedge clk); #1;
      if (v) begin
        total++;
        n1 += d1;
        checks += 2;
        if (d0 !== 1'b1) failures++;
        if (d1 !== e) begin
          failures++;
          if (failures < 10) $display("FAIL draw %0d got %0d expected %0d", i, d1, e);
        end
      end
    end
    checks++;
    if (n1 * 100 < total * 9 || n1 * 100 > total * 11) begin
      failures++;
      $display("FAIL r=1 rate %0d / %0d", n1, total);
    end
    $display("r=1 decay rate %0d / %0d", n1, total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
