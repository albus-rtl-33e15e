// tb_xoodoo_nc_hash -- self-checking testbench of the pipelined Xoodoo-based
// flow-key hash.
//
// Feeds one random flow key per clock (with some idle gaps and a key change
// halfway) and checks every digest against the flat-array reference
// permutation in albus_ref_pkg. Also checks that the digest appears exactly
// NROUNDS clocks after its key and that idle inputs produce no output. Runs
// the full 12-round hash.
module tb_xoodoo_nc_hash;
  import albus_pkg::*;
  import albus_ref_pkg::*;

  localparam int unsigned NR = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [KEY_W-1:0] in_key = '0;
  logic [HKEY_W-1:0] hkey;
  logic out_valid;
  logic [DIGEST_W-1:0] out_digest;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [95:0] exp_q [$];
  int          t_q   [$];
  int sent = 0, got = 0;

  xoodoo_nc_hash #(.NROUNDS(NR)) dut (.clk, .rst_n, .in_valid, .in_key, .hkey, .out_valid, .out_digest);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks += 2;
      got++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected digest");
      end else begin
        logic [95:0] e; int t0;
        e = exp_q.pop_front();
        t0 = t_q.pop_front();
        if (out_digest !== e) begin
          failures++;
          if (failures < 10) $display("FAIL digest %h expected %h", out_digest, e);
        end
        if (cyc - t0 != NR) begin
          failures++;
          $display("FAIL latency %0d expected %0d", cyc - t0, NR);
        end
      end
    end
  end

  initial begin
    hkey = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      if (i == 300) hkey = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;
      in_valid = ($urandom % 5) != 0;
      in_key = {$urandom, $urandom, $urandom, $urandom};
      if (i < 4) in_key = KEY_W'(i);   // tiny keys still spread
      if (in_valid) begin
        exp_q.push_back(hash_ref(in_key, hkey, NR));
        t_q.push_back(cyc);
        sent++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (NR + 3) @(posedge clk);
    checks++;
    if (got != sent || exp_q.size() != 0) begin
      failures++;
      $display("FAIL sent %0d got %0d", sent, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
