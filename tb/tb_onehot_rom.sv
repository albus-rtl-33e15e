// tb_onehot_rom -- self-checking testbench of the index-to-one-hot memory.
//
// Reads every address of the default 1024-word memory in order, then random
// addresses, and checks that the word read one clock later has exactly the
// addressed bit set. Also checks that the output holds while en is low.
module tb_onehot_rom;
  localparam int unsigned IDX_W = 10;
  localparam int unsigned N = 2**IDX_W;

  logic clk = 1'b0;
  logic en = 1'b0;
  logic [IDX_W-1:0] addr = '0;
  logic [N-1:0] data_o;
  int checks = 0, failures = 0;

  onehot_rom dut (.clk, .en, .addr, .data_o);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a);
    logic [N-1:0] e;
    @(negedge clk);
    en = 1'b1;
    addr = IDX_W'(a);
    @(posedge clk); #1;
    e = '0;
    e[a] = 1'b1;
    checks++;
    if (data_o !== e) begin
      failures++;
      if (failures < 10) $display("FAIL address %0d", a);
    end
  endtask

  initial begin
    for (int a = 0; a < N; a++) rd(a);
    for (int i = 0; i < 500; i++) rd($urandom % N);
    rd(77);
    @(negedge clk);
    en = 1'b0;
    addr = 10'd5;
    @(posedge clk); #1;
    checks++;
    if (data_o[77] !== 1'b1 || data_o[5] !== 1'b0) begin
      failures++;
      $display("FAIL output not held while en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
