// decay_rng -- per-packet random draw for the background counters'
// probabilistic decay.
//
// When a packet meets a background counter that holds another flow, ALBUS
// decrements that counter only with probability 0.1^r, where r is the
// rigidity. This block draws that decision once per packet: a 32-bit Galois
// LFSR (polynomial x^32+x^22+x^2+x+1) advances on every valid packet, and the
// decision is "low 16 bits below 65536/10^r". r = 0, the paper's best setting,
// gives probability 1; r = 1..4 give 6554, 655, 66 and 7 out of 65536.
// The LFSR and the 16-bit comparison are this design's choice; the paper gives
// only the probability.
//
// Timing: decay belongs to the packet that had in_valid high one clock
// earlier. The LFSR restarts from SEED at reset.
module decay_rng #(
  parameter int unsigned RIGIDITY = 0,
  parameter logic [31:0] SEED     = 32'hACE1_2468
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic decay
);

  function automatic logic [16:0] threshold(input int unsigned r);
    int unsigned t;
    t = 65536;
    for (int unsigned i = 0; i < r; i++) t = (t + 5) / 10;
    return 17'(t);
  endfunction

  localparam logic [16:0] THR = threshold(RIGIDITY);

  logic [31:0] lfsr;
  logic [31:0] lfsr_next;

  assign lfsr_next = lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr  <= (SEED == 32'd0) ? 32'd1 : SEED;
      decay <= 1'b0;
    end else if (in_valid) begin
      lfsr  <= lfsr_next;
      decay <= {1'b0, lfsr[15:0]} < THR;
    end
  end

endmodule
