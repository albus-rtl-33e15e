// onehot_rom -- memory that turns a binary cell index into a one-hot cell
// select vector.
//
// Following the paper's FPGA design, the decoder is not a gate-level
// decoder but a single memory: the word at address i holds the vector with
// only bit i set. The contents are computed at elaboration (word i = 1 << i),
// so no data file is needed; with the default 10-bit index the memory is
// 1024 words of 1024 bits, a block-RAM sized ROM on an FPGA.
//
// Timing: synchronous read, data_o is the word at the address presented on
// the previous rising edge with en high (one clock of latency, held while en
// is low). No reset: the word is only used together with a valid bit that the
// caller pipelines alongside.
module onehot_rom #(
  parameter int unsigned IDX_W = 10
) (
  input  logic                clk,
  input  logic                en,
  input  logic [IDX_W-1:0]    addr,
  output logic [2**IDX_W-1:0] data_o
);

  localparam int unsigned DEPTH = 2**IDX_W;

  logic [DEPTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      mem[i] = DEPTH'(1) << i;
  end

  always_ff @(posedge clk) begin
    if (en) data_o <= mem[addr];
  end

endmodule
