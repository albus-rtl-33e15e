// drain_timebase -- converts packet timestamps in nanoseconds into a drain
// clock counted in bytes, shared by all cells.
//
// The leaky-bucket drain between two packets of a flow is d = gamma*(t - t').
// Since gamma is the same for every flow, this block multiplies only the time
// between consecutive packets of the whole stream by gamma and accumulates the
// result. A cell then obtains d by subtracting two drain-clock values, with no
// multiplier per cell. gamma is given in bytes per nanosecond as an unsigned
// Q0.32 fraction (1 Mbit/s = 536871). The accumulator is Q32.32; its integer
// part is the drain clock and wraps modulo 2^32 like the cells' 32-bit LB
// timestamps. Nanosecond timestamps may wrap as well: the difference of two
// consecutive timestamps is taken modulo 2^32, so the input only needs to be
// monotonic with gaps below 4.29 s.
//
// Timing: one packet per clock; t_drain belongs to the packet that had
// in_valid high one clock earlier (out_valid marks it). The first packet after
// reset starts the clock at 0. gamma may change between packets; the change
// applies from the next gap on.
//
// This block is this design's way of computing the paper's drain volume; the
// paper gives the formula, not a circuit.
module drain_timebase
  import albus_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [31:0]        ts_ns,
  input  logic [GAMMA_W-1:0] gamma,
  output logic               out_valid,
  output logic [TS_W-1:0]    t_drain
);

  logic        started;
  logic [31:0] prev_ts;
  logic [63:0] acc;
  logic [31:0] delta;
  logic [63:0] acc_next;

  always_comb begin
    delta    = started ? (ts_ns - prev_ts) : 32'd0;
    acc_next = acc + (64'(delta) * 64'(gamma));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      started   <= 1'b0;
      prev_ts   <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      t_drain   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        started <= 1'b1;
        prev_ts <= ts_ns;
        acc     <= acc_next;
        t_drain <= acc_next[63:32];
      end
    end
  end

endmodule
