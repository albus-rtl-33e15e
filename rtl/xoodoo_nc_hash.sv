// xoodoo_nc_hash -- keyed, pipelined hash of a flow key into a 96-bit digest
// from rounds of the Xoodoo permutation.
//
// The monitor needs exactly one hash per packet: its least significant 10
// bits select the cell, and this design also takes the flow ID stored in the
// cell from the digest bits just above them. The hash is built on the
// 384-bit Xoodoo state (3 planes of 4 32-bit lanes; lane x of plane y sits at
// bits 32*(x+4y)). Each round applies theta, rho-west, iota, chi and rho-east;
// the round constants are those of Xoodoo[12], of which the last NROUNDS are
// used.
//
// Absorption (this design's choice; the exact Xoodoo-NC construction is not
// given here): plane 0 is loaded with the 128-bit secret key, plane 1 with the
// flow key zero-extended to 128 bits, plane 2 with the constant 1 as a domain
// and padding word. After NROUNDS rounds the digest is the low 96 bits of
// plane 0 (lanes 0..2).
//
// Timing: one round per pipeline stage, a new key every clock, digest valid
// NROUNDS clocks after in_valid (out_valid marks it). Only the valid chain is
// reset; the data registers need none.
module xoodoo_nc_hash
  import albus_pkg::*;
#(
  parameter int unsigned NROUNDS = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [KEY_W-1:0]    in_key,
  input  logic [HKEY_W-1:0]   hkey,
  output logic                out_valid,
  output logic [DIGEST_W-1:0] out_digest
);

  localparam int unsigned SW = 384;

  // round constants of Xoodoo[12], rounds -11 .. 0
  localparam logic [31:0] RC [12] = '{
    32'h058, 32'h038, 32'h3C0, 32'h0D0, 32'h120, 32'h014,
    32'h060, 32'h02C, 32'h380, 32'h0F0, 32'h1A0, 32'h012
  };

  function automatic logic [31:0] rotl(input logic [31:0] v, input int unsigned n);
    return (v << n) | (v >> (32 - n));
  endfunction

  function automatic logic [SW-1:0] xoodoo_round(input logic [SW-1:0] s, input logic [31:0] rc);
    logic [31:0] a [3][4];
    logic [31:0] b [3][4];
    logic [31:0] p [4];
    logic [31:0] e [4];
    logic [SW-1:0] r;
    for (int y = 0; y < 3; y++)
      for (int x = 0; x < 4; x++)
        a[y][x] = s[32*(x+4*y) +: 32];
    // theta: add the column parity, shifted and rotated
    for (int x = 0; x < 4; x++) p[x] = a[0][x] ^ a[1][x] ^ a[2][x];
    for (int x = 0; x < 4; x++) e[x] = rotl(p[(x+3)%4], 5) ^ rotl(p[(x+3)%4], 14);
    for (int y = 0; y < 3; y++)
      for (int x = 0; x < 4; x++)
        a[y][x] = a[y][x] ^ e[x];
    // rho-west: plane 1 shifted by one lane, plane 2 rotated by 11
    for (int x = 0; x < 4; x++) begin
      b[1][x] = a[1][(x+3)%4];
      b[2][x] = rotl(a[2][x], 11);
    end
    for (int x = 0; x < 4; x++) begin
      a[1][x] = b[1][x];
      a[2][x] = b[2][x];
    end
    // iota
    a[0][0] = a[0][0] ^ rc;
    // chi
    for (int x = 0; x < 4; x++) begin
      b[0][x] = ~a[1][x] & a[2][x];
      b[1][x] = ~a[2][x] & a[0][x];
      b[2][x] = ~a[0][x] & a[1][x];
    end
    for (int y = 0; y < 3; y++)
      for (int x = 0; x < 4; x++)
        a[y][x] = a[y][x] ^ b[y][x];
    // rho-east: plane 1 rotated by 1, plane 2 shifted by two lanes and rotated by 8
    for (int x = 0; x < 4; x++) begin
      b[1][x] = rotl(a[1][x], 1);
      b[2][x] = rotl(a[2][(x+2)%4], 8);
    end
    for (int x = 0; x < 4; x++) begin
      a[1][x] = b[1][x];
      a[2][x] = b[2][x];
    end
    for (int y = 0; y < 3; y++)
      for (int x = 0; x < 4; x++)
        r[32*(x+4*y) +: 32] = a[y][x];
    return r;
  endfunction

  logic [SW-1:0] init;
  assign init = {128'd1, 128'(in_key), hkey};

  logic [SW-1:0] st [NROUNDS];
  logic          vld [NROUNDS];

  always_ff @(posedge clk) begin
    st[0] <= xoodoo_round(init, RC[12-NROUNDS]);
    for (int k = 1; k < NROUNDS; k++)
      st[k] <= xoodoo_round(st[k-1], RC[12-NROUNDS+k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NROUNDS; k++) vld[k] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int k = 1; k < NROUNDS; k++) vld[k] <= vld[k-1];
    end
  end

  assign out_valid  = vld[NROUNDS-1];
  assign out_digest = st[NROUNDS-1][DIGEST_W-1:0];

  initial begin
    assert (NROUNDS >= 1 && NROUNDS <= 12) else $error("NROUNDS must be 1..12");
  end

endmodule
