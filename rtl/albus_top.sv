// albus_top -- the ALBUS burst monitor datapath: one packet per clock.
//
// For every packet (flow key, size, nanosecond timestamp) the datapath
//   1. hashes the flow key with the keyed Xoodoo-based hash (xoodoo_nc_hash)
//      into a 96-bit digest, pipelined one round per clock;
//   2. looks the 10 least significant digest bits up in a memory holding the
//      one-hot vector of each index (onehot_rom), which selects one of the
//      1024 cells; in the same clock it converts the timestamp into the drain
//      clock (drain_timebase) and draws the decay decision (decay_rng);
//   3. lets the selected albus_cell apply the ALBUS case distinction to its
//      leaky bucket and background counter. Every cell drives an "ok" line
//      that drops only when it reports; the ok lines of all cells are ANDed,
//      and a low AND output flags the packet's flow as excessively bursty.
// The hash, the one-hot memory, the 1024 cells and the final AND follow the
// paper's FPGA design; the drain clock, the random source, the event output
// and the pipeline registers are this design's.
//
// Interface: in_valid/in_key/in_size/in_ts_ns take one packet per clock, with
// timestamps non-decreasing. The configuration inputs are static: the hash
// key, the allowed rate gamma (bytes per ns, unsigned Q0.32), the burstiness
// allowance beta and the push threshold T (bytes). The LB time-out is beta/gamma
// in time, which on the drain clock is simply beta. For each packet, NROUNDS+2
// clocks after it entered, out_valid rises with the packet's flow key, cell
// index, the case it took (albus_pkg::albus_event_e) and out_report, high when
// the flow has been reported.
//
// Digest bits above the index and flow ID (95:34) are not used.
//
// Timing: initiation interval 1, latency NROUNDS+2 clocks (14 with the
// default 12 rounds). Two packets of the same cell in consecutive clocks are
// exact, since a cell finishes its update in one clock.
module albus_top
  import albus_pkg::*;
#(
  parameter int unsigned IDX_W    = 10,  // 2^IDX_W cells
  parameter int unsigned NROUNDS  = 12,  // Xoodoo rounds in the hash
  parameter int unsigned RIGIDITY = 0    // r: BC decay probability 0.1^r
) (
  input  logic               clk,
  input  logic               rst_n,
  // packet metadata
  input  logic               in_valid,
  input  logic [KEY_W-1:0]   in_key,
  input  logic [SIZE_W-1:0]  in_size,
  input  logic [31:0]        in_ts_ns,
  // configuration
  input  logic [HKEY_W-1:0]  cfg_hash_key,
  input  logic [GAMMA_W-1:0] cfg_gamma,
  input  logic [LBC_W-1:0]   cfg_beta,
  input  logic [BCC_W-1:0]   cfg_push_t,
  // per-packet result
  output logic               out_valid,
  output logic [KEY_W-1:0]   out_key,
  output logic [IDX_W-1:0]   out_idx,
  output logic [3:0]         out_event,
  output logic               out_report
);

  localparam int unsigned NCELLS = 2**IDX_W;

  // ---------------- stage H: hash, metadata delayed alongside ----------------
  logic                h_valid;
  logic [DIGEST_W-1:0] h_digest;
  logic [KEY_W-1:0]    key_dl  [NROUNDS];
  logic [SIZE_W-1:0]   size_dl [NROUNDS];
  logic [31:0]         ts_dl   [NROUNDS];

  xoodoo_nc_hash #(.NROUNDS(NROUNDS)) u_hash (
    .clk, .rst_n,
    .in_valid  (in_valid),
    .in_key    (in_key),
    .hkey      (cfg_hash_key),
    .out_valid (h_valid),
    .out_digest(h_digest)
  );

  always_ff @(posedge clk) begin
    key_dl[0]  <= in_key;
    size_dl[0] <= in_size;
    ts_dl[0]   <= in_ts_ns;
    for (int k = 1; k < NROUNDS; k++) begin
      key_dl[k]  <= key_dl[k-1];
      size_dl[k] <= size_dl[k-1];
      ts_dl[k]   <= ts_dl[k-1];
    end
  end

  // ---------------- stage A: one-hot decode, drain clock, decay draw ----------------
  logic [NCELLS-1:0] onehot;
  logic              a_valid, tb_valid;
  logic [KEY_W-1:0]  a_key;
  logic [IDX_W-1:0]  a_idx;
  logic [FID_W-1:0]  a_fid;
  logic [SIZE_W-1:0] a_size;
  logic [TS_W-1:0]   a_t;
  logic              a_decay;

  onehot_rom #(.IDX_W(IDX_W)) u_rom (
    .clk,
    .en    (h_valid),
    .addr  (h_digest[IDX_W-1:0]),
    .data_o(onehot)
  );

  drain_timebase u_time (
    .clk, .rst_n,
    .in_valid (h_valid),
    .ts_ns    (ts_dl[NROUNDS-1]),
    .gamma    (cfg_gamma),
    .out_valid(tb_valid),
    .t_drain  (a_t)
  );

  decay_rng #(.RIGIDITY(RIGIDITY)) u_rng (
    .clk, .rst_n,
    .in_valid(h_valid),
    .decay   (a_decay)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a_valid <= 1'b0;
    else        a_valid <= h_valid;
  end

  always_ff @(posedge clk) begin
    if (h_valid) begin
      a_key  <= key_dl[NROUNDS-1];
      a_size <= size_dl[NROUNDS-1];
      a_idx  <= h_digest[IDX_W-1:0];
      a_fid  <= h_digest[IDX_W +: FID_W];
    end
  end

  // ---------------- stage C: cells ----------------
  cell_req_t  req;
  albus_cfg_t cfg;
  logic [NCELLS-1:0] cell_ok;
  logic [3:0]        cell_ev [NCELLS];
  logic              all_ok;
  logic [3:0]        ev_any;

  assign req = '{fid: a_fid, size: a_size, t: a_t, decay: a_decay};
  assign cfg = '{beta: cfg_beta, push_t: cfg_push_t, timeout: TS_W'(cfg_beta)};

  for (genvar i = 0; i < NCELLS; i++) begin : g_cell
    albus_cell u_cell (
      .clk, .rst_n,
      .sel (a_valid & onehot[i]),
      .req (req),
      .cfg (cfg),
      .ok  (cell_ok[i]),
      .ev  (cell_ev[i]),
      .lb_o(),
      .bc_o()
    );
  end

  // the AND of all cells: low when the selected cell reports
  assign all_ok = &cell_ok;

  // only the selected cell drives a non-zero event code
  always_comb begin
    ev_any = '0;
    for (int i = 0; i < NCELLS; i++) ev_any = ev_any | cell_ev[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_report <= 1'b0;
      out_event  <= '0;
    end else begin
      out_valid  <= a_valid;
      out_report <= a_valid & ~all_ok;
      out_event  <= a_valid ? ev_any : 4'(EV_NONE);
    end
  end

  always_ff @(posedge clk) begin
    if (a_valid) begin
      out_key <= a_key;
      out_idx <= a_idx;
    end
  end

  // the drain clock and the select vector must line up with the packet
  a_step: assert property (@(posedge clk) disable iff (!rst_n) tb_valid == a_valid)
    else $error("drain clock out of step with packet");
  a_sel: assert property (@(posedge clk) disable iff (!rst_n) a_valid |-> $onehot(onehot))
    else $error("cell select not one-hot");

endmodule
