// albus_ref_pkg -- behavioural reference models used by the testbenches.
//
// Written independently of the RTL: the Xoodoo permutation works on a flat
// array of 12 lanes, the drain clock uses 64-bit integer arithmetic, and the
// ALBUS cell model follows the algorithm text case by case with signed
// integer counts. The testbenches compare the RTL against these models.
package albus_ref_pkg;

  // ---------------- Xoodoo ----------------
  typedef logic [31:0] lane_t;

  function automatic lane_t rol(lane_t v, int n);
    n = n % 32;
    if (n == 0) return v;
    return (v << n) | (v >> (32 - n));
  endfunction

  function automatic logic [383:0] xoodoo_perm(logic [383:0] s, int nrounds);
    lane_t L [12];
    lane_t T [12];
    lane_t P [4];
    lane_t E [4];
    lane_t rc [12];
    logic [383:0] r;
    rc = '{32'h00000058, 32'h00000038, 32'h000003C0, 32'h000000D0,
           32'h00000120, 32'h00000014, 32'h00000060, 32'h0000002C,
           32'h00000380, 32'h000000F0, 32'h000001A0, 32'h00000012};
    for (int i = 0; i < 12; i++) L[i] = s[i*32 +: 32];
    for (int rnd = 12 - nrounds; rnd < 12; rnd++) begin
      for (int x = 0; x < 4; x++) P[x] = L[x] ^ L[x+4] ^ L[x+8];
      for (int x = 0; x < 4; x++) E[x] = rol(P[(x+3)&3], 5) ^ rol(P[(x+3)&3], 14);
      for (int i = 0; i < 12; i++) L[i] ^= E[i&3];
      T = L;
      for (int x = 0; x < 4; x++) begin
        L[4+x] = T[4+((x+3)&3)];
        L[8+x] = rol(T[8+x], 11);
      end
      L[0] ^= rc[rnd];
      T = L;
      for (int x = 0; x < 4; x++) begin
        L[x]   = T[x]   ^ (~T[4+x] & T[8+x]);
        L[4+x] = T[4+x] ^ (~T[8+x] & T[x]);
        L[8+x] = T[8+x] ^ (~T[x]   & T[4+x]);
      end
      T = L;
      for (int x = 0; x < 4; x++) begin
        L[4+x] = rol(T[4+x], 1);
        L[8+x] = rol(T[8+((x+2)&3)], 8);
      end
    end
    for (int i = 0; i < 12; i++) r[i*32 +: 32] = L[i];
    return r;
  endfunction

  function automatic logic [95:0] hash_ref(logic [103:0] key, logic [127:0] hkey, int nrounds);
    logic [383:0] s;
    s = '0;
    s[127:0]   = hkey;
    s[231:128] = key;
    s[256]     = 1'b1;
    s = xoodoo_perm(s, nrounds);
    return s[95:0];
  endfunction

  // ---------------- drain clock ----------------
  typedef struct {
    bit          started;
    longint unsigned prev;
    longint unsigned acc;   // Q32.32 modulo 2^64
  } tb_time_t;

  function automatic longint unsigned drain_step(ref tb_time_t st, input longint unsigned ts, longint unsigned gamma);
    longint unsigned dt;
    dt = st.started ? ((ts - st.prev) & 64'hFFFF_FFFF) : 0;
    st.acc = st.acc + dt * gamma;
    st.prev = ts;
    st.started = 1;
    return (st.acc >> 32) & 64'hFFFF_FFFF;
  endfunction

  // ---------------- ALBUS cell ----------------
  // event codes, same numbering as the design's albus_event_e
  localparam int E_LB_ASSIGN = 1, E_REPORT = 2, E_LB_KEEP = 3, E_LB_EVICT = 4,
                 E_BC_ASSIGN = 5, E_BC_INC = 6, E_BC_DECAY = 7, E_BC_REPLACE = 8,
                 E_BC_SKIP = 9, E_PUSH = 10, E_TIMEOUT = 11;

  typedef struct {
    bit     lb_v;
    int     lb_f;
    longint lb_t;     // drain units, 0 .. 2^32-1
    bit     lb_inf;   // timestamp -infinity
    int     lb_c;
    bit     bc_v;
    int     bc_f;
    int     bc_c;
  } ref_cell_t;

  // Apply one packet (flow f, size s, drain time t) to a cell.
  // Returns the event code; rep is set when the flow is reported.
  function automatic int cell_step(ref ref_cell_t c, input int f, input int s,
                                   input longint t, input bit decay,
                                   input int beta, input int push_t, output bit rep);
    longint d;
    int cn;
    rep = 0;
    if (!c.lb_v) begin
      c.lb_v = 1; c.lb_f = f; c.lb_t = t; c.lb_inf = 0; c.lb_c = s;
      return E_LB_ASSIGN;
    end
    d = (t - c.lb_t) & 64'hFFFF_FFFF;
    if (c.lb_f == f) begin
      // leaky bucket update; a pulled flow has had infinite drain
      if (c.lb_inf) cn = s;
      else if (d >= c.lb_c) cn = s;
      else cn = c.lb_c - int'(d) + s;
      if (cn > 65535) cn = 65535;
      if (cn > beta || (!c.lb_inf && s <= d)) begin
        rep = (cn > beta);
        if (c.bc_v) begin
          c.lb_f = c.bc_f; c.lb_t = t; c.lb_inf = 1; c.lb_c = 0;
        end else begin
          c.lb_v = 0;
        end
        c.bc_v = 0;
        return rep ? E_REPORT : E_LB_EVICT;
      end
      c.lb_t = t; c.lb_inf = 0; c.lb_c = cn;
      return E_LB_KEEP;
    end
    if (d > beta) begin
      if (c.bc_v && c.bc_f != f) begin
        c.lb_f = c.bc_f; c.lb_t = t; c.lb_inf = 1; c.lb_c = 0;
        c.bc_f = f; c.bc_c = s;
      end else begin
        c.lb_f = f; c.lb_t = t; c.lb_inf = 0; c.lb_c = s;
        c.bc_v = 0;
      end
      return E_TIMEOUT;
    end
    if (!c.bc_v) begin
      c.bc_v = 1; c.bc_f = f; c.bc_c = s;
      return E_BC_ASSIGN;
    end
    if (c.bc_f == f) begin
      if (c.bc_c + s > push_t) begin
        int of, oc;
        of = c.lb_f; oc = c.lb_c;
        c.lb_f = f; c.lb_t = t; c.lb_inf = 0; c.lb_c = s;
        c.bc_f = of; c.bc_c = oc;
        return E_PUSH;
      end
      c.bc_c = (c.bc_c + s > 65535) ? 65535 : c.bc_c + s;
      return E_BC_INC;
    end
    if (!decay) return E_BC_SKIP;
    if (c.bc_c - s < 0) begin
      c.bc_f = f; c.bc_c = s;
      return E_BC_REPLACE;
    end
    c.bc_c = c.bc_c - s;
    return E_BC_DECAY;
  endfunction

endpackage
