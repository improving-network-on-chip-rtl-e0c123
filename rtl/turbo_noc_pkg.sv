// Shared types, constants and elaboration-time functions of the NoC-based
// turbo decoder interconnect.
//
// The fixed-point formats follow the paper: extrinsic LLRs on n_lambda = 8
// bits, the pseudo-floating-point (PFP) significand on n_xi = 4 bits and the
// shift index on n_sigma = 3 bits, so that a double-binary payload needs
// n_d = 2*n_xi + n_sigma = 11 bits. Field widths of the packet are sized for
// the largest network the paper evaluates (P = 64 nodes) and for the largest
// slice of any evaluated configuration (LTE on P = 8 nodes, N/P = 768 trellis
// steps), so that every configuration of the paper's tables only needs a
// change of the top's parameters; unused upper bits stay at zero.
//
// The generalized Kautz graph used by the functions below is the usual
// Imase-Itoh construction: node i has a link to node (-(D*i + k)) mod P for
// k = 1..D. It is this design's reading of the topology the paper selects;
// the paper cites the definition and does not restate it. Output link k-1 of
// a node is its RE output port k-1; port D is the local PE port.
package turbo_noc_pkg;

  localparam int unsigned P_MAX     = 64;  // largest network size evaluated
  localparam int unsigned DEST_W    = 6;   // d(i,j), up to 64 nodes
  localparam int unsigned LOC_W     = 10;  // t(i,j), up to 1024 steps per slice (LTE, P = 8: 768)
  localparam int unsigned LAMBDA_W  = 8;   // n_lambda
  localparam int unsigned XI_W      = 4;   // n_xi
  localparam int unsigned SIGMA_W   = 3;   // n_sigma
  localparam int unsigned SIGMA_MAX = LAMBDA_W - XI_W;           // 4
  localparam int unsigned PAYLOAD_W = 2 * XI_W + SIGMA_W;        // n_d = 11
  localparam int unsigned PORT_W    = 3;   // RE port index, M = D+1 <= 5
  localparam int unsigned K_W       = 8;   // ABR threshold K
  localparam int unsigned BL_W      = 2 * LAMBDA_W;              // stored BL pair

  typedef logic signed [LAMBDA_W-1:0] llr_t;

  // Symbol-level extrinsic of a double-binary symbol u = AB, relative to the
  // reference symbol 00. l01 = lambda[~A B], l10 = lambda[A ~B],
  // l11 = lambda[A B]. In binary mode only l01 is used (the LLR of u = 1).
  typedef struct packed {
    llr_t l01;
    llr_t l10;
    llr_t l11;
  } sl_llr_t;

  // Bit-level pair lambda[A], lambda[B]. In binary mode `a` holds the LLR.
  typedef struct packed {
    llr_t a;
    llr_t b;
  } bl_llr_t;

  // Pseudo-floating-point payload.
  typedef struct packed {
    logic [SIGMA_W-1:0]       sigma;
    logic signed [XI_W-1:0]   xi_a;
    logic signed [XI_W-1:0]   xi_b;
  } pfp_t;

  // FA packet: header d(i,j), payload t(i,j) and the extrinsic information.
  typedef struct packed {
    logic [DEST_W-1:0]    dest;
    logic [LOC_W-1:0]     loc;
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);   // 27

  // Routing algorithm of the RE arbiter.
  typedef enum logic {
    RA_RR = 1'b0,   // round robin
    RA_FL = 1'b1    // FIFO length: fullest input buffer first
  } ra_policy_e;

  // Successor of node i on output link k (0..D-1).
  function automatic int kautz_succ(int p, int d, int i, int k);
    int v;
    v = -(d * i + k + 1);
    v = v % p;
    if (v < 0) v = v + p;
    return v;
  endfunction

  // Input port of node kautz_succ(p,d,i,k) on which link (i,k) arrives:
  // links into a node are numbered in order of increasing i*D+k.
  function automatic int kautz_in_port(int p, int d, int i, int k);
    int j, n;
    j = kautz_succ(p, d, i, k);
    n = 0;
    for (int s = 0; s < i * d + k; s++)
      if (kautz_succ(p, d, s / d, s % d) == j) n++;
    return n;
  endfunction

  // Source link (i*D+k) arriving on input port q of node j; -1 if none.
  function automatic int kautz_pred(int p, int d, int j, int q);
    int n;
    n = 0;
    for (int s = 0; s < p * d; s++) begin
      if (kautz_succ(p, d, s / d, s % d) == j) begin
        if (n == q) return s;
        n++;
      end
    end
    return -1;
  endfunction

  // Single-shortest-path routing row of node src: for every destination,
  // the output port of one shortest path (breadth-first search, links tried
  // in index order). Entry dst occupies bits [PORT_W*dst +: PORT_W]; the
  // entry of src itself is the local port D.
  function automatic logic [P_MAX*PORT_W-1:0] kautz_route_row(int p, int d, int src);
    logic [P_MAX*PORT_W-1:0] row;
    int first [P_MAX];
    int queue [P_MAX];
    bit seen  [P_MAX];
    int head, tail, u, v;
    row = '0;
    for (int n = 0; n < P_MAX; n++) begin
      first[n] = 0;
      queue[n] = 0;
      seen[n]  = 1'b0;
    end
    seen[src] = 1'b1;
    first[src] = d;
    head = 0;
    tail = 0;
    queue[tail] = src;
    tail++;
    while (head < tail) begin
      u = queue[head];
      head++;
      for (int k = 0; k < d; k++) begin
        v = kautz_succ(p, d, u, k);
        if (!seen[v]) begin
          seen[v]  = 1'b1;
          first[v] = (u == src) ? k : first[u];
          queue[tail] = v;
          tail++;
        end
      end
    end
    for (int n = 0; n < p; n++)
      row[PORT_W*n +: PORT_W] = PORT_W'(first[n]);
    return row;
  endfunction

endpackage
