// ced_pkg: types and constants shared by the coset ensemble decoder.
//
// The decoding graph is a 3D cubic lattice of L x L x R detector vertices
// (x, y: space, z: syndrome round). The spatial axes wrap around (periodic
// surface code, as used for the accuracy results), the round axis is open.
// Every vertex has up to six axis-aligned incident edges.
//
// Vertex data and edge data are spread over NBANKS memory banks with the
// linear hash b = (1*x + 3*y + 5*z) mod 22, taken from the paper. L = R = 15
// is the paper's largest supported code distance. Widths of identifiers,
// root and edge budgets, and the priority width are this design's choices.
package ced_pkg;

  // ---- lattice and hashing (paper: alpha=1, beta=3, gamma=5, M=22, d<=15)
  parameter int unsigned L      = 15;   // code distance d (x and y extent)
  parameter int unsigned R      = 15;   // syndrome rounds T = d (z extent)
  parameter int unsigned NBANKS = 22;
  parameter int unsigned HA     = 1;
  parameter int unsigned HB     = 3;
  parameter int unsigned HG     = 5;

  parameter int unsigned CW  = 4;                  // coordinate width (L,R <= 16)
  parameter int unsigned BW  = 5;                  // bank index width
  parameter int unsigned AW  = 8;                  // in-bank address width

  // ---- cluster bookkeeping (assumed budgets)
  parameter int unsigned MAX_ROOTS = 128;          // defects per decoding task
  parameter int unsigned RW        = 7;            // RID / CID width
  parameter int unsigned DW        = 6;            // growth depth from the root
  parameter int unsigned LOGW      = 2;            // logical classes: x and y winding
  parameter int unsigned WW        = 10;           // correction weight width

  // ---- ensemble
  parameter int unsigned K         = 24;           // candidate number (paper: K = 24)
  parameter int unsigned MAX_CEDGES = 256;         // compressed edges per task
  parameter int unsigned EIW       = 8;            // compressed edge index width
  parameter int unsigned PW        = 16;           // priority width

  typedef struct packed {
    logic [CW-1:0] x;
    logic [CW-1:0] y;
    logic [CW-1:0] z;
  } coord_t;

  // Growth directions: +x, -x, +y, -y, +z, -z
  typedef enum logic [2:0] {
    DIR_XP = 3'd0, DIR_XM = 3'd1, DIR_YP = 3'd2,
    DIR_YM = 3'd3, DIR_ZP = 3'd4, DIR_ZM = 3'd5
  } dir_e;

  // One word of the RID buffer: which root's growth reached this vertex,
  // its homology winding relative to that root and its hop distance.
  typedef struct packed {
    logic          owned;
    logic [RW-1:0] rid;
    logic [LOGW-1:0] wind;
    logic [DW-1:0] hops;
  } rid_word_t;

  // One word of the edge buffer: growth (0,1,2 half-edges) of the three
  // edges whose forward endpoint is this vertex, one per axis.
  typedef struct packed {
    logic [1:0] wz;
    logic [1:0] wy;
    logic [1:0] wx;
  } edge_word_t;

  // An edge of the compressed graph: root to root, with the homology class
  // and physical length of the path it stands for.
  typedef struct packed {
    logic [RW-1:0]   a;
    logic [RW-1:0]   b;
    logic [LOGW-1:0] label;
    logic [WW-1:0]   weight;
  } cedge_t;

  // A cluster merge: every RID mapped to CID 'from' now maps to 'to'.
  typedef struct packed {
    logic          valid;
    logic [RW-1:0] from;
    logic [RW-1:0] to;
  } merge_t;

  // Neighbour of c in direction d: x and y wrap modulo lx, z is open.
  function automatic coord_t nbr(coord_t c, int unsigned d, int unsigned lx);
    coord_t n = c;
    case (d)
      0: n.x = (32'(c.x) == lx-1) ? '0 : c.x + 1'b1;
      1: n.x = (c.x == '0) ? CW'(lx-1) : c.x - 1'b1;
      2: n.y = (32'(c.y) == lx-1) ? '0 : c.y + 1'b1;
      3: n.y = (c.y == '0) ? CW'(lx-1) : c.y - 1'b1;
      4: n.z = c.z + 1'b1;
      default: n.z = c.z - 1'b1;
    endcase
    return n;
  endfunction

  function automatic logic nbr_exists(coord_t c, int unsigned d, int unsigned lz);
    if (d == 4) return 32'(c.z) != lz-1;
    if (d == 5) return c.z != '0;
    return 1'b1;
  endfunction

  // Homology change when crossing the edge from c in direction d: bit 0 for
  // the x wrap (between x = lx-1 and x = 0), bit 1 for the y wrap.
  function automatic logic [LOGW-1:0] nbr_cross(coord_t c, int unsigned d, int unsigned lx);
    logic [LOGW-1:0] w = '0;
    case (d)
      0: w[0] = (32'(c.x) == lx-1);
      1: w[0] = (c.x == '0);
      2: w[1] = (32'(c.y) == lx-1);
      3: w[1] = (c.y == '0);
      default: w = '0;
    endcase
    return w;
  endfunction

  // Event counters of one decoding task, exported by the top.
  typedef struct packed {
    logic [31:0] cycles;        // load to result
    logic [31:0] issued;        // vertices dispatched into S1
    logic [31:0] stall;         // cycles S1..S4 were held
    logic [31:0] bubble;        // cycles S1 had nothing to dispatch while clustering
    logic [31:0] fwd_edge;      // edge words patched by the bypass network
    logic [31:0] fwd_rid;       // RID words patched by the bypass network
    logic [31:0] fwd_cid;       // CIDs patched by merge forwarding
    logic [31:0] merges;        // cluster merges
    logic [31:0] claims;        // vertices claimed by growth
    logic [31:0] cedges;        // compressed-graph edges produced
    logic [31:0] multi_claim;   // growth steps that claimed two or more vertices
  } ced_stats_t;

  // Largest number of lattice points that the hash puts into one bank.
  function automatic int unsigned bank_depth(int unsigned lx, int unsigned lz);
    int unsigned cnt [NBANKS];
    int unsigned m = 0;
    for (int b = 0; b < NBANKS; b++) cnt[b] = 0;
    for (int unsigned i = 0; i < lx; i++)
      for (int unsigned j = 0; j < lx; j++)
        for (int unsigned k = 0; k < lz; k++)
          cnt[(HA*i + HB*j + HG*k) % NBANKS]++;
    for (int b = 0; b < NBANKS; b++) if (cnt[b] > m) m = cnt[b];
    return m;
  endfunction

  // Apply a cycle's merges, in order, to a CID read before they committed.
  function automatic logic [RW-1:0] fwd_cid(logic [RW-1:0] cid, merge_t m [6]);
    logic [RW-1:0] c = cid;
    for (int k = 0; k < 6; k++)
      if (m[k].valid && c == m[k].from) c = m[k].to;
    return c;
  endfunction

endpackage
