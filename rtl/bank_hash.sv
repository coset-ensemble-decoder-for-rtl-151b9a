// bank_hash: maps a lattice coordinate to (bank, in-bank address).
//
// Bank: b = (1*x + 3*y + 5*z) mod 22, the paper's linear congruential hash.
// Address: the rank of (x,y,z), in lexicographic order with x outermost and
// z innermost, among all lattice points that hash to the same bank, which is
// the paper's dense packing. The rank is split into three partial counts so
// that it needs only three small tables, all computed at elaboration:
//   TA[x][b] : points with i < x                       hashing to b
//   TB[y][c] : (j,k) with j < y        and 3j+5k = c (mod 22)
//   TC[z][c] : k with k < z            and 5k    = c (mod 22)
//   addr = TA[x][b] + TB[y][(b-x) mod 22] + TC[z][(b-x-3y) mod 22]
// The split is this design's way to compute the paper's rank formula.
// Purely combinational; DEPTH (largest bank occupancy) is exported for the
// memories that use this hash.
module bank_hash
  import ced_pkg::*;
#(
  parameter int unsigned LX = ced_pkg::L,
  parameter int unsigned LZ = ced_pkg::R
) (
  input  coord_t          c,
  output logic [BW-1:0]   bank,
  output logic [AW-1:0]   addr
);

  function automatic int unsigned hsh(int unsigned i, int unsigned j, int unsigned k);
    return (HA*i + HB*j + HG*k) % NBANKS;
  endfunction

  function automatic int unsigned cnt_a(int unsigned x, int unsigned b);
    int unsigned n = 0;
    for (int unsigned i = 0; i < x; i++)
      for (int unsigned j = 0; j < LX; j++)
        for (int unsigned k = 0; k < LZ; k++)
          if (hsh(i, j, k) == b) n++;
    return n;
  endfunction

  function automatic int unsigned cnt_b(int unsigned y, int unsigned cc);
    int unsigned n = 0;
    for (int unsigned j = 0; j < y; j++)
      for (int unsigned k = 0; k < LZ; k++)
        if (((HB*j + HG*k) % NBANKS) == cc) n++;
    return n;
  endfunction

  function automatic int unsigned cnt_c(int unsigned z, int unsigned cc);
    int unsigned n = 0;
    for (int unsigned k = 0; k < z; k++)
      if (((HG*k) % NBANKS) == cc) n++;
    return n;
  endfunction

  logic [AW-1:0] ta [LX][NBANKS];
  logic [AW-1:0] tb [LX][NBANKS];
  logic [AW-1:0] tc [LZ][NBANKS];

  for (genvar gi = 0; gi < LX; gi++) begin : g_ab
    for (genvar gb = 0; gb < NBANKS; gb++) begin : g_b
      localparam int unsigned VA = cnt_a(gi, gb);
      localparam int unsigned VB = cnt_b(gi, gb);
      assign ta[gi][gb] = AW'(VA);
      assign tb[gi][gb] = AW'(VB);
    end
  end
  for (genvar gk = 0; gk < LZ; gk++) begin : g_c
    for (genvar gb = 0; gb < NBANKS; gb++) begin : g_b
      localparam int unsigned VC = cnt_c(gk, gb);
      assign tc[gk][gb] = AW'(VC);
    end
  end

  logic [7:0] sum;
  logic [BW-1:0] b1, b2;
  always_comb begin
    sum  = 8'(HA*c.x) + 8'(HB*c.y) + 8'(HG*c.z);
    bank = BW'(sum % NBANKS);
    b1   = BW'((8'(bank) + 8'(NBANKS) - 8'(c.x)) % NBANKS);
    b2   = BW'((8'(b1) + 8'(3*NBANKS) - 8'(HB*c.y)) % NBANKS);
    addr = ta[c.x][bank] + tb[c.y][b1] + tc[c.z][b2];
  end

endmodule
