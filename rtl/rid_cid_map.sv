// rid_cid_map: the RID -> CID indirection of the hierarchical ID mapping.
//
// Upper level of the two-level cluster naming. Every root (RID) maps to the
// cluster (CID) it currently belongs to, and every CID carries the parity of
// its defect count. A merge relabels a whole cluster by rewriting only the
// few RID entries that hold the absorbed CID, never the vertex (VID) store,
// which is the paper's point: merge write fan-out is the number of roots,
// not the number of vertices. The map is kept flat (every entry holds its
// final CID), so a lookup is one read and needs no pointer chasing.
//
// Interface: NLK combinational lookup ports (stage S3 reads seven RIDs, S6
// one); 'init' starts a new singleton odd cluster for a loaded defect;
// up to NM merges per cycle are applied in order at the clock edge
// (parity[to] ^= parity[from], parity[from] = 0, all map entries equal to
// 'from' become 'to'); 'clear' resets the map to identity with all parities
// even. 'parity' exposes the live parities; 'any_odd' is their OR.
module rid_cid_map
  import ced_pkg::*;
#(
  parameter int unsigned NR  = ced_pkg::MAX_ROOTS,
  parameter int unsigned NLK = 8,
  parameter int unsigned NM  = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          init_en,
  input  logic [RW-1:0] init_rid,
  input  logic [RW-1:0] lk_rid [NLK],
  output logic [RW-1:0] lk_cid [NLK],
  input  merge_t        merge  [NM],
  output logic [NR-1:0] parity,
  output logic          any_odd
);

  logic [RW-1:0] map [NR];

  always_comb begin
    for (int i = 0; i < NLK; i++)
      lk_cid[i] = (32'(lk_rid[i]) < NR) ? map[lk_rid[i]] : lk_rid[i];
    any_odd = |parity;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NR; r++) map[r] <= RW'(r);
      parity <= '0;
    end else if (clear) begin
      for (int r = 0; r < NR; r++) map[r] <= RW'(r);
      parity <= '0;
    end else begin
      logic [RW-1:0] m [NR];
      logic [NR-1:0] p;
      for (int r = 0; r < NR; r++) m[r] = map[r];
      p = parity;
      if (init_en && 32'(init_rid) < NR) begin
        m[init_rid] = init_rid;
        p[init_rid] = 1'b1;
      end
      for (int k = 0; k < NM; k++) begin
        if (merge[k].valid && merge[k].from != merge[k].to &&
            32'(merge[k].from) < NR && 32'(merge[k].to) < NR) begin
          p[merge[k].to]   = p[merge[k].to] ^ p[merge[k].from];
          p[merge[k].from] = 1'b0;
          for (int r = 0; r < NR; r++)
            if (m[r] == merge[k].from) m[r] = merge[k].to;
        end
      end
      for (int r = 0; r < NR; r++) map[r] <= m[r];
      parity <= p;
    end
  end

endmodule
